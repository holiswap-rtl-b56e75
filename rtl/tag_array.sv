// tag_array: tags, valid and dirty bits of the L1, one row of four ways per set.
//
// 128 rows of 4 x (1 valid + 1 dirty + 19 tag) bits, about the 2KB tag array
// the paper sizes. One port: in a cycle with `en` high, `we` low reads row
// `idx` (the row appears on `rdata` in the next cycle); `we` high writes the
// ways selected by `wway` from `wdata`. A reset clears every valid and dirty
// bit (it takes one cycle, as the bits are held in flip-flops); the tag bits
// are not reset.
//
// From the paper: a separate, smaller tag array that is read faster than the
// data subarrays. This design's choice: the row layout, the per-way write
// enables and the one-cycle read.
module tag_array
  import holiswap_pkg::*;
#(
  parameter int unsigned SETS = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    we,
  input  logic [$clog2(SETS)-1:0] idx,
  input  logic [WAYS-1:0]         wway,
  input  tag_row_t                wdata,
  output tag_row_t                rdata
);
  logic [TAG_W-1:0] tags  [SETS][WAYS];
  logic [WAYS-1:0] valid [SETS];
  logic [WAYS-1:0] dirty [SETS];

  // tag bits: plain memory, no reset
  always_ff @(posedge clk) begin
    if (en && we)
      for (int w = 0; w < WAYS; w++)
        if (wway[w]) tags[idx][w] <= wdata[w].tag;
  end

  // status bits: reset to invalid and clean
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
      end
    end else if (en && we) begin
      for (int w = 0; w < WAYS; w++)
        if (wway[w]) begin
          valid[idx][w] <= wdata[w].valid;
          dirty[idx][w] <= wdata[w].dirty;
        end
    end
  end

  always_ff @(posedge clk) begin
    if (en && !we)
      for (int w = 0; w < WAYS; w++) begin
        rdata[w].tag   <= tags[idx][w];
        rdata[w].valid <= valid[idx][w];
        rdata[w].dirty <= dirty[idx][w];
      end
  end
endmodule
