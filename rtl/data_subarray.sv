// data_subarray: one 8KB SRAM subarray that holds one way of the L1.
//
// 128 lines of 64 bytes. Single port: in a cycle with `en` high it either
// writes the enabled bytes of `wdata` into line `idx` (`we` high) or reads
// line `idx`; the read line appears on `rdata` in the next cycle and is held
// until the next read. A cycle without `en` leaves the array and `rdata`
// untouched, which stands for a subarray whose bit lines are not cycled.
//
// From the paper: one subarray per way, 8KB, 128 sets. This design's
// choice: the 64-byte line (8KB / 128), the single port and the one-cycle
// synchronous read (the paper's 0.5 ns access fits one cycle).
module data_subarray #(
  parameter int unsigned SETS       = 128,
  parameter int unsigned LINE_BYTES = 64
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic                      we,
  input  logic [$clog2(SETS)-1:0]   idx,
  input  logic [LINE_BYTES-1:0]     wbe,
  input  logic [LINE_BYTES*8-1:0]   wdata,
  output logic [LINE_BYTES*8-1:0]   rdata
);
  logic [LINE_BYTES*8-1:0] mem [SETS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < LINE_BYTES; b++)
          if (wbe[b]) mem[idx][b*8 +: 8] <= wdata[b*8 +: 8];
      end else begin
        rdata <= mem[idx];
      end
    end
  end
endmodule
