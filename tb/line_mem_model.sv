// line_mem_model: behavioural model of the next memory level (L2 / DRAM).
//
// Not synthesizable and not part of the cache: it serves the cache's
// line-wide memory port in testbenches. It takes one request at a time
// (req_ready is low while a read is outstanding). A write stores the line at
// once; a read returns the line LATENCY cycles after it was taken, as a
// one-cycle resp_valid pulse. Lines never written read as tb_hs_pkg::init_word
// of each word address. It counts reads and writes.
module line_mem_model #(
  parameter int unsigned LATENCY = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [31:0]  req_addr,
  input  logic [511:0] req_wdata,
  output logic         resp_valid,
  output logic [511:0] resp_rdata,
  output int           n_reads,
  output int           n_writes
);
  import tb_hs_pkg::*;

  logic [511:0] lines [logic [25:0]];
  int           wait_cnt;
  logic         busy;
  logic [25:0]  pend;

  function automatic logic [511:0] read_line(input logic [25:0] la);
    logic [511:0] l;
    if (lines.exists(la)) return lines[la];
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = init_word({la, 6'(i * 4)});
    return l;
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      wait_cnt   <= 0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      pend       <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_we) begin
          lines[req_addr[31:6]] = req_wdata;
          n_writes <= n_writes + 1;
        end else begin
          busy     <= 1'b1;
          pend     <= req_addr[31:6];
          wait_cnt <= LATENCY - 1;
          n_reads  <= n_reads + 1;
        end
      end else if (busy) begin
        if (wait_cnt == 0) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp_rdata <= read_line(pend);
        end else begin
          wait_cnt <= wait_cnt - 1;
        end
      end
    end
  end
endmodule
