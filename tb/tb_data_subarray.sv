// tb_data_subarray: checks one 8KB way subarray.
//
// Writes every line with random data, then mixes random byte-enabled writes
// and reads against a copy kept here. Each read is checked in the cycle after
// it was issued (one-cycle read), and the read data must stay unchanged over
// a following idle cycle (en low) and over a write.
module tb_data_subarray;
  localparam int SETS = 128;
  localparam int LB   = 64;

  logic              clk = 0;
  logic              en, we;
  logic [6:0]        idx;
  logic [LB-1:0]     wbe;
  logic [LB*8-1:0]   wdata, rdata;
  logic [LB*8-1:0]   shadow [SETS];
  int checks = 0, failures = 0;

  data_subarray dut (.clk, .en, .we, .idx, .wbe, .wdata, .rdata);

  always #5 clk = ~clk;

  function automatic logic [LB*8-1:0] rand_line();
    logic [LB*8-1:0] l;
    for (int i = 0; i < LB / 4; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic do_write(input int i, input logic [LB-1:0] be, input logic [LB*8-1:0] d);
    en = 1; we = 1; idx = 7'(i); wbe = be; wdata = d;
    @(posedge clk); #1;
    for (int b = 0; b < LB; b++) if (be[b]) shadow[i][b*8 +: 8] = d[b*8 +: 8];
    en = 0; we = 0;
  endtask

  task automatic do_read(input int i);
    logic [LB*8-1:0] held;
    en = 1; we = 0; idx = 7'(i);
    @(posedge clk); #1;
    en = 0;
    checks++;
    if (rdata !== shadow[i]) begin
      failures++;
      $display("FAIL read set %0d", i);
    end
    held = rdata;
    @(posedge clk); #1;                  // idle cycle: output is held
    checks++;
    if (rdata !== held) begin
      failures++;
      $display("FAIL read data not held, set %0d", i);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; idx = 0; wbe = 0; wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < SETS; i++) do_write(i, '1, rand_line());
    for (int i = 0; i < SETS; i++) do_read(i);
    for (int n = 0; n < 600; n++) begin
      automatic int i = $urandom_range(SETS - 1);
      if ($urandom_range(1)) do_write(i, {$urandom, $urandom}, rand_line());
      else                   do_read(i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
