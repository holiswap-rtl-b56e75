// tb_log_counter_inc: checks the logarithmic counter increment.
//
// Part 1 goes over every code, with and without an event, against random
// words and against words with exactly the low e bits clear or one of them
// set, and compares with the rule written out here: code 0 always advances,
// code k >= 1 advances when rnd mod 2^(k-1) is 0, code 15 never. Part 2
// draws 8192 random words for codes 1..6 and checks that the advance rate is
// near 1/2^(k-1).
module tb_log_counter_inc;
  import holiswap_pkg::*;

  logic [CNT_W-1:0]  code, next;
  logic              inc;
  logic [RAND_W-1:0] rnd;
  int checks = 0, failures = 0;

  log_counter_inc dut (.code, .inc, .rnd, .next);

  function automatic logic [CNT_W-1:0] model(input int c, input bit i, input int unsigned r);
    int unsigned e;
    if (!i || c == 15) return CNT_W'(c);
    if (c == 0) return 1;
    e = c - 1;
    if (e >= 16) return (r % 65536 == 0) ? CNT_W'(c + 1) : CNT_W'(c);
    return ((r % (1 << e)) == 0) ? CNT_W'(c + 1) : CNT_W'(c);
  endfunction

  task automatic check(input int c, input bit i, input logic [15:0] r);
    code = CNT_W'(c); inc = i; rnd = r;
    #1;
    checks++;
    if (next !== model(c, i, r)) begin
      failures++;
      $display("FAIL code=%0d inc=%0d rnd=%h next=%0d exp=%0d", c, i, r, next, model(c, i, r));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) begin
      for (int i = 0; i < 2; i++) begin
        check(c, i[0], 16'h0000);
        check(c, i[0], 16'hFFFF);
        for (int b = 0; b < 16; b++) check(c, i[0], 16'h1 << b);
        for (int n = 0; n < 20; n++) check(c, i[0], 16'($urandom));
      end
    end
    // rate of advance from code k is 1/2^(k-1)
    for (int c = 1; c <= 6; c++) begin
      automatic int adv = 0;
      real rate, expect_rate;
      for (int n = 0; n < 8192; n++) begin
        code = CNT_W'(c); inc = 1'b1; rnd = 16'($urandom);
        #1;
        if (next == CNT_W'(c + 1)) adv++;
      end
      rate = real'(adv) / 8192.0;
      expect_rate = 1.0 / real'(1 << (c - 1));
      checks++;
      if (rate < expect_rate * 0.8 || rate > expect_rate * 1.2) begin
        failures++;
        $display("FAIL rate code=%0d %f expected %f", c, rate, expect_rate);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
