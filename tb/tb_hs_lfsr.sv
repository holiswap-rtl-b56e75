// tb_hs_lfsr: checks the random source.
//
// After reset the register holds the seed. Each cycle with `step` high must
// give the next state of a 16-bit Galois LFSR with taps 0xB400, computed here
// in software; a cycle with `step` low must hold the state. Over a full period
// the sequence must return to the seed after exactly 65535 steps.
module tb_hs_lfsr;
  logic        clk = 0, rst_n = 0, step = 0;
  logic [15:0] rnd, model;
  int checks = 0, failures = 0;
  int period;

  hs_lfsr dut (.clk, .rst_n, .step, .rnd);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    model = 16'hACE1;
    check(rnd == model, "seed after reset");
    for (int n = 0; n < 2000; n++) begin
      step = ($urandom_range(3) != 0);
      @(posedge clk); #1;
      if (step) model = model[0] ? ((model >> 1) ^ 16'hB400) : (model >> 1);
      check(rnd == model, $sformatf("state %h expected %h", rnd, model));
    end
    // full period back to the seed
    step = 1;
    period = 0;
    do begin
      @(posedge clk); #1;
      period++;
    end while (rnd != 16'hACE1 && period < 70000);
    step = 0;
    check(rnd != 0, "never zero");
    $display("period from a state back to the seed: %0d", period);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
