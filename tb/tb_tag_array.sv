// tb_tag_array: checks the tag array.
//
// After reset every way of every set reads invalid and clean. Then random
// writes of random way subsets and random reads are compared with a copy
// kept here; a read is checked in the cycle after it was issued, and a
// write must touch only the ways it enables.
module tb_tag_array;
  import holiswap_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       en, we;
  logic [6:0] idx;
  logic [3:0] wway;
  tag_row_t   wdata, rdata;
  tag_row_t   shadow [128];
  int checks = 0, failures = 0;

  tag_array dut (.clk, .rst_n, .en, .we, .idx, .wway, .wdata, .rdata);

  always #5 clk = ~clk;

  task automatic do_read(input int i, input bit after_reset);
    en = 1; we = 0; idx = 7'(i);
    @(posedge clk); #1;
    en = 0;
    for (int w = 0; w < WAYS; w++) begin
      checks++;
      if (after_reset) begin
        if (rdata[w].valid !== 1'b0 || rdata[w].dirty !== 1'b0) begin
          failures++;
          $display("FAIL set %0d way %0d not cleared by reset", i, w);
        end
      end else if (rdata[w] !== shadow[i][w]) begin
        failures++;
        $display("FAIL set %0d way %0d read %h expected %h", i, w, rdata[w], shadow[i][w]);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; idx = 0; wway = 0; wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 128; i++) do_read(i, 1'b1);
    // give every entry a known value
    for (int i = 0; i < 128; i++) begin
      for (int w = 0; w < WAYS; w++) begin
        shadow[i][w].valid = 1'($urandom);
        shadow[i][w].dirty = 1'($urandom);
        shadow[i][w].tag   = TAG_W'($urandom);
      end
      en = 1; we = 1; idx = 7'(i); wway = '1; wdata = shadow[i];
      @(posedge clk); #1;
      en = 0; we = 0;
    end
    for (int n = 0; n < 1000; n++) begin
      automatic int i = $urandom_range(127);
      if ($urandom_range(1)) begin
        tag_row_t r;
        logic [3:0] m;
        for (int w = 0; w < WAYS; w++) r[w] = {1'($urandom), 1'($urandom), TAG_W'($urandom)};
        m = 4'($urandom);
        en = 1; we = 1; idx = 7'(i); wway = m; wdata = r;
        @(posedge clk); #1;
        en = 0; we = 0;
        for (int w = 0; w < WAYS; w++) if (m[w]) shadow[i][w] = r[w];
      end else begin
        do_read(i, 1'b0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
