// tb_lru_state: checks the LRU replacement state.
//
// A reference model keeps, per set, the ways in recency order (a list). Random
// touches and W0 swaps over a few sets are applied to both; after each, the
// oldest way reported for the set must be the last way of the list. A swap
// exchanges the list positions of W0 and the swapped way. Directed part:
// after reset the oldest way is W3; touching W3 makes W2 the oldest.
module tb_lru_state;
  logic       clk = 0, rst_n = 0;
  logic       touch_valid = 0, swap_valid = 0;
  logic [6:0] touch_set = 0, swap_set = 0, rd_set = 0;
  logic [1:0] touch_way = 0, swap_way = 0, lru_way;
  int checks = 0, failures = 0;
  int order [8][4];   // order[s][0] most recent ... order[s][3] oldest

  lru_state dut (.clk, .rst_n, .touch_valid, .touch_set, .touch_way,
                 .swap_valid, .swap_set, .swap_way, .rd_set, .lru_way);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic touch(input int s, input int w);
    int p;
    touch_valid = 1; touch_set = 7'(s); touch_way = 2'(w);
    @(posedge clk); #1;
    touch_valid = 0;
    p = 0;
    for (int i = 0; i < 4; i++) if (order[s][i] == w) p = i;
    for (int i = p; i > 0; i--) order[s][i] = order[s][i-1];
    order[s][0] = w;
  endtask

  task automatic swap(input int s, input int w);
    swap_valid = 1; swap_set = 7'(s); swap_way = 2'(w);
    @(posedge clk); #1;
    swap_valid = 0;
    for (int i = 0; i < 4; i++) begin
      if (order[s][i] == 0) order[s][i] = w;
      else if (order[s][i] == w) order[s][i] = 0;
    end
  endtask

  task automatic compare(input int s);
    rd_set = 7'(s); #1;
    check(lru_way == 2'(order[s][3]), $sformatf("set %0d oldest %0d expected %0d", s, lru_way, order[s][3]));
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 8; s++) for (int i = 0; i < 4; i++) order[s][i] = i;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare(0);
    check(lru_way == 3, "W3 oldest after reset");
    touch(0, 3);
    compare(0);
    check(lru_way == 2, "W2 oldest after touching W3");
    for (int n = 0; n < 5000; n++) begin
      automatic int s = $urandom_range(7);
      if ($urandom_range(4) == 0) swap(s, $urandom_range(1, 3));
      else                        touch(s, $urandom_range(3));
      compare(s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
