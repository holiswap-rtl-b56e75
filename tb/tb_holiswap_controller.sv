// tb_holiswap_controller: checks hot-line detection with E = 256, T = 128.
//
// Directed part: with all random bits zero every counted event advances a
// counter, so eight hits to way 2 of a set make its counter reach the code of
// 128 = T: the eighth hit must request a swap of way 2, and the counters of
// ways 0 and 2 must trade places. The ninth access reaches the code of
// 256 = E and must end the epoch, clearing the set. A refill must clear one
// line's counter.
// Random part: biased random accesses, hits, refills and random bits over a
// few sets, compared cycle by cycle with a reference model of the counters
// written here from the rules (log increment, epoch end, hottest line, swap).
module tb_holiswap_controller;
  import holiswap_pkg::*;

  logic              clk = 0, rst_n = 0;
  logic              acc_valid = 0, acc_hit = 0, fill_valid = 0;
  logic [6:0]        acc_set = 0, fill_set = 0, rd_set = 0;
  logic [1:0]        acc_way = 0, fill_way = 0;
  logic [15:0]       rnd = 0;
  logic              swap_valid, epoch_end;
  logic [1:0]        swap_way;
  logic [3:0]        rd_epoch;
  logic [3:0]        rd_hit [4];
  int checks = 0, failures = 0;
  int n_swaps = 0, n_epochs = 0;

  holiswap_controller dut (
    .clk, .rst_n, .acc_valid, .acc_set, .acc_hit, .acc_way, .rnd,
    .swap_valid, .swap_way, .epoch_end, .fill_valid, .fill_set, .fill_way,
    .rd_set, .rd_epoch, .rd_hit
  );

  always #5 clk = ~clk;

  // reference model
  int m_epoch [128];
  int m_hit   [128][4];

  function automatic int inc_model(input int c, input logic [15:0] r);
    if (c == 15) return c;
    if (c == 0)  return 1;
    if ((r & ((16'h1 << (c - 1)) - 1)) == 0) return c + 1;
    return c;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // apply one cycle of inputs, compare outputs against the model, update model
  task automatic step(input bit a, input int s, input bit h, input int w,
                      input bit f, input int fs, input int fw, input logic [15:0] r);
    int e_n, h_n [4], hot, hc;
    bit exp_end, exp_swap;
    logic [15:0] rr;
    acc_valid = a; acc_set = 7'(s); acc_hit = h; acc_way = 2'(w);
    fill_valid = f; fill_set = 7'(fs); fill_way = 2'(fw); rnd = r;
    #1;
    exp_end = 0; exp_swap = 0; hot = 0;
    if (a) begin
      rr = {r[7:0], r[15:8]};
      e_n = inc_model(m_epoch[s], r);
      for (int k = 0; k < 4; k++) h_n[k] = (h && k == w) ? inc_model(m_hit[s][k], rr) : m_hit[s][k];
      hc = h_n[0];
      for (int k = 1; k < 4; k++) if (h_n[k] > hc) begin hc = h_n[k]; hot = k; end
      exp_end  = (e_n >= 9);
      exp_swap = !exp_end && h && (hc >= 8) && (hot != 0);
    end
    check(epoch_end == exp_end, "epoch_end");
    check(swap_valid == exp_swap, "swap_valid");
    if (exp_swap) check(swap_way == 2'(hot), "swap_way");
    if (exp_swap) n_swaps++;
    if (exp_end)  n_epochs++;
    @(posedge clk); #1;
    if (a) begin
      if (exp_end) begin
        m_epoch[s] = 0;
        for (int k = 0; k < 4; k++) m_hit[s][k] = 0;
      end else begin
        m_epoch[s] = e_n;
        for (int k = 0; k < 4; k++) m_hit[s][k] = h_n[k];
        if (exp_swap) begin
          m_hit[s][0]   = h_n[hot];
          m_hit[s][hot] = h_n[0];
        end
      end
    end
    if (f) m_hit[fs][fw] = 0;
    acc_valid = 0; fill_valid = 0;
    // compare the stored counters of the touched set
    rd_set = 7'(s); #1;
    check(rd_epoch == 4'(m_epoch[s]), "epoch counter");
    for (int k = 0; k < 4; k++) check(rd_hit[k] == 4'(m_hit[s][k]), "hit counter");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 128; s++) begin
      m_epoch[s] = 0;
      for (int k = 0; k < 4; k++) m_hit[s][k] = 0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // directed: one miss, then hits to way 2 of set 5 with every coin won
    step(1, 5, 0, 0, 0, 0, 0, 16'h0);
    for (int n = 0; n < 7; n++) step(1, 5, 1, 2, 0, 0, 0, 16'h0);
    check(swap_valid == 0, "no swap before T");
    check(rd_hit[2] == 4'd7 && rd_epoch == 4'd8, "counts before T");
    // this access makes the epoch code 9 = E: epoch ends, no swap
    step(1, 5, 1, 2, 0, 0, 0, 16'h0);
    check(rd_epoch == 0 && rd_hit[2] == 0, "epoch end clears the set");
    // 8 hits in a fresh epoch: hit code reaches 8 = T at the 8th, epoch is 8
    for (int n = 0; n < 7; n++) step(1, 6, 1, 2, 0, 0, 0, 16'h0);
    acc_valid = 1; acc_set = 6; acc_hit = 1; acc_way = 2; rnd = 0; #1;
    check(swap_valid == 1 && swap_way == 2, "swap requested at T");
    acc_valid = 0; #1;
    step(1, 6, 1, 2, 0, 0, 0, 16'h0);
    rd_set = 6; #1;
    check(rd_hit[0] == 4'd8 && rd_hit[2] == 4'd0, "counters follow the swapped lines");
    step(0, 6, 0, 0, 1, 6, 0, 16'h0);
    check(rd_hit[0] == 0, "refill clears the counter");
    // random traffic over four sets, hot way 3 most of the time
    for (int n = 0; n < 20000; n++) begin
      automatic int s = $urandom_range(3);
      automatic int w = ($urandom_range(9) < 7) ? 3 : $urandom_range(3);
      automatic bit h = ($urandom_range(9) != 0);
      automatic bit f = ($urandom_range(49) == 0);
      step($urandom_range(7) != 0, s, h, w, f, $urandom_range(3), $urandom_range(3),
           ($urandom_range(3) == 0) ? 16'h0 : 16'($urandom));
    end
    check(n_swaps > 0, "swaps happened");
    check(n_epochs > 0, "epochs ended");
    $display("swaps=%0d epochs=%0d", n_swaps, n_epochs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
