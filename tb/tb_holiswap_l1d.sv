// tb_holiswap_l1d: end-to-end test of the HoLiSwap L1 data cache.
//
// Three caches are built with the default E = 256 and T = 128, one for each
// lookup organisation (sequential, parallel, static W0 prediction), each with
// its own memory model. Each is driven in turn with the same accesses:
//   1. random loads and stores over 8 sets x 6 lines, enough to cause misses
//      and dirty write-backs;
//   2. a hot-line scenario: four lines fill the four ways of one set, then the
//      line in way W3 is loaded until the cache swaps it to W0; afterwards it
//      must hit in W0 and the line that was in W0 must still hold its data;
//   3. more random traffic.
// Every load is compared with a copy of memory kept here. Hit latency is
// checked against the organisation: sequential 3 cycles; parallel 2; static
// prediction 2 for a load that hits W0 and 3 otherwise. Each swap must block
// the processor port for exactly 4 cycles. The test counts how often each
// mechanism happened (miss, write-back, swap, epoch end, 2- and 3-cycle hits,
// wrong prediction) and counts a failure for one that never did.
module tb_holiswap_l1d;
  import holiswap_pkg::*;
  import tb_hs_pkg::*;

  localparam int NM = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid [NM];
  logic        req_ready [NM];
  cpu_req_t    req       [NM];
  logic        resp_valid[NM];
  cpu_resp_t   resp      [NM];
  logic        m_valid [NM], m_ready [NM], m_we [NM], m_rvalid [NM];
  logic [31:0] m_addr  [NM];
  logic [511:0] m_wdata [NM], m_rdata [NM];
  int          n_rd [NM], n_wr [NM];
  hs_events_t  ev [NM];

  for (genvar g = 0; g < NM; g++) begin : g_dut
    holiswap_l1d #(.LOOKUP(lookup_e'(g))) dut (
      .clk, .rst_n,
      .cpu_req_valid(req_valid[g]), .cpu_req_ready(req_ready[g]), .cpu_req(req[g]),
      .cpu_resp_valid(resp_valid[g]), .cpu_resp(resp[g]),
      .mem_req_valid(m_valid[g]), .mem_req_ready(m_ready[g]), .mem_req_we(m_we[g]),
      .mem_req_addr(m_addr[g]), .mem_req_wdata(m_wdata[g]),
      .mem_resp_valid(m_rvalid[g]), .mem_resp_rdata(m_rdata[g]),
      .events(ev[g])
    );
    line_mem_model #(.LATENCY(6)) mem (
      .clk, .rst_n, .req_valid(m_valid[g]), .req_ready(m_ready[g]), .req_we(m_we[g]),
      .req_addr(m_addr[g]), .req_wdata(m_wdata[g]), .resp_valid(m_rvalid[g]),
      .resp_rdata(m_rdata[g]), .n_reads(n_rd[g]), .n_writes(n_wr[g])
    );
  end

  int checks = 0, failures = 0;
  logic [31:0] shadow [NM][logic [31:0]];

  // mechanism counters
  int c_miss[NM], c_wb[NM], c_swap[NM], c_epoch[NM], c_fast[NM], c_slow[NM], c_pwrong[NM];
  int block_len[NM];
  bit blocking[NM];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // event monitor and swap blocking-length check
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (ev[m].miss)       c_miss[m]++;
      if (ev[m].writeback)  c_wb[m]++;
      if (ev[m].epoch_end)  c_epoch[m]++;
      if (ev[m].pred_wrong) c_pwrong[m]++;
      if (blocking[m]) begin
        if (!req_ready[m]) block_len[m]++;
        else begin
          blocking[m] = 0;
          check(block_len[m] == 4, $sformatf("swap blocked the port %0d cycles", block_len[m]));
        end
      end
      if (ev[m].swap) begin
        c_swap[m]++;
        blocking[m] = 1;
        block_len[m] = 1;
      end
    end
  end

  task automatic access(input int m, input bit we, input logic [31:0] addr,
                        input logic [31:0] wdata, input logic [3:0] wstrb,
                        output cpu_resp_t r, output int lat);
    logic [31:0] old, expv;
    addr = {addr[31:2], 2'b00};
    req[m] = '{we: we, addr: addr, wdata: wdata, wstrb: wstrb};
    req_valid[m] = 1;
    #0;
    while (!req_ready[m]) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    req_valid[m] = 0;
    lat = 1;
    while (!resp_valid[m]) begin @(posedge clk); #1; lat++; end
    r = resp[m];
    old = shadow[m].exists(addr) ? shadow[m][addr] : init_word(addr);
    if (we) begin
      expv = old;
      for (int b = 0; b < 4; b++) if (wstrb[b]) expv[b*8 +: 8] = wdata[b*8 +: 8];
      shadow[m][addr] = expv;
    end else begin
      check(r.rdata == old, $sformatf("load %h mode %0d got %h expected %h", addr, m, r.rdata, old));
    end
    if (r.hit) begin
      int exp_lat;
      case (m)
        0: exp_lat = 3;
        1: exp_lat = 2;
        default: exp_lat = (!we && r.way == 0) ? 2 : 3;
      endcase
      check(lat == exp_lat, $sformatf("hit latency %0d mode %0d expected %0d", lat, m, exp_lat));
      if (lat == 2) c_fast[m]++; else c_slow[m]++;
    end
  endtask

  function automatic logic [31:0] mk_addr(input int tag, input int set, input int word);
    return {19'(tag + 1), 7'(set), 4'(word), 2'b00};
  endfunction

  task automatic random_traffic(input int m, input int n);
    cpu_resp_t r; int lat;
    for (int i = 0; i < n; i++) begin
      logic [31:0] a = mk_addr($urandom_range(5), $urandom_range(7) * 3, $urandom_range(15));
      access(m, $urandom_range(2) == 0, a, $urandom, 4'($urandom_range(15)), r, lat);
    end
  endtask

  task automatic hot_line(input int m);
    cpu_resp_t r; int lat; int n; int s0;
    int set = 100;
    // fill ways 0..3 of the set with tags 20..23 (invalid ways fill lowest first)
    for (int t = 0; t < 4; t++) begin
      access(m, 1'b1, mk_addr(20 + t, set, 1), 32'hC0DE_0000 + t, 4'hF, r, lat);
    end
    access(m, 1'b0, mk_addr(23, set, 1), 0, 0, r, lat);
    check(r.way == 3, "fourth line filled way 3");
    s0 = c_swap[m];
    n = 0;
    while (c_swap[m] == s0 && n < 2000) begin
      access(m, 1'b0, mk_addr(23, set, n % 16), 0, 0, r, lat);
      n++;
    end
    check(c_swap[m] > s0, "hot line was swapped");
    repeat (6) @(posedge clk);
    access(m, 1'b0, mk_addr(23, set, 1), 0, 0, r, lat);
    check(r.hit && r.way == 0, $sformatf("hot line now in W0 (way %0d)", r.way));
    access(m, 1'b0, mk_addr(20, set, 1), 0, 0, r, lat);
    check(r.hit && r.way == 3, $sformatf("old W0 line moved to W3 (way %0d)", r.way));
    $display("mode %0d: hot line swapped after %0d hits", m, n);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) begin
      req_valid[m] = 0; req[m] = '0;
      c_miss[m] = 0; c_wb[m] = 0; c_swap[m] = 0; c_epoch[m] = 0;
      c_fast[m] = 0; c_slow[m] = 0; c_pwrong[m] = 0; blocking[m] = 0; block_len[m] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int m = 0; m < NM; m++) begin
      random_traffic(m, 1500);
      hot_line(m);
      random_traffic(m, 1500);
    end
    repeat (10) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      $display("mode %0d: miss=%0d wb=%0d swap=%0d epoch=%0d hit2=%0d hit3=%0d pred_wrong=%0d",
               m, c_miss[m], c_wb[m], c_swap[m], c_epoch[m], c_fast[m], c_slow[m], c_pwrong[m]);
      check(c_miss[m] > 0, "misses happened");
      check(c_wb[m] > 0, "write-backs happened");
      check(c_swap[m] > 0, "swaps happened");
      check(c_epoch[m] > 0, "epochs ended");
      check(n_wr[m] == c_wb[m], "every write-back reached memory");
    end
    check(c_slow[0] > 0 && c_fast[0] == 0, "sequential hits take 3 cycles");
    check(c_fast[1] > 0 && c_slow[1] == 0, "parallel hits take 2 cycles");
    check(c_fast[2] > 0 && c_slow[2] > 0 && c_pwrong[2] > 0, "prediction: right and wrong");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
