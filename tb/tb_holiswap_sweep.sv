// tb_holiswap_sweep: the lookup organisations and the epoch length, side by
// side, on one synthetic hot-line stream.
//
// Ten caches run the same 40,000-access stream (hs_workload_driver, same
// seed), each with its own memory model:
//   sequential, parallel and static-W0 prediction, each with migration
//   (E = 256, T = 128) and without it (T = 2^14, never reached within a
//   256-access epoch); and sequential with E = 4, 16, 64 and 1024 (T = E/2).
// It prints energy, wire energy, cycles, swaps and the share of load hits in
// W0 (the accuracy of the static W0 prediction) for each, and the savings of
// migration. Checks: every load returns the right data; in each organisation
// migration raises the W0 share, lowers the wire energy and leaves the miss
// count unchanged; swaps happen in every migrating cache and never without
// migration; short epochs swap more often than long ones.
module tb_holiswap_sweep;
  import holiswap_pkg::*;

  localparam int NC = 10;
  // configuration table: lookup, EPOCH_LOG2, HOT_LOG2
  localparam int CFG_LOOKUP [NC] = '{0, 0, 1, 1, 2, 2, 0, 0, 0, 0};
  localparam int CFG_ELOG   [NC] = '{8, 8, 8, 8, 8, 8, 2, 4, 6, 10};
  localparam int CFG_TLOG   [NC] = '{7, 14, 7, 14, 7, 14, 1, 3, 5, 9};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid [NC], req_ready [NC], resp_valid [NC];
  cpu_req_t    req [NC];
  cpu_resp_t   resp [NC];
  logic        m_valid [NC], m_ready [NC], m_we [NC], m_rvalid [NC];
  logic [31:0] m_addr [NC];
  logic [511:0] m_wdata [NC], m_rdata [NC];
  int          n_rd [NC], n_wr [NC];
  hs_events_t  ev [NC];
  logic        done [NC];
  longint      energy [NC], wire_e [NC];
  int          cycles [NC], swaps [NC], epochs [NC], misses [NC], lh [NC], lh0 [NC], errors [NC];

  for (genvar g = 0; g < NC; g++) begin : g_cfg
    holiswap_l1d #(
      .LOOKUP(lookup_e'(CFG_LOOKUP[g])), .EPOCH_LOG2(CFG_ELOG[g]), .HOT_LOG2(CFG_TLOG[g])
    ) dut (
      .clk, .rst_n,
      .cpu_req_valid(req_valid[g]), .cpu_req_ready(req_ready[g]), .cpu_req(req[g]),
      .cpu_resp_valid(resp_valid[g]), .cpu_resp(resp[g]),
      .mem_req_valid(m_valid[g]), .mem_req_ready(m_ready[g]), .mem_req_we(m_we[g]),
      .mem_req_addr(m_addr[g]), .mem_req_wdata(m_wdata[g]),
      .mem_resp_valid(m_rvalid[g]), .mem_resp_rdata(m_rdata[g]),
      .events(ev[g])
    );
    line_mem_model #(.LATENCY(10)) mem (
      .clk, .rst_n, .req_valid(m_valid[g]), .req_ready(m_ready[g]), .req_we(m_we[g]),
      .req_addr(m_addr[g]), .req_wdata(m_wdata[g]), .resp_valid(m_rvalid[g]),
      .resp_rdata(m_rdata[g]), .n_reads(n_rd[g]), .n_writes(n_wr[g])
    );
    hs_workload_driver drv (
      .clk, .rst_n, .req_valid(req_valid[g]), .req_ready(req_ready[g]), .req(req[g]),
      .resp_valid(resp_valid[g]), .resp(resp[g]), .ev(ev[g]), .done(done[g]),
      .energy(energy[g]), .wire_energy(wire_e[g]), .cycles(cycles[g]), .swaps(swaps[g]),
      .epochs(epochs[g]), .misses(misses[g]), .load_hits(lh[g]), .load_hits_w0(lh0[g]),
      .errors(errors[g])
    );
  end

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int pct_saving(input longint with_m, input longint without_m);
    return int'(100 - (100 * with_m) / without_m);
  endfunction

  initial begin
    #500000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int g = 0; g < NC; g++) all_done &= done[g];
    end while (!all_done);
    $display("cfg lookup E    T     energy(pJ) wire(pJ)  cycles  swaps epochs misses W0-share-of-load-hits");
    for (int g = 0; g < NC; g++) begin
      $display("%2d  %0d      %-4d %-5d %-10d %-9d %-7d %-5d %-6d %-6d %0d%%",
               g, CFG_LOOKUP[g], 1 << CFG_ELOG[g], 1 << CFG_TLOG[g], energy[g] / 10, wire_e[g] / 10,
               cycles[g], swaps[g], epochs[g], misses[g], (100 * lh0[g]) / lh[g]);
      check(errors[g] == 0, $sformatf("cfg %0d load data", g));
    end
    for (int m = 0; m < 3; m++) begin
      int a, b;
      a = 2 * m;
      b = 2 * m + 1;
      $display("lookup %0d: migration saves %0d%% energy, %0d%% wire energy; cycles +%0d",
               m, pct_saving(energy[a], energy[b]), pct_saving(wire_e[a], wire_e[b]), cycles[a] - cycles[b]);
      check(swaps[a] > 0 && swaps[b] == 0, $sformatf("lookup %0d swaps only with migration", m));
      check(longint'(lh0[a]) * lh[b] > longint'(lh0[b]) * lh[a], $sformatf("lookup %0d W0 share rises", m));
      check(wire_e[a] < wire_e[b], $sformatf("lookup %0d wire energy falls", m));
      check(misses[a] == misses[b], $sformatf("lookup %0d miss count unchanged by migration", m));
    end
    for (int g = 6; g < NC; g++)
      $display("E=%0d: migration saves %0d%% energy against no migration",
               1 << CFG_ELOG[g], pct_saving(energy[g], energy[1]));
    check(swaps[6] > swaps[0] && swaps[0] > 0, "short epochs swap more");
    check(swaps[9] > 0, "E = 1024 swaps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
