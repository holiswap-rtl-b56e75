// tb_holiswap_workload: a hot-line workload on the cache at its default size.
//
// The cache is built with every parameter at its default (sequential lookup,
// E = 256, T = 128, 32KB, 4 ways). The access stream is synthetic, shaped
// after the statistics that motivate HoLiSwap: a few hot lines (16 of the
// 512 lines of the cache, about 3%) receive 60% of the accesses, a warm set
// of 600 lines shares 35%, and 5% go to lines never seen before. A quarter of
// the accesses are stores. The warm lines are loaded once first, so that the
// hot lines are filled into whichever way replacement gives them. Every load is checked against a copy of memory.
//
// The test also estimates the energy of the output wires and of the whole
// sequential access with the per-way energies of a 32KB 4-way 22nm cache
// (total 5.7 / 8.8 / 10.9 / 14.0 pJ, wire 1.6 / 4.7 / 6.8 / 9.9 pJ for ways
// W0..W3). It charges each access to the way that served it, and each swap
// two reads and two writes (of W0 and the hot way). The comparison is with
// the same lines left in the way each was filled into, as a cache without
// migration would keep them. It checks that the hot lines end up served from
// W0, that most accesses go to W0, and that migration lowers the wire energy.
module tb_holiswap_workload;
  import holiswap_pkg::*;
  import tb_hs_pkg::*;

  localparam int N_ACC  = 100000;
  localparam int N_HOT  = 16;
  localparam int N_WARM = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid, req_ready, resp_valid;
  cpu_req_t    req;
  cpu_resp_t   resp;
  logic        m_valid, m_ready, m_we, m_rvalid;
  logic [31:0] m_addr;
  logic [511:0] m_wdata, m_rdata;
  int          n_rd, n_wr;
  hs_events_t  ev;

  holiswap_l1d dut (
    .clk, .rst_n,
    .cpu_req_valid(req_valid), .cpu_req_ready(req_ready), .cpu_req(req),
    .cpu_resp_valid(resp_valid), .cpu_resp(resp),
    .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_we(m_we),
    .mem_req_addr(m_addr), .mem_req_wdata(m_wdata),
    .mem_resp_valid(m_rvalid), .mem_resp_rdata(m_rdata),
    .events(ev)
  );

  line_mem_model #(.LATENCY(10)) mem (
    .clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready), .req_we(m_we),
    .req_addr(m_addr), .req_wdata(m_wdata), .resp_valid(m_rvalid),
    .resp_rdata(m_rdata), .n_reads(n_rd), .n_writes(n_wr)
  );

  // per-way energies in units of 0.1 pJ (sequential lookup)
  localparam int E_TOT  [4] = '{57, 88, 109, 140};
  localparam int E_WIRE [4] = '{16, 47, 68, 99};

  int checks = 0, failures = 0;
  logic [31:0] shadow [logic [31:0]];
  int fill_way [logic [25:0]];          // way each line was filled into
  longint e_wire_hs = 0, e_wire_base = 0, e_tot_hs = 0, e_tot_base = 0;
  int way_hs [4], way_base [4];
  int n_swap = 0, n_epoch = 0, n_miss = 0, n_hot_w0 = 0, n_hot = 0, swap_way_r;
  int cycles = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (ev.epoch_end) n_epoch++;
    if (ev.miss) n_miss++;
    if (ev.swap) begin
      n_swap++;
      // a swap reads and writes W0 and the hot way: charge both twice
      for (int w = 0; w < 4; w++) if (ev.sub_en[w]) swap_way_r = w;
      e_tot_hs  += 2 * (E_TOT[0] + E_TOT[swap_way_r]);
      e_wire_hs += 2 * (E_WIRE[0] + E_WIRE[swap_way_r]);
    end
  end

  // sub_en in the first swap cycle shows only W0; the hot way is recovered
  // from the cycle after
  always @(posedge clk) if (rst_n && dut.state == dut.S_SW1) begin
    for (int w = 1; w < 4; w++) if (ev.sub_en[w]) begin
      e_tot_hs  += 2 * (E_TOT[w] - E_TOT[0]);
      e_wire_hs += 2 * (E_WIRE[w] - E_WIRE[0]);
    end
  end

  task automatic access(input bit we, input logic [31:0] addr, input logic [31:0] wdata,
                        output cpu_resp_t r);
    logic [31:0] old, expv;
    req = '{we: we, addr: addr, wdata: wdata, wstrb: 4'hF};
    req_valid = 1;
    #0;
    while (!req_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    req_valid = 0;
    while (!resp_valid) begin @(posedge clk); #1; end
    r = resp;
    old = shadow.exists(addr) ? shadow[addr] : init_word(addr);
    if (we) shadow[addr] = wdata;
    else check(r.rdata == old, $sformatf("load %h got %h expected %h", addr, r.rdata, old));
  endtask

  function automatic logic [31:0] line_addr(input int region, input int n);
    // distinct lines spread over all sets
    return {4'(region), 28'(n) << 6};
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpu_resp_t r;
    int stream = 0;
    for (int w = 0; w < 4; w++) begin way_hs[w] = 0; way_base[w] = 0; end
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // warm-up: fill the cache with the warm lines, so that the hot lines
    // later land in whichever way replacement picks, not in empty W0 slots
    for (int i = 0; i < N_WARM; i++) begin
      access(1'b0, line_addr(2, i), 0, r);
      fill_way[line_addr(2, i) >> 6] = r.way;
    end
    for (int i = 0; i < N_ACC; i++) begin
      int k;
      logic [31:0] a;
      bit hot;
      k = $urandom_range(99);
      hot = 0;
      if (k < 60) begin
        a = line_addr(1, $urandom_range(N_HOT - 1) * 37);
        hot = 1;
      end else if (k < 95) begin
        a = line_addr(2, $urandom_range(N_WARM - 1));
      end else begin
        a = line_addr(3, stream);
        stream++;
      end
      a = a | {26'b0, 4'($urandom_range(15)), 2'b00};
      access($urandom_range(3) == 0, a, $urandom, r);
      if (!r.hit) fill_way[a[31:6]] = r.way;
      way_hs[r.way]++;
      way_base[fill_way[a[31:6]]]++;
      e_tot_hs    += E_TOT[r.way];
      e_wire_hs   += E_WIRE[r.way];
      e_tot_base  += E_TOT[fill_way[a[31:6]]];
      e_wire_base += E_WIRE[fill_way[a[31:6]]];
      if (hot && i > N_ACC / 2) begin
        n_hot++;
        if (r.way == 0) n_hot_w0++;
      end
    end
    $display("accesses=%0d cycles=%0d misses=%0d swaps=%0d epochs=%0d", N_ACC, cycles, n_miss, n_swap, n_epoch);
    $display("way share with migration   : %0d %0d %0d %0d", way_hs[0], way_hs[1], way_hs[2], way_hs[3]);
    $display("way share without migration: %0d %0d %0d %0d", way_base[0], way_base[1], way_base[2], way_base[3]);
    $display("wire energy  %0d.%0d pJ vs %0d.%0d pJ without migration (saving %0d%%)",
             e_wire_hs / 10, e_wire_hs % 10, e_wire_base / 10, e_wire_base % 10,
             100 - (100 * e_wire_hs) / e_wire_base);
    $display("total energy %0d.%0d pJ vs %0d.%0d pJ without migration (saving %0d%%)",
             e_tot_hs / 10, e_tot_hs % 10, e_tot_base / 10, e_tot_base % 10,
             100 - (100 * e_tot_hs) / e_tot_base);
    $display("hot-line accesses served by W0 in the second half: %0d of %0d", n_hot_w0, n_hot);
    check(n_swap > 0, "swaps happened");
    check(n_epoch > 0, "epochs ended");
    check(n_miss > 0, "misses happened");
    check(n_hot_w0 * 10 > n_hot * 7, "hot lines served by W0");
    check(way_hs[0] > way_base[0], "migration raises the share of W0");
    check(e_wire_hs < e_wire_base, "migration lowers the wire energy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
