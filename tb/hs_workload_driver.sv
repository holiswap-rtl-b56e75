// hs_workload_driver: drives one cache with a synthetic hot-line stream and
// accounts its energy; used by tb_holiswap_sweep.
//
// The stream comes from a private xorshift generator seeded by SEED, so every
// driver with the same SEED issues exactly the same accesses, whatever cache
// it drives. Mix: N_HOT hot lines take 60% of the accesses, N_WARM warm lines
// 35%, new lines 5%; a quarter are stores. The warm lines are loaded once
// first. Every load is checked against a copy of memory (`errors`).
//
// Energy, in units of 0.1 pJ, is taken from the cache's event outputs: 4.1 pJ
// for every cycle a subarray is cycled (sub_en), plus the output-wire energy
// of the way whose wire carries a load word (1.6 / 4.7 / 6.8 / 9.9 pJ for
// W0..W3), plus that way's wire energy for the data of a store, plus two
// wire transfers of both ways for a swap. With one subarray per access this
// gives the sequential per-way totals 5.7 / 8.8 / 10.9 / 14.0 pJ, and with
// four the parallel ones 18.0 / 21.1 / 23.2 / 26.3 pJ. `done` rises when the
// stream is over; the counters are then final.
module hs_workload_driver
  import holiswap_pkg::*;
  import tb_hs_pkg::*;
#(
  parameter int N_ACC  = 40000,
  parameter int N_HOT  = 16,
  parameter int N_WARM = 600,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       req_valid,
  input  logic       req_ready,
  output cpu_req_t   req,
  input  logic       resp_valid,
  input  cpu_resp_t  resp,
  input  hs_events_t ev,
  output logic       done,
  output longint     energy,       // array + wire, 0.1 pJ
  output longint     wire_energy,  // wire only, 0.1 pJ
  output int         cycles,
  output int         swaps,
  output int         epochs,
  output int         misses,
  output int         load_hits,
  output int         load_hits_w0,
  output int         errors
);
  localparam int WIRE [4] = '{16, 47, 68, 99};
  localparam int ARRAY = 41;

  logic [31:0] shadow [logic [31:0]];
  logic [31:0] x;
  bit          counting;
  bit          prev_swap;

  function automatic logic [31:0] next_rand(inout logic [31:0] s);
    s ^= s << 13;
    s ^= s >> 17;
    s ^= s << 5;
    return s;
  endfunction

  function automatic logic [31:0] line_addr(input int region, input int n);
    return {4'(region), 28'(n) << 6};
  endfunction

  // energy from the event outputs; the hot way of a swap shows in the second
  // swap cycle, charged with two transfers over the wires of W0 and that way
  always @(posedge clk) begin
    if (rst_n && counting) begin
      cycles++;
      for (int w = 0; w < 4; w++) begin
        if (ev.sub_en[w]) energy += ARRAY;
        if (ev.wire_sel[w]) begin
          energy      += WIRE[w];
          wire_energy += WIRE[w];
        end
        if (prev_swap && w > 0 && ev.sub_en[w]) begin
          energy      += 2 * (WIRE[0] + WIRE[w]);
          wire_energy += 2 * (WIRE[0] + WIRE[w]);
        end
      end
      if (ev.swap)      swaps++;
      if (ev.miss)      misses++;
      if (ev.epoch_end) epochs++;
    end
    prev_swap = rst_n && ev.swap;
  end

  task automatic access(input bit we, input logic [31:0] addr, input logic [31:0] wdata);
    cpu_resp_t r;
    logic [31:0] old;
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
    else if (r.rdata != old) errors++;
    if (counting) begin
      if (we) begin
        energy      += WIRE[r.way];
        wire_energy += WIRE[r.way];
      end
      if (!we && r.hit) begin
        load_hits++;
        if (r.way == 0) load_hits_w0++;
      end
    end
  endtask

  initial begin
    logic [31:0] a;
    int k;
    done = 0; req_valid = 0; req = '0; x = SEED; prev_swap = 0;
    energy = 0; wire_energy = 0; cycles = 0; swaps = 0; epochs = 0; misses = 0;
    load_hits = 0; load_hits_w0 = 0; errors = 0; counting = 0;
    @(posedge rst_n);
    @(posedge clk); #1;
    for (int i = 0; i < N_WARM; i++) access(1'b0, line_addr(2, i), 0);
    counting = 1;
    for (int i = 0; i < N_ACC; i++) begin
      k = int'(next_rand(x) % 100);
      if (k < 60)      a = line_addr(1, int'(next_rand(x) % N_HOT) * 37);
      else if (k < 95) a = line_addr(2, int'(next_rand(x) % N_WARM));
      else             a = line_addr(3, i);
      a = a | {26'b0, 4'(next_rand(x)), 2'b00};
      access((next_rand(x) % 4) == 0, a, next_rand(x));
    end
    counting = 0;
    done = 1;
  end
endmodule
