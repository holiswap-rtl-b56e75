// holiswap_controller: hot-line detection of HoLiSwap.
//
// For every set s it keeps an epoch counter C_s and, for each of the four
// lines of the set, a hit counter H_l, all as 4-bit logarithmic counters
// (20 bits per set). On each access to set s (`acc_valid`), C_s counts the
// access and, on a hit, the hit way's H_l counts the hit; both increments are
// probabilistic (log_counter_inc). Then, in the same cycle:
//   1. if C_s has reached E, a new epoch starts: C_s and the set's four hit
//      counters return to zero;
//   2. otherwise, on a hit, the hottest line of the set (highest H_l, the lower way on a
//      tie) is hot if H_l >= T; if it is not already in way W0, `swap_valid`
//      asks for a swap of that way with W0 (`swap_way`). The controller swaps
//      the two hit counters at once, so the counters follow the lines; the
//      cache must then swap the lines before it serves another access.
// When the cache refills a way (`fill_valid`), the hit counter of that way is
// cleared, as the line there is new. `rd_set` reads one set's counters for
// observation. All outputs except the counter read-out are combinational in
// the access cycle; the state changes at the clock edge that ends it.
//
// From the paper: the per-set epoch counter and per-line hit counters, the
// rules C_s = E and H_l >= T, the swap of the hottest line to W0, E = 256 and
// T = 128 (T = E/2 keeps at most one line hot), the 4-bit exponent counters.
// This design's choice: the tie rule, deciding swaps on hits only (the hit
// counters change only on hits), clearing a refilled line's counter,
// and taking the random bits from an input.
module holiswap_controller
  import holiswap_pkg::*;
#(
  parameter int unsigned SETS       = 128,
  parameter int unsigned EPOCH_LOG2 = 8,   // E = 2^EPOCH_LOG2 = 256
  parameter int unsigned HOT_LOG2   = 7    // T = 2^HOT_LOG2   = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // access event
  input  logic                    acc_valid,
  input  logic [$clog2(SETS)-1:0] acc_set,
  input  logic                    acc_hit,
  input  logic [WAY_W-1:0]        acc_way,
  input  logic [RAND_W-1:0]       rnd,
  // swap decision (same cycle as the access)
  output logic                    swap_valid,
  output logic [WAY_W-1:0]        swap_way,
  output logic                    epoch_end,
  // refill of a way
  input  logic                    fill_valid,
  input  logic [$clog2(SETS)-1:0] fill_set,
  input  logic [WAY_W-1:0]        fill_way,
  // counter read-out
  input  logic [$clog2(SETS)-1:0] rd_set,
  output logic [CNT_W-1:0]        rd_epoch,
  output logic [CNT_W-1:0]        rd_hit [WAYS]
);
  localparam logic [CNT_W-1:0] E_CODE = log_code(EPOCH_LOG2);
  localparam logic [CNT_W-1:0] T_CODE = log_code(HOT_LOG2);

  logic [CNT_W-1:0] epoch_q [SETS];
  logic [CNT_W-1:0] hit_q   [SETS][WAYS];

  logic [CNT_W-1:0] epoch_nxt;
  logic [CNT_W-1:0] hit_nxt [WAYS];
  logic [CNT_W-1:0] hit_new [WAYS];   // after a swap
  logic [RAND_W-1:0] rnd_hit;
  logic [WAY_W-1:0]  hot_way;
  logic [CNT_W-1:0]  hot_code;

  // the hit counter takes the random word rotated by half, so that its coin
  // differs from the epoch counter's coin of the same cycle
  assign rnd_hit = {rnd[RAND_W/2-1:0], rnd[RAND_W-1:RAND_W/2]};

  log_counter_inc u_inc_epoch (
    .code(epoch_q[acc_set]), .inc(acc_valid), .rnd(rnd), .next(epoch_nxt)
  );

  for (genvar w = 0; w < WAYS; w++) begin : g_hit
    log_counter_inc u_inc_hit (
      .code(hit_q[acc_set][w]),
      .inc (acc_valid && acc_hit && (acc_way == WAY_W'(w))),
      .rnd (rnd_hit),
      .next(hit_nxt[w])
    );
  end

  always_comb begin
    hot_way  = '0;
    hot_code = hit_nxt[0];
    for (int w = 1; w < WAYS; w++)
      if (hit_nxt[w] > hot_code) begin
        hot_code = hit_nxt[w];
        hot_way  = WAY_W'(w);
      end
    epoch_end  = acc_valid && (epoch_nxt >= E_CODE);
    swap_valid = acc_valid && acc_hit && !epoch_end && (hot_code >= T_CODE) && (hot_way != '0);
    swap_way   = hot_way;
    for (int w = 0; w < WAYS; w++) hit_new[w] = hit_nxt[w];
    if (swap_valid) begin
      hit_new[0]       = hit_nxt[hot_way];
      hit_new[hot_way] = hit_nxt[0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        epoch_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) hit_q[s][w] <= '0;
      end
    end else begin
      if (acc_valid) begin
        if (epoch_end) begin
          epoch_q[acc_set] <= '0;
          for (int w = 0; w < WAYS; w++) hit_q[acc_set][w] <= '0;
        end else begin
          epoch_q[acc_set] <= epoch_nxt;
          for (int w = 0; w < WAYS; w++) hit_q[acc_set][w] <= hit_new[w];
        end
      end
      if (fill_valid)
        hit_q[fill_set][fill_way] <= '0;
    end
  end

  assign rd_epoch = epoch_q[rd_set];
  always_comb
    for (int w = 0; w < WAYS; w++) rd_hit[w] = hit_q[rd_set][w];

endmodule
