// holiswap_l1d: 32KB 4-way L1 data cache with HoLiSwap hot-line migration.
//
// The cache keeps each way in its own 8KB subarray (data_subarray); way W0 is
// the one nearest the processor, so its output wires are the shortest and
// cheapest. A small tag array (tag_array) is read before or with the data.
// The HoLiSwap controller (holiswap_controller) counts accesses per set and
// hits per line with logarithmic counters; when a line becomes hot
// (H_l >= T within an epoch of E accesses to its set) and is not in W0, the
// cache swaps it with the line in W0. A swap blocks the processor port for
// four cycles: read W0, read the hot way, write W0, write the hot way (two
// reads and two writes). The output word of each subarray is gated by its tag
// match before the way multiplexer (way_output_mux).
//
// Lookup organisation, parameter LOOKUP:
//   LOOKUP_SEQUENTIAL  cycle 1 tags, cycle 2 only the hit way: hit in 3 cycles
//   LOOKUP_PARALLEL    cycle 1 tags and all four ways: load hit in 2 cycles
//   LOOKUP_PREDICT_W0  cycle 1 tags and W0 (the static prediction); a load that
//                      hits W0 returns in 2 cycles, any other hit and every
//                      store in 3 cycles.
// Latency is counted from the clock edge that accepts the request
// (cpu_req_valid && cpu_req_ready) to the cycle in which cpu_resp_valid is
// high: a request accepted at edge 0 answers in the cycle after edge N-1,
// i.e. cpu_resp_valid is sampled high at edge N.
//
// Processor port: valid/ready request (one outstanding access: the cache is
// blocking), one-cycle response pulse. A store writes the bytes of wstrb and
// returns a response with no data. Memory port: line-wide valid/ready
// request (write-back of a dirty victim or read of a line), read data
// returned by a one-cycle mem_resp_valid pulse. Misses allocate (stores too);
// a dirty victim is written back first. The victim is the lowest invalid way,
// else the least recently used one (lru_state); a swap carries the LRU ages
// with the lines, so migration does not change which line is evicted. After the refill the access is replayed through
// the normal hit path without counting it a second time.
//
// From the paper: the 32KB / 4-way / 8KB-per-way organisation with 128 sets,
// the counters and thresholds (E = 256, T = 128), the swap of the hottest line
// to W0 with the port blocked for 4 cycles (2 reads, 2 writes), the gated
// outputs, the hit latencies of the three lookups and the static W0 way
// prediction. This design's choice: the 64-byte line, 32-bit word, the
// blocking single-access port, write-back with write-allocate, LRU
// replacement, the memory interface and the random source.
module holiswap_l1d
  import holiswap_pkg::*;
#(
  parameter lookup_e     LOOKUP     = LOOKUP_SEQUENTIAL,
  parameter int unsigned EPOCH_LOG2 = 8,   // E = 256
  parameter int unsigned HOT_LOG2   = 7,   // T = 128
  parameter logic [15:0] SEED       = 16'hACE1
) (
  input  logic              clk,
  input  logic              rst_n,
  // processor
  input  logic              cpu_req_valid,
  output logic              cpu_req_ready,
  input  cpu_req_t          cpu_req,
  output logic              cpu_resp_valid,
  output cpu_resp_t         cpu_resp,
  // next level of the memory hierarchy
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [LINE_W-1:0] mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_rdata,
  // accounting
  output hs_events_t        events
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_DATA, S_WB_RD, S_WB_REQ, S_FILL_REQ, S_FILL_WAIT,
    S_REPLAY, S_SW0, S_SW1, S_SW2, S_SW3
  } state_e;

  state_e state, state_n;

  // ---------------------------------------------------------------- request
  cpu_req_t          r_req;
  logic              r_replay;       // the lookup is the replay after a refill
  logic [WAY_W-1:0]  r_way;          // hit way / victim way
  logic [WAY_W-1:0]  r_swap_way;
  logic              r_swap_pend;
  tag_row_t          r_row;          // tag row of the set, kept up to date

  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  logic [3:0]        widx;           // word in the line
  assign idx  = r_req.addr[OFFSET_W +: IDX_W];
  assign tag  = r_req.addr[ADDR_W-1 -: TAG_W];
  assign widx = r_req.addr[OFFSET_W-1:2];

  logic accept;
  assign cpu_req_ready = (state == S_IDLE);
  assign accept        = cpu_req_valid && cpu_req_ready;

  // ---------------------------------------------------------------- arrays
  logic              t_en, t_we;
  logic [IDX_W-1:0]  t_idx;
  logic [WAYS-1:0]   t_wway;
  tag_row_t          t_wdata, t_rdata;

  logic [WAYS-1:0]   d_en;
  logic              d_we;
  logic [IDX_W-1:0]  d_idx;
  logic [LINE_BYTES-1:0] d_wbe;
  logic [LINE_W-1:0] d_wdata;
  logic [LINE_W-1:0] d_rdata [WAYS];

  tag_array #(.SETS(L1_SETS)) u_tags (
    .clk, .rst_n, .en(t_en), .we(t_we), .idx(t_idx), .wway(t_wway),
    .wdata(t_wdata), .rdata(t_rdata)
  );

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    data_subarray #(.SETS(L1_SETS), .LINE_BYTES(LINE_BYTES)) u_sub (
      .clk, .en(d_en[w]), .we(d_we), .idx(d_idx), .wbe(d_wbe),
      .wdata(d_wdata), .rdata(d_rdata[w])
    );
  end

  // ---------------------------------------------------------------- random
  logic [RAND_W-1:0] rnd;
  hs_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .step(1'b1), .rnd);

  // ---------------------------------------------------------------- tag match
  logic [WAYS-1:0]  match;
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      match[w] = t_rdata[w].valid && (t_rdata[w].tag == tag);
      if (match[w]) hit_way = WAY_W'(w);
    end
    hit = |match;
  end

  // replacement: least recently used, ages follow swapped lines
  logic [WAY_W-1:0] lru_way;
  lru_state #(.SETS(L1_SETS)) u_lru (
    .clk, .rst_n,
    .touch_valid(state == S_LOOKUP && hit), .touch_set(idx), .touch_way(hit_way),
    .swap_valid(state == S_SW3), .swap_set(idx), .swap_way(r_swap_way),
    .rd_set(idx), .lru_way
  );

  // victim: lowest invalid way, else the least recently used
  logic [WAY_W-1:0] victim;
  always_comb begin
    victim = lru_way;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!t_rdata[w].valid) victim = WAY_W'(w);
  end

  // ---------------------------------------------------------------- controller
  logic             acc_valid, swap_valid, epoch_end, fill_valid;
  logic [WAY_W-1:0] swap_way;
  logic [CNT_W-1:0] rd_epoch;
  logic [CNT_W-1:0] rd_hit [WAYS];

  assign acc_valid  = (state == S_LOOKUP) && !r_replay;
  assign fill_valid = (state == S_FILL_WAIT) && mem_resp_valid;

  holiswap_controller #(
    .SETS(L1_SETS), .EPOCH_LOG2(EPOCH_LOG2), .HOT_LOG2(HOT_LOG2)
  ) u_ctrl (
    .clk, .rst_n,
    .acc_valid, .acc_set(idx), .acc_hit(hit), .acc_way(hit_way), .rnd,
    .swap_valid, .swap_way, .epoch_end,
    .fill_valid, .fill_set(idx), .fill_way(r_way),
    .rd_set(idx), .rd_epoch, .rd_hit
  );

  // ---------------------------------------------------------------- output gating
  logic [WAYS-1:0]   out_sel;
  logic [WORD_W-1:0] way_word [WAYS];
  logic [WORD_W-1:0] gated    [WAYS];
  logic [WORD_W-1:0] load_word;
  always_comb
    for (int w = 0; w < WAYS; w++) way_word[w] = d_rdata[w][widx*WORD_W +: WORD_W];

  way_output_mux #(.DATA_W(WORD_W)) u_mux (
    .sel(out_sel), .way_data(way_word), .gated, .dout(load_word)
  );

  // ---------------------------------------------------------------- lookup helpers
  // the lookup reads data with the tags (parallel / predicted way) or not
  function automatic logic [WAYS-1:0] lookup_data_en(input logic is_store);
    if (is_store) return '0;
    case (LOOKUP)
      LOOKUP_PARALLEL:   return '1;
      LOOKUP_PREDICT_W0: return WAYS'(1);
      default:           return '0;
    endcase
  endfunction

  // the hit can be answered at the end of the lookup cycle (2-cycle hit)
  logic fast_hit;
  always_comb begin
    case (LOOKUP)
      LOOKUP_PARALLEL:   fast_hit = 1'b1;
      LOOKUP_PREDICT_W0: fast_hit = !r_req.we && (hit_way == '0);
      default:           fast_hit = 1'b0;
    endcase
  end

  logic [LINE_BYTES-1:0] store_wbe;
  assign store_wbe = LINE_BYTES'(r_req.wstrb) << (widx * WORD_BYTES);

  // ---------------------------------------------------------------- FSM
  logic [LINE_W-1:0] swap_buf;
  logic              resp_set;

  always_comb begin
    state_n   = state;
    t_en      = 1'b0;
    t_we      = 1'b0;
    t_idx     = idx;
    t_wway    = '0;
    t_wdata   = r_row;
    d_en      = '0;
    d_we      = 1'b0;
    d_idx     = idx;
    d_wbe     = '1;
    d_wdata   = mem_resp_rdata;
    out_sel   = '0;
    resp_set  = 1'b0;
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = {r_req.addr[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}};
    mem_req_wdata = d_rdata[r_way];

    case (state)
      S_IDLE: begin
        if (cpu_req_valid) begin
          t_en    = 1'b1;
          t_idx   = cpu_req.addr[OFFSET_W +: IDX_W];
          d_en    = lookup_data_en(cpu_req.we);
          d_idx   = cpu_req.addr[OFFSET_W +: IDX_W];
          state_n = S_LOOKUP;
        end
      end

      S_REPLAY: begin
        t_en    = 1'b1;
        d_en    = lookup_data_en(r_req.we);
        state_n = S_LOOKUP;
      end

      S_LOOKUP: begin
        if (hit) begin
          if (r_req.we) begin
            // store: write the hit way and mark it dirty
            d_en[hit_way] = 1'b1;
            d_we          = 1'b1;
            d_wbe         = store_wbe;
            d_wdata       = {WORDS_PER_LINE{r_req.wdata}};
            t_en          = 1'b1;
            t_we          = 1'b1;
            t_wway        = WAYS'(1) << hit_way;
            t_wdata       = t_rdata;
            t_wdata[hit_way].dirty = 1'b1;
          end
          if (fast_hit) begin
            out_sel[hit_way] = !r_req.we;
            resp_set = 1'b1;
            state_n  = (swap_valid) ? S_SW0 : S_IDLE;
          end else begin
            if (!r_req.we) d_en[hit_way] = 1'b1;   // read only the hit way
            state_n = S_DATA;
          end
        end else begin
          state_n = (t_rdata[victim].valid && t_rdata[victim].dirty) ? S_WB_RD : S_FILL_REQ;
        end
      end

      S_DATA: begin
        out_sel[r_way] = !r_req.we;
        resp_set = 1'b1;
        state_n  = r_swap_pend ? S_SW0 : S_IDLE;
      end

      S_WB_RD: begin
        d_en[r_way] = 1'b1;
        state_n     = S_WB_REQ;
      end

      S_WB_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = {r_row[r_way].tag, idx, {OFFSET_W{1'b0}}};
        if (mem_req_ready) state_n = S_FILL_REQ;
      end

      S_FILL_REQ: begin
        mem_req_valid = 1'b1;
        if (mem_req_ready) state_n = S_FILL_WAIT;
      end

      S_FILL_WAIT: begin
        if (mem_resp_valid) begin
          d_en[r_way] = 1'b1;
          d_we        = 1'b1;
          d_wdata     = mem_resp_rdata;
          t_en        = 1'b1;
          t_we        = 1'b1;
          t_wway      = WAYS'(1) << r_way;
          t_wdata[r_way] = '{valid: 1'b1, dirty: 1'b0, tag: tag};
          state_n     = S_REPLAY;
        end
      end

      // hot-line swap: 2 reads, 2 writes, port blocked
      S_SW0: begin
        d_en[0] = 1'b1;
        state_n = S_SW1;
      end
      S_SW1: begin
        d_en[r_swap_way] = 1'b1;
        state_n = S_SW2;
      end
      S_SW2: begin
        d_en[0]  = 1'b1;
        d_we     = 1'b1;
        d_wdata  = d_rdata[r_swap_way];
        state_n  = S_SW3;
      end
      S_SW3: begin
        d_en[r_swap_way] = 1'b1;
        d_we     = 1'b1;
        d_wdata  = swap_buf;
        t_en     = 1'b1;
        t_we     = 1'b1;
        t_wway   = (WAYS'(1) << r_swap_way) | WAYS'(1);
        t_wdata[0]          = r_row[r_swap_way];
        t_wdata[r_swap_way] = r_row[0];
        state_n  = S_IDLE;
      end

      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      r_req          <= '0;
      r_replay       <= 1'b0;
      r_way          <= '0;
      r_swap_way     <= '0;
      r_swap_pend    <= 1'b0;
      r_row          <= '0;
      swap_buf       <= '0;
      cpu_resp_valid <= 1'b0;
      cpu_resp       <= '0;
    end else begin
      state          <= state_n;
      cpu_resp_valid <= resp_set;
      if (resp_set) begin
        cpu_resp.rdata <= r_req.we ? '0 : load_word;
        cpu_resp.hit   <= !r_replay;
        cpu_resp.way   <= (state == S_LOOKUP) ? hit_way : r_way;
      end
      if (accept) begin
        r_req    <= cpu_req;
        r_replay <= 1'b0;
      end
      if (state == S_LOOKUP) begin
        r_row <= t_wdata;                      // row with a store's dirty bit
        if (!t_we) r_row <= t_rdata;
        if (hit) begin
          r_way       <= hit_way;
          r_swap_pend <= swap_valid;
          r_swap_way  <= swap_way;
        end else begin
          r_way       <= victim;
          r_swap_pend <= 1'b0;
        end
      end
      if (state == S_FILL_WAIT && mem_resp_valid) r_replay <= 1'b1;
      if (state == S_SW1) swap_buf <= d_rdata[0];
      if (state == S_SW3) r_swap_pend <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- accounting
  always_comb begin
    events            = '0;
    events.access     = acc_valid;
    events.hit        = acc_valid && hit;
    events.miss       = acc_valid && !hit;
    events.swap       = (state == S_SW0);
    events.epoch_end  = epoch_end;
    events.writeback  = (state == S_WB_REQ) && mem_req_ready;
    events.pred_wrong = (LOOKUP == LOOKUP_PREDICT_W0) && (state == S_LOOKUP) && hit
                        && !r_req.we && (hit_way != '0);
    events.sub_en     = d_en;
    events.wire_sel   = out_sel;
  end

  // ---------------------------------------------------------------- protocol checks
  // a memory request holds its address and kind until it is taken
  property p_mem_req_stable;
    @(posedge clk) disable iff (!rst_n)
      mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we);
  endproperty
  assert property (p_mem_req_stable);

  // the port is blocked during a swap
  assert property (@(posedge clk) disable iff (!rst_n)
    (state inside {S_SW0, S_SW1, S_SW2, S_SW3}) |-> !cpu_req_ready);

  // at most one way matches a tag
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOOKUP) |-> $onehot0(match));

endmodule
