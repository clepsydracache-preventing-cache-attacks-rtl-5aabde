// clepsydra_cache -- a last-level cache with randomized skewed placement and
// time-based (TTL) eviction.
//
// Organisation. WAYS ways of SETS rows, 64-byte lines. A line address maps to
// one pseudorandom row in every way (addr_randomizer, one instance per way,
// each with its own 64-bit way secret); the WAYS entries reached this way form
// the line's "dynamic set". Each entry holds the encrypted tag, the line data,
// a dirty bit and a TTL counter (ttl_store); TTL > 0 means live.
//
// Operation (all following the cache proposal unless marked as a choice):
//   * Hit: a live entry of the dynamic set holds the tag. The line is served
//     (read) or overwritten and marked dirty (write), and the entry gets a
//     fresh random TTL in [TTL_LOW, TTL_HIGH].
//   * Miss with an empty entry in the dynamic set: one of the empty entries is
//     picked at random and filled; no live line is disturbed.
//   * Miss with no empty entry (a conflict): a random way is replaced, and the
//     rttl_scheduler is told, which fires a TTL tick at once and quarters the
//     tick period (raising R_TTL).
//   * Expiry: an entry whose TTL reaches zero is invalid at once. If it is
//     dirty it still has to be written back; a scanner walks the rows one per
//     idle cycle and writes such entries back through addr_derandomizer. (The
//     scanner is this design's choice of how to find them.)
//   * An expired dirty entry that is reused before the scanner reaches it is
//     written back first. A miss whose tag matches an expired dirty entry
//     reuses exactly that entry, so memory is updated before the line is
//     fetched again (this design's choice, for coherence).
//
// Upstream port (towards L1): a request is taken when req_valid && req_ready.
// req_write = 1 is a full-line write (an L1 writeback, allocated without
// fetching); req_write = 0 is a line read. Each request gets one resp_valid
// pulse; resp_hit tells hit or miss, resp_rdata carries read data. The L1 side
// must accept the response in that cycle (choice).
// Downstream port (towards memory): mem_req_valid/ready handshake with an
// operation (read or writeback), a line address and writeback data; a read is
// answered by one mem_resp_valid pulse with the line.
//
// Timing: a hit answers 3 cycles after the request is taken (lookup read,
// compare, registered response). A miss adds the writeback handshake, if a
// victim is dirty, and the memory round trip. These latencies are this
// design's, the proposal gives none.
//
// Keys: k0/k1 (PRINCE key) and way_secret are inputs meant to be drawn at
// system start and held; changing them while lines are cached loses them.
module clepsydra_cache
  import clepsydra_pkg::*;
#(
  parameter int unsigned WAYS          = 8,          // 8-way L2
  parameter int unsigned SETS          = 2048,       // 1 MiB / (64 B * 8 ways)
  parameter int unsigned LINE_W        = 512,        // 64-byte line
  parameter int unsigned TTL_W         = 8,
  parameter int unsigned TTL_LOW       = 128,        // lower bound of a fresh TTL (ticks)
  parameter int unsigned TTL_HIGH      = 255,        // upper bound: 255 ticks = 50 ms at R_MIN
  parameter int unsigned CNT_W         = 20,
  parameter int unsigned INTERVAL_MIN  = 256,
  parameter int unsigned INTERVAL_MAX  = 392157,     // cycles per tick at R_MIN (2 GHz)
  parameter int unsigned INTERVAL_STEP = 1024,
  parameter logic [31:0] SEED          = 32'hACE1_2468,
  localparam int unsigned IDX_W = $clog2(SETS),
  localparam int unsigned TAG_W = ADDR_W - IDX_W,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // secrets
  input  blk_t                k0,
  input  blk_t                k1,
  input  blk_t                way_secret [WAYS],
  // upstream
  input  logic                req_valid,
  output logic                req_ready,
  input  logic                req_write,
  input  logic [ADDR_W-1:0]   req_addr,
  input  logic [LINE_W-1:0]   req_wdata,
  output logic                resp_valid,
  output logic                resp_hit,
  output logic [LINE_W-1:0]   resp_rdata,
  // downstream
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output mem_op_e             mem_req_op,
  output logic [ADDR_W-1:0]   mem_req_addr,
  output logic [LINE_W-1:0]   mem_req_wdata,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_rdata,
  // monitoring
  output cache_events_t       events,
  output logic [CNT_W-1:0]    rttl_interval          // current tick period (1/R_TTL)
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_CMP, S_VWB, S_FETCH, S_WAIT, S_EXP_RD, S_EXP_WB
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- storage
  logic [TAG_W-1:0]  tag_mem  [WAYS][SETS];
  logic [LINE_W-1:0] data_mem [WAYS][SETS];
  logic              dirty    [WAYS][SETS];

  logic [TAG_W-1:0]  tag_q  [WAYS];
  logic [LINE_W-1:0] data_q [WAYS];

  // ------------------------------------------------------- request registers
  logic [ADDR_W-1:0] addr_q;
  logic              write_q;
  logic [LINE_W-1:0] wdata_q;

  // ---------------------------------------------------- address randomizers
  logic [IDX_W-1:0] idx_w [WAYS];
  logic [TAG_W-1:0] tag_w [WAYS];

  for (genvar w = 0; w < int'(WAYS); w++) begin : g_map
    addr_randomizer #(.IDX_W(IDX_W)) u_map (
      .addr(addr_q), .k0(k0), .k1(k1), .way_secret(way_secret[w]),
      .idx(idx_w[w]), .tag(tag_w[w])
    );
  end

  // ------------------------------------------------------------- TTL logic
  logic             tick, conflict_pulse;
  logic [IDX_W-1:0] scan_row;
  logic [TTL_W-1:0] lookup_ttl [WAYS];
  logic [TTL_W-1:0] scan_ttl   [WAYS];
  logic             ttl_wr_en;
  logic [WAY_W-1:0] ttl_wr_way;
  logic [IDX_W-1:0] ttl_wr_idx;
  logic [TTL_W-1:0] ttl_wr_val;

  ttl_store #(.WAYS(WAYS), .SETS(SETS), .TTL_W(TTL_W)) u_ttl (
    .clk, .rst_n, .tick,
    .lookup_idx(idx_w), .lookup_ttl,
    .scan_idx(scan_row), .scan_ttl,
    .wr_en(ttl_wr_en), .wr_way(ttl_wr_way), .wr_idx(ttl_wr_idx), .wr_ttl(ttl_wr_val)
  );

  rttl_scheduler #(
    .CNT_W(CNT_W), .INTERVAL_MIN(INTERVAL_MIN), .INTERVAL_MAX(INTERVAL_MAX),
    .INTERVAL_STEP(INTERVAL_STEP), .INTERVAL_INIT(INTERVAL_MIN)
  ) u_sched (
    .clk, .rst_n, .conflict(conflict_pulse), .tick, .interval(rttl_interval)
  );

  logic [31:0] rnd;
  lfsr_rng #(.SEED(SEED)) u_rng (.clk, .rst_n, .rnd);

  // Fresh TTL, uniform over [TTL_LOW, TTL_HIGH] up to the modulo bias.
  logic [TTL_W-1:0] fresh_ttl;
  assign fresh_ttl = TTL_W'(TTL_LOW + (32'(rnd[31:8]) % (TTL_HIGH - TTL_LOW + 1)));

  // ------------------------------------------------------ hit / victim logic
  logic [WAYS-1:0] hit_vec, empty_vec, stale_vec;
  logic            any_hit, any_empty, any_stale;
  logic [WAY_W-1:0] hit_way, pick_way, rand_way, stale_way;

  // Random pick among the set bits of a mask: rotate-priority from a random
  // start way (choice; exactly uniform only when a single bit is set or the
  // mask is full).
  function automatic logic [WAY_W-1:0] pick_random(logic [WAYS-1:0] mask, logic [WAY_W-1:0] start);
    logic [WAY_W-1:0] r;
    r = start;
    for (int k = int'(WAYS) - 1; k >= 0; k--) begin
      logic [WAY_W-1:0] cand;
      cand = WAY_W'((int'(start) + k) % int'(WAYS));
      if (mask[cand]) r = cand;
    end
    return r;
  endfunction

  always_comb begin
    for (int w = 0; w < int'(WAYS); w++) begin
      hit_vec[w]   = (lookup_ttl[w] != '0) && (tag_q[w] == tag_w[w]);
      empty_vec[w] = (lookup_ttl[w] == '0);
      stale_vec[w] = (lookup_ttl[w] == '0) && dirty[w][idx_w[w]] && (tag_q[w] == tag_w[w]);
    end
    any_hit   = |hit_vec;
    any_empty = |empty_vec;
    any_stale = |stale_vec;
    hit_way   = '0;
    stale_way = '0;
    for (int w = int'(WAYS) - 1; w >= 0; w--) begin
      if (hit_vec[w])   hit_way   = WAY_W'(w);
      if (stale_vec[w]) stale_way = WAY_W'(w);
    end
    rand_way = WAY_W'(rnd[7:0] % WAYS);
    pick_way = pick_random(empty_vec, rand_way);
  end

  // ----------------------------------------------------- victim / writeback
  logic [WAY_W-1:0]  vic_way;
  logic [IDX_W-1:0]  vic_idx;
  logic [ADDR_W-1:0] wb_addr;

  addr_derandomizer #(.IDX_W(IDX_W)) u_unmap (
    .idx(vic_idx), .tag(tag_q[vic_way]), .k0(k0), .k1(k1),
    .way_secret(way_secret[vic_way]), .addr(wb_addr)
  );

  // Expired dirty entries in the scanned row.
  logic [WAYS-1:0]  exp_vec;
  logic             any_exp;
  logic [WAY_W-1:0] exp_way;
  always_comb begin
    for (int w = 0; w < int'(WAYS); w++) exp_vec[w] = (scan_ttl[w] == '0) && dirty[w][scan_row];
    any_exp = |exp_vec;
    exp_way = '0;
    for (int w = int'(WAYS) - 1; w >= 0; w--) if (exp_vec[w]) exp_way = WAY_W'(w);
  end

  // --------------------------------------------------------------- control
  logic             rd_en;
  logic [IDX_W-1:0] rd_idx [WAYS];

  assign req_ready = (state == S_IDLE);
  assign rd_en     = (state == S_LOOKUP) || (state == S_EXP_RD);
  always_comb
    for (int w = 0; w < int'(WAYS); w++) rd_idx[w] = (state == S_EXP_RD) ? scan_row : idx_w[w];

  assign mem_req_valid = (state == S_VWB) || (state == S_FETCH) || (state == S_EXP_WB);
  assign mem_req_op    = (state == S_FETCH) ? MEM_READ : MEM_WRITEBACK;
  assign mem_req_addr  = (state == S_FETCH) ? {addr_q[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}} : wb_addr;
  assign mem_req_wdata = data_q[vic_way];

  // Array reads: synchronous, all ways in parallel.
  always_ff @(posedge clk) begin
    if (rd_en)
      for (int w = 0; w < int'(WAYS); w++) begin
        tag_q[w]  <= tag_mem[w][rd_idx[w]];
        data_q[w] <= data_mem[w][rd_idx[w]];
      end
  end

  // Victim chosen in S_CMP (combinationally) and held afterwards.
  logic [WAY_W-1:0] cmp_vic;
  always_comb begin
    if (any_stale)      cmp_vic = stale_way;
    else if (any_empty) cmp_vic = pick_way;
    else                cmp_vic = rand_way;
  end

  logic cmp_need_wb;
  assign cmp_need_wb = dirty[cmp_vic][idx_w[cmp_vic]];

  logic [WAY_W-1:0] vic_way_q;
  logic             exp_mode_q;                     // victim is the scanner's entry
  assign vic_way = (state == S_CMP) ? cmp_vic : vic_way_q;
  assign vic_idx = exp_mode_q ? scan_row : idx_w[vic_way];

  assign conflict_pulse = (state == S_CMP) && !any_hit && !any_empty && !any_stale;


  // Array writes (one entry per cycle) and TTL loads.
  logic              arr_we;
  logic [LINE_W-1:0] arr_wdata;
  logic              arr_dirty;
  logic              clr_dirty;

  always_comb begin
    arr_we     = 1'b0;
    arr_wdata  = wdata_q;
    arr_dirty  = 1'b0;
    clr_dirty  = 1'b0;
    ttl_wr_en  = 1'b0;
    ttl_wr_way = vic_way;
    ttl_wr_idx = idx_w[vic_way];
    ttl_wr_val = fresh_ttl;
    unique case (state)
      S_CMP: if (any_hit) begin
        ttl_wr_en  = 1'b1;                          // a hit renews the TTL
        ttl_wr_way = hit_way;
        ttl_wr_idx = idx_w[hit_way];
        arr_we     = write_q;
        arr_dirty  = 1'b1;
      end
      S_VWB:    clr_dirty = mem_req_ready;
      S_EXP_WB: clr_dirty = mem_req_ready;
      default: ;
    endcase
    // Allocation of a line: write request after any victim writeback, or
    // read data arriving from memory.
    if ((state == S_VWB && mem_req_ready && write_q) || (state == S_CMP && !any_hit && !cmp_need_wb && write_q)) begin
      arr_we    = 1'b1;
      arr_dirty = 1'b1;
      ttl_wr_en = 1'b1;
    end
    if (state == S_WAIT && mem_resp_valid) begin
      arr_we    = 1'b1;
      arr_wdata = mem_resp_rdata;
      arr_dirty = 1'b0;
      ttl_wr_en = 1'b1;
    end
  end

  // Entry written: the hit entry on a hit, otherwise the victim.
  logic             wr_is_hit;
  logic [WAY_W-1:0] wr_way;
  logic [IDX_W-1:0] wr_idx;
  assign wr_is_hit = (state == S_CMP) && any_hit;
  assign wr_way    = wr_is_hit ? hit_way : vic_way;
  assign wr_idx    = idx_w[wr_way];

  always_ff @(posedge clk) begin
    if (arr_we) begin
      data_mem[wr_way][wr_idx] <= arr_wdata;
      if (!wr_is_hit) tag_mem[wr_way][wr_idx] <= tag_w[wr_way];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < int'(WAYS); w++)
        for (int s = 0; s < int'(SETS); s++) dirty[w][s] <= 1'b0;
    end else begin
      if (clr_dirty) dirty[vic_way][vic_idx] <= 1'b0;
      if (arr_we) dirty[wr_way][wr_idx] <= arr_dirty;
    end
  end

  // State machine.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      addr_q     <= '0;
      write_q    <= 1'b0;
      wdata_q    <= '0;
      vic_way_q  <= '0;
      exp_mode_q <= 1'b0;
      scan_row   <= '0;
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_rdata <= '0;
      events     <= '0;
    end else begin
      resp_valid <= 1'b0;
      events     <= '0;
      events.tick <= tick;
      unique case (state)
        S_IDLE: begin
          exp_mode_q <= 1'b0;
          if (req_valid) begin
            addr_q  <= req_addr;
            write_q <= req_write;
            wdata_q <= req_wdata;
            state   <= S_LOOKUP;
          end else if (any_exp) begin
            vic_way_q  <= exp_way;
            exp_mode_q <= 1'b1;
            state      <= S_EXP_RD;
          end else begin
            scan_row <= (scan_row == IDX_W'(SETS - 1)) ? '0 : scan_row + 1'b1;
          end
        end
        S_LOOKUP: state <= S_CMP;
        S_CMP: begin
          if (any_hit) begin
            events.hit <= 1'b1;
            resp_valid <= 1'b1;
            resp_hit   <= 1'b1;
            resp_rdata <= data_q[hit_way];
            state      <= S_IDLE;
          end else begin
            events.miss      <= 1'b1;
            events.fill_free <= !conflict_pulse;
            events.conflict  <= conflict_pulse;
            vic_way_q        <= cmp_vic;
            if (cmp_need_wb) state <= S_VWB;
            else if (write_q) begin
              resp_valid <= 1'b1;
              resp_hit   <= 1'b0;
              state      <= S_IDLE;
            end else state <= S_FETCH;
          end
        end
        S_VWB: if (mem_req_ready) begin
          events.victim_wb <= 1'b1;
          if (write_q) begin
            resp_valid <= 1'b1;
            resp_hit   <= 1'b0;
            state      <= S_IDLE;
          end else state <= S_FETCH;
        end
        S_FETCH: if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          resp_valid <= 1'b1;
          resp_hit   <= 1'b0;
          resp_rdata <= mem_resp_rdata;
          state      <= S_IDLE;
        end
        S_EXP_RD: state <= S_EXP_WB;
        S_EXP_WB: if (mem_req_ready) begin
          events.expiry_wb <= 1'b1;
          exp_mode_q       <= 1'b0;
          state            <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  // A memory request is held, unchanged, until it is accepted.
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_op) && $stable(mem_req_addr));
  // Every miss is either a fill into an empty entry or a conflict, never both.
  a_miss_kind: assert property (@(posedge clk) disable iff (!rst_n)
    events.miss |-> (events.fill_free ^ events.conflict));

endmodule
