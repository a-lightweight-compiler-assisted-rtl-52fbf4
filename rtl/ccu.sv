// ccu: Caching Collector Unit, an operand collector that is also a small
// fully associative register cache for the warp it last served.
//
// State (paper Fig. 5):
//   metadata   - warp id and instruction of the occupant;
//   cache table (CT), CT_ENTRIES rows of tag (register id), valid, lock,
//                reuse bit (1 = near), LRU rank (0 = most recent) and a
//                DATA_W-bit register value;
//   operand collector table (OCT), one slot per source operand with valid,
//                ready and a pointer (index) into the CT, so that repeated
//                sources share one CT entry;
//   operand MUXs - each OCT slot's index selects its CT data for dispatch.
//
// Operations, all completed at one clock edge:
//   allocation (alloc_valid, only while not busy): the CT is flushed when the
//     new warp differs from the stored one; every valid source is looked up;
//     a hit marks the slot ready; a miss takes a CT entry by the replacement
//     policy and emits a read request on rd_req (same cycle, to the bank
//     FIFOs). The entries used are locked, get the instruction's reuse bits,
//     and become most recently used. Only the reuse bits of the new
//     instruction's registers are updated, as the paper proposes.
//   S port: a bank value arrives for CT entry s_idx; it is stored and every
//     OCT slot pointing at it becomes ready.
//   D port: a filtered (near) write-back of this warp. A present register is
//     updated; otherwise an unlocked entry is replaced and filled. Not locked.
//   dispatch: disp_ready is high when busy and every valid slot is ready;
//     disp_ack releases the CCU and clears all locks. The data stay cached.
//
// Replacement (paper Sec. IV-A1): locked entries are excluded; among the rest a
// far entry is chosen at random (16-bit LFSR, rotated start), and if there is
// no far entry the least recently used one is taken. An invalid entry, when
// one exists, is used before either (this design's choice).
//
// Coherence (this design's choice): the write filter forwards only near writes
// and at most one per cycle, so a CCU also watches every accepted write-back
// (wb_fire/wb_req); a write of its warp to a cached, unlocked register that did
// not come through the D port invalidates that entry, so a stale value is never
// served.
//
// Port R is the status output: busy, has_data (busy or any valid entry),
// has_near (any valid near entry) and warp.
// Timing: a hit-only instruction allocated in cycle t is dispatchable in t+1.
// Lint notes: the top bit of s_idx is unused when CT_ENTRIES is 8 (the index
// field is shared package-wide), the victim search keeps a 32-bit loop
// variable, and rst_n also feeds the 'disable iff' of the protocol
// assertions; none is a circuit problem. Some output bits are constant by
// construction: an event count never exceeds 7, so the top bit of the 4-bit
// counts stays 0, and rd_req carries this unit's fixed CCU number.
module ccu
  import malekeh_pkg::*;
#(
  parameter int unsigned CCU_ID     = 0,
  parameter int unsigned CT_ENTRIES = 8,
  parameter int unsigned DATA_W     = 1024,
  parameter int unsigned NUM_WB     = 2,
  localparam int unsigned EW        = $clog2(CT_ENTRIES)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // allocation of a new instruction (from the issue scheduler / allocator)
  input  logic                             alloc_valid,
  input  warp_id_t                         alloc_warp,
  input  instr_t                           alloc_instr,
  // port R
  output ccu_status_t                      status,
  // read requests for the missing sources
  output logic    [NUM_SRC-1:0]            rd_req_valid,
  output rd_req_t [NUM_SRC-1:0]            rd_req,
  // port S
  input  logic                             s_valid,
  input  logic    [IDX_W-1:0]              s_idx,
  input  logic    [DATA_W-1:0]             s_data,
  // port D
  input  logic                             d_valid,
  input  wb_req_t                          d_req,
  input  logic    [DATA_W-1:0]             d_data,
  // write-back snoop
  input  logic    [NUM_WB-1:0]             wb_fire,
  input  wb_req_t [NUM_WB-1:0]             wb_req,
  // dispatch
  output logic                             disp_ready,
  output warp_id_t                         disp_warp,
  output instr_t                           disp_instr,
  output logic    [NUM_SRC-1:0][DATA_W-1:0] disp_operands,
  input  logic                             disp_ack,
  // events
  output ccu_events_t                      ev
);

  typedef logic [CT_ENTRIES-1:0][EW-1:0] lru_vec_t;

  // ---------------- state ----------------
  logic                      busy_q;
  warp_id_t                  warp_q;
  instr_t                    instr_q;
  logic [CT_ENTRIES-1:0]     ct_valid, ct_lock, ct_near;
  reg_id_t [CT_ENTRIES-1:0]  ct_tag;
  lru_vec_t                  ct_lru;
  logic [DATA_W-1:0]         ct_data [CT_ENTRIES];
  logic [NUM_SRC-1:0]        oct_valid, oct_ready;
  logic [NUM_SRC-1:0][EW-1:0] oct_idx;
  logic [15:0]               lfsr;

  // ---------------- next state ----------------
  logic                      n_busy;
  warp_id_t                  n_warp;
  instr_t                    n_instr;
  logic [CT_ENTRIES-1:0]     n_valid, n_lock, n_near, we_s, we_d;
  reg_id_t [CT_ENTRIES-1:0]  n_tag;
  lru_vec_t                  n_lru;
  logic [NUM_SRC-1:0]        n_oct_valid, n_oct_ready;
  logic [NUM_SRC-1:0][EW-1:0] n_oct_idx;

  // Move entry i to most-recently-used; entries that were more recent age by one.
  function automatic lru_vec_t lru_touch(lru_vec_t l, logic [EW-1:0] i);
    lru_vec_t r;
    r = l;
    for (int e = 0; e < CT_ENTRIES; e++)
      if (l[e] < l[i]) r[e] = l[e] + 1'b1;
    r[i] = '0;
    return r;
  endfunction

  // Replacement policy. kind: 0 invalid entry, 1 random far entry, 2 LRU.
  function automatic logic pick_victim(
      input  logic [CT_ENTRIES-1:0] valid, excl, near,
      input  lru_vec_t              lru,
      input  logic [EW-1:0]         start,
      output logic [EW-1:0]         idx,
      output logic [1:0]            kind);
    logic found;
    found = 1'b0;
    idx   = '0;
    kind  = 2'd0;
    for (int e = 0; e < CT_ENTRIES; e++)
      if (!found && !valid[e] && !excl[e]) begin
        found = 1'b1; idx = EW'(e); kind = 2'd0;
      end
    for (int k = 0; k < CT_ENTRIES; k++) begin
      int unsigned e;
      e = (int'(start) + k) % CT_ENTRIES;
      if (!found && valid[e] && !excl[e] && !near[e]) begin
        found = 1'b1; idx = EW'(e); kind = 2'd1;
      end
    end
    if (!found) begin
      logic [EW-1:0] best;
      best = '0;
      for (int e = 0; e < CT_ENTRIES; e++)
        if (!excl[e] && (!found || lru[e] > best)) begin
          found = 1'b1; idx = EW'(e); best = lru[e]; kind = 2'd2;
        end
    end
    return found;
  endfunction

  always_comb begin
    logic [CT_ENTRIES-1:0] fresh;
    logic                  hit, ok;
    logic [EW-1:0]         hidx;
    logic [1:0]            kind;
    n_busy      = busy_q;
    n_warp      = warp_q;
    n_instr     = instr_q;
    n_valid     = ct_valid;
    n_lock      = ct_lock;
    n_near      = ct_near;
    n_tag       = ct_tag;
    n_lru       = ct_lru;
    n_oct_valid = oct_valid;
    n_oct_ready = oct_ready;
    n_oct_idx   = oct_idx;
    we_s        = '0;
    we_d        = '0;
    rd_req_valid = '0;
    rd_req       = '0;
    ev           = '0;
    fresh        = '0;
    hit = 1'b0; ok = 1'b0; hidx = '0; kind = '0;

    // dispatch releases the unit
    if (disp_ack) begin
      n_busy      = 1'b0;
      n_lock      = '0;
      n_oct_valid = '0;
      n_oct_ready = '0;
    end

    // allocation of a new instruction
    if (alloc_valid) begin
      if (alloc_warp != warp_q) begin
        ev.flush = |ct_valid;
        n_valid  = '0;
      end
      n_warp  = alloc_warp;
      n_instr = alloc_instr;
      n_busy  = 1'b1;
      n_lock  = '0;
      for (int s = 0; s < NUM_SRC; s++) begin
        n_oct_valid[s] = alloc_instr.src_valid[s];
        n_oct_ready[s] = 1'b0;
        n_oct_idx[s]   = '0;
        if (alloc_instr.src_valid[s]) begin
          hit = 1'b0; hidx = '0;
          for (int e = 0; e < CT_ENTRIES; e++)
            if (n_valid[e] && n_tag[e] == alloc_instr.src_reg[s]) begin
              hit = 1'b1; hidx = EW'(e);
            end
          if (hit) begin
            n_oct_ready[s] = !fresh[hidx];
            if (!fresh[hidx]) ev.src_hits = ev.src_hits + 4'd1;
          end else begin
            ok = pick_victim(n_valid, n_lock, n_near, n_lru, lfsr[EW-1:0] + EW'(s), hidx, kind);
            n_valid[hidx] = 1'b1;
            n_tag[hidx]   = alloc_instr.src_reg[s];
            fresh[hidx]   = 1'b1;
            rd_req_valid[s]  = 1'b1;
            rd_req[s].ccu    = CCU_ID_W'(CCU_ID);
            rd_req[s].idx    = IDX_W'(hidx);
            rd_req[s].warp   = alloc_warp;
            rd_req[s].rid    = alloc_instr.src_reg[s];
            ev.src_misses    = ev.src_misses + 4'd1;
            if (kind == 2'd1) ev.far_victims = ev.far_victims + 4'd1;
            if (kind == 2'd2) ev.lru_victims = ev.lru_victims + 4'd1;
          end
          n_oct_idx[s]  = hidx;
          n_lock[hidx]  = 1'b1;
          n_near[hidx]  = alloc_instr.src_near[s];
          n_lru         = lru_touch(n_lru, hidx);
        end
      end
    end

    // writes of this warp that bypass the D port make cached copies stale
    for (int p = 0; p < NUM_WB; p++) begin
      if (wb_fire[p] && wb_req[p].warp == n_warp &&
          !(d_valid && d_req.warp == wb_req[p].warp && d_req.rid == wb_req[p].rid)) begin
        for (int e = 0; e < CT_ENTRIES; e++)
          if (n_valid[e] && !n_lock[e] && n_tag[e] == wb_req[p].rid) begin
            n_valid[e]    = 1'b0;
            ev.invalidate = 1'b1;
          end
      end
    end

    // D port: near write-back of this warp
    if (d_valid && d_req.warp == n_warp) begin
      hit = 1'b0; hidx = '0;
      for (int e = 0; e < CT_ENTRIES; e++)
        if (n_valid[e] && n_tag[e] == d_req.rid) begin
          hit = 1'b1; hidx = EW'(e);
        end
      if (hit) begin
        ev.d_hit = 1'b1;
        ok       = 1'b1;
      end else begin
        ok = pick_victim(n_valid, n_lock, n_near, n_lru, lfsr[EW-1:0] + EW'(NUM_SRC), hidx, kind);
        if (ok) begin
          ev.d_alloc = 1'b1;
          if (kind == 2'd1) ev.far_victims = ev.far_victims + 4'd1;
          if (kind == 2'd2) ev.lru_victims = ev.lru_victims + 4'd1;
        end
      end
      if (ok) begin
        n_valid[hidx] = 1'b1;
        n_tag[hidx]   = d_req.rid;
        n_near[hidx]  = d_req.near_reuse;
        n_lru         = lru_touch(n_lru, hidx);
        we_d[hidx]    = 1'b1;
      end
    end

    // S port: a requested source value arrives from a bank
    if (s_valid) begin
      we_s[s_idx[EW-1:0]] = 1'b1;
      for (int s = 0; s < NUM_SRC; s++)
        if (n_oct_valid[s] && n_oct_idx[s] == s_idx[EW-1:0]) n_oct_ready[s] = 1'b1;
    end
  end

  // ---------------- registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      warp_q    <= '0;
      instr_q   <= '0;
      ct_valid  <= '0;
      ct_lock   <= '0;
      ct_near   <= '0;
      ct_tag    <= '0;
      for (int e = 0; e < CT_ENTRIES; e++) ct_lru[e] <= EW'(e);
      oct_valid <= '0;
      oct_ready <= '0;
      oct_idx   <= '0;
      lfsr      <= 16'(CCU_ID * 16'h3A5 + 16'h1D);
    end else begin
      busy_q    <= n_busy;
      warp_q    <= n_warp;
      instr_q   <= n_instr;
      ct_valid  <= n_valid;
      ct_lock   <= n_lock;
      ct_near   <= n_near;
      ct_tag    <= n_tag;
      ct_lru    <= n_lru;
      oct_valid <= n_oct_valid;
      oct_ready <= n_oct_ready;
      oct_idx   <= n_oct_idx;
      lfsr      <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
    end
  end

  always_ff @(posedge clk) begin
    for (int e = 0; e < CT_ENTRIES; e++) begin
      if (we_s[e])      ct_data[e] <= s_data;
      else if (we_d[e]) ct_data[e] <= d_data;
    end
  end

  // ---------------- outputs ----------------
  always_comb begin
    status.busy     = busy_q;
    status.has_data = busy_q || (|ct_valid);
    status.has_near = |(ct_valid & ct_near);
    status.warp     = warp_q;
    disp_ready      = busy_q && ((oct_valid & ~oct_ready) == '0);
    disp_warp       = warp_q;
    disp_instr      = instr_q;
    for (int s = 0; s < NUM_SRC; s++) disp_operands[s] = ct_data[oct_idx[s]];
  end

  // Protocol rules of the unit.
  a_alloc_idle: assert property (@(posedge clk) disable iff (!rst_n) !(alloc_valid && busy_q))
    else $error("CCU %0d allocated while busy", CCU_ID);
  a_disp_ready: assert property (@(posedge clk) disable iff (!rst_n) !(disp_ack && !disp_ready))
    else $error("CCU %0d dispatched before ready", CCU_ID);
  a_fill_busy: assert property (@(posedge clk) disable iff (!rst_n) !(s_valid && !busy_q))
    else $error("CCU %0d S-port value while idle", CCU_ID);

endmodule
