// rf_arbiter: bank arbitration and write-back filtering of one sub-core.
//
// Reads. A CCU that has just been allocated an instruction pushes one request
// per missing source operand (up to six in one cycle). Each request goes to the
// FIFO of the bank that holds the register. Every cycle the oldest request of
// each FIFO is granted if (a) its bank is not being written this cycle and
// (b) no other bank has already been granted a read for the same CCU, whose S
// port takes one value per cycle. Banks are examined in fixed order, bank 0
// first. A granted read is performed at the clock edge; rd_route tells the
// crossbar, one cycle later when the bank data appears, which CCU and which
// cache-table entry it belongs to.
//
// Writes. Write-back requests always reach the banks and have priority over
// reads. A bank takes one write per cycle, so if two write-back ports target
// the same bank the lower-numbered port wins and the other sees wb_ready=0.
//
// Write filter. For every CCU whose cache table holds the writing warp, at most
// one accepted write is forwarded to its D port, and only one whose reuse is
// near; far writes are squashed (the tri-state buffer of the paper's Fig. 4).
// The paper gives the queueing, the grant rule, write priority and the filter;
// the FIFO depth (one entry per operand slot of every CCU, so it never
// overflows), the fixed bank order, the lowest-port-wins rules and the register
// to bank/row mapping are this design's choices:
//   bank = (warp + reg) mod NUM_BANKS
//   row  = ((warp / NUM_SUBCORES) * REGS_PER_WARP + reg mod REGS_PER_WARP) / NUM_BANKS
// Lint notes: the upper bits of the row/hash arithmetic are unused by design
// (they are computed in 32-bit integers and truncated), and rst_n also
// appears in the 'disable iff' of the overflow assertion, which lint reports
// as a reset used both synchronously and asynchronously; neither is a circuit
// problem.
module rf_arbiter
  import malekeh_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 2,
  parameter int unsigned NUM_CCU       = 2,
  parameter int unsigned NUM_WB        = 2,
  parameter int unsigned NUM_SUBCORES  = 4,
  parameter int unsigned REGS_PER_WARP = 64,
  parameter int unsigned ROWS          = 256,
  localparam int unsigned AW           = $clog2(ROWS),
  localparam int unsigned QDEPTH       = NUM_CCU * NUM_SRC,
  localparam int unsigned QW           = $clog2(QDEPTH + 1),
  localparam int unsigned PW           = (NUM_WB > 1) ? $clog2(NUM_WB) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // read requests of the CCU being allocated this cycle
  input  logic    [NUM_SRC-1:0]   rd_req_valid,
  input  rd_req_t [NUM_SRC-1:0]   rd_req,
  // write-back requests
  input  logic    [NUM_WB-1:0]    wb_valid,
  input  wb_req_t [NUM_WB-1:0]    wb_req,
  output logic    [NUM_WB-1:0]    wb_ready,
  // CCU status (port R) for the write filter
  input  ccu_status_t [NUM_CCU-1:0] ccu_status,
  // bank control
  output logic    [NUM_BANKS-1:0] bank_en,
  output logic    [NUM_BANKS-1:0] bank_we,
  output logic    [NUM_BANKS-1:0][AW-1:0] bank_addr,
  output logic    [NUM_BANKS-1:0][PW-1:0] bank_wsel,
  output rd_route_t [NUM_BANKS-1:0] rd_route,
  // write filter result, one D-port selection per CCU
  output d_sel_t  [NUM_CCU-1:0]   d_sel,
  // events for counters and tests
  output logic    [NUM_BANKS-1:0] ev_read_blocked,   // head request waited this cycle
  output logic    [3:0]           ev_far_squashed,   // far writes kept out of CCUs
  output logic    [QW-1:0]        q_count [NUM_BANKS]
);

  function automatic logic [AW-1:0] row_of(warp_id_t w, reg_id_t r);
    int unsigned lw, row;
    lw  = int'(w) / NUM_SUBCORES;
    row = (lw * REGS_PER_WARP + (int'(r) % REGS_PER_WARP)) / NUM_BANKS;
    return AW'(row);
  endfunction

  // ---------------- bank FIFOs ----------------
  rd_req_t             q_mem  [NUM_BANKS][QDEPTH];
  logic [QW-1:0]       q_head [NUM_BANKS];
  logic [QW-1:0]       q_cnt  [NUM_BANKS];
  logic [NUM_BANKS-1:0] pop;

  // ---------------- writes ----------------
  logic [NUM_BANKS-1:0] bank_wr;
  always_comb begin
    bank_wr   = '0;
    wb_ready  = '0;
    bank_wsel = '0;
    for (int p = 0; p < NUM_WB; p++) begin
      int unsigned b;
      b = bank_of(wb_req[p].warp, wb_req[p].rid, NUM_BANKS);
      if (wb_valid[p] && !bank_wr[b]) begin
        bank_wr[b]   = 1'b1;
        bank_wsel[b] = PW'(p);
        wb_ready[p]  = 1'b1;
      end
    end
  end

  // ---------------- read grants ----------------
  always_comb begin
    logic [NUM_CCU-1:0] ccu_taken;
    ccu_taken       = '0;
    pop             = '0;
    bank_en         = '0;
    bank_we         = '0;
    bank_addr       = '0;
    ev_read_blocked = '0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      rd_req_t h;
      h = q_mem[b][q_head[b]];
      if (bank_wr[b]) begin
        bank_en[b]   = 1'b1;
        bank_we[b]   = 1'b1;
        bank_addr[b] = row_of(wb_req[bank_wsel[b]].warp, wb_req[bank_wsel[b]].rid);
        if (q_cnt[b] != 0) ev_read_blocked[b] = 1'b1;
      end else if (q_cnt[b] != 0) begin
        if (!ccu_taken[int'(h.ccu)]) begin
          ccu_taken[int'(h.ccu)] = 1'b1;
          pop[b]           = 1'b1;
          bank_en[b]       = 1'b1;
          bank_addr[b]     = row_of(h.warp, h.rid);
        end else begin
          ev_read_blocked[b] = 1'b1;
        end
      end
    end
  end

  // FIFO slot written by each request this cycle, in slot order
  logic [NUM_BANKS-1:0][NUM_SRC-1:0] push_en;
  logic [NUM_SRC-1:0][QW-1:0]        push_pos;
  logic [NUM_BANKS-1:0][QW-1:0]      push_n;
  always_comb begin
    push_en  = '0;
    push_pos = '0;
    push_n   = '0;
    for (int s = 0; s < NUM_SRC; s++) begin
      int unsigned b;
      b = bank_of(rd_req[s].warp, rd_req[s].rid, NUM_BANKS);
      if (rd_req_valid[s]) begin
        push_en[b][s] = 1'b1;
        push_pos[s]   = QW'((int'(q_head[b]) + int'(q_cnt[b]) + int'(push_n[b])) % QDEPTH);
        push_n[b]     = push_n[b] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        q_head[b] <= '0;
        q_cnt[b]  <= '0;
      end
      rd_route <= '0;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        rd_route[b].valid <= pop[b];
        rd_route[b].ccu   <= q_mem[b][q_head[b]].ccu;
        rd_route[b].idx   <= q_mem[b][q_head[b]].idx;
        if (pop[b]) q_head[b] <= QW'((int'(q_head[b]) + 1) % QDEPTH);
        q_cnt[b] <= q_cnt[b] + push_n[b] - QW'(pop[b]);
      end
    end
  end

  // FIFO storage (no reset needed: only entries below the count are read)
  always_ff @(posedge clk) begin
    for (int b = 0; b < NUM_BANKS; b++)
      for (int s = 0; s < NUM_SRC; s++)
        if (push_en[b][s]) q_mem[b][push_pos[s]] <= rd_req[s];
  end

  always_comb for (int b = 0; b < NUM_BANKS; b++) q_count[b] = q_cnt[b];

  // ---------------- write filter (D ports) ----------------
  always_comb begin
    d_sel           = '0;
    ev_far_squashed = '0;
    for (int c = 0; c < NUM_CCU; c++) begin
      for (int p = 0; p < NUM_WB; p++) begin
        if (wb_valid[p] && wb_ready[p] && ccu_status[c].has_data &&
            wb_req[p].warp == ccu_status[c].warp) begin
          if (!wb_req[p].near_reuse)
            ev_far_squashed = ev_far_squashed + 4'd1;
          else if (!d_sel[c].valid) begin
            d_sel[c].valid = 1'b1;
            d_sel[c].port  = 4'(p);
          end
        end
      end
    end
  end

  // The FIFOs are sized for every operand slot of every CCU; never overflow.
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_q_assert
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) int'(q_cnt[b]) <= QDEPTH)
      else $error("bank %0d read FIFO overflow", b);
  end

endmodule
