// tb_malekeh_subcore: end-to-end test of one sub-core (8 warps, 2 CCUs, 2 banks,
// 8-entry caches, 1024-bit registers) with STHLD held at 3.
// It first checks the issue-to-dispatch latency of a miss (3 cycles) and of a
// hit (1 cycle), then runs the same random environment as the SM test:
// random programs with reuse bits, a scoreboard, execution units with 1-12
// cycle latency, two write-back ports, and a golden register file against which
// every dispatched operand is compared. Every cache and allocation mechanism
// must occur at least once.
module tb_malekeh_subcore;
  import malekeh_pkg::*;
  localparam int NS = 1, NWL = 8, NC = 2, NB = 2, NWB = 2, DW = 1024;
  localparam int NREG = 16, CYCLES = 20000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    [NS-1:0][NWL-1:0]           warp_ready;
  instr_t  [NS-1:0][NWL-1:0]           warp_instr;
  logic    [NS-1:0]                    issue_valid;
  logic    [NS-1:0][2:0]               issue_lwarp;
  logic    [NS-1:0]                    eu_valid, eu_ready;
  warp_id_t [NS-1:0]                   eu_warp;
  instr_t  [NS-1:0]                    eu_instr;
  logic    [NS-1:0][NUM_SRC-1:0][DW-1:0] eu_operands;
  logic    [NS-1:0][NWB-1:0]           wb_valid, wb_ready;
  wb_req_t [NS-1:0][NWB-1:0]           wb_req;
  logic    [NS-1:0][NWB-1:0][DW-1:0]   wb_data;
  logic    [7:0]                       sthld;
  logic    [2:0]                       sthld_state;
  logic                                interval_end, large_change;
  ccu_events_t [NS-1:0][NC-1:0]        ccu_ev;
  alloc_case_t [NS-1:0]                issue_case;
  logic    [NS-1:0][5:0]               cases_seen;
  logic    [NS-1:0][NB-1:0]            read_blocked;
  logic    [NS-1:0][3:0]               far_squashed;

  assign sthld = 8'd3;
  assign sthld_state = '0;
  assign interval_end = 1'b0;
  assign large_change = 1'b0;
  malekeh_subcore #(.SUBCORE_ID(0), .NUM_SUBCORES(1)) dut (
    .clk, .rst_n, .warp_ready(warp_ready[0]), .warp_instr(warp_instr[0]), .sthld,
    .issue_valid(issue_valid[0]), .issue_lwarp(issue_lwarp[0]),
    .eu_valid(eu_valid[0]), .eu_ready(eu_ready[0]), .eu_warp(eu_warp[0]), .eu_instr(eu_instr[0]),
    .eu_operands(eu_operands[0]), .wb_valid(wb_valid[0]), .wb_req(wb_req[0]), .wb_data(wb_data[0]),
    .wb_ready(wb_ready[0]), .ccu_ev(ccu_ev[0]), .issue_case(issue_case[0]), .cases_seen(cases_seen[0]),
    .read_blocked(read_blocked[0]), .far_squashed(far_squashed[0]));

  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s t=%0t", m, $time); end
  endtask

  // ---------------- environment state ----------------
  logic [DW-1:0] gold [32][NREG];
  int            pend [32][NREG];
  typedef struct { int due; wb_req_t req; logic [DW-1:0] data; } wbq_t;
  wbq_t wbq [NS][$];
  int   wb_idx [NS][NWB];
  int   issued = 0, dispatched = 0, written = 0, expected_writes = 0;
  int   now = 0, active = NWL;
  int   took [NS];
  longint cnt [string];

  function automatic int gw(int s, int i); return i * NS + s; endfunction

  function automatic instr_t gen();
    instr_t x;
    int n, nd;
    x = '0;
    n  = ($urandom_range(9) == 0) ? 6 : int'($urandom_range(1, 3));
    nd = (n == 6) ? 2 : 1;
    x.opcode = 8'($urandom);
    x.eu     = 2'($urandom);
    for (int s = 0; s < n; s++) begin
      x.src_valid[s] = 1'b1;
      x.src_reg[s]   = 8'($urandom_range(NREG - 1));
      x.src_near[s]  = ($urandom_range(99) < 60);
    end
    for (int d = 0; d < nd; d++) begin
      x.dst_valid[d] = 1'b1;
      x.dst_reg[d]   = 8'($urandom_range(NREG - 1));
      x.dst_near[d]  = ($urandom_range(99) < 50);
    end
    if (nd == 2 && x.dst_reg[1] == x.dst_reg[0]) x.dst_reg[1] = x.dst_reg[0] ^ 8'd1;
    return x;
  endfunction

  function automatic logic [DW-1:0] compute(instr_t x, logic [NUM_SRC-1:0][DW-1:0] ops, int d);
    logic [DW-1:0] r;
    for (int l = 0; l < DW / 32; l++) begin
      logic [31:0] acc;
      acc = 32'(x.opcode) + 32'(d * 3 + 1);
      for (int s = 0; s < NUM_SRC; s++) if (x.src_valid[s]) acc += ops[s][l*32 +: 32];
      r[l*32 +: 32] = acc;
    end
    return r;
  endfunction

  function automatic bit can_issue(int s, int i);
    instr_t x;
    int w;
    x = warp_instr[s][i];
    w = gw(s, i);
    for (int k = 0; k < NUM_SRC; k++) if (x.src_valid[k] && pend[w][x.src_reg[k]] != 0) return 0;
    for (int k = 0; k < NUM_DST; k++) if (x.dst_valid[k] && pend[w][x.dst_reg[k]] != 0) return 0;
    return 1;
  endfunction

  task automatic bump(string k, int n = 1);
    cnt[k] = (cnt.exists(k) ? cnt[k] : 0) + n;
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (CYCLES + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main loop ----------------
  initial begin
    int last_iv, drain;
    bit stop;
    warp_ready = '0; eu_ready = '0; wb_valid = '0; wb_req = '0; wb_data = '0;
    for (int s = 0; s < NS; s++) for (int i = 0; i < NWL; i++) warp_instr[s][i] = gen();
    for (int w = 0; w < NWL; w++) for (int r = 0; r < NREG; r++) begin
      pend[w][r] = 0;
      for (int l = 0; l < DW / 32; l++) gold[w][r][l*32 +: 32] = $urandom;
    end
    // initial register contents go in through the write-back ports (far reuse)
    for (int w = 0; w < NWL; w++) for (int r = 0; r < NREG; r++)
      wbq[w % NS].push_back('{due: 0, req: '{warp: 5'(w), rid: 8'(r), near_reuse: 1'b0}, data: gold[w][r]});
    expected_writes = NWL * NREG;
    repeat (3) @(negedge clk);
    rst_n = 1;
    latency_test();
    last_iv = -1;
    stop = 0;
    drain = 0;
    while (1) begin
      @(negedge clk);
      now++;
      if (now % 5000 == 0) active = (active == NWL) ? 3 : NWL;
      if (now == CYCLES) stop = 1;
      // --- drive ---
      for (int s = 0; s < NS; s++) begin
        int n;
        for (int i = 0; i < NWL; i++)
          warp_ready[s][i] = !stop && (now > 300) && (i < active) && can_issue(s, i);
        eu_ready[s] = ($urandom_range(99) < 90);
        n = 0;
        wb_valid[s] = '0;
        for (int p = 0; p < NWB; p++) wb_idx[s][p] = -1;
        foreach (wbq[s][k]) begin
          if (n < NWB && wbq[s][k].due <= now) begin
            wb_valid[s][n] = 1'b1;
            wb_req[s][n]   = wbq[s][k].req;
            wb_data[s][n]  = wbq[s][k].data;
            wb_idx[s][n]   = k;
            n++;
          end
        end
      end
      #1;
      // --- observe this cycle ---
      for (int s = 0; s < NS; s++) begin
        int rm [$];
        took[s] = -1;
        rm = {};
        for (int c = 0; c < NC; c++) begin
          bump("source hits", int'(ccu_ev[s][c].src_hits));
          bump("source misses", int'(ccu_ev[s][c].src_misses));
          bump("flushes", int'(ccu_ev[s][c].flush));
          bump("D-port updates", int'(ccu_ev[s][c].d_hit));
          bump("D-port allocations", int'(ccu_ev[s][c].d_alloc));
          bump("stale copies invalidated", int'(ccu_ev[s][c].invalidate));
          bump("far-entry replacements", int'(ccu_ev[s][c].far_victims));
          bump("LRU replacements", int'(ccu_ev[s][c].lru_victims));
        end
        for (int k = 0; k < 6; k++) if (cases_seen[s][k]) bump($sformatf("allocation case %0d", (k == 5) ? 9 : k + 3));
        bump("reads held back", $countones(read_blocked[s]));
        bump("far writes squashed", int'(far_squashed[s]));
        bump("write-back port conflicts", $countones(wb_valid[s] & ~wb_ready[s]));
        // dispatch
        if (eu_valid[s] && eu_ready[s]) begin
          instr_t x;
          int w;
          x = eu_instr[s];
          w = int'(eu_warp[s]);
          check(w % NS == s, "warp dispatched by its own sub-core");
          for (int k = 0; k < NUM_SRC; k++)
            if (x.src_valid[k]) check(eu_operands[s][k] == gold[w][x.src_reg[k]], "operand value");
          for (int d = 0; d < NUM_DST; d++) if (x.dst_valid[d])
            wbq[s].push_back('{due: now + int'($urandom_range(1, 12)),
                               req: '{warp: 5'(w), rid: x.dst_reg[d], near_reuse: x.dst_near[d]},
                               data: compute(x, eu_operands[s], d)});
          dispatched++;
        end
        // issue: the warp's next instruction is taken, its destinations become pending
        if (issue_valid[s]) begin
          int i, w;
          i = int'(issue_lwarp[s]);
          w = gw(s, i);
          check(warp_ready[s][i], "only a ready warp issues");
          for (int d = 0; d < NUM_DST; d++) if (warp_instr[s][i].dst_valid[d]) begin
            pend[w][warp_instr[s][i].dst_reg[d]]++;
            expected_writes++;
          end
          issued++;
          took[s] = i;
        end
        // write-backs accepted at this edge
        for (int p = 0; p < NWB; p++) if (wb_valid[s][p] && wb_ready[s][p]) rm.push_back(wb_idx[s][p]);
        rm.rsort();
        foreach (rm[k]) begin
          wbq_t e;
          e = wbq[s][rm[k]];
          gold[e.req.warp][e.req.rid] = e.data;
          if (pend[e.req.warp][e.req.rid] > 0) pend[e.req.warp][e.req.rid]--;
          wbq[s].delete(rm[k]);
          written++;
        end
      end
      if (interval_end) begin
        bump("STHLD intervals");
        if (last_iv >= 0) check(now - last_iv == 10000, "interval length 10000 cycles");
        last_iv = now;
        $display("interval end at cycle %0d: state %0d STHLD %0d large=%0d", now, sthld_state, sthld, large_change);
      end
      if (large_change) bump("large IPC changes");
      // --- state that changes at this edge, applied before the next drive ---
      @(posedge clk);
      #1;
      for (int s = 0; s < NS; s++) if (took[s] >= 0) warp_instr[s][took[s]] = gen();
      if (stop) begin
        bit idle;
        idle = 1;
        for (int s = 0; s < NS; s++) if (wbq[s].size() != 0) idle = 0;
        if (idle && issued == dispatched) drain++;
        if (drain > 20) break;
      end
    end
    check(issued == dispatched, "every issued instruction dispatched once");
    check(written == expected_writes, "every write-back performed");
    foreach (cnt[k]) $display("%-28s %0d", k, cnt[k]);
    $display("issued %0d, dispatched %0d, writes %0d, final STHLD %0d", issued, dispatched, written, sthld);
    begin
      string need [$] = '{"source hits", "source misses", "flushes", "D-port updates",
        "D-port allocations", "stale copies invalidated", "far-entry replacements", "LRU replacements",
        "allocation case 3", "allocation case 4", "allocation case 5", "allocation case 6",
        "allocation case 7", "allocation case 9", "reads held back", "far writes squashed",
        "write-back port conflicts"};
      foreach (need[k]) check(cnt.exists(need[k]) && cnt[need[k]] > 0, {"mechanism never happened: ", need[k]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // Directed timing: one instruction of warp 0 with a single source that is not
  // cached leaves 3 cycles after issue (grant, bank read, fill); the same
  // source again hits and leaves 1 cycle after issue.
  task automatic latency_test();
    instr_t x;
    int t0;
    // load r3 of warp 0 into its bank first
    wb_valid[0] = 2'b01; wb_req[0][0] = '{warp: 5'd0, rid: 8'd3, near_reuse: 1'b0};
    wb_data[0][0] = gold[0][3];
    @(negedge clk);
    wb_valid[0] = '0;
    x = '0; x.src_valid[0] = 1'b1; x.src_reg[0] = 8'd3; x.src_near[0] = 1'b1; x.opcode = 8'h11;
    for (int rep = 0; rep < 2; rep++) begin
      warp_instr[0][0] = x; warp_ready[0] = 8'b1; eu_ready[0] = 1'b1;
      #1;
      check(issue_valid[0] && issue_lwarp[0] == 3'd0, "directed issue");
      @(negedge clk);
      warp_ready[0] = '0;
      t0 = 1;
      while (!eu_valid[0] && t0 < 20) begin @(negedge clk); t0++; end
      check(t0 == ((rep == 0) ? 3 : 1), $sformatf("issue-to-dispatch latency %0d (pass %0d)", t0, rep));
      check(eu_operands[0][0] == gold[0][3], "directed operand");
      @(negedge clk);
    end
    eu_ready[0] = 1'b0;
    warp_instr[0][0] = gen();
    // drain the initial writes in the queue from here on as usual
  endtask
endmodule
