// tb_issue_scheduler: random warp readiness and CCU states against a model of
// the priority and allocation rules. The model predicts which warp issues,
// the allocation case, the CCU (exactly for cases 3; for the random cases 5
// and 9 it checks membership in the allowed set: free far CCUs, free CCUs),
// the waiting counter (increment on a waiting cycle, reset on case 9) and the
// last-warp register. Each case must occur.
module tb_issue_scheduler;
  import malekeh_pkg::*;
  localparam int NW = 8, NC = 2, SC = 1, NS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NW-1:0] warp_ready; ccu_status_t [NC-1:0] ccu_status; logic [7:0] sthld;
  logic issue_valid; logic [2:0] issue_lwarp; warp_id_t issue_warp; logic [0:0] issue_ccu;
  alloc_case_t issue_case; logic [5:0] cases_seen; logic [7:0] wait_count;
  issue_scheduler #(.NUM_WARPS(NW), .NUM_CCU(NC), .SUBCORE_ID(SC), .NUM_SUBCORES(NS)) dut (.*);
  int checks = 0, failures = 0;
  int seen [alloc_case_t];
  task automatic check(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end endtask

  int m_counter = 0, m_last = -1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    warp_ready = 0; ccu_status = '0; sthld = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      alloc_case_t sc, wc [NW];
      logic [NC-1:0] free_m, far_m;
      int wccu [NW];
      bit wdata [NW], ok [NW], any_wait;
      int pick;
      @(negedge clk);
      if (t % 500 == 0) sthld = 8'($urandom_range(6));
      warp_ready = NW'($urandom);
      for (int c = 0; c < NC; c++) begin
        ccu_status[c].busy     = ($urandom_range(99) < 45);
        ccu_status[c].has_near = ($urandom_range(99) < 60);
        ccu_status[c].has_data = ccu_status[c].busy || ($urandom_range(99) < 70);
        ccu_status[c].warp     = 5'($urandom_range(NW - 1) * NS + SC);
      end
      if (ccu_status[0].warp == ccu_status[1].warp) ccu_status[1].warp = ccu_status[1].warp ^ 5'd4;
      #1;
      check(int'(wait_count) == m_counter, "waiting counter");
      for (int c = 0; c < NC; c++) begin
        free_m[c] = !ccu_status[c].busy;
        far_m[c]  = free_m[c] && !ccu_status[c].has_near;
      end
      if (far_m != 0) sc = CASE_FAR_CCU;
      else if (free_m == 0) sc = CASE_NO_FREE;
      else if (m_counter < int'(sthld)) sc = CASE_WAIT;
      else sc = CASE_FORCED;
      any_wait = 0;
      for (int i = 0; i < NW; i++) begin
        wdata[i] = 0; wc[i] = sc; wccu[i] = -1;
        for (int c = 0; c < NC; c++)
          if (ccu_status[c].has_data && int'(ccu_status[c].warp) == i * NS + SC) begin
            wdata[i] = 1; wccu[i] = c;
            wc[i] = ccu_status[c].busy ? CASE_OWN_BUSY : CASE_SAME_CCU;
          end
        ok[i] = warp_ready[i] && (wc[i] == CASE_SAME_CCU || wc[i] == CASE_FAR_CCU || wc[i] == CASE_FORCED);
        if (warp_ready[i] && wc[i] == CASE_WAIT) any_wait = 1;
        if (warp_ready[i]) seen[wc[i]] = seen.exists(wc[i]) ? seen[wc[i]] + 1 : 1;
      end
      pick = -1;
      if (m_last >= 0 && ok[m_last]) pick = m_last;
      for (int i = 0; i < NW; i++) if (pick < 0 && ok[i] && wdata[i]) pick = i;
      for (int i = 0; i < NW; i++) if (pick < 0 && ok[i] && !wdata[i]) pick = i;
      check(issue_valid == (pick >= 0), "issue decision");
      if (pick >= 0) begin
        check(int'(issue_lwarp) == pick && int'(issue_warp) == pick * NS + SC, "warp priority");
        check(issue_case == wc[pick], "allocation case");
        if (wc[pick] == CASE_SAME_CCU) check(int'(issue_ccu) == wccu[pick], "same CCU");
        if (wc[pick] == CASE_FAR_CCU)  check(far_m[issue_ccu], "a free far CCU");
        if (wc[pick] == CASE_FORCED)   check(free_m[issue_ccu], "a free CCU");
        m_last = pick;
        if (wc[pick] == CASE_FORCED) m_counter = 0;
      end else if (any_wait && m_counter < 255) m_counter++;
    end
    foreach (seen[k]) $display("case %0d met %0d times", int'(k), seen[k]);
    check(seen.size() == 6, "every allocation case met");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
