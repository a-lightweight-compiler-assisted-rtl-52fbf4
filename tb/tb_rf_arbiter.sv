// tb_rf_arbiter: random traffic against a reference model of the arbitration
// rules. Each cycle, with random write-backs and random bursts of read requests
// (a CCU only sends a burst when it has nothing outstanding, as in the design),
// the model predicts: which write-back ports are accepted (one write per bank,
// lower port first), which bank is written, which queue heads are granted
// (bank free of writes, CCU S port not yet taken this cycle, banks in order),
// the row addresses, the routes one cycle later, FIFO order, and the D-port
// selections of the write filter (warp match, near only, lowest port).
module tb_rf_arbiter;
  import malekeh_pkg::*;
  localparam int NB = 2, NC = 2, NW = 2, NS = 4, RPW = 64, ROWS = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NUM_SRC-1:0] rd_req_valid; rd_req_t [NUM_SRC-1:0] rd_req;
  logic [NW-1:0] wb_valid, wb_ready; wb_req_t [NW-1:0] wb_req;
  ccu_status_t [NC-1:0] ccu_status;
  logic [NB-1:0] bank_en, bank_we; logic [NB-1:0][7:0] bank_addr; logic [NB-1:0][0:0] bank_wsel;
  rd_route_t [NB-1:0] rd_route; d_sel_t [NC-1:0] d_sel;
  logic [NB-1:0] ev_read_blocked; logic [3:0] ev_far_squashed;
  logic [3:0] q_count [NB];

  rf_arbiter #(.NUM_BANKS(NB), .NUM_CCU(NC), .NUM_WB(NW), .NUM_SUBCORES(NS),
               .REGS_PER_WARP(RPW), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  int n_blocked_wr = 0, n_blocked_port = 0, n_wb_conflict = 0, n_dsel = 0, n_squash = 0;
  task automatic check(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end endtask

  rd_req_t q [NB][$];
  rd_route_t exp_route [NB];

  function automatic int row(warp_id_t w, reg_id_t r);
    return ((int'(w) / NS) * RPW + int'(r) % RPW) / NB;
  endfunction
  function automatic int outstanding(int c);
    int n = 0;
    for (int b = 0; b < NB; b++) foreach (q[b][i]) if (int'(q[b][i].ccu) == c) n++;
    return n;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_req_valid = 0; rd_req = '0; wb_valid = 0; wb_req = '0;
    for (int c = 0; c < NC; c++) ccu_status[c] = '{busy: 1'b0, has_data: 1'b1, has_near: 1'b0, warp: 5'(c * 4)};
    for (int b = 0; b < NB; b++) exp_route[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      logic [NB-1:0] wr, gr;
      logic [NC-1:0] taken;
      logic [NW-1:0] ewr;
      int burst_c;
      @(negedge clk);
      // routes of the previous cycle's grants
      for (int b = 0; b < NB; b++) begin
        check(rd_route[b].valid == exp_route[b].valid, "route valid");
        if (exp_route[b].valid) check(rd_route[b] == exp_route[b], "route ccu/idx");
      end
      // stimulus
      for (int p = 0; p < NW; p++) begin
        wb_valid[p] = ($urandom_range(99) < 35);
        wb_req[p] = '{warp: 5'($urandom_range(1) * 4), rid: 8'($urandom_range(63)), near_reuse: 1'($urandom)};
      end
      rd_req_valid = '0; rd_req = '0;
      burst_c = int'($urandom_range(NC - 1));
      if (outstanding(burst_c) == 0 && $urandom_range(99) < 50) begin
        for (int s = 0; s < NUM_SRC; s++) if ($urandom_range(99) < 60) begin
          rd_req_valid[s] = 1;
          rd_req[s] = '{ccu: 4'(burst_c), idx: 4'(s), warp: 5'(burst_c * 4), rid: 8'($urandom_range(63))};
        end
      end
      for (int c = 0; c < NC; c++) ccu_status[c].has_data = ($urandom_range(99) < 80);
      #1;
      // expected writes
      wr = '0; ewr = '0;
      for (int p = 0; p < NW; p++) begin
        int b;
        b = bank_of(wb_req[p].warp, wb_req[p].rid, NB);
        if (wb_valid[p]) begin
          if (!wr[b]) begin wr[b] = 1; ewr[p] = 1; end
          else n_wb_conflict++;
        end
      end
      check(wb_ready == ewr, "write-back acceptance");
      // expected grants
      taken = '0; gr = '0;
      for (int b = 0; b < NB; b++) begin
        if (wr[b]) begin
          int p;
          p = int'(bank_wsel[b]);
          check(bank_en[b] && bank_we[b], "write gets the bank");
          check(ewr[p] && bank_of(wb_req[p].warp, wb_req[p].rid, NB) == b, "write port select");
          check(int'(bank_addr[b]) == row(wb_req[p].warp, wb_req[p].rid), "write row");
          if (q[b].size() > 0) n_blocked_wr++;
        end else if (q[b].size() > 0) begin
          if (!taken[q[b][0].ccu]) begin
            taken[q[b][0].ccu] = 1; gr[b] = 1;
            check(bank_en[b] && !bank_we[b], "read granted");
            check(int'(bank_addr[b]) == row(q[b][0].warp, q[b][0].rid), "read row");
          end else begin
            n_blocked_port++;
            check(!bank_en[b], "second read for the same CCU held back");
          end
        end else check(!bank_en[b], "idle bank");
      end
      // expected write filter
      for (int c = 0; c < NC; c++) begin
        d_sel_t e;
        e = '0;
        for (int p = 0; p < NW; p++)
          if (ewr[p] && ccu_status[c].has_data && wb_req[p].warp == ccu_status[c].warp) begin
            if (wb_req[p].near_reuse && !e.valid) begin e.valid = 1; e.port = 4'(p); end
            if (!wb_req[p].near_reuse) n_squash++;
          end
        check(d_sel[c] == e, "D-port selection");
        if (e.valid) n_dsel++;
      end
      // model update at the edge
      for (int b = 0; b < NB; b++) begin
        exp_route[b] = '0;
        if (gr[b]) begin
          exp_route[b] = '{valid: 1'b1, ccu: q[b][0].ccu, idx: q[b][0].idx};
          void'(q[b].pop_front());
        end
      end
      for (int s = 0; s < NUM_SRC; s++)
        if (rd_req_valid[s]) q[bank_of(rd_req[s].warp, rd_req[s].rid, NB)].push_back(rd_req[s]);
    end
    check(n_blocked_wr > 0 && n_blocked_port > 0 && n_wb_conflict > 0 && n_dsel > 0 && n_squash > 0,
          "all arbitration cases exercised");
    $display("write-blocked reads %0d, port-blocked reads %0d, write conflicts %0d, D selections %0d, far squashed %0d",
             n_blocked_wr, n_blocked_port, n_wb_conflict, n_dsel, n_squash);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
