// tb_dispatch_scheduler: four CCUs with random allocation and readiness. A
// model keeps the allocation time of each CCU; among the ready ones the
// earliest allocated must be chosen, its warp, instruction and operands must
// appear at the EU side, and disp_ack must follow eu_ready.
module tb_dispatch_scheduler;
  import malekeh_pkg::*;
  localparam int NC = 4, DW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NC-1:0] alloc, ccu_ready, disp_ack;
  warp_id_t [NC-1:0] ccu_warp; instr_t [NC-1:0] ccu_instr;
  logic [NC-1:0][NUM_SRC-1:0][DW-1:0] ccu_operands;
  logic eu_valid, eu_ready; warp_id_t eu_warp; instr_t eu_instr; logic [NUM_SRC-1:0][DW-1:0] eu_operands;
  dispatch_scheduler #(.NUM_CCU(NC), .DATA_W(DW)) dut (.*);
  int checks = 0, failures = 0, n_order = 0;
  task automatic check(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  int stamp [NC];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc = 0; ccu_ready = 0; eu_ready = 0; ccu_warp = '0; ccu_instr = '0; ccu_operands = '0;
    for (int c = 0; c < NC; c++) stamp[c] = c - NC;   // reset order: 0 oldest
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int best;
      @(negedge clk);
      alloc = '0;
      if ($urandom_range(99) < 40) alloc[$urandom_range(NC - 1)] = 1'b1;
      for (int c = 0; c < NC; c++) begin
        ccu_ready[c] = ($urandom_range(99) < 40) && !alloc[c];
        ccu_warp[c] = 5'($urandom);
        ccu_instr[c] = instr_t'({$urandom, $urandom, $urandom, $urandom});
        for (int s = 0; s < NUM_SRC; s++) ccu_operands[c][s] = {$urandom, $urandom};
      end
      eu_ready = ($urandom_range(99) < 70);
      #1;
      best = -1;
      for (int c = 0; c < NC; c++)
        if (ccu_ready[c] && (best < 0 || stamp[c] < stamp[best])) best = c;
      check(eu_valid == (best >= 0), "eu_valid");
      if (best >= 0) begin
        check(eu_warp == ccu_warp[best] && eu_instr == ccu_instr[best] &&
              eu_operands == ccu_operands[best], "oldest ready CCU selected");
        check(disp_ack == (eu_ready ? NC'(1) << best : '0), "ack follows eu_ready");
        if ($countones(ccu_ready) > 1) n_order++;
      end else check(disp_ack == '0, "no ack");
      for (int c = 0; c < NC; c++) if (alloc[c]) stamp[c] = t;
    end
    check(n_order > 100, "competing ready CCUs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
