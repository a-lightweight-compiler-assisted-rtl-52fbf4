// tb_ccu: self-checking test of one caching collector unit.
// Walks through allocation with a repeated source, S-port fills, dispatch
// operands, hits on later instructions, the one-cycle hit-to-dispatch latency,
// D-port writes, invalidation of a stale copy by a write that bypasses the D
// port, the flush on a warp change, and the replacement order (invalid entry,
// then a far entry, then least recently used).
module tb_ccu;
  import malekeh_pkg::*;
  localparam int DW = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic alloc_valid; warp_id_t alloc_warp; instr_t alloc_instr;
  ccu_status_t status;
  logic [NUM_SRC-1:0] rd_req_valid; rd_req_t [NUM_SRC-1:0] rd_req;
  logic s_valid; logic [IDX_W-1:0] s_idx; logic [DW-1:0] s_data;
  logic d_valid; wb_req_t d_req; logic [DW-1:0] d_data;
  logic [1:0] wb_fire; wb_req_t [1:0] wb_req;
  logic disp_ready; warp_id_t disp_warp; instr_t disp_instr;
  logic [NUM_SRC-1:0][DW-1:0] disp_operands; logic disp_ack;
  ccu_events_t ev;

  ccu #(.CCU_ID(1), .CT_ENTRIES(8), .DATA_W(DW), .NUM_WB(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // tag -> cache index learnt from read requests
  int idx_of [int];
  int nreq, nhit, nmiss, nfar, nlru;

  function automatic logic [DW-1:0] val(int w, int r, int gen);
    return {32{32'(w * 1000 + r * 7 + gen * 100000)}};
  endfunction

  function automatic instr_t mk(int n, int r0, int r1, int r2, int r3, int r4, int r5, logic [5:0] nearm);
    instr_t i;
    int rs[6];
    i = '0;
    rs = '{r0, r1, r2, r3, r4, r5};
    for (int s = 0; s < n; s++) begin i.src_valid[s] = 1; i.src_reg[s] = 8'(rs[s]); end
    i.src_near = nearm;
    i.opcode = 8'h42;
    return i;
  endfunction

  task automatic do_alloc(int w, instr_t ins);
    @(negedge clk);
    alloc_valid = 1; alloc_warp = 5'(w); alloc_instr = ins;
    #1;
    nreq = 0;
    for (int s = 0; s < NUM_SRC; s++) if (rd_req_valid[s]) begin
      nreq++;
      idx_of[int'(rd_req[s].rid)] = int'(rd_req[s].idx);
      check(rd_req[s].ccu == 4'd1 && rd_req[s].warp == 5'(w), "request carries CCU id and warp");
    end
    nhit = int'(ev.src_hits); nmiss = int'(ev.src_misses);
    nfar = int'(ev.far_victims); nlru = int'(ev.lru_victims);
    @(negedge clk);
    alloc_valid = 0;
  endtask

  task automatic fill(int r, logic [DW-1:0] d);
    s_valid = 1; s_idx = IDX_W'(idx_of[r]); s_data = d;
    @(negedge clk);
    s_valid = 0;
  endtask

  task automatic dispatch();
    check(disp_ready, "instruction ready to dispatch");
    disp_ack = disp_ready;
    @(negedge clk);
    disp_ack = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t a;
    alloc_valid = 0; alloc_warp = 0; alloc_instr = '0; s_valid = 0; s_idx = 0; s_data = 0;
    d_valid = 0; d_req = '0; d_data = 0; wb_fire = 0; wb_req = '0; disp_ack = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!status.busy && !status.has_data, "idle after reset");

    // 1. sources r1, r2, r1: two reads, slots 0 and 2 share an entry
    a = mk(3, 1, 2, 1, 0, 0, 0, 6'b000011);
    do_alloc(3, a);
    check(nreq == 2 && nmiss == 2 && nhit == 0, "two misses, one read per distinct register");
    check(status.busy && status.has_near && status.warp == 5'd3, "R port: busy, near, warp 3");
    check(!disp_ready, "not ready before fills");
    fill(1, val(3, 1, 0));
    check(!disp_ready, "not ready with one of two values");
    fill(2, val(3, 2, 0));
    check(disp_ready, "ready after both fills");
    check(disp_operands[0] == val(3, 1, 0) && disp_operands[1] == val(3, 2, 0) &&
          disp_operands[2] == val(3, 1, 0), "operands routed through the indices");
    check(disp_warp == 5'd3 && disp_instr == a, "metadata kept");
    dispatch();
    check(!status.busy && status.has_data, "released, data kept");

    // 2. r2 hits, r5 misses
    do_alloc(3, mk(2, 2, 5, 0, 0, 0, 0, 6'b000001));
    check(nhit == 1 && nmiss == 1 && nreq == 1, "one hit one miss");
    fill(5, val(3, 5, 0));
    check(disp_operands[0] == val(3, 2, 0) && disp_operands[1] == val(3, 5, 0), "hit and fill operands");
    dispatch();

    // 3. all hits: ready the cycle after allocation
    @(negedge clk);
    alloc_valid = 1; alloc_warp = 3; alloc_instr = mk(2, 1, 5, 0, 0, 0, 0, 0);
    @(negedge clk);
    alloc_valid = 0;
    check(disp_ready, "hit-only instruction dispatchable one cycle after allocation");
    check(disp_operands[0] == val(3, 1, 0) && disp_operands[1] == val(3, 5, 0), "hit operands");
    dispatch();
    check(status.has_near, "r2 keeps its near bit: only the new instruction's registers are updated");

    // 4. D port: near write of r7 allocates, later hit
    d_valid = 1; d_req = '{warp: 5'd3, rid: 8'd7, near_reuse: 1'b1}; d_data = val(3, 7, 1);
    wb_fire = 2'b01; wb_req[0] = d_req;
    #1 check(ev.d_alloc, "D write allocated an entry");
    @(negedge clk);
    d_valid = 0; wb_fire = 0;
    do_alloc(3, mk(1, 7, 0, 0, 0, 0, 0, 6'b1));
    check(nhit == 1 && nreq == 0, "D-written register hits");
    check(disp_ready && disp_operands[0] == val(3, 7, 1), "D-written value served");
    dispatch();
    // D write to a present register updates it
    d_valid = 1; d_req = '{warp: 5'd3, rid: 8'd7, near_reuse: 1'b1}; d_data = val(3, 7, 2);
    wb_fire = 2'b01; wb_req[0] = d_req;
    #1 check(ev.d_hit, "D write hit");
    @(negedge clk);
    d_valid = 0; wb_fire = 0;
    do_alloc(3, mk(1, 7, 0, 0, 0, 0, 0, 6'b1));
    check(nhit == 1 && disp_operands[0] == val(3, 7, 2), "updated value served");
    dispatch();

    // 5. a far write-back of r2 that bypasses the D port invalidates the copy
    wb_fire = 2'b10; wb_req[1] = '{warp: 5'd3, rid: 8'd2, near_reuse: 1'b0};
    #1 check(ev.invalidate, "stale copy invalidated");
    @(negedge clk);
    wb_fire = 0;
    do_alloc(3, mk(1, 2, 0, 0, 0, 0, 0, 0));
    check(nmiss == 1 && nreq == 1, "invalidated register misses");
    fill(2, val(3, 2, 1));
    check(disp_operands[0] == val(3, 2, 1), "new value fetched");
    dispatch();
    // a write of another warp is ignored
    wb_fire = 2'b01; wb_req[0] = '{warp: 5'd9, rid: 8'd1, near_reuse: 1'b0};
    #1 check(!ev.invalidate, "other warp's write ignored");
    @(negedge clk); wb_fire = 0;

    // 6. new warp: flush, then replacement order
    idx_of.delete();
    @(negedge clk);
    alloc_valid = 1; alloc_warp = 4; alloc_instr = mk(6, 10, 11, 12, 13, 14, 15, 6'b111111);
    #1 check(ev.flush, "flush on warp change");
    @(negedge clk);
    alloc_valid = 0;
    for (int s = 0; s < 6; s++) begin
      // learn indices from the OCT via the dispatch operands after filling in order
    end
    // indices: the flush leaves every entry invalid, so the six misses take entries 0..5
    for (int r = 10; r <= 15; r++) idx_of[r] = r - 10;
    for (int r = 10; r <= 15; r++) fill(r, val(4, r, 0));
    for (int s = 0; s < 6; s++) check(disp_operands[s] == val(4, 10 + s, 0), "six-source operands");
    dispatch();
    do_alloc(4, mk(2, 16, 17, 0, 0, 0, 0, 6'b000010));  // r16 far, r17 near
    check(nmiss == 2 && nfar == 0 && nlru == 0, "invalid entries used first");
    check(idx_of[16] == 6 && idx_of[17] == 7, "remaining entries 6 and 7");
    fill(16, val(4, 16, 0)); fill(17, val(4, 17, 0));
    dispatch();
    do_alloc(4, mk(1, 18, 0, 0, 0, 0, 0, 6'b1));
    check(nfar == 1 && idx_of[18] == 6, "the only far entry (r16) is replaced");
    fill(18, val(4, 18, 0));
    dispatch();
    check(status.has_near, "near values present");
    do_alloc(4, mk(1, 19, 0, 0, 0, 0, 0, 6'b1));
    check(nlru == 1 && idx_of[19] == 0, "no far entry: least recently used (r10) replaced");
    fill(19, val(4, 19, 0));
    dispatch();
    // locked entries are never replaced: r11..r15 locked, one new source
    do_alloc(4, mk(6, 11, 12, 13, 14, 15, 20, 6'b111111));
    check(nhit == 5 && nmiss == 1, "five hits one miss");
    check(idx_of[20] != 1 && idx_of[20] != 2 && idx_of[20] != 3 && idx_of[20] != 4 &&
          idx_of[20] != 5, "locked entries not replaced");
    fill(20, val(4, 20, 0));
    for (int s = 0; s < 5; s++) check(disp_operands[s] == val(4, 11 + s, 0), "hit operands r11..r15");
    check(disp_operands[5] == val(4, 20, 0), "fresh operand r20");
    dispatch();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
