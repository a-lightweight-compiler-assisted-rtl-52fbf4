// tb_rf_crossbar: random routing patterns. Expected outputs are computed from
// the routing rules (bank write data from the granted port, bank read data to
// the named CCU and entry, write-back port to the selected D port).
module tb_rf_crossbar;
  import malekeh_pkg::*;
  localparam int NB = 2, NC = 2, NW = 2, DW = 1024;
  wb_req_t [NW-1:0] wb_req; logic [NW-1:0][DW-1:0] wb_data;
  logic [NB-1:0][0:0] bank_wsel; logic [NB-1:0][DW-1:0] bank_wdata, bank_rdata;
  rd_route_t [NB-1:0] rd_route; d_sel_t [NC-1:0] d_sel;
  logic [NC-1:0] s_valid, d_valid; logic [NC-1:0][IDX_W-1:0] s_idx;
  logic [NC-1:0][DW-1:0] s_data, d_data; wb_req_t [NC-1:0] d_req;
  rf_crossbar #(.NUM_BANKS(NB), .NUM_CCU(NC), .NUM_WB(NW), .DATA_W(DW)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask

  function automatic logic [DW-1:0] rnd();
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      int c0;
      for (int p = 0; p < NW; p++) begin
        wb_data[p] = rnd();
        wb_req[p] = '{warp: 5'($urandom), rid: 8'($urandom), near_reuse: 1'($urandom)};
      end
      for (int b = 0; b < NB; b++) begin
        bank_rdata[b] = rnd();
        bank_wsel[b] = 1'($urandom);
      end
      // two banks routed to distinct CCUs (or one idle)
      c0 = int'($urandom_range(1));
      rd_route[0] = '{valid: 1'($urandom), ccu: 4'(c0), idx: 4'($urandom_range(7))};
      rd_route[1] = '{valid: 1'($urandom), ccu: 4'(1 - c0), idx: 4'($urandom_range(7))};
      for (int c = 0; c < NC; c++) d_sel[c] = '{valid: 1'($urandom), port: 4'($urandom_range(1))};
      #1;
      for (int b = 0; b < NB; b++)
        check(bank_wdata[b] == wb_data[bank_wsel[b]], "bank write data");
      for (int c = 0; c < NC; c++) begin
        logic ev; logic [3:0] ei; logic [DW-1:0] ed;
        ev = 0; ei = 0; ed = 0;
        for (int b = 0; b < NB; b++)
          if (rd_route[b].valid && rd_route[b].ccu == 4'(c)) begin ev = 1; ei = rd_route[b].idx; ed = bank_rdata[b]; end
        check(s_valid[c] == ev, "S valid");
        if (ev) check(s_idx[c] == ei && s_data[c] == ed, "S index and data");
        check(d_valid[c] == d_sel[c].valid, "D valid");
        if (d_sel[c].valid)
          check(d_req[c] == wb_req[d_sel[c].port] && d_data[c] == wb_data[d_sel[c].port], "D data");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
