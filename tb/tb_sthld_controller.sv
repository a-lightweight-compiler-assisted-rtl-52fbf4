// tb_sthld_controller: a short interval (100 cycles) and scripted instruction
// counts per interval. A model of the paper's state diagram (states, S/L
// decision at 2 %, printed deltas) predicts state and STHLD after every
// interval; the interval length itself is checked by counting cycles between
// interval_end pulses. The script walks every edge of the diagram.
module tb_sthld_controller;
  localparam int IV = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] inst_inc; logic [7:0] sthld; logic [2:0] state;
  logic interval_end, large_change; logic [23:0] prev_count;
  sthld_controller #(.INTERVAL(IV), .STHLD_W(8), .CNT_W(24), .INC_W(3)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end endtask

  // per-interval totals: each cycle issues rate or rate+1 instructions
  int counts [$] = '{200, 200, 201, 300, 300, 400, 404, 500, 502, 600, 200, 100, 50, 51, 52, 100,
                     200, 201, 300, 300, 400, 200, 201, 100, 100};
  int m_state = 1, m_sthld = 0, prev = 0;
  bit edges [string];

  initial begin
    repeat (IV * 40) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inst_inc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (counts[k]) begin
      int total, big, d, ns;
      total = counts[k];
      for (int c = 0; c < IV; c++) begin
        inst_inc = 3'((total / IV) + ((c < total % IV) ? 1 : 0));
        #1;
        check(interval_end == (c == IV - 1), "interval length");
        @(negedge clk);
      end
      big = (50 * (total > prev ? total - prev : prev - total)) > prev;
      case (m_state)
        1: begin ns = 2; d = 1; end
        2: begin ns = big ? 3 : 2; d = 1; end
        3: begin ns = big ? 4 : 2; d = big ? -2 : 1; end
        4: begin ns = big ? 5 : 2; d = big ? -1 : 1; end
        5: begin ns = big ? 5 : 6; d = big ? -1 : 1; end
        default: begin ns = big ? 3 : 6; d = big ? 1 : 0; end
      endcase
      edges[$sformatf("%0d%s", m_state, big ? "L" : "S")] = 1;
      m_state = ns;
      m_sthld = (m_sthld + d < 0) ? 0 : m_sthld + d;
      prev = total;
      check(int'(state) == m_state, $sformatf("state after interval %0d", k));
      check(int'(sthld) == m_sthld, $sformatf("STHLD after interval %0d", k));
      check(int'(prev_count) == total, "stored count of the last interval");
    end
    $display("edges taken: %0d", edges.size());
    check(edges.size() >= 11, "every edge of the state diagram taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
