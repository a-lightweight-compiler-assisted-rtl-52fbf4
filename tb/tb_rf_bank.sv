// tb_rf_bank: writes every row of a bank with a value derived from its address,
// then reads rows back in random order and checks the one-cycle read latency
// and that a read is unaffected by a write in an earlier cycle to another row.
module tb_rf_bank;
  localparam int ROWS = 256, DW = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we; logic [7:0] addr; logic [DW-1:0] wdata, rdata;
  rf_bank #(.ROWS(ROWS), .DATA_W(DW)) dut (.*);
  int checks = 0, failures = 0;

  function automatic logic [DW-1:0] pat(int a, int g);
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = 32'(a * 65537 + i * 31 + g * 7919);
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < ROWS; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(a); wdata = pat(a, 0);
    end
    @(negedge clk); en = 0; we = 0;
    for (int k = 0; k < 300; k++) begin
      int a;
      a = int'($urandom_range(ROWS - 1));
      @(negedge clk); en = 1; we = 0; addr = 8'(a);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== pat(a, 0)) begin failures++; $display("FAIL row %0d", a); end
    end
    // write row 5, read row 6 next cycle, then row 5
    @(negedge clk); en = 1; we = 1; addr = 8'd5; wdata = pat(5, 1);
    @(negedge clk); en = 1; we = 0; addr = 8'd6;
    @(negedge clk); en = 1; we = 0; addr = 8'd5;
    checks++; if (rdata !== pat(6, 0)) begin failures++; $display("FAIL row 6"); end
    @(negedge clk); en = 0;
    checks++; if (rdata !== pat(5, 1)) begin failures++; $display("FAIL row 5 rewrite"); end
    // output holds when idle
    @(negedge clk);
    checks++; if (rdata !== pat(5, 1)) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
