// rf_bank: one single-ported register-file bank.
//
// Each row holds one warp register: 32 threads x 4 bytes = 1024 bits. The port
// serves either one read or one write per cycle; the arbiter guarantees that
// and gives writes priority. A read returns its row on rdata in the cycle after
// en=1/we=0 (one-cycle bank latency, this design's choice). Writes are visible
// to reads from the next cycle on.
//
// Size: 256 KB of registers per SM, 4 sub-cores, 2 banks per sub-core gives
// 32 KB = 256 rows of 128 bytes per bank, the default here. The memory is not
// reset; the contents are whatever the write-back path last stored.
module rf_bank #(
  parameter int unsigned ROWS   = 256,
  parameter int unsigned DATA_W = 1024,
  localparam int unsigned AW    = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
