// rf_crossbar: the data network between the banks, the write-back bus and the CCUs.
//
// Three routes, all combinational:
//   * bank write data: each bank takes the write-back port that the arbiter
//     granted it (bank_wsel);
//   * S ports: a bank's read data, valid one cycle after the grant, goes to the
//     CCU and cache-table entry named by the arbiter's rd_route for that bank.
//     The arbiter never routes two banks to one CCU in the same cycle;
//   * D ports: the write-back port chosen by the write filter for a CCU
//     (d_sel) is delivered to that CCU together with its warp and register id.
// Fig. 4 of the paper draws this block between the banks and the CCUs with an
// S and a D input per CCU; its internal structure (plain multiplexers here) is
// this design's choice.
module rf_crossbar
  import malekeh_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 2,
  parameter int unsigned NUM_CCU   = 2,
  parameter int unsigned NUM_WB    = 2,
  parameter int unsigned DATA_W    = 1024,
  localparam int unsigned PW       = (NUM_WB > 1) ? $clog2(NUM_WB) : 1
) (
  // write-back bus
  input  wb_req_t   [NUM_WB-1:0]                wb_req,
  input  logic      [NUM_WB-1:0][DATA_W-1:0]    wb_data,
  // banks
  input  logic      [NUM_BANKS-1:0][PW-1:0]     bank_wsel,
  output logic      [NUM_BANKS-1:0][DATA_W-1:0] bank_wdata,
  input  logic      [NUM_BANKS-1:0][DATA_W-1:0] bank_rdata,
  input  rd_route_t [NUM_BANKS-1:0]             rd_route,
  input  d_sel_t    [NUM_CCU-1:0]               d_sel,
  // CCU S ports
  output logic      [NUM_CCU-1:0]               s_valid,
  output logic      [NUM_CCU-1:0][IDX_W-1:0]    s_idx,
  output logic      [NUM_CCU-1:0][DATA_W-1:0]   s_data,
  // CCU D ports
  output logic      [NUM_CCU-1:0]               d_valid,
  output wb_req_t   [NUM_CCU-1:0]               d_req,
  output logic      [NUM_CCU-1:0][DATA_W-1:0]   d_data
);

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) bank_wdata[b] = wb_data[bank_wsel[b]];
  end

  always_comb begin
    s_valid = '0;
    s_idx   = '0;
    s_data  = '0;
    for (int c = 0; c < NUM_CCU; c++) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (rd_route[b].valid && int'(rd_route[b].ccu) == c) begin
          s_valid[c] = 1'b1;
          s_idx[c]   = rd_route[b].idx;
          s_data[c]  = bank_rdata[b];
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NUM_CCU; c++) begin
      d_valid[c] = d_sel[c].valid;
      d_req[c]   = wb_req[d_sel[c].port[PW-1:0]];
      d_data[c]  = wb_data[d_sel[c].port[PW-1:0]];
    end
  end

endmodule
