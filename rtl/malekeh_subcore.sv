// malekeh_subcore: the register file of one sub-core with its caching collector
// units, wired as in the paper's Fig. 4.
//
//   issue_scheduler  picks a ready warp and a CCU (uses every CCU's R port and
//                    the SM-wide STHLD) and hands that warp's instruction to the
//                    CCU. issue_valid/issue_lwarp tell the instruction supplier
//                    that the warp's current instruction has been taken.
//   ccu x NUM_CCU    look the sources up, request the missing ones.
//   rf_arbiter       bank FIFOs, read grants, write priority, write filter.
//   rf_bank x NUM_BANKS single-ported banks.
//   rf_crossbar      bank data to S ports, filtered write-backs to D ports,
//                    write-back data to the banks.
//   dispatch_scheduler oldest ready CCU to the execution units (eu_*).
//
// Write-backs arrive on NUM_WB ports (wb_valid/wb_req/wb_data) and are taken
// when wb_ready is high; every accepted write-back updates its bank. The number
// of write-back ports (2) is this design's choice; 2 banks, 2 CCUs, 8 warps per
// sub-core, 8 cache entries and 1024-bit registers follow the paper.
// Latency: an instruction whose sources all hit is issued in cycle t and can
// leave in t+1; a miss adds at least the queue wait, one grant cycle and one
// bank cycle (t+3 at best).
// Lint note: wait_count and the arbiter's FIFO counts are observation-only
// outputs and are deliberately left unconnected here.
module malekeh_subcore
  import malekeh_pkg::*;
#(
  parameter int unsigned SUBCORE_ID    = 0,
  parameter int unsigned NUM_SUBCORES  = 4,
  parameter int unsigned NUM_WARPS     = 8,
  parameter int unsigned NUM_CCU       = 2,
  parameter int unsigned NUM_BANKS     = 2,
  parameter int unsigned NUM_WB        = 2,
  parameter int unsigned CT_ENTRIES    = 8,
  parameter int unsigned DATA_W        = 1024,
  parameter int unsigned REGS_PER_WARP = 64,
  parameter int unsigned STHLD_W       = 8,
  localparam int unsigned ROWS         = NUM_WARPS * REGS_PER_WARP / NUM_BANKS,
  localparam int unsigned LWW          = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned CW           = (NUM_CCU > 1) ? $clog2(NUM_CCU) : 1,
  localparam int unsigned PW           = (NUM_WB > 1) ? $clog2(NUM_WB) : 1,
  localparam int unsigned AW           = $clog2(ROWS),
  localparam int unsigned QW           = $clog2(NUM_CCU * NUM_SRC + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // instruction supply
  input  logic    [NUM_WARPS-1:0]           warp_ready,
  input  instr_t  [NUM_WARPS-1:0]           warp_instr,
  input  logic    [STHLD_W-1:0]             sthld,
  output logic                              issue_valid,
  output logic    [LWW-1:0]                 issue_lwarp,
  // execution units
  output logic                              eu_valid,
  input  logic                              eu_ready,
  output warp_id_t                          eu_warp,
  output instr_t                            eu_instr,
  output logic    [NUM_SRC-1:0][DATA_W-1:0] eu_operands,
  // write-back
  input  logic    [NUM_WB-1:0]              wb_valid,
  input  wb_req_t [NUM_WB-1:0]              wb_req,
  input  logic    [NUM_WB-1:0][DATA_W-1:0]  wb_data,
  output logic    [NUM_WB-1:0]              wb_ready,
  // observation
  output ccu_events_t [NUM_CCU-1:0]         ccu_ev,
  output alloc_case_t                       issue_case,
  output logic    [5:0]                     cases_seen,
  output logic    [NUM_BANKS-1:0]           read_blocked,
  output logic    [3:0]                     far_squashed
);

  // issue
  warp_id_t         issue_warp;
  logic [CW-1:0]    issue_ccu;
  logic [STHLD_W-1:0] wait_count;
  ccu_status_t [NUM_CCU-1:0] status;

  issue_scheduler #(.NUM_WARPS(NUM_WARPS), .NUM_CCU(NUM_CCU), .SUBCORE_ID(SUBCORE_ID),
                    .NUM_SUBCORES(NUM_SUBCORES), .STHLD_W(STHLD_W)) u_issue (
    .clk, .rst_n, .warp_ready, .ccu_status(status), .sthld,
    .issue_valid, .issue_lwarp, .issue_warp, .issue_ccu, .issue_case, .cases_seen,
    .wait_count);

  // CCUs
  logic [NUM_CCU-1:0]                     alloc;
  logic [NUM_CCU-1:0][NUM_SRC-1:0]        c_rd_valid;
  rd_req_t [NUM_CCU-1:0][NUM_SRC-1:0]     c_rd_req;
  logic [NUM_SRC-1:0]                     rd_valid;
  rd_req_t [NUM_SRC-1:0]                  rd_req;
  logic [NUM_CCU-1:0]                     s_valid, d_valid, c_ready, disp_ack;
  logic [NUM_CCU-1:0][IDX_W-1:0]          s_idx;
  logic [NUM_CCU-1:0][DATA_W-1:0]         s_data, d_data;
  wb_req_t [NUM_CCU-1:0]                  d_req;
  warp_id_t [NUM_CCU-1:0]                 c_warp;
  instr_t [NUM_CCU-1:0]                   c_instr;
  logic [NUM_CCU-1:0][NUM_SRC-1:0][DATA_W-1:0] c_ops;
  logic [NUM_WB-1:0]                      wb_fire;

  assign wb_fire = wb_valid & wb_ready;

  for (genvar c = 0; c < NUM_CCU; c++) begin : g_ccu
    assign alloc[c] = issue_valid && (int'(issue_ccu) == c);
    ccu #(.CCU_ID(c), .CT_ENTRIES(CT_ENTRIES), .DATA_W(DATA_W), .NUM_WB(NUM_WB)) u_ccu (
      .clk, .rst_n,
      .alloc_valid(alloc[c]), .alloc_warp(issue_warp), .alloc_instr(warp_instr[issue_lwarp]),
      .status(status[c]),
      .rd_req_valid(c_rd_valid[c]), .rd_req(c_rd_req[c]),
      .s_valid(s_valid[c]), .s_idx(s_idx[c]), .s_data(s_data[c]),
      .d_valid(d_valid[c]), .d_req(d_req[c]), .d_data(d_data[c]),
      .wb_fire, .wb_req,
      .disp_ready(c_ready[c]), .disp_warp(c_warp[c]), .disp_instr(c_instr[c]),
      .disp_operands(c_ops[c]), .disp_ack(disp_ack[c]),
      .ev(ccu_ev[c]));
  end

  // only the CCU allocated this cycle requests reads
  always_comb begin
    rd_valid = '0;
    rd_req   = '0;
    for (int c = 0; c < NUM_CCU; c++)
      if (alloc[c]) begin
        rd_valid = c_rd_valid[c];
        rd_req   = c_rd_req[c];
      end
  end

  // arbiter and banks
  logic [NUM_BANKS-1:0]              bank_en, bank_we;
  logic [NUM_BANKS-1:0][AW-1:0]      bank_addr;
  logic [NUM_BANKS-1:0][PW-1:0]      bank_wsel;
  logic [NUM_BANKS-1:0][DATA_W-1:0]  bank_wdata, bank_rdata;
  rd_route_t [NUM_BANKS-1:0]         rd_route;
  d_sel_t [NUM_CCU-1:0]              d_sel;
  logic [QW-1:0]                     q_count [NUM_BANKS];

  rf_arbiter #(.NUM_BANKS(NUM_BANKS), .NUM_CCU(NUM_CCU), .NUM_WB(NUM_WB),
               .NUM_SUBCORES(NUM_SUBCORES), .REGS_PER_WARP(REGS_PER_WARP), .ROWS(ROWS)) u_arb (
    .clk, .rst_n, .rd_req_valid(rd_valid), .rd_req,
    .wb_valid, .wb_req, .wb_ready, .ccu_status(status),
    .bank_en, .bank_we, .bank_addr, .bank_wsel, .rd_route, .d_sel,
    .ev_read_blocked(read_blocked), .ev_far_squashed(far_squashed), .q_count);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    rf_bank #(.ROWS(ROWS), .DATA_W(DATA_W)) u_bank (
      .clk, .en(bank_en[b]), .we(bank_we[b]), .addr(bank_addr[b]),
      .wdata(bank_wdata[b]), .rdata(bank_rdata[b]));
  end

  rf_crossbar #(.NUM_BANKS(NUM_BANKS), .NUM_CCU(NUM_CCU), .NUM_WB(NUM_WB), .DATA_W(DATA_W)) u_xbar (
    .wb_req, .wb_data, .bank_wsel, .bank_wdata, .bank_rdata, .rd_route, .d_sel,
    .s_valid, .s_idx, .s_data, .d_valid, .d_req, .d_data);

  dispatch_scheduler #(.NUM_CCU(NUM_CCU), .DATA_W(DATA_W)) u_disp (
    .clk, .rst_n, .alloc, .ccu_ready(c_ready), .ccu_warp(c_warp), .ccu_instr(c_instr),
    .ccu_operands(c_ops), .disp_ack,
    .eu_valid, .eu_ready, .eu_warp, .eu_instr, .eu_operands);

endmodule
