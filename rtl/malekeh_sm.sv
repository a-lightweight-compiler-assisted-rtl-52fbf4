// malekeh_sm: one streaming multiprocessor's register file with the Malekeh
// register-file cache: NUM_SUBCORES sub-cores (each with its banks, CCUs,
// arbiter, crossbar, issue and dispatch schedulers), a performance counter of
// issued instructions and the dynamic STHLD controller that sets the stall
// threshold shared by all issue schedulers.
//
// Everything the paper takes from the baseline GPU stays outside and meets the
// design at the ports: the instruction supply (per warp a ready flag and the
// next instruction with its compiler reuse bits), the SIMD execution units
// (eu_* per sub-core, valid/ready) and the write-back bus (wb_* per sub-core).
// Warps are spread over the sub-cores as warp = local_index * NUM_SUBCORES +
// sub-core, so sub-core s serves SM warps s, s+4, s+8, ...
// The paper runs one STHLD controller per GPU fed by GPU IPC; with one SM here
// it is fed by this SM's issue count (a multi-SM system would sum the counts).
// Lint note: the controller's prev_count output is observation-only and left
// unconnected here.
module malekeh_sm
  import malekeh_pkg::*;
#(
  parameter int unsigned NUM_SUBCORES  = 4,
  parameter int unsigned NUM_WARPS     = 8,      // per sub-core (32 per SM)
  parameter int unsigned NUM_CCU       = 2,
  parameter int unsigned NUM_BANKS     = 2,
  parameter int unsigned NUM_WB        = 2,
  parameter int unsigned CT_ENTRIES    = 8,
  parameter int unsigned DATA_W        = 1024,
  parameter int unsigned REGS_PER_WARP = 64,
  parameter int unsigned STHLD_W       = 8,
  parameter int unsigned INTERVAL      = 10000,
  localparam int unsigned LWW          = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic                                                clk,
  input  logic                                                rst_n,
  input  logic    [NUM_SUBCORES-1:0][NUM_WARPS-1:0]           warp_ready,
  input  instr_t  [NUM_SUBCORES-1:0][NUM_WARPS-1:0]           warp_instr,
  output logic    [NUM_SUBCORES-1:0]                          issue_valid,
  output logic    [NUM_SUBCORES-1:0][LWW-1:0]                 issue_lwarp,
  output logic    [NUM_SUBCORES-1:0]                          eu_valid,
  input  logic    [NUM_SUBCORES-1:0]                          eu_ready,
  output warp_id_t [NUM_SUBCORES-1:0]                         eu_warp,
  output instr_t  [NUM_SUBCORES-1:0]                          eu_instr,
  output logic    [NUM_SUBCORES-1:0][NUM_SRC-1:0][DATA_W-1:0] eu_operands,
  input  logic    [NUM_SUBCORES-1:0][NUM_WB-1:0]              wb_valid,
  input  wb_req_t [NUM_SUBCORES-1:0][NUM_WB-1:0]              wb_req,
  input  logic    [NUM_SUBCORES-1:0][NUM_WB-1:0][DATA_W-1:0]  wb_data,
  output logic    [NUM_SUBCORES-1:0][NUM_WB-1:0]              wb_ready,
  // observation
  output logic    [STHLD_W-1:0]                               sthld,
  output logic    [2:0]                                       sthld_state,
  output logic                                                interval_end,
  output logic                                                large_change,
  output ccu_events_t [NUM_SUBCORES-1:0][NUM_CCU-1:0]         ccu_ev,
  output alloc_case_t [NUM_SUBCORES-1:0]                      issue_case,
  output logic    [NUM_SUBCORES-1:0][5:0]                     cases_seen,
  output logic    [NUM_SUBCORES-1:0][NUM_BANKS-1:0]           read_blocked,
  output logic    [NUM_SUBCORES-1:0][3:0]                     far_squashed
);

  localparam int unsigned INC_W = $clog2(NUM_SUBCORES + 1);

  for (genvar s = 0; s < NUM_SUBCORES; s++) begin : g_sc
    malekeh_subcore #(
      .SUBCORE_ID(s), .NUM_SUBCORES(NUM_SUBCORES), .NUM_WARPS(NUM_WARPS), .NUM_CCU(NUM_CCU),
      .NUM_BANKS(NUM_BANKS), .NUM_WB(NUM_WB), .CT_ENTRIES(CT_ENTRIES), .DATA_W(DATA_W),
      .REGS_PER_WARP(REGS_PER_WARP), .STHLD_W(STHLD_W)) u_sc (
      .clk, .rst_n,
      .warp_ready(warp_ready[s]), .warp_instr(warp_instr[s]), .sthld,
      .issue_valid(issue_valid[s]), .issue_lwarp(issue_lwarp[s]),
      .eu_valid(eu_valid[s]), .eu_ready(eu_ready[s]), .eu_warp(eu_warp[s]),
      .eu_instr(eu_instr[s]), .eu_operands(eu_operands[s]),
      .wb_valid(wb_valid[s]), .wb_req(wb_req[s]), .wb_data(wb_data[s]), .wb_ready(wb_ready[s]),
      .ccu_ev(ccu_ev[s]), .issue_case(issue_case[s]), .cases_seen(cases_seen[s]),
      .read_blocked(read_blocked[s]), .far_squashed(far_squashed[s]));
  end

  // performance counter input: instructions issued this cycle in the SM
  logic [INC_W-1:0] inst_inc;
  always_comb begin
    inst_inc = '0;
    for (int s = 0; s < NUM_SUBCORES; s++) inst_inc = inst_inc + INC_W'(issue_valid[s]);
  end

  logic [23:0] prev_count;
  sthld_controller #(.INTERVAL(INTERVAL), .STHLD_W(STHLD_W), .CNT_W(24), .INC_W(INC_W)) u_sthld (
    .clk, .rst_n, .inst_inc, .sthld, .state(sthld_state), .interval_end, .large_change,
    .prev_count);

endmodule
