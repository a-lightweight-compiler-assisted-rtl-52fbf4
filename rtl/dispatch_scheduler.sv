// dispatch_scheduler: picks which ready CCU sends its instruction to the SIMD
// execution units, and drives the operand multiplexer that does it.
//
// A CCU is a candidate when all its valid source operands are ready. Among the
// candidates the one allocated earliest is chosen (oldest first); ages are held
// as a pairwise "older-than" matrix updated at every allocation. The chosen
// unit's warp, instruction and operands appear on the eu_* outputs with
// eu_valid; the instruction leaves when eu_ready is high in the same cycle, and
// disp_ack then releases that CCU at the clock edge. One instruction leaves per
// cycle. The paper names this block and its role (Fig. 3, Fig. 4); the
// oldest-first choice and the valid/ready handshake are this design's.
module dispatch_scheduler
  import malekeh_pkg::*;
#(
  parameter int unsigned NUM_CCU = 2,
  parameter int unsigned DATA_W  = 1024
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic     [NUM_CCU-1:0]                     alloc,       // CCU allocated this cycle
  input  logic     [NUM_CCU-1:0]                     ccu_ready,
  input  warp_id_t [NUM_CCU-1:0]                     ccu_warp,
  input  instr_t   [NUM_CCU-1:0]                     ccu_instr,
  input  logic     [NUM_CCU-1:0][NUM_SRC-1:0][DATA_W-1:0] ccu_operands,
  output logic     [NUM_CCU-1:0]                     disp_ack,
  // to the execution units
  output logic                                       eu_valid,
  input  logic                                       eu_ready,
  output warp_id_t                                   eu_warp,
  output instr_t                                     eu_instr,
  output logic     [NUM_SRC-1:0][DATA_W-1:0]         eu_operands
);

  // older[i][j] = CCU i was allocated before CCU j
  logic [NUM_CCU-1:0][NUM_CCU-1:0] older;
  logic [NUM_CCU-1:0]              pick;

  always_comb begin
    pick = '0;
    for (int i = 0; i < NUM_CCU; i++) begin
      logic beaten;
      beaten = 1'b0;
      for (int j = 0; j < NUM_CCU; j++)
        if (j != i && ccu_ready[j] && older[j][i]) beaten = 1'b1;
      if (ccu_ready[i] && !beaten && pick == '0) pick[i] = 1'b1;
    end
  end

  always_comb begin
    eu_valid    = |pick;
    eu_warp     = '0;
    eu_instr    = '0;
    eu_operands = '0;
    for (int i = 0; i < NUM_CCU; i++) begin
      if (pick[i]) begin
        eu_warp     = ccu_warp[i];
        eu_instr    = ccu_instr[i];
        eu_operands = ccu_operands[i];
      end
    end
    disp_ack = eu_ready ? pick : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CCU; i++)
        for (int j = 0; j < NUM_CCU; j++)
          older[i][j] <= (i < j);
    end else begin
      for (int c = 0; c < NUM_CCU; c++) begin
        if (alloc[c]) begin
          for (int j = 0; j < NUM_CCU; j++) begin
            if (j != c) begin
              older[j][c] <= 1'b1;
              older[c][j] <= 1'b0;
            end
          end
        end
      end
    end
  end

endmodule
