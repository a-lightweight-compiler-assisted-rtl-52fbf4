// issue_scheduler: one sub-core's warp selection and CCU allocation.
//
// Each cycle it issues at most one instruction, and only when a ready warp can
// be given a free CCU. Warp priority (paper Fig. 6, box 1): the warp that
// issued last, then warps that have data in a CCU, then all other warps; the
// last two groups oldest first. Warp age is the local warp index (index 0 is
// oldest), a choice of this design.
//
// CCU allocation (Fig. 6, box 2), decided per warp from the CCUs' R ports:
//   the warp has data in a CCU (its warp id is stored there and the CCU is busy
//   or holds valid entries):
//       that CCU is free -> allocate it (case 3); else no allocation (case 4);
//   otherwise:
//       some free CCU holds no near value -> allocate one of them at random (5);
//       no CCU free                          -> no allocation (6);
//       waiting counter < STHLD              -> no allocation (7), counter + 1 (8);
//       otherwise -> allocate a random free CCU and reset the counter (9).
// The instruction issued is that of the highest-priority ready warp whose
// outcome is an allocation. The counter counts a cycle as a waiting cycle when
// nothing was issued and at least one ready warp met case 7 (this design's
// reading of "the counter is increased"); it saturates. The counter is per
// sub-core scheduler; STHLD comes from the SM-wide dynamic controller.
// Random choices use a 16-bit LFSR. Everything is combinational from the
// registered CCU status except the counter, the last-warp register and the LFSR.
// Lint note: pick_random computes in 32-bit integers and keeps only the bits
// needed for a CCU number; the unused upper bits are expected. The two low
// bits of issue_warp are constant: they are this sub-core's number.
module issue_scheduler
  import malekeh_pkg::*;
#(
  parameter int unsigned NUM_WARPS    = 8,
  parameter int unsigned NUM_CCU      = 2,
  parameter int unsigned SUBCORE_ID   = 0,
  parameter int unsigned NUM_SUBCORES = 4,
  parameter int unsigned STHLD_W      = 8,
  localparam int unsigned LWW         = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned CW          = (NUM_CCU > 1) ? $clog2(NUM_CCU) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic        [NUM_WARPS-1:0]  warp_ready,
  input  ccu_status_t [NUM_CCU-1:0]    ccu_status,
  input  logic        [STHLD_W-1:0]    sthld,
  output logic                         issue_valid,
  output logic        [LWW-1:0]        issue_lwarp,   // local warp index
  output warp_id_t                     issue_warp,    // SM warp id
  output logic        [CW-1:0]         issue_ccu,
  output alloc_case_t                  issue_case,
  output logic        [5:0]            cases_seen,    // {9,7,6,5,4,3} met by a ready warp
  output logic        [STHLD_W-1:0]    wait_count
);

  logic [15:0]          lfsr;
  logic                 last_valid;
  logic [LWW-1:0]       last_warp;
  logic [STHLD_W-1:0]   counter;

  function automatic warp_id_t gid(int unsigned i);
    return WARP_W'(i * NUM_SUBCORES + SUBCORE_ID);
  endfunction

  // Random member of a non-empty mask, scanning from a pseudo-random start.
  function automatic logic [CW-1:0] pick_random(logic [NUM_CCU-1:0] m, logic [15:0] r);
    logic [CW-1:0] sel;
    logic          found;
    sel = '0; found = 1'b0;
    for (int k = 0; k < NUM_CCU; k++) begin
      int unsigned c;
      c = (int'(r) % NUM_CCU + k) % NUM_CCU;
      if (!found && m[c]) begin found = 1'b1; sel = CW'(c); end
    end
    return sel;
  endfunction

  logic [NUM_CCU-1:0]   free_m, far_m;
  alloc_case_t          shared_case;
  logic [CW-1:0]        shared_ccu;
  alloc_case_t          w_case [NUM_WARPS];
  logic [CW-1:0]        w_ccu  [NUM_WARPS];
  logic [NUM_WARPS-1:0] w_data, w_ok;

  always_comb begin
    for (int c = 0; c < NUM_CCU; c++) begin
      free_m[c] = !ccu_status[c].busy;
      far_m[c]  = !ccu_status[c].busy && !ccu_status[c].has_near;
    end
    shared_ccu = '0;
    if (far_m != '0) begin
      shared_case = CASE_FAR_CCU;
      shared_ccu  = pick_random(far_m, lfsr);
    end else if (free_m == '0) begin
      shared_case = CASE_NO_FREE;
    end else if (counter < sthld) begin
      shared_case = CASE_WAIT;
    end else begin
      shared_case = CASE_FORCED;
      shared_ccu  = pick_random(free_m, lfsr);
    end

    for (int i = 0; i < NUM_WARPS; i++) begin
      w_data[i] = 1'b0;
      w_ccu[i]  = shared_ccu;
      w_case[i] = shared_case;
      for (int c = 0; c < NUM_CCU; c++) begin
        if (ccu_status[c].has_data && ccu_status[c].warp == gid(i)) begin
          w_data[i] = 1'b1;
          w_ccu[i]  = CW'(c);
          w_case[i] = ccu_status[c].busy ? CASE_OWN_BUSY : CASE_SAME_CCU;
        end
      end
      w_ok[i] = warp_ready[i] &&
                (w_case[i] == CASE_SAME_CCU || w_case[i] == CASE_FAR_CCU ||
                 w_case[i] == CASE_FORCED);
    end
  end

  always_comb begin
    logic found;
    found       = 1'b0;
    issue_lwarp = '0;
    if (last_valid && w_ok[last_warp]) begin
      found = 1'b1; issue_lwarp = last_warp;
    end
    for (int i = 0; i < NUM_WARPS; i++)
      if (!found && w_ok[i] && w_data[i]) begin found = 1'b1; issue_lwarp = LWW'(i); end
    for (int i = 0; i < NUM_WARPS; i++)
      if (!found && w_ok[i] && !w_data[i]) begin found = 1'b1; issue_lwarp = LWW'(i); end
    issue_valid = found;
    issue_warp  = gid(int'(issue_lwarp));
    issue_ccu   = w_ccu[issue_lwarp];
    issue_case  = w_case[issue_lwarp];

    cases_seen = '0;
    for (int i = 0; i < NUM_WARPS; i++) begin
      if (warp_ready[i]) begin
        case (w_case[i])
          CASE_SAME_CCU: cases_seen[0] = 1'b1;
          CASE_OWN_BUSY: cases_seen[1] = 1'b1;
          CASE_FAR_CCU:  cases_seen[2] = 1'b1;
          CASE_NO_FREE:  cases_seen[3] = 1'b1;
          CASE_WAIT:     cases_seen[4] = 1'b1;
          default:       cases_seen[5] = 1'b1;
        endcase
      end
    end
    wait_count = counter;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr       <= 16'hACE1 ^ 16'(SUBCORE_ID);
      last_valid <= 1'b0;
      last_warp  <= '0;
      counter    <= '0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (issue_valid) begin
        last_valid <= 1'b1;
        last_warp  <= issue_lwarp;
        if (issue_case == CASE_FORCED) counter <= '0;
      end else if (cases_seen[4] && counter != '1) begin
        counter <= counter + 1'b1;
      end
    end
  end

endmodule
