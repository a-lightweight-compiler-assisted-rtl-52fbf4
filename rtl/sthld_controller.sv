// sthld_controller: dynamic algorithm that sets the stall threshold STHLD.
//
// Execution is cut into intervals of INTERVAL cycles. During an interval the
// instructions issued by all schedulers are counted (inst_inc per cycle; since
// intervals have equal length, the count stands for IPC). At the end of an
// interval the count is compared with the previous interval's count, the only
// extra storage the algorithm needs. The relative difference is "large" (L)
// when |cur - prev| > 0.02 * prev, evaluated exactly as 50*|cur - prev| > prev,
// and "small" (S) otherwise. A six-state machine then moves and changes STHLD
// by the printed delta (paper Fig. 9):
//   1 --*/+1--> 2
//   2 --S/+1--> 2      2 --L/+1--> 3
//   3 --S/+1--> 2      3 --L/-2--> 4
//   4 --S/+1--> 2      4 --L/-1--> 5
//   5 --L/-1--> 5      5 --S/+1--> 6
//   6 --S/0---> 6      6 --L/+1--> 3
// The states, edges, deltas, the 0.02 bound and the 10000-cycle interval follow
// the paper. STHLD starting at 0, saturating at 0 and at its maximum, the exact
// treatment of a difference equal to 0.02 (small) and the counter widths are
// this design's choices. sthld is registered and changes one cycle after the
// last cycle of an interval.
module sthld_controller #(
  parameter int unsigned INTERVAL = 10000,
  parameter int unsigned STHLD_W  = 8,
  parameter int unsigned CNT_W    = 24,
  parameter int unsigned INC_W    = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [INC_W-1:0]   inst_inc,      // instructions issued this cycle
  output logic [STHLD_W-1:0] sthld,
  output logic [2:0]         state,         // 1..6 as in the paper's figure
  output logic               interval_end,  // pulse: an interval closed
  output logic               large_change,  // with the pulse: the change was L
  output logic [CNT_W-1:0]   prev_count
);

  typedef enum logic [2:0] { ST1 = 3'd1, ST2 = 3'd2, ST3 = 3'd3,
                             ST4 = 3'd4, ST5 = 3'd5, ST6 = 3'd6 } st_t;

  localparam int unsigned TW = $clog2(INTERVAL);

  st_t              st_q;
  logic [TW-1:0]    tick;
  logic [CNT_W-1:0] cur_q, prev_q, cur_total;
  logic             big;
  st_t              st_n;
  logic signed [2:0] delta;

  always_comb begin
    logic [CNT_W+6:0] diff;
    cur_total    = cur_q + CNT_W'(inst_inc);
    diff         = (cur_total >= prev_q) ? (CNT_W+7)'(cur_total - prev_q)
                                         : (CNT_W+7)'(prev_q - cur_total);
    big          = (diff * 50) > (CNT_W+7)'(prev_q);
    interval_end = (int'(tick) == INTERVAL - 1);
    large_change = interval_end && big;
    st_n  = st_q;
    delta = 3'sd0;
    unique case (st_q)
      ST1: begin st_n = ST2; delta = 3'sd1; end
      ST2: if (big) begin st_n = ST3; delta =  3'sd1; end
           else     begin st_n = ST2; delta =  3'sd1; end
      ST3: if (big) begin st_n = ST4; delta = -3'sd2; end
           else     begin st_n = ST2; delta =  3'sd1; end
      ST4: if (big) begin st_n = ST5; delta = -3'sd1; end
           else     begin st_n = ST2; delta =  3'sd1; end
      ST5: if (big) begin st_n = ST5; delta = -3'sd1; end
           else     begin st_n = ST6; delta =  3'sd1; end
      ST6: if (big) begin st_n = ST3; delta =  3'sd1; end
           else     begin st_n = ST6; delta =  3'sd0; end
      default: begin st_n = ST1; delta = 3'sd0; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= ST1;
      tick   <= '0;
      cur_q  <= '0;
      prev_q <= '0;
      sthld  <= '0;
    end else if (interval_end) begin
      tick   <= '0;
      cur_q  <= '0;
      prev_q <= cur_total;
      st_q   <= st_n;
      if (delta < 0) sthld <= (sthld < STHLD_W'(-delta)) ? '0 : sthld - STHLD_W'(-delta);
      else if (delta > 0) sthld <= (sthld > '1 - STHLD_W'(delta)) ? '1 : sthld + STHLD_W'(delta);
    end else begin
      tick  <= tick + 1'b1;
      cur_q <= cur_total;
    end
  end

  assign state      = st_q;
  assign prev_count = prev_q;

endmodule
