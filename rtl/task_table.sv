// task_table -- Execution Table and Schedule Table of one PIM unit, with the
// four table routines of the work-stealing flow done in hardware.
//
// A pattern of n vertices is enumerated by n nested loops. Level 0 walks the
// root vertices v0; level i walks the candidate set of level i (for example
// N(v0) - N(v1)). The Execution Table T_exe holds, per level, the index being
// executed; the Schedule Table T_sch holds, per level, the next index to run
// there (T_sch[i] = T_exe[i] + 1, and T_exe[0] + STRIDE at level 0, because
// roots are dealt round-robin over the units).
//
// Operations (op_valid with op, answered one cycle later with op_done):
//  * TT_INIT(op_root)  first root of this unit; the table starts empty above.
//  * TT_NEXT           Load Task + Update Sche Tab. Searches from the deepest
//                      level down for the first level k whose T_sch[k] is
//                      below that level's bound, copies it into T_exe[k],
//                      zeroes the deeper T_exe entries, and sets T_sch for the
//                      changed levels. next_ok=0 means the Schedule Table is
//                      empty. new_level = k tells the core which loops must
//                      reload their candidate sets.
//  * TT_STEAL_SRC      Searches from level 0 up for a level with a scheduled
//                      index and gives it away: steal_msg = {T_exe[0..k-1],
//                      T_sch[k], 0...} at level k; T_sch[k] skips it.
//                      steal_msg.valid=0 when nothing can be given.
//  * TT_STEAL_DST(in_msg) Takes over a stolen task. The levels up to the
//                      stolen one are pinned: the unit runs the subtree of the
//                      stolen index only, and the next TT_NEXT loads that
//                      index without a bound check (the victim checked it).
//
// Bounds: level 0 is bounded by cfg_nv (the vertex count); level i >= 1 by
// bound[i], the size of the candidate set of level i for the current T_exe
// prefix, which the PIM core supplies. Levels a pattern does not use get
// bound 1 and index 0.
//
// The table contents and the order of the searches follow the published flow.
// Held in registers here (the published tables live in the unit's memory and
// are updated by code on the PIM core); the pinning of stolen levels, the
// trusted first load after a steal and doing Load and Update as one atomic
// operation are this design's choices.
module task_table
  import pimminer_pkg::*;
#(
  parameter int unsigned LEVELS = MAX_LEVELS,
  parameter int unsigned W      = IDX_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [W-1:0]            cfg_nv,
  input  logic [W-1:0]            cfg_stride,
  input  logic [LEVELS-1:0][W-1:0] bound,
  input  logic                    op_valid,
  input  tt_op_t                  op,
  input  logic [W-1:0]            op_root,
  input  logic                    in_msg_valid,
  input  logic [$clog2(LEVELS+1)-1:0] in_msg_level,
  input  logic [LEVELS-1:0][W-1:0] in_msg_idx,
  output logic                    op_done,
  output logic                    next_ok,
  output logic [$clog2(LEVELS+1)-1:0] new_level,
  output logic                    steal_msg_valid,
  output logic [$clog2(LEVELS+1)-1:0] steal_msg_level,
  output logic [LEVELS-1:0][W-1:0] steal_msg_idx,
  output logic [LEVELS-1:0][W-1:0] t_exe,
  output logic [LEVELS-1:0][W-1:0] t_sch,
  output logic [$clog2(LEVELS+1)-1:0] pin_level
);

  localparam int unsigned LW = $clog2(LEVELS + 1);
  localparam logic [W-1:0] EXH = '1;  // "nothing scheduled at this level"

  logic [LEVELS-1:0][W-1:0] exe_q, sch_q;
  logic [LW-1:0]            pin_q;
  logic                     trust_q;

  // a level holds a runnable scheduled index
  logic [LEVELS-1:0] avail;
  always_comb begin
    for (int k = 0; k < LEVELS; k++) begin
      if (k < int'(pin_q))     avail[k] = 1'b0;
      else if (trust_q)        avail[k] = (k == int'(pin_q));
      else if (k == 0)         avail[k] = (sch_q[k] < cfg_nv);
      else                     avail[k] = (sch_q[k] < bound[k]);
    end
  end

  // deepest available level (for NEXT), shallowest (for STEAL_SRC)
  logic          any_avail;
  logic [LW-1:0] deep_k, shal_k;
  always_comb begin
    any_avail = |avail;
    deep_k = '0;
    shal_k = '0;
    for (int k = 0; k < LEVELS; k++)
      if (avail[k]) deep_k = LW'(k);
    for (int k = LEVELS - 1; k >= 0; k--)
      if (avail[k]) shal_k = LW'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exe_q           <= '0;
      sch_q           <= {LEVELS{EXH}};
      pin_q           <= '0;
      trust_q         <= 1'b0;
      op_done         <= 1'b0;
      next_ok         <= 1'b0;
      new_level       <= '0;
      steal_msg_valid <= 1'b0;
      steal_msg_level <= '0;
      steal_msg_idx   <= '0;
    end else begin
      op_done <= op_valid;
      if (op_valid) begin
        unique case (op)
          TT_INIT: begin
            exe_q    <= '0;
            sch_q    <= {LEVELS{EXH}};
            sch_q[0] <= op_root;
            pin_q    <= '0;
            trust_q  <= 1'b0;
            next_ok  <= 1'b0;
          end
          TT_NEXT: begin
            next_ok <= any_avail;
            if (any_avail) begin
              new_level <= deep_k;
              for (int j = 0; j < LEVELS; j++) begin
                if (j == int'(deep_k)) begin
                  exe_q[j] <= sch_q[j];
                  if (trust_q)     sch_q[j] <= EXH;
                  else if (j == 0) sch_q[j] <= sch_q[j] + cfg_stride;
                  else             sch_q[j] <= sch_q[j] + W'(1);
                end else if (j > int'(deep_k)) begin
                  exe_q[j] <= '0;
                  sch_q[j] <= W'(1);
                end
              end
              if (trust_q) begin
                pin_q   <= deep_k + LW'(1);
                trust_q <= 1'b0;
              end
            end
          end
          TT_STEAL_SRC: begin
            steal_msg_valid <= any_avail;
            steal_msg_level <= shal_k;
            for (int j = 0; j < LEVELS; j++) begin
              if (j < int'(shal_k))       steal_msg_idx[j] <= exe_q[j];
              else if (j == int'(shal_k)) steal_msg_idx[j] <= sch_q[j];
              else                        steal_msg_idx[j] <= '0;
            end
            if (any_avail) begin
              if (trust_q) begin
                sch_q[shal_k] <= EXH;
                trust_q       <= 1'b0;
              end else if (shal_k == '0) begin
                sch_q[0] <= sch_q[0] + cfg_stride;
              end else begin
                sch_q[shal_k] <= sch_q[shal_k] + W'(1);
              end
            end
          end
          TT_STEAL_DST: begin
            if (in_msg_valid) begin
              for (int j = 0; j < LEVELS; j++) begin
                if (j < int'(in_msg_level)) begin
                  exe_q[j] <= in_msg_idx[j];
                  sch_q[j] <= EXH;
                end else if (j == int'(in_msg_level)) begin
                  sch_q[j] <= in_msg_idx[j];
                end else begin
                  sch_q[j] <= EXH;
                end
              end
              pin_q   <= in_msg_level;
              trust_q <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  assign t_exe     = exe_q;
  assign t_sch     = sch_q;
  assign pin_level = pin_q;

endmodule
