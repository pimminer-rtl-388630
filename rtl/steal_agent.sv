// steal_agent -- per-PIM-unit controller of the task execution and
// work-stealing workflow, holding the unit's task tables.
//
// The PIM core asks for work with core_req; the agent answers with core_ack
// once a task is in the Execution Table (t_exe, new_level). Every request runs
// Load Task + Update Sche Tab on the tables (task_table, TT_NEXT).
//
// When the Schedule Table runs empty and stealing is on, the unit becomes a
// thief: it marks itself 10 in its channel's scheduler and asks the
// schedulers for a victim, its own channel first, then the next channel, and
// so on around the stack. A found victim j is marked 11 by the scheduler; the
// thief records j as its related unit and waits for j's message. The message
// is the stolen part of j's Schedule Table; the thief runs Steal Dest
// (TT_STEAL_DST), marks itself 01 and goes back to executing. If one full
// round over all channels finds no unit in 01 and no steal in progress, the
// unit marks itself 00 and stops (unit_done). With stealing off it stops as
// soon as its own tasks are done.
//
// As a victim, the agent sees steal_req from its scheduler entry (the thief's
// ID is the entry's related ID), holds the core off the tables
// (core_hold), waits until the core's bounds are valid, runs Steal Source
// (TT_STEAL_SRC), sends the message to the thief and restores its state.
//
// Interfaces (all single-cycle pulses unless noted):
//   launch/launch_sel/steal_en  kernel start (PIMFunction <units><stealing>)
//   core_req (level), core_ack, core_bound, core_bound_valid, core_hold
//   sched_we/sched_wdata        own scheduler entry
//   claim_valid (level)/claim_ch, claim_grant, claim_resp_*  victim search
//   steal_req, steal_thief      victim side
//   msg_out_* / msg_in_*        stolen table transfer
//
// The states and the order of the search follow the published workflow; the
// handshakes, the "busy" rescan rule and serving a steal that arrives in the
// same cycle the unit turns thief are this design's choices.
module steal_agent
  import pimminer_pkg::*;
#(
  parameter int unsigned UNIT   = 0,
  parameter int unsigned NCH    = NUM_CH,
  parameter int unsigned LEVELS = MAX_LEVELS,
  parameter int unsigned W      = IDX_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // kernel launch and configuration
  input  logic                     launch,
  input  logic                     launch_sel,
  input  logic                     steal_en,
  input  logic [W-1:0]             cfg_nv,
  input  logic [W-1:0]             cfg_stride,
  input  logic [W-1:0]             cfg_root,
  // PIM core
  input  logic                     core_req,
  output logic                     core_ack,
  output logic [LEVELS-1:0][W-1:0] t_exe,
  output logic [$clog2(LEVELS+1)-1:0] new_level,
  input  logic [LEVELS-1:0][W-1:0] core_bound,
  input  logic                     core_bound_valid,
  output logic                     core_hold,
  output logic                     unit_done,
  // own scheduler entry
  output logic                     sched_we,
  output sched_entry_t             sched_wdata,
  // victim search
  output logic                     claim_valid,
  output logic [$clog2(NCH)-1:0]   claim_ch,
  input  logic                     claim_grant,
  input  logic                     claim_resp_valid,
  input  logic                     claim_resp_found,
  input  logic [UNIT_ID_W-1:0]     claim_resp_victim,
  input  logic                     claim_resp_busy,
  // victim side
  input  logic                     steal_req,
  input  logic [UNIT_ID_W-1:0]     steal_thief,
  // stolen-table transfer
  output logic                     msg_out_valid,
  output logic [UNIT_ID_W-1:0]     msg_out_dst,
  output logic                     msg_out_ok,
  output logic [$clog2(LEVELS+1)-1:0] msg_out_level,
  output logic [LEVELS-1:0][W-1:0] msg_out_idx,
  input  logic                     msg_in_valid,
  input  logic                     msg_in_ok,
  input  logic [$clog2(LEVELS+1)-1:0] msg_in_level,
  input  logic [LEVELS-1:0][W-1:0] msg_in_idx,
  // observation
  output unit_state_t              state_o,
  output logic [UNIT_ID_W-1:0]     victim_id,
  output logic [LEVELS-1:0][W-1:0] t_sch,
  output logic [$clog2(LEVELS+1)-1:0] pin_level,
  output logic [31:0]              n_tasks,
  output logic [31:0]              n_stolen_in,
  output logic [31:0]              n_given
);

  localparam int unsigned LW  = $clog2(LEVELS + 1);
  localparam int unsigned CHW = $clog2(NCH);
  localparam logic [UNIT_ID_W-1:0] MY_ID = UNIT_ID_W'(UNIT);
  localparam logic [CHW-1:0]        MY_CH = CHW'(UNIT % NCH);

  typedef enum logic [3:0] {
    A_IDLE, A_EXEC, A_NEXT_WAIT, A_SRV_WAITB, A_SRV_OP, A_SRV_SEND,
    A_SEARCH_REQ, A_SEARCH_RESP, A_WAIT_MSG, A_DST_WAIT, A_DONE
  } astate_t;

  astate_t a_q, resume_q;
  logic               steal_pend_q;
  logic [UNIT_ID_W-1:0] thief_q, victim_q;
  logic [CHW-1:0]     cur_ch_q;
  logic [$clog2(NCH+1)-1:0] scanned_q;
  logic               busy_seen_q;
  unit_state_t        st_q;   // this unit's own view of its scheduler state

  // task table
  logic    tt_valid;
  tt_op_t  tt_op;
  logic    tt_done, tt_next_ok, tt_msg_valid;
  logic [LW-1:0] tt_new_level, tt_msg_level;
  logic [LEVELS-1:0][W-1:0] tt_msg_idx;

  task_table #(.LEVELS(LEVELS), .W(W)) u_tab (
    .clk, .rst_n,
    .cfg_nv, .cfg_stride,
    .bound          (core_bound),
    .op_valid       (tt_valid),
    .op             (tt_op),
    .op_root        (cfg_root),
    .in_msg_valid   (msg_in_ok),
    .in_msg_level   (msg_in_level),
    .in_msg_idx     (msg_in_idx),
    .op_done        (tt_done),
    .next_ok        (tt_next_ok),
    .new_level      (tt_new_level),
    .steal_msg_valid(tt_msg_valid),
    .steal_msg_level(tt_msg_level),
    .steal_msg_idx  (tt_msg_idx),
    .t_exe          (t_exe),
    .t_sch          (t_sch),
    .pin_level      (pin_level)
  );

  assign new_level = tt_new_level;

  logic steal_now;
  assign steal_now = steal_pend_q || steal_req;

  always_comb begin
    tt_valid      = 1'b0;
    tt_op         = TT_NEXT;
    sched_we      = 1'b0;
    sched_wdata   = '{unit_id: MY_ID, state: st_q, related_id: victim_q};
    claim_valid   = 1'b0;
    claim_ch      = cur_ch_q;
    core_ack      = 1'b0;
    msg_out_valid = 1'b0;
    msg_out_dst   = thief_q;
    msg_out_ok    = tt_msg_valid;
    msg_out_level = tt_msg_level;
    msg_out_idx   = tt_msg_idx;
    unique case (a_q)
      A_IDLE, A_DONE: if (launch && launch_sel) begin
        tt_valid = 1'b1;
        tt_op    = TT_INIT;
        sched_we = 1'b1;
        sched_wdata.state = ST_EXEC;
      end
      A_EXEC: begin
        if (!steal_now && core_req) begin
          tt_valid = 1'b1;
          tt_op    = TT_NEXT;
        end
      end
      A_NEXT_WAIT: if (tt_done) begin
        if (tt_next_ok) core_ack = 1'b1;
        else if (steal_en) begin
          sched_we = 1'b1;
          sched_wdata.state = ST_STEAL;
        end else begin
          sched_we = 1'b1;
          sched_wdata.state = ST_IDLE;
        end
      end
      A_SRV_OP: begin
        tt_valid = 1'b1;
        tt_op    = TT_STEAL_SRC;
      end
      A_SRV_SEND: begin
        msg_out_valid = 1'b1;
        sched_we      = 1'b1;
        sched_wdata.state      = st_q;
        sched_wdata.related_id = thief_q;
      end
      A_SEARCH_REQ: if (!steal_now) claim_valid = 1'b1;
      A_SEARCH_RESP: if (claim_resp_valid) begin
        if (claim_resp_found) begin
          sched_we = 1'b1;
          sched_wdata.state      = ST_STEAL;
          sched_wdata.related_id = claim_resp_victim;
        end else if (scanned_q == ($clog2(NCH+1))'(NCH - 1) && !(busy_seen_q || claim_resp_busy)) begin
          sched_we = 1'b1;
          sched_wdata.state = ST_IDLE;
        end
      end
      A_WAIT_MSG: if (msg_in_valid && msg_in_ok) begin
        tt_valid = 1'b1;
        tt_op    = TT_STEAL_DST;
      end
      A_DST_WAIT: if (tt_done) begin
        sched_we = 1'b1;
        sched_wdata.state = ST_EXEC;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q          <= A_IDLE;
      resume_q     <= A_EXEC;
      steal_pend_q <= 1'b0;
      thief_q      <= '0;
      victim_q     <= '0;
      cur_ch_q     <= MY_CH;
      scanned_q    <= '0;
      busy_seen_q  <= 1'b0;
      st_q         <= ST_IDLE;
      n_tasks      <= '0;
      n_stolen_in  <= '0;
      n_given      <= '0;
    end else begin
      if (steal_req) begin
        steal_pend_q <= 1'b1;
        thief_q      <= steal_thief;
      end
      if (sched_we) st_q <= sched_wdata.state;
      unique case (a_q)
        A_IDLE: if (launch && launch_sel) begin
          a_q         <= A_EXEC;
          n_tasks     <= '0;
          n_stolen_in <= '0;
          n_given     <= '0;
        end
        A_EXEC: begin
          if (steal_now) begin
            resume_q <= A_EXEC;
            a_q      <= A_SRV_WAITB;
          end else if (core_req) a_q <= A_NEXT_WAIT;
        end
        A_NEXT_WAIT: if (tt_done) begin
          if (tt_next_ok) begin
            a_q     <= A_EXEC;
            n_tasks <= n_tasks + 1;
          end else if (steal_en) begin
            a_q         <= A_SEARCH_REQ;
            cur_ch_q    <= MY_CH;
            scanned_q   <= '0;
            busy_seen_q <= 1'b0;
          end else a_q <= A_DONE;
        end
        A_SRV_WAITB: if (core_bound_valid) a_q <= A_SRV_OP;
        A_SRV_OP:    a_q <= A_SRV_SEND;   // op_done and the message arrive next cycle
        A_SRV_SEND: begin
          steal_pend_q <= 1'b0;
          if (tt_msg_valid) n_given <= n_given + 1;
          a_q <= resume_q;
        end
        A_SEARCH_REQ: begin
          if (steal_now) begin
            resume_q <= A_SEARCH_REQ;
            a_q      <= A_SRV_WAITB;
          end else if (claim_grant) a_q <= A_SEARCH_RESP;
        end
        A_SEARCH_RESP: if (claim_resp_valid) begin
          if (claim_resp_found) begin
            victim_q <= claim_resp_victim;
            a_q      <= A_WAIT_MSG;
          end else begin
            cur_ch_q <= (cur_ch_q == CHW'(NCH - 1)) ? '0 : cur_ch_q + CHW'(1);
            if (scanned_q == ($clog2(NCH+1))'(NCH - 1)) begin
              if (busy_seen_q || claim_resp_busy) begin
                scanned_q   <= '0;
                busy_seen_q <= 1'b0;
                a_q         <= A_SEARCH_REQ;
              end else a_q <= A_DONE;
            end else begin
              scanned_q   <= scanned_q + 1'b1;
              busy_seen_q <= busy_seen_q || claim_resp_busy;
              a_q         <= A_SEARCH_REQ;
            end
          end
        end
        A_WAIT_MSG: if (msg_in_valid) begin
          if (msg_in_ok) a_q <= A_DST_WAIT;
          else begin
            // the victim had nothing left: keep searching, and do not end the round
            busy_seen_q <= 1'b1;
            cur_ch_q    <= (cur_ch_q == CHW'(NCH - 1)) ? '0 : cur_ch_q + CHW'(1);
            scanned_q   <= (scanned_q == ($clog2(NCH+1))'(NCH - 1)) ? '0 : scanned_q + 1'b1;
            a_q         <= A_SEARCH_REQ;
          end
        end
        A_DST_WAIT: if (tt_done) begin
          n_stolen_in <= n_stolen_in + 1;
          a_q         <= A_EXEC;
        end
        A_DONE: if (launch && launch_sel) begin
          a_q         <= A_EXEC;
          n_tasks     <= '0;
          n_stolen_in <= '0;
          n_given     <= '0;
        end
        default: a_q <= A_IDLE;
      endcase
    end
  end

  assign core_hold = (a_q == A_SRV_WAITB) || (a_q == A_SRV_OP) || (a_q == A_SRV_SEND);
  assign unit_done = (a_q == A_DONE);
  assign state_o   = st_q;
  assign victim_id = victim_q;

  // A thief only ever waits for the message of the victim it claimed.
  a_msg_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    msg_in_valid |-> a_q == A_WAIT_MSG);
  // A steal request reaches a unit only while it executes (or in the cycle it
  // turns thief, in which case it is served before searching).
  a_steal_req_state: assert property (@(posedge clk) disable iff (!rst_n)
    steal_req |-> (a_q == A_EXEC || a_q == A_NEXT_WAIT || a_q == A_SEARCH_REQ));

endmodule
