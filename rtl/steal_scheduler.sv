// steal_scheduler -- stealing scheduler of one HBM-PIM channel.
//
// HBM-PIM has no shared cache through which cores could find each other's
// work, so each channel keeps a small metadata table instead: for every PIM
// unit of the channel a 16-bit entry {unit ID (7 b), state (2 b), related unit
// ID (7 b)}. State 00 is idle, 01 executing, 10 stealing (related = the unit it
// steals from), 11 being stolen from (related = the unit that steals).
//
// Ports:
//  * init            - InitialScheduler: every entry gets its unit ID
//                      (bank group * NCH + channel, i.e. {bank group,
//                      channel} in the 32-channel stack), state 00,
//                      related 0.
//  * own_we/own_wdata- each unit of the channel rewrites its own state and
//                      related ID (one port per unit, no conflicts).
//  * claim_*         - a stealing unit (from any channel) asks this channel
//                      for a victim. The table atomically picks the
//                      lowest-numbered entry in state 01 that is not the
//                      thief, sets it to 11 with related = thief, and pulses
//                      steal_req for that entry. The answer arrives one
//                      cycle after the request: claim_found and claim_victim,
//                      plus claim_busy when some entry is 11 (a steal is
//                      under way, so work may still appear). An entry its own
//                      unit writes in the same cycle is not claimed, and is
//                      reported busy if it was 01.
//  * entries         - the table, for observation.
//
// The table and its codes follow the published design. Making the claim
// atomic in the table (the published flow has the victim mark itself 11 when
// it sees the steal signal) is this design's choice: it guarantees that two
// thieves never pick the same victim, which the 11 state exists to prevent.
module steal_scheduler
  import pimminer_pkg::*;
#(
  parameter int unsigned CH_IDX = 0,
  parameter int unsigned UNITS  = UNITS_PER_CH,
  parameter int unsigned NCH    = NUM_CH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       init,
  input  logic [UNITS-1:0]           own_we,
  input  sched_entry_t [UNITS-1:0]   own_wdata,   // unit_id field ignored
  input  logic                       claim_valid,
  input  logic [UNIT_ID_W-1:0]       claim_thief,
  output logic                       claim_done,
  output logic                       claim_found,
  output logic [UNIT_ID_W-1:0]       claim_victim,
  output logic                       claim_busy,
  output logic [UNITS-1:0]           steal_req,
  output sched_entry_t [UNITS-1:0]   entries
);

  sched_entry_t [UNITS-1:0] tab_q;

  // victim selection
  logic                      pick_found;
  logic [$clog2(UNITS)-1:0]  pick_idx;
  logic                      busy_now;

  always_comb begin
    pick_found = 1'b0;
    pick_idx   = '0;
    busy_now   = 1'b0;
    for (int k = UNITS - 1; k >= 0; k--) begin
      if (tab_q[k].state == ST_STOLEN) busy_now = 1'b1;
      if (tab_q[k].state == ST_EXEC && own_we[k]) busy_now = 1'b1;
      if (tab_q[k].state == ST_EXEC && !own_we[k] && tab_q[k].unit_id != claim_thief) begin
        pick_found = 1'b1;
        pick_idx   = k[$clog2(UNITS)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < UNITS; k++) begin
        tab_q[k].unit_id    <= UNIT_ID_W'(k * NCH + CH_IDX);
        tab_q[k].state      <= ST_IDLE;
        tab_q[k].related_id <= '0;
      end
      claim_done   <= 1'b0;
      claim_found  <= 1'b0;
      claim_victim <= '0;
      claim_busy   <= 1'b0;
      steal_req    <= '0;
    end else begin
      claim_done  <= claim_valid && !init;
      claim_found <= 1'b0;
      claim_busy  <= busy_now;
      steal_req   <= '0;
      if (init) begin
        for (int k = 0; k < UNITS; k++) begin
          tab_q[k].unit_id    <= UNIT_ID_W'(k * NCH + CH_IDX);
          tab_q[k].state      <= ST_IDLE;
          tab_q[k].related_id <= '0;
        end
      end else begin
        for (int k = 0; k < UNITS; k++) begin
          if (own_we[k]) begin
            tab_q[k].state      <= own_wdata[k].state;
            tab_q[k].related_id <= own_wdata[k].related_id;
          end
        end
        if (claim_valid && pick_found) begin
          tab_q[pick_idx].state      <= ST_STOLEN;
          tab_q[pick_idx].related_id <= claim_thief;
          claim_found                <= 1'b1;
          claim_victim               <= tab_q[pick_idx].unit_id;
          steal_req[pick_idx]        <= 1'b1;
        end
      end
    end
  end

  assign entries = tab_q;

endmodule
