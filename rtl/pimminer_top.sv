// pimminer_top -- the PIMMiner additions to an HBM-PIM stack, wired together.
//
// The stack has NCH channels with UPC PIM units each (one unit per bank
// group); unit ID u sits in channel u % NCH, bank group u / NCH. Around the
// PIM cores and DRAM banks, which stay outside this module, the top holds:
//
//  * the HBM-PIM memory controller's local-first address mapping, once on the
//    host side (decode, and compose for allocation in a chosen unit) and once
//    per unit, to classify each unit access as near-core, intra-channel or
//    inter-channel;
//  * per bank group, the pair of application-aware access filters between
//    the bank's sense amplifiers and the 64-bit TSV path;
//  * per channel, a stealing scheduler (16 bits per unit) behind a
//    round-robin arbiter that accepts one victim search per cycle from any
//    unit of the stack;
//  * per unit, a steal agent with the unit's Execution and Schedule tables.
//    A thief reads the stolen table from the victim it claimed.
//
// Host side: sched_init is InitialScheduler; launch with launch_mask and
// steal_en is PIMFunction<units><stealing|none>; cfg_nv is the vertex count,
// cfg_stride the round-robin step of the roots and cfg_root[u] each unit's
// first root.
//
// Ports towards the PIM cores (core_*), the banks (bank_*) and the TSVs
// (tsv_*) are arrays indexed by unit ID. Scheduler claims take one cycle, a
// filtered beat two cycles.
module pimminer_top
  import pimminer_pkg::*;
#(
  parameter int unsigned NCH    = NUM_CH,
  parameter int unsigned UPC    = UNITS_PER_CH,
  parameter int unsigned LEVELS = MAX_LEVELS,
  parameter int unsigned W      = IDX_W,
  parameter int unsigned TSV_W  = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host: scheduler init and kernel launch
  input  logic                          sched_init,
  input  logic                          launch,
  input  logic [NCH*UPC-1:0]            launch_mask,
  input  logic                          steal_en,
  input  logic [W-1:0]                  cfg_nv,
  input  logic [W-1:0]                  cfg_stride,
  input  logic [NCH*UPC-1:0][W-1:0]     cfg_root,
  // host: HBM-PIM memory controller address mapping
  input  logic [ADDR_W-1:0]             host_addr,
  output dram_addr_t                    host_fields,
  output logic [UNIT_ID_W-1:0]          host_owner,
  input  logic [UNIT_ID_W-1:0]          host_alloc_unit,
  input  logic [ADDR_W-UNIT_ID_W-1:0]   host_alloc_offset,
  output logic [ADDR_W-1:0]             host_alloc_addr,
  // PIM cores
  input  logic [NCH*UPC-1:0]            core_req,
  output logic [NCH*UPC-1:0]            core_ack,
  output logic [NCH*UPC-1:0][LEVELS-1:0][W-1:0] core_t_exe,
  output logic [NCH*UPC-1:0][$clog2(LEVELS+1)-1:0] core_new_level,
  input  logic [NCH*UPC-1:0][LEVELS-1:0][W-1:0] core_bound,
  input  logic [NCH*UPC-1:0]            core_bound_valid,
  output logic [NCH*UPC-1:0]            core_hold,
  output logic [NCH*UPC-1:0]            unit_done,
  input  logic [NCH*UPC-1:0][ADDR_W-1:0] pim_req_addr,
  output acc_class_t [NCH*UPC-1:0]      pim_acc_class,
  // banks -> filters -> TSV, one lane per bank group
  input  logic [NCH*UPC-1:0]            bank_cfg_load,
  input  cmp_t [NCH*UPC-1:0]            bank_cmp,
  input  logic [NCH*UPC-1:0][31:0]      bank_th,
  input  logic [NCH*UPC-1:0]            bank_rd_valid,
  input  logic [NCH*UPC-1:0][TSV_W-1:0] bank_rd_data,
  output logic [NCH*UPC-1:0][TSV_W/32-1:0] tsv_word_valid,
  output logic [NCH*UPC-1:0][TSV_W-1:0] tsv_data,
  // observation
  output unit_state_t [NCH*UPC-1:0]     unit_state,
  output logic [NCH*UPC-1:0][31:0]      unit_tasks,
  output logic [NCH*UPC-1:0][31:0]      unit_stolen_in,
  output logic [NCH*UPC-1:0][31:0]      unit_given
);

  localparam int unsigned NU  = NCH * UPC;
  localparam int unsigned CHW = $clog2(NCH);
  localparam int unsigned UW  = $clog2(NU);
  localparam int unsigned LW  = $clog2(LEVELS + 1);

  // ---------------------------------------------------------------- host map
  local_first_addr_map u_host_map (
    .addr        (host_addr),
    .req_unit    ('0),
    .fields      (host_fields),
    .owner_unit  (host_owner),
    .acc_class   (),
    .alloc_unit  (host_alloc_unit),
    .alloc_offset(host_alloc_offset),
    .alloc_addr  (host_alloc_addr)
  );

  // ---------------------------------------------------------------- per unit
  logic [NU-1:0]                 a_sched_we;
  sched_entry_t [NU-1:0]         a_sched_wdata;
  logic [NU-1:0]                 a_claim_valid;
  logic [NU-1:0][CHW-1:0]        a_claim_ch;
  logic [NU-1:0]                 a_claim_grant;
  logic [NU-1:0]                 a_resp_valid, a_resp_found, a_resp_busy;
  logic [NU-1:0][UNIT_ID_W-1:0]  a_resp_victim;
  logic [NU-1:0]                 a_steal_req;
  logic [NU-1:0][UNIT_ID_W-1:0]  a_steal_thief;
  logic [NU-1:0]                 m_out_valid, m_out_ok;
  logic [NU-1:0][UNIT_ID_W-1:0]  m_out_dst;
  logic [NU-1:0][LW-1:0]         m_out_level;
  logic [NU-1:0][LEVELS-1:0][W-1:0] m_out_idx;
  logic [NU-1:0][UNIT_ID_W-1:0]  a_victim;

  for (genvar u = 0; u < NU; u++) begin : g_unit
    logic [UW-1:0] vic;
    logic          min_valid;
    assign vic       = a_victim[u][UW-1:0];
    assign min_valid = m_out_valid[vic] && (m_out_dst[vic] == UNIT_ID_W'(u));

    steal_agent #(.UNIT(u), .NCH(NCH), .LEVELS(LEVELS), .W(W)) u_agent (
      .clk, .rst_n,
      .launch, .launch_sel(launch_mask[u]), .steal_en,
      .cfg_nv, .cfg_stride, .cfg_root(cfg_root[u]),
      .core_req        (core_req[u]),
      .core_ack        (core_ack[u]),
      .t_exe           (core_t_exe[u]),
      .new_level       (core_new_level[u]),
      .core_bound      (core_bound[u]),
      .core_bound_valid(core_bound_valid[u]),
      .core_hold       (core_hold[u]),
      .unit_done       (unit_done[u]),
      .sched_we        (a_sched_we[u]),
      .sched_wdata     (a_sched_wdata[u]),
      .claim_valid     (a_claim_valid[u]),
      .claim_ch        (a_claim_ch[u]),
      .claim_grant     (a_claim_grant[u]),
      .claim_resp_valid (a_resp_valid[u]),
      .claim_resp_found (a_resp_found[u]),
      .claim_resp_victim(a_resp_victim[u]),
      .claim_resp_busy  (a_resp_busy[u]),
      .steal_req       (a_steal_req[u]),
      .steal_thief     (a_steal_thief[u]),
      .msg_out_valid   (m_out_valid[u]),
      .msg_out_dst     (m_out_dst[u]),
      .msg_out_ok      (m_out_ok[u]),
      .msg_out_level   (m_out_level[u]),
      .msg_out_idx     (m_out_idx[u]),
      .msg_in_valid    (min_valid),
      .msg_in_ok       (m_out_ok[vic]),
      .msg_in_level    (m_out_level[vic]),
      .msg_in_idx      (m_out_idx[vic]),
      .state_o         (unit_state[u]),
      .victim_id       (a_victim[u]),
      .t_sch           (),
      .pin_level       (),
      .n_tasks         (unit_tasks[u]),
      .n_stolen_in     (unit_stolen_in[u]),
      .n_given         (unit_given[u])
    );

    local_first_addr_map u_map (
      .addr        (pim_req_addr[u]),
      .req_unit    (UNIT_ID_W'(u)),
      .fields      (),
      .owner_unit  (),
      .acc_class   (pim_acc_class[u]),
      .alloc_unit  ('0),
      .alloc_offset('0),
      .alloc_addr  ()
    );

    bank_group_filter #(.TSV_W(TSV_W), .WORD_W(32)) u_filt (
      .clk, .rst_n,
      .cfg_load      (bank_cfg_load[u]),
      .cfg_cmp       (bank_cmp[u]),
      .cfg_th        (bank_th[u]),
      .in_valid      (bank_rd_valid[u]),
      .in_data       (bank_rd_data[u]),
      .out_word_valid(tsv_word_valid[u]),
      .out_data      (tsv_data[u])
    );
  end

  // ------------------------------------------------------------- per channel
  logic [NCH-1:0]          c_gnt_valid_q;
  logic [NCH-1:0][UW-1:0]  c_gnt_idx_q;
  logic [NCH-1:0]          c_done, c_found, c_busy;
  logic [NCH-1:0][UNIT_ID_W-1:0] c_victim;
  logic [NCH-1:0][NU-1:0]  c_grant_vec;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [NU-1:0]           req;
    logic                    gv;
    logic [UW-1:0]           gi;
    logic [UPC-1:0]          own_we, steal_req;
    sched_entry_t [UPC-1:0]  own_wdata, entries;

    always_comb
      for (int u = 0; u < NU; u++)
        req[u] = a_claim_valid[u] && (a_claim_ch[u] == CHW'(c));

    rr_arbiter #(.N(NU)) u_arb (.clk, .rst_n, .req, .grant_valid(gv), .grant_idx(gi));

    always_comb begin
      c_grant_vec[c] = '0;
      if (gv) c_grant_vec[c][gi] = 1'b1;
    end

    for (genvar k = 0; k < UPC; k++) begin : g_ent
      assign own_we[k]    = a_sched_we[k*NCH + c];
      assign own_wdata[k] = a_sched_wdata[k*NCH + c];
      assign a_steal_req[k*NCH + c]   = steal_req[k];
      assign a_steal_thief[k*NCH + c] = entries[k].related_id;
    end

    steal_scheduler #(.CH_IDX(c), .UNITS(UPC), .NCH(NCH)) u_sched (
      .clk, .rst_n,
      .init        (sched_init),
      .own_we      (own_we),
      .own_wdata   (own_wdata),
      .claim_valid (gv),
      .claim_thief (UNIT_ID_W'(gi)),
      .claim_done  (c_done[c]),
      .claim_found (c_found[c]),
      .claim_victim(c_victim[c]),
      .claim_busy  (c_busy[c]),
      .steal_req   (steal_req),
      .entries     (entries)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        c_gnt_valid_q[c] <= 1'b0;
        c_gnt_idx_q[c]   <= '0;
      end else begin
        c_gnt_valid_q[c] <= gv;
        c_gnt_idx_q[c]   <= gi;
      end
    end
  end

  // grants to units, and the answers routed back to the unit granted last cycle
  always_comb begin
    a_claim_grant = '0;
    a_resp_valid  = '0;
    a_resp_found  = '0;
    a_resp_busy   = '0;
    a_resp_victim = '0;
    for (int c = 0; c < NCH; c++) begin
      a_claim_grant = a_claim_grant | c_grant_vec[c];
      if (c_gnt_valid_q[c] && c_done[c]) begin
        a_resp_valid[c_gnt_idx_q[c]]  = 1'b1;
        a_resp_found[c_gnt_idx_q[c]]  = c_found[c];
        a_resp_busy[c_gnt_idx_q[c]]   = c_busy[c];
        a_resp_victim[c_gnt_idx_q[c]] = c_victim[c];
      end
    end
  end

endmodule
