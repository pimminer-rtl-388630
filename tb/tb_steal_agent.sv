// tb_steal_agent -- self-checking test of the per-unit steal agent.
//
// Four agents (units 0..3) in a two-channel, two-units-per-channel system
// with two stealing schedulers; a fixed-priority claim arbiter per channel is
// written out here. Behavioural cores count k-cliques of a random graph with
// a dense cluster, for k = 3, 4 and 5 (the clique patterns 3-CC, 4-CC, 5-CC)
// on 5-level tables. Unit 0 owns every root (step 1); the others start empty,
// so all their work must be stolen. Checks: each count equals the brute-force
// count, with stealing on (every unit must end up doing work, steals must
// occur both inside a channel and across channels) and, for triangles, with
// stealing off (only unit 0 works); every unit ends idle; each steal answer
// reaches the thief that asked.
module tb_steal_agent;
  import pimminer_pkg::*;

  localparam int NCH = 2, UPC = 2, NU = 4, L = 5, NVMAX = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic launch, steal_en, sched_init, go;
  logic [NVMAX-1:0][NVMAX-1:0] adj;
  int nv;

  logic [NU-1:0] core_req, core_ack, core_bound_valid, core_hold, unit_done;
  logic [NU-1:0][L-1:0][31:0] t_exe, core_bound, msg_out_idx;
  logic [NU-1:0][2:0] new_level, msg_out_level;
  int kk;
  logic [NU-1:0] sched_we, claim_valid, claim_grant, resp_valid, resp_found, resp_busy;
  sched_entry_t [NU-1:0] sched_wdata;
  logic [NU-1:0][0:0] claim_ch;
  logic [NU-1:0][6:0] resp_victim, steal_thief, msg_out_dst, victim_id;
  logic [NU-1:0] steal_req, msg_out_valid, msg_out_ok, msg_in_valid;
  unit_state_t [NU-1:0] state_o;
  logic [NU-1:0][31:0] n_tasks, n_stolen_in, n_given;
  int found [NU];
  int tasks [NU];

  // schedulers and their claim arbiters
  logic [NCH-1:0] c_valid, c_done, c_found, c_busy;
  logic [NCH-1:0][6:0] c_thief, c_victim;
  logic [NCH-1:0][1:0] c_own_we, c_steal_req;
  sched_entry_t [NCH-1:0][1:0] c_wdata, c_entries;
  int gnt_q [NCH];
  int gnt_c [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    int gnt;
    always_comb begin
      gnt = -1;
      for (int u = NU - 1; u >= 0; u--) if (claim_valid[u] && claim_ch[u] == 1'(c)) gnt = u;
      c_valid[c] = (gnt >= 0);
      c_thief[c] = 7'(gnt < 0 ? 0 : gnt);
    end
    always_ff @(posedge clk) gnt_q[c] <= gnt;
    assign gnt_c[c] = gnt;
    for (genvar k = 0; k < UPC; k++) begin : g_k
      assign c_own_we[c][k] = sched_we[k * NCH + c];
      assign c_wdata[c][k]  = sched_wdata[k * NCH + c];
      assign steal_req[k * NCH + c]   = c_steal_req[c][k];
      assign steal_thief[k * NCH + c] = c_entries[c][k].related_id;
    end
    steal_scheduler #(.CH_IDX(c), .UNITS(UPC), .NCH(NCH)) u_s (
      .clk, .rst_n, .init(sched_init), .own_we(c_own_we[c]), .own_wdata(c_wdata[c]),
      .claim_valid(c_valid[c]), .claim_thief(c_thief[c]), .claim_done(c_done[c]),
      .claim_found(c_found[c]), .claim_victim(c_victim[c]), .claim_busy(c_busy[c]),
      .steal_req(c_steal_req[c]), .entries(c_entries[c]));
  end

  always_comb begin
    claim_grant = '0; resp_valid = '0; resp_found = '0; resp_busy = '0; resp_victim = '0;
    for (int c = 0; c < NCH; c++) begin
      if (gnt_c[c] >= 0) claim_grant[gnt_c[c]] = 1'b1;
      if (c_done[c] && gnt_q[c] >= 0) begin
        resp_valid[gnt_q[c]] = 1'b1; resp_found[gnt_q[c]] = c_found[c];
        resp_busy[gnt_q[c]] = c_busy[c]; resp_victim[gnt_q[c]] = c_victim[c];
      end
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_u
    logic [1:0] vic;
    assign vic = victim_id[u][1:0];
    assign msg_in_valid[u] = msg_out_valid[vic] && msg_out_dst[vic] == 7'(u);
    steal_agent #(.UNIT(u), .NCH(NCH), .LEVELS(L)) dut (
      .clk, .rst_n, .launch, .launch_sel(1'b1), .steal_en,
      .cfg_nv(32'(nv)), .cfg_stride(32'd1), .cfg_root(u == 0 ? 32'd0 : 32'(nv)),
      .core_req(core_req[u]), .core_ack(core_ack[u]), .t_exe(t_exe[u]), .new_level(new_level[u]),
      .core_bound(core_bound[u]), .core_bound_valid(core_bound_valid[u]), .core_hold(core_hold[u]),
      .unit_done(unit_done[u]), .sched_we(sched_we[u]), .sched_wdata(sched_wdata[u]),
      .claim_valid(claim_valid[u]), .claim_ch(claim_ch[u]), .claim_grant(claim_grant[u]),
      .claim_resp_valid(resp_valid[u]), .claim_resp_found(resp_found[u]),
      .claim_resp_victim(resp_victim[u]), .claim_resp_busy(resp_busy[u]),
      .steal_req(steal_req[u]), .steal_thief(steal_thief[u]),
      .msg_out_valid(msg_out_valid[u]), .msg_out_dst(msg_out_dst[u]), .msg_out_ok(msg_out_ok[u]),
      .msg_out_level(msg_out_level[u]), .msg_out_idx(msg_out_idx[u]),
      .msg_in_valid(msg_in_valid[u]), .msg_in_ok(msg_out_ok[vic]),
      .msg_in_level(msg_out_level[vic]), .msg_in_idx(msg_out_idx[vic]),
      .state_o(state_o[u]), .victim_id(victim_id[u]), .t_sch(), .pin_level(),
      .n_tasks(n_tasks[u]), .n_stolen_in(n_stolen_in[u]), .n_given(n_given[u]));
    pim_core_model #(.LEVELS(L), .NVMAX(NVMAX)) u_core (
      .clk, .rst_n, .go, .k_levels(kk), .nv(nv), .max_exec(4), .adj(adj),
      .core_req(core_req[u]), .core_ack(core_ack[u]), .t_exe(t_exe[u]),
      .core_bound(core_bound[u]), .core_bound_valid(core_bound_valid[u]),
      .unit_done(unit_done[u]), .found(found[u]), .tasks(tasks[u]));
  end

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int same_ch = 0, cross_ch = 0, lost_msg = 0;
  always @(posedge clk) if (rst_n)
    for (int j = 0; j < NU; j++)
      if (msg_out_valid[j]) begin
        int t;
        t = int'(msg_out_dst[j]);
        if (!msg_in_valid[t]) lost_msg++;
        if (msg_out_ok[j]) begin if (t % NCH == j % NCH) same_ch++; else cross_ch++; end
      end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // brute-force k-clique count, vertices in descending ID order
  function automatic int clique_count(input int k);
    int c = 0;
    for (int a = 0; a < nv; a++) for (int b = 0; b < a; b++) if (adj[a][b])
      for (int d = 0; d < b; d++) if (adj[a][d] && adj[b][d]) begin
        if (k == 3) c++;
        else for (int e = 0; e < d; e++) if (adj[a][e] && adj[b][e] && adj[d][e]) begin
          if (k == 4) c++;
          else for (int f = 0; f < e; f++)
            if (adj[a][f] && adj[b][f] && adj[d][f] && adj[e][f]) c++;
        end
      end
    return c;
  endfunction

  task automatic run(input logic se, input int ref_cnt);
    int start_cnt, total, cyc;
    start_cnt = 0; for (int u = 0; u < NU; u++) start_cnt += found[u];
    @(negedge clk); steal_en = se; launch = 1;
    @(negedge clk); launch = 0; go = 1;
    cyc = 0;
    do begin @(negedge clk); cyc++; end while (!(&unit_done) && cyc < 500000);
    repeat (3) @(negedge clk);
    total = -start_cnt; for (int u = 0; u < NU; u++) total += found[u];
    chk(&unit_done, "all done");
    chk(total == ref_cnt, $sformatf("%0d-cliques %0d expected %0d (steal=%0b)", kk, total, ref_cnt, se));
    for (int u = 0; u < NU; u++) chk(state_o[u] == ST_IDLE, "idle at end");
    if (se) for (int u = 1; u < NU; u++) chk(n_tasks[u] > 0 && n_stolen_in[u] > 0, $sformatf("unit %0d stole work", u));
    else    for (int u = 1; u < NU; u++) chk(n_tasks[u] == 0, "no work without stealing");
    $display("k=%0d steal=%0b: cliques=%0d cycles=%0d tasks=%0d/%0d/%0d/%0d", kk, se, total, cyc,
             n_tasks[0], n_tasks[1], n_tasks[2], n_tasks[3]);
  endtask

  initial begin
    int ref_cnt;
    launch = 0; steal_en = 0; sched_init = 0; go = 0; kk = 3;
    nv = NVMAX; adj = '0;
    for (int a = 1; a < nv; a++)
      for (int e = 0; e < 4; e++) begin
        int b; b = $urandom_range(0, a - 1); adj[a][b] = 1; adj[b][a] = 1;
      end
    for (int a = nv - 12; a < nv; a++)
      for (int b = nv - 12; b < a; b++)
        if ($urandom_range(0, 9) < 7) begin adj[a][b] = 1; adj[b][a] = 1; end
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); sched_init = 1; @(negedge clk); sched_init = 0;
    for (int k = 3; k <= 5; k++) begin
      kk = k;
      ref_cnt = clique_count(k);
      chk(ref_cnt > 0, $sformatf("graph has %0d-cliques", k));
      if (k == 3) run(1'b0, ref_cnt);
      run(1'b1, ref_cnt);
    end
    chk(same_ch > 0 && cross_ch > 0, $sformatf("steals in channel %0d, across %0d", same_ch, cross_ch));
    chk(lost_msg == 0, "every steal answer reaches its thief");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
