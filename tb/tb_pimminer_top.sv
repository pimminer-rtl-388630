// tb_pimminer_top -- end-to-end test of the PIMMiner top at its default size
// (32 channels x 4 PIM units = 128 units, 5 loop levels).
//
// Every unit gets a behavioural PIM core (pim_core_model) that counts
// 4-cliques of a random sparse graph with one dense cluster (the last 40
// vertex IDs, edge probability 1/2), so a few roots carry most of the work,
// as in the skewed real graphs; roots are dealt round-robin (unit u starts at root u, step 128). The
// count is run twice, once with stealing off and once with stealing on; both
// must equal the brute-force count worked out here. The stolen-table messages
// are watched to count steals at level 0 and deeper, inside a channel and
// across channels, and steals that found nothing. The memory side is checked
// too: the host-side address decode, the access class of unit requests
// (near-core, intra-channel, inter-channel) and the bank-group filters (words
// passed and dropped, two cycles after the beat). Each mechanism must occur.
module tb_pimminer_top;
  import pimminer_pkg::*;

  localparam int NCH = NUM_CH, UPC = UNITS_PER_CH, NU = NCH * UPC, L = MAX_LEVELS;
  localparam int NVMAX = 400, K = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT ports
  logic sched_init, launch, steal_en;
  logic [NU-1:0] launch_mask;
  logic [31:0] cfg_nv, cfg_stride;
  logic [NU-1:0][31:0] cfg_root;
  logic [31:0] host_addr, host_alloc_addr;
  dram_addr_t host_fields;
  logic [6:0] host_owner, host_alloc_unit;
  logic [24:0] host_alloc_offset;
  logic [NU-1:0] core_req, core_ack, core_bound_valid, core_hold, unit_done;
  logic [NU-1:0][L-1:0][31:0] core_t_exe, core_bound;
  logic [NU-1:0][2:0] core_new_level;
  logic [NU-1:0][31:0] pim_req_addr;
  acc_class_t [NU-1:0] pim_acc_class;
  logic [NU-1:0] bank_cfg_load, bank_rd_valid;
  cmp_t [NU-1:0] bank_cmp;
  logic [NU-1:0][31:0] bank_th;
  logic [NU-1:0][63:0] bank_rd_data, tsv_data;
  logic [NU-1:0][1:0] tsv_word_valid;
  unit_state_t [NU-1:0] unit_state;
  logic [NU-1:0][31:0] unit_tasks, unit_stolen_in, unit_given;

  pimminer_top dut (.*);

  // graph and cores
  logic [NVMAX-1:0][NVMAX-1:0] adj;
  int nv;
  logic go;
  int found [NU];
  int tasks [NU];

  for (genvar u = 0; u < NU; u++) begin : g_core
    pim_core_model #(.LEVELS(L), .NVMAX(NVMAX)) u_core (
      .clk, .rst_n, .go, .k_levels(K), .nv(nv), .max_exec(12), .adj(adj),
      .core_req(core_req[u]), .core_ack(core_ack[u]), .t_exe(core_t_exe[u]),
      .core_bound(core_bound[u]), .core_bound_valid(core_bound_valid[u]),
      .unit_done(unit_done[u]), .found(found[u]), .tasks(tasks[u]));
  end

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- mechanism counters, from the stolen-table messages
  int n_steal_ok, n_steal_empty, n_steal_l0, n_steal_deep, n_steal_same_ch, n_steal_cross_ch;
  int n_hold_cycles;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < NU; j++) begin
      if (dut.m_out_valid[j]) begin
        int t;
        t = int'(dut.m_out_dst[j]);
        if (dut.m_out_ok[j]) begin
          n_steal_ok++;
          if (dut.m_out_level[j] == 0) n_steal_l0++; else n_steal_deep++;
          if (t % NCH == j % NCH) n_steal_same_ch++; else n_steal_cross_ch++;
        end else n_steal_empty++;
      end
      if (core_hold[j]) n_hold_cycles++;
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clique_count(input int n);
    int c = 0;
    for (int a = 0; a < n; a++)
      for (int b = 0; b < a; b++) if (adj[a][b])
        for (int d = 0; d < b; d++) if (adj[a][d] && adj[b][d])
          for (int e = 0; e < d; e++) if (adj[a][e] && adj[b][e] && adj[d][e]) c++;
    return c;
  endfunction

  task automatic run_count(input logic with_steal, input int expect_count, output int cycles);
    int total, tot_tasks, maxt, start_cnt;
    start_cnt = 0;
    for (int u = 0; u < NU; u++) start_cnt += found[u];
    @(negedge clk);
    steal_en = with_steal; launch = 1; launch_mask = '1;
    @(negedge clk);
    launch = 0;
    go = 1;
    cycles = 0;
    do begin @(negedge clk); cycles++; end while (!(&unit_done) && cycles < 2000000);
    repeat (5) @(negedge clk);
    total = -start_cnt; tot_tasks = 0; maxt = 0;
    for (int u = 0; u < NU; u++) begin
      total += found[u]; tot_tasks += unit_tasks[u];
      if (unit_tasks[u] > maxt) maxt = unit_tasks[u];
    end
    chk(&unit_done, "all units finished");
    chk(total == expect_count, $sformatf("4-clique count %0d, expected %0d (stealing %0b)",
                                          total, expect_count, with_steal));
    for (int u = 0; u < NU; u++) chk(unit_state[u] == ST_IDLE, "unit idle at end");
    $display("stealing=%0b: cliques=%0d tasks=%0d busiest unit=%0d tasks, %0d cycles",
             with_steal, total, tot_tasks, maxt, cycles);
  endtask

  initial begin
    int ref_cnt, cyc_off, cyc_on;
    int n_near, n_intra, n_inter, n_pass, n_drop;
    sched_init = 0; launch = 0; steal_en = 0; launch_mask = '0; go = 0;
    cfg_stride = NU;
    for (int u = 0; u < NU; u++) cfg_root[u] = u;
    host_addr = 0; host_alloc_unit = 0; host_alloc_offset = 0;
    pim_req_addr = '0; bank_cfg_load = '0; bank_rd_valid = '0; bank_cmp = '{default: CMP_ALL};
    bank_th = '0; bank_rd_data = '0;
    n_steal_ok = 0; n_steal_empty = 0; n_steal_l0 = 0; n_steal_deep = 0;
    n_steal_same_ch = 0; n_steal_cross_ch = 0; n_hold_cycles = 0;

    // sparse random graph plus a dense cluster among the highest IDs
    nv = NVMAX;
    foreach (adj[i]) adj[i] = '0;
    for (int a = 1; a < nv; a++)
      for (int e = 0; e < 3; e++) begin
        int b;
        b = $urandom_range(0, a - 1);
        adj[a][b] = 1; adj[b][a] = 1;
      end
    for (int a = nv - 40; a < nv; a++)
      for (int b = nv - 40; b < a; b++)
        if ($urandom_range(0, 1) == 1) begin adj[a][b] = 1; adj[b][a] = 1; end
    ref_cnt = clique_count(nv);
    cfg_nv = nv;
    $display("graph: %0d vertices, %0d 4-cliques", nv, ref_cnt);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); sched_init = 1; @(negedge clk); sched_init = 0;
    chk(dut.g_ch[3].u_sched.entries[2].unit_id == 7'(2 * 32 + 3), "scheduler unit IDs after init");

    // ---------------- memory side
    n_near = 0; n_intra = 0; n_inter = 0;
    for (int i = 0; i < 300; i++) begin
      host_addr = $urandom; host_alloc_unit = 7'($urandom_range(0, NU - 1)); host_alloc_offset = $urandom;
      for (int u = 0; u < NU; u++) begin
        case ($urandom_range(0, 2))
          0: pim_req_addr[u] = {7'(u), 25'($urandom)};
          1: pim_req_addr[u] = {2'($urandom_range(0, 3)), 5'(u % 32), 25'($urandom)};
          default: pim_req_addr[u] = $urandom;
        endcase
      end
      #1;
      chk(host_owner == {host_addr[31:30], host_addr[29:25]} && host_fields.row == host_addr[24:10]
          && host_fields.bank == host_addr[6], "host decode");
      chk(host_alloc_addr[31:25] == host_alloc_unit && host_alloc_addr[24:0] == host_alloc_offset, "host compose");
      for (int u = 0; u < NU; u++) begin
        int own;
        own = pim_req_addr[u][31:30] * 32 + pim_req_addr[u][29:25];
        if (own == u) begin n_near++; chk(pim_acc_class[u] == ACC_NEAR, "near"); end
        else if (own % 32 == u % 32) begin n_intra++; chk(pim_acc_class[u] == ACC_INTRA, "intra"); end
        else begin n_inter++; chk(pim_acc_class[u] == ACC_INTER, "inter"); end
      end
    end
    // filters: each unit loads v < th with th = u, reads beat {u+1, u-1}
    n_pass = 0; n_drop = 0;
    @(negedge clk);
    for (int u = 0; u < NU; u++) begin
      bank_cfg_load[u] = 1; bank_cmp[u] = CMP_LT; bank_th[u] = u + 1;
    end
    @(negedge clk);
    bank_cfg_load = '0;
    for (int u = 0; u < NU; u++) begin
      bank_rd_valid[u] = 1; bank_rd_data[u] = {32'(u + 2), 32'(u)};
    end
    @(negedge clk);
    bank_rd_valid = '0;
    @(negedge clk);
    for (int u = 0; u < NU; u++) begin
      chk(tsv_word_valid[u] == 2'b01 && tsv_data[u][31:0] == u, "filter keeps v<th, drops v>th");
      n_pass += tsv_word_valid[u][0]; n_drop += !tsv_word_valid[u][1];
    end

    // ---------------- mining: stealing off, then on
    run_count(1'b0, ref_cnt, cyc_off);
    chk(n_steal_ok == 0 && n_steal_empty == 0, "no steals with stealing off");
    run_count(1'b1, ref_cnt, cyc_on);

    $display("mechanisms: near=%0d intra=%0d inter=%0d filter_pass=%0d filter_drop=%0d",
             n_near, n_intra, n_inter, n_pass, n_drop);
    $display("steals: ok=%0d (level0=%0d deeper=%0d same_ch=%0d cross_ch=%0d) empty=%0d hold_cycles=%0d",
             n_steal_ok, n_steal_l0, n_steal_deep, n_steal_same_ch, n_steal_cross_ch, n_steal_empty, n_hold_cycles);
    chk(n_near > 0, "near-core access seen");
    chk(n_intra > 0, "intra-channel access seen");
    chk(n_inter > 0, "inter-channel access seen");
    chk(n_pass > 0 && n_drop > 0, "filter pass and drop seen");
    chk(n_steal_l0 > 0, "level-0 steal seen");
    chk(n_steal_deep > 0, "deeper-level steal seen");
    chk(n_steal_same_ch > 0, "intra-channel steal seen");
    chk(n_steal_cross_ch > 0, "cross-channel steal seen");
    chk(n_hold_cycles > 0, "victim core held");
    chk(cyc_on < cyc_off, "stealing shortens the run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
