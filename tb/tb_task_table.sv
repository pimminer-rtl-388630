// tb_task_table -- self-checking test of the Execution/Schedule tables.
//
// A three-level loop nest is used, with candidate-set sizes given by fixed
// formulas of the loop prefix: level 0 walks v0 < NV, level 1 has
// (7*v0+3) % 5 entries, level 2 has (v0+3*v1) % 4 entries. The reference is
// the plain nested loop written out in the testbench.
//
// Part 1: one table walks the whole nest with TT_NEXT; the valid tasks must
// come out in exactly the reference order, and the table must then report
// empty.  Part 2: table A walks the nest while, at random moments, Steal
// Source is run on A and the message handed to table B (Steal Dest), which
// then runs its stolen subtree to the end. Every valid task must be executed
// exactly once over A and B, and steals must happen at level 0 and deeper.
module tb_task_table;
  import pimminer_pkg::*;

  localparam int L = 3, NV = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  typedef logic [L-1:0][31:0] vec_t;

  function automatic int b1(input int v0);         return (7 * v0 + 3) % 5; endfunction
  function automatic int b2(input int v0, int v1); return (v0 + 3 * v1) % 4; endfunction
  function automatic logic valid_task(input vec_t e);
    return e[0] < NV && e[1] < b1(e[0]) && e[2] < b2(e[0], e[1]);
  endfunction

  // two tables
  logic    [1:0] op_valid, op_done, next_ok, smv, in_v;
  tt_op_t  op [2];
  vec_t    bound [2], exe [2], sch [2], smi [2], in_i [2];
  logic [1:0] sml [2], nl [2], pin [2], in_l [2];
  logic [31:0] stride;

  for (genvar t = 0; t < 2; t++) begin : g_t
    always_comb begin
      bound[t][0] = NV;
      bound[t][1] = b1(exe[t][0]);
      bound[t][2] = b2(exe[t][0], exe[t][1]);
    end
    task_table #(.LEVELS(L)) u_t (
      .clk, .rst_n, .cfg_nv(NV), .cfg_stride(stride), .bound(bound[t]),
      .op_valid(op_valid[t]), .op(op[t]), .op_root(32'd0),
      .in_msg_valid(in_v[t]), .in_msg_level(in_l[t]), .in_msg_idx(in_i[t]),
      .op_done(op_done[t]), .next_ok(next_ok[t]), .new_level(nl[t]),
      .steal_msg_valid(smv[t]), .steal_msg_level(sml[t]), .steal_msg_idx(smi[t]),
      .t_exe(exe[t]), .t_sch(sch[t]), .pin_level(pin[t]));
  end

  int checks = 0, failures = 0;
  vec_t ref_list[$];
  int   seen[int];
  int   steals_l0 = 0, steals_deep = 0, steals_empty = 0;

  function automatic int key(input vec_t e); return e[0] * 10000 + e[1] * 100 + e[2]; endfunction

  task automatic do_op(input int t, input tt_op_t o);
    @(negedge clk);
    op_valid[t] = 1; op[t] = o;
    @(negedge clk);
    op_valid[t] = 0;
    checks++;
    if (!op_done[t]) begin failures++; $display("no op_done after one cycle"); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    op_valid = 0; op[0] = TT_NEXT; op[1] = TT_NEXT; in_v = 0; in_l[0] = 0; in_l[1] = 0;
    in_i[0] = '0; in_i[1] = '0; stride = 1;
    for (int a = 0; a < NV; a++)
      for (int b = 0; b < b1(a); b++)
        for (int c = 0; c < b2(a, b); c++) begin
          vec_t e; e[0] = a; e[1] = b; e[2] = c; ref_list.push_back(e);
        end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- part 1: ordered walk
    do_op(0, TT_INIT);
    n = 0;
    forever begin
      do_op(0, TT_NEXT);
      if (!next_ok[0]) break;
      if (valid_task(exe[0])) begin
        checks++;
        if (n >= ref_list.size() || exe[0] !== ref_list[n]) begin
          failures++;
          $display("order mismatch at %0d: %0d %0d %0d", n, exe[0][0], exe[0][1], exe[0][2]);
        end
        n++;
      end
    end
    checks++;
    if (n != ref_list.size()) begin failures++; $display("walk found %0d of %0d", n, ref_list.size()); end
    do_op(0, TT_NEXT);
    checks++; if (next_ok[0]) failures++;   // stays empty

    // ---- part 2: walk with stealing
    for (int rep = 0; rep < 20; rep++) begin
      seen.delete();
      do_op(0, TT_INIT);
      forever begin
        do_op(0, TT_NEXT);
        if (!next_ok[0]) break;
        if (valid_task(exe[0])) seen[key(exe[0])] = seen.exists(key(exe[0])) ? seen[key(exe[0])] + 1 : 1;
        if ($urandom_range(0, 2) == 0) begin
          do_op(0, TT_STEAL_SRC);
          if (!smv[0]) steals_empty++;
          else begin
            if (sml[0] == 0) steals_l0++; else steals_deep++;
            in_v[1] = 1; in_l[1] = sml[0]; in_i[1] = smi[0];
            do_op(1, TT_STEAL_DST);
            in_v[1] = 0;
            forever begin
              do_op(1, TT_NEXT);
              if (!next_ok[1]) break;
              if (valid_task(exe[1])) seen[key(exe[1])] = seen.exists(key(exe[1])) ? seen[key(exe[1])] + 1 : 1;
            end
          end
        end
      end
      checks++;
      if (seen.num() != ref_list.size()) begin
        failures++; $display("rep %0d: %0d distinct of %0d", rep, seen.num(), ref_list.size());
      end
      foreach (seen[k]) begin
        checks++;
        if (seen[k] != 1) begin failures++; $display("task %0d run %0d times", k, seen[k]); end
      end
    end
    checks++;
    if (steals_l0 == 0 || steals_deep == 0) failures++;
    $display("steals: level0=%0d deeper=%0d empty=%0d tasks=%0d", steals_l0, steals_deep, steals_empty, ref_list.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
