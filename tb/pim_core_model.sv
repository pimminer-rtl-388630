// pim_core_model -- behavioural stand-in for one PIM core running k-clique
// counting through its task tables (testbench only, not synthesizable).
//
// The core asks its steal agent for a task (core_req until core_ack), takes
// the loop indices t_exe, and recomputes the candidate-set sizes of each loop
// level for the new prefix; while it does so core_bound_valid is low for a
// few cycles. Level 0 walks all vertices; level i walks the vertices w < v(i-1)
// adjacent to every vertex chosen so far. A task whose indices are all inside
// their sets is one k-clique, and is counted. Levels at and beyond K get
// bound 1. The core then "executes" for a random number of cycles, and asks
// again, until its agent reports unit_done.
module pim_core_model #(
  parameter int unsigned LEVELS = 5,
  parameter int unsigned NVMAX  = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       go,
  input  int                         k_levels,
  input  int                         nv,
  input  int                         max_exec,
  input  logic [NVMAX-1:0][NVMAX-1:0] adj,
  output logic                       core_req,
  input  logic                       core_ack,
  input  logic [LEVELS-1:0][31:0]    t_exe,
  output logic [LEVELS-1:0][31:0]    core_bound,
  output logic                       core_bound_valid,
  input  logic                       unit_done,
  output int                         found,
  output int                         tasks
);

  // compute the set sizes for the current indices; returns 1 if all valid
  function automatic logic eval(input logic [LEVELS-1:0][31:0] e,
                                output logic [LEVELS-1:0][31:0] b);
    int v[LEVELS];
    logic ok;
    ok = 1'b1;
    b[0] = 32'(nv);
    if (e[0] >= 32'(nv)) ok = 1'b0; else v[0] = int'(e[0]);
    for (int i = 1; i < LEVELS; i++) begin
      if (i >= k_levels) begin
        b[i] = 1;
        if (e[i] != 0) ok = 1'b0;
      end else if (!ok) begin
        b[i] = 0;
      end else begin
        int cnt, pick;
        cnt = 0; pick = -1;
        for (int w = 0; w < v[i-1]; w++) begin
          logic in_set;
          in_set = 1'b1;
          for (int j = 0; j < i; j++) if (!adj[v[j]][w]) in_set = 1'b0;
          if (in_set) begin
            if (cnt == int'(e[i])) pick = w;
            cnt++;
          end
        end
        b[i] = 32'(cnt);
        if (pick < 0) ok = 1'b0; else v[i] = pick;
      end
    end
    return ok;
  endfunction

  // outputs change on the falling edge, away from the agent's sampling edge
  initial begin
    logic [LEVELS-1:0][31:0] b;
    core_req = 0; core_bound = '0; core_bound_valid = 1; found = 0; tasks = 0;
    @(posedge clk iff go);
    forever begin
      @(negedge clk);
      core_req = 1;
      @(posedge clk iff (core_ack || unit_done));
      @(negedge clk);
      core_req = 0;
      if (unit_done) begin
        @(posedge clk iff !unit_done);   // relaunched
      end else begin
        core_bound_valid = 0;
        tasks++;
        if (eval(t_exe, b)) found++;
        core_bound = b;
        repeat ($urandom_range(1, 3)) @(negedge clk);
        core_bound_valid = 1;
        repeat ($urandom_range(0, max_exec)) @(negedge clk);
      end
    end
  end

endmodule
