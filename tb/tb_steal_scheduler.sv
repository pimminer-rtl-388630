// tb_steal_scheduler -- self-checking test of one channel's stealing scheduler.
//
// Checks the 16-bit entries after init (unit IDs {bank group, channel}),
// own-state writes, a claim that finds the lowest-numbered executing unit other
// than the thief and marks it 11 with the thief as related unit (with the
// steal_req pulse one cycle later), a claim that finds nothing while a steal
// is under way (busy), a claim that finds nothing with all units stealing
// (not busy, the end condition), and that an entry being written by its own
// unit is not claimed in that cycle.
module tb_steal_scheduler;
  import pimminer_pkg::*;

  localparam int CH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init, claim_valid, claim_done, claim_found, claim_busy;
  logic [3:0] own_we, steal_req;
  sched_entry_t [3:0] own_wdata, entries;
  logic [6:0] claim_thief, claim_victim;
  int checks = 0, failures = 0;

  steal_scheduler #(.CH_IDX(CH)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic set_state(input int k, input unit_state_t s, input logic [6:0] rel);
    @(negedge clk);
    own_we = '0; own_we[k] = 1'b1;
    own_wdata[k] = '{unit_id: '0, state: s, related_id: rel};
    @(negedge clk);
    own_we = '0;
  endtask

  task automatic claim(input logic [6:0] thief);
    @(negedge clk);
    claim_valid = 1; claim_thief = thief;
    @(negedge clk);
    claim_valid = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init = 0; claim_valid = 0; own_we = '0; own_wdata = '0; claim_thief = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int k = 0; k < 4; k++) begin
      chk(entries[k].unit_id == 7'(k * 32 + CH), "unit id");
      chk(entries[k].state == ST_IDLE, "idle after init");
    end
    // units 1,2,3 executing, unit 0 stealing
    set_state(1, ST_EXEC, 0); set_state(2, ST_EXEC, 0); set_state(3, ST_EXEC, 0);
    set_state(0, ST_STEAL, 0);
    chk(entries[2].state == ST_EXEC && $bits(entries[2]) == 16, "16-bit entry, write");
    // unit 0 (id 5) claims: lowest executing is entry 1 (id 37)
    @(negedge clk); claim_valid = 1; claim_thief = 7'd5;
    @(negedge clk); claim_valid = 0;
    chk(claim_done && claim_found && claim_victim == 7'd37, "claim finds entry 1");
    chk(steal_req == 4'b0010, "steal_req to victim");
    chk(entries[1].state == ST_STOLEN && entries[1].related_id == 7'd5, "victim marked 11");
    @(negedge clk);
    chk(steal_req == 4'b0000, "steal_req is a pulse");
    // a thief from another channel (id 100) claims: entry 2 (id 69)
    claim(7'd100);
    chk(claim_found && claim_victim == 7'd69, "second claim finds entry 2");
    // entry 3 writes itself in the same cycle as a claim: not claimed, busy
    @(negedge clk);
    claim_valid = 1; claim_thief = 7'd9;
    own_we = 4'b1000; own_wdata[3] = '{unit_id: '0, state: ST_EXEC, related_id: 7'd0};
    @(negedge clk);
    claim_valid = 0; own_we = '0;
    chk(claim_done && !claim_found && claim_busy, "own write blocks claim, busy");
    // the thief cannot claim itself: only entry 3 (id 101) executes, thief is 101
    claim(7'd101);
    chk(!claim_found && claim_busy, "no self claim; steals under way -> busy");
    // victims restore 01 / go stealing; everyone stealing -> not busy
    set_state(1, ST_STEAL, 0); set_state(2, ST_STEAL, 0); set_state(3, ST_STEAL, 0);
    claim(7'd5);
    chk(claim_done && !claim_found && !claim_busy, "all stealing: end condition");
    // init clears
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    chk(entries[3].state == ST_IDLE, "init clears state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
