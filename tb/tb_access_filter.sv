// tb_access_filter -- self-checking test of one 32-bit access filter.
//
// Loads random restrictions (<, =, >, all) and thresholds, streams random
// words (some equal to the threshold, some negative) with random gaps, and
// compares each output cycle with a reference that evaluates v_x cmp th in
// plain integer arithmetic and delays it by the two-cycle latency.
module tb_access_filter;
  import pimminer_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_load, in_valid, out_valid;
  cmp_t cfg_cmp;
  logic [31:0] cfg_th, in_data, out_data;
  int checks = 0, failures = 0, kept = 0, dropped = 0;

  access_filter dut (.*);

  // reference pipeline: expected output two cycles after the input
  logic        exp_v [0:2];
  logic [31:0] exp_d [0:2];
  cmp_t        cur_cmp;
  logic [31:0] cur_th;

  function automatic logic holds(input cmp_t c, input logic [31:0] v, input logic [31:0] t);
    case (c)
      CMP_LT:  return $signed(v) <  $signed(t);
      CMP_EQ:  return v == t;
      CMP_GT:  return $signed(v) >  $signed(t);
      default: return 1'b1;
    endcase
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_load = 0; in_valid = 0; cfg_cmp = CMP_ALL; cfg_th = 0; in_data = 0;
    for (int i = 0; i < 3; i++) begin exp_v[i] = 0; exp_d[i] = 0; end
    cur_cmp = CMP_ALL; cur_th = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // check what the DUT shows now against the reference from two cycles ago
      if (exp_v[2] || out_valid) begin
        checks++;
        if (out_valid !== exp_v[2] || (out_valid && out_data !== exp_d[2])) begin
          failures++;
          if (failures < 10) $display("mismatch cyc %0d: got v=%0b d=%0d exp v=%0b d=%0d",
                                      cyc, out_valid, out_data, exp_v[2], exp_d[2]);
        end
      end
      // drive new stimulus for the next edge
      cfg_load = ($urandom_range(0, 49) == 0);
      cfg_cmp  = cmp_t'($urandom_range(0, 3));
      cfg_th   = ($urandom_range(0, 3) == 0) ? -$urandom_range(0, 50) : $urandom_range(0, 100);
      in_valid = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 3))
        0: in_data = cur_th;
        1: in_data = -$urandom_range(1, 100);
        default: in_data = $urandom_range(0, 120);
      endcase
      // reference: the word seen at this edge uses the registers as they are
      exp_v[2] = exp_v[1]; exp_d[2] = exp_d[1];
      exp_v[1] = in_valid && holds(cur_cmp, in_data, cur_th);
      exp_d[1] = in_data;
      if (in_valid) begin
        if (exp_v[1]) kept++; else dropped++;
      end
      if (cfg_load) begin cur_cmp = cfg_cmp; cur_th = cfg_th; end
    end
    checks++;
    if (kept == 0 || dropped == 0) failures++;
    $display("kept=%0d dropped=%0d", kept, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
