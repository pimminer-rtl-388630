// tb_bank_group_filter -- self-checking test of the two-filter bank-group lane.
//
// Streams 64-bit beats of two vertex IDs under restrictions v < th and v > th
// and checks, for every beat, each half's valid bit and data, two cycles after
// the beat went in.
module tb_bank_group_filter;
  import pimminer_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_load, in_valid;
  cmp_t cfg_cmp;
  logic [31:0] cfg_th;
  logic [63:0] in_data, out_data;
  logic [1:0]  out_word_valid;
  int checks = 0, failures = 0, partial = 0;

  bank_group_filter dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] lo, hi;
    logic [1:0]  ev;
    cfg_load = 0; in_valid = 0; cfg_cmp = CMP_ALL; cfg_th = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      cfg_load = 1; cfg_cmp = (r % 2) ? CMP_GT : CMP_LT; cfg_th = $urandom_range(10, 90);
      @(negedge clk);
      cfg_load = 0;
      lo = $urandom_range(0, 100); hi = $urandom_range(0, 100);
      in_valid = 1; in_data = {hi, lo};
      ev[0] = (cfg_cmp == CMP_LT) ? (lo < cfg_th) : (lo > cfg_th);
      ev[1] = (cfg_cmp == CMP_LT) ? (hi < cfg_th) : (hi > cfg_th);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_word_valid !== 2'b00) failures++;   // not before two cycles
      @(negedge clk);
      checks++;
      if (out_word_valid !== ev || (ev[0] && out_data[31:0] !== lo) || (ev[1] && out_data[63:32] !== hi)) begin
        failures++;
        $display("beat %0d: got %b exp %b", r, out_word_valid, ev);
      end
      if (ev == 2'b01 || ev == 2'b10) partial++;
    end
    checks++;
    if (partial == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
