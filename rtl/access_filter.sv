// access_filter -- application-aware memory access filter for one 32-bit word.
//
// When a bank is asked for a neighbour list N(v) under a symmetry-breaking
// restriction such as v_x < th, this filter drops the words that break the
// restriction before they leave the bank, so they never cross the TSVs.
//
// Structure (as published): one subtractor, one filter logic (a multiplexer)
// and two registers. `cfg_load` stores the comparison `cfg_cmp` and the
// threshold `cfg_th` into the two registers; they stay until the next load.
// Each word `in_data` (with `in_valid`) read from the sense amplifiers is
// subtracted from by th. The sign of v_x - th (positive, zero, negative) is
// registered, and in the second cycle the multiplexer picks, by that sign,
// whether the comparison holds: the word goes out with `out_valid` set, or is
// dropped (out_valid low, "NULL").
//
// Timing: two cycles from in_valid to out_valid (one for the subtraction, one
// for the comparison), fully pipelined, one word per cycle.
//
// Choices of this design: values are 32-bit two's-complement integers (the
// subtractor is a "32b int" one) and the difference is taken on 33 bits so it
// cannot overflow; cmp is encoded as in pimminer_pkg::cmp_t, with CMP_ALL
// passing every word for unrestricted reads; reset clears the pipeline and
// sets the registers to CMP_ALL / 0.
module access_filter
  import pimminer_pkg::*;
#(
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // restriction that comes with the neighbour-list request
  input  logic              cfg_load,
  input  cmp_t              cfg_cmp,
  input  logic [DATA_W-1:0] cfg_th,
  // word v_x from the bank
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  // filtered word towards the TSV
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data
);

  cmp_t              cmp_q;
  logic [DATA_W-1:0] th_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_q <= CMP_ALL;
      th_q  <= '0;
    end else if (cfg_load) begin
      cmp_q <= cfg_cmp;
      th_q  <= cfg_th;
    end
  end

  // Stage 1: subtractor, v_x - th on DATA_W+1 bits.
  logic signed [DATA_W:0] diff;
  always_comb diff = $signed({in_data[DATA_W-1], in_data}) - $signed({th_q[DATA_W-1], th_q});

  typedef enum logic [1:0] {SGN_NEG = 2'd0, SGN_ZERO = 2'd1, SGN_POS = 2'd2} sign_t;

  logic              s1_valid;
  sign_t             s1_sign;
  logic [DATA_W-1:0] s1_data;
  cmp_t              s1_cmp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sign  <= SGN_ZERO;
      s1_data  <= '0;
      s1_cmp   <= CMP_ALL;
    end else begin
      s1_valid <= in_valid;
      s1_data  <= in_data;
      s1_cmp   <= cmp_q;
      if (diff == '0)     s1_sign <= SGN_ZERO;
      else if (diff[DATA_W]) s1_sign <= SGN_NEG;
      else                s1_sign <= SGN_POS;
    end
  end

  // Stage 2: filter logic, a multiplexer selecting by the sign.
  logic keep;
  always_comb begin
    unique case (s1_sign)
      SGN_NEG:  keep = (s1_cmp == CMP_LT) || (s1_cmp == CMP_ALL);
      SGN_ZERO: keep = (s1_cmp == CMP_EQ) || (s1_cmp == CMP_ALL);
      SGN_POS:  keep = (s1_cmp == CMP_GT) || (s1_cmp == CMP_ALL);
      default:  keep = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= s1_valid && keep;
      out_data  <= s1_data;
    end
  end

endmodule
