// bank_group_filter -- the pair of access filters at one bank group.
//
// One filter handles one 32-bit word, and the TSV path of a bank group is
// 64 bits wide, so each bank group carries two filters that work side by side
// on the low and high halves of a 64-bit beat. Both share the same restriction
// (cmp, th), loaded with the neighbour-list request. Each half comes out with
// its own valid bit, so a beat can leave with two, one or no surviving words.
//
// Timing: two cycles from in_valid to the output beat, one beat per cycle.
// That the two filters share one restriction, and that surviving words are not
// packed together across beats, are choices of this design.
module bank_group_filter
  import pimminer_pkg::*;
#(
  parameter int unsigned TSV_W  = 64,
  parameter int unsigned WORD_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_load,
  input  cmp_t               cfg_cmp,
  input  logic [WORD_W-1:0]  cfg_th,
  input  logic               in_valid,
  input  logic [TSV_W-1:0]   in_data,
  output logic [TSV_W/WORD_W-1:0] out_word_valid,
  output logic [TSV_W-1:0]   out_data
);

  localparam int unsigned NW = TSV_W / WORD_W;  // 2 filters

  for (genvar w = 0; w < NW; w++) begin : g_filt
    access_filter #(.DATA_W(WORD_W)) u_filt (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_load (cfg_load),
      .cfg_cmp  (cfg_cmp),
      .cfg_th   (cfg_th),
      .in_valid (in_valid),
      .in_data  (in_data[w*WORD_W +: WORD_W]),
      .out_valid(out_word_valid[w]),
      .out_data (out_data[w*WORD_W +: WORD_W])
    );
  end

endmodule
