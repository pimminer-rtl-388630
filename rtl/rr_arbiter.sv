// rr_arbiter -- round-robin arbiter, one grant per cycle.
//
// Grants the first requester at or after the rotating pointer; the pointer
// moves to just past the winner, so every requester is served within N grants.
// grant_idx is valid when grant_valid is high. Combinational grant,
// registered pointer. A generic helper of this design (used by the channel
// schedulers to accept one victim search per cycle).
module rr_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  output logic                 grant_valid,
  output logic [$clog2(N)-1:0] grant_idx
);

  logic [$clog2(N)-1:0] ptr_q;

  always_comb begin
    grant_valid = 1'b0;
    grant_idx   = '0;
    for (int i = 0; i < N; i++) begin
      int unsigned j;
      j = (int'(ptr_q) + i) % N;
      if (!grant_valid && req[j]) begin
        grant_valid = 1'b1;
        grant_idx   = j[$clog2(N)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (grant_valid)
      ptr_q <= (grant_idx == $clog2(N)'(N - 1)) ? '0 : grant_idx + 1'b1;
  end

endmodule
