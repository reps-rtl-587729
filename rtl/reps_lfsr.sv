// reps_lfsr: pseudo-random word for REPS exploration.
//
// REPS explores a path by drawing a random EV, rand() % EVS_SIZE. The paper
// does not say how rand() is built; this design uses a 32-bit Galois LFSR with
// the maximal-length polynomial x^32 + x^22 + x^2 + x + 1 (feedback mask
// 32'h8020_0003), which steps once per cycle in which `step_i` is high.
// Each step shifts right by one; if the bit shifted out is 1 the mask is
// XORed in. Reset loads SEED (non-zero, so the register never locks up).
// Output `rand_o` is the register itself, valid in the same cycle.
module reps_lfsr #(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step_i,
  output logic [31:0] rand_o
);

  localparam logic [31:0] TAPS = 32'h8020_0003;

  logic [31:0] state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state_q <= (SEED == '0) ? 32'h1 : SEED;
    else if (step_i)
      state_q <= (state_q >> 1) ^ (state_q[0] ? TAPS : 32'h0);
  end

  assign rand_o = state_q;

endmodule
