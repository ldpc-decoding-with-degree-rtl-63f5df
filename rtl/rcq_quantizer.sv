// rcq_quantizer: the quantization function Q() of an RCQ variable-node unit.
//
// A b_v-bit two's-complement V2C message x is mapped to a b_c-bit message
// [s(x) Q*(|x|)]: the sign bit s(x) = 1 when x < 0, and the magnitude index
// Q*(|x|) = j when tau_j <= |x| < tau_(j+1), or 2^(b_c-1)-1 when |x| >= tau_max.
// The thresholds follow the paper's power-function form
// tau_j = C*(j/2^(b_c-1))^gamma; they are not computed here but come from the
// threshold table of the decoder, already scaled to the b_v-bit LLR grid, so one
// circuit serves every (C, gamma) pair. Because such thresholds increase with j,
// the index equals the number of thresholds tau_1..tau_max that |x| reaches,
// which is what the circuit counts (a thermometer-to-binary count).
// |x| of the most negative input is taken as 2^(b_v-1)-1 (symmetric saturation),
// a choice of this design. Purely combinational.
module rcq_quantizer #(
  parameter int unsigned B_V = wrcq_pkg::BV_DEF,
  parameter int unsigned B_C = wrcq_pkg::BC_DEF,
  localparam int unsigned NT = 1 << (B_C - 1)
) (
  input  logic signed [B_V-1:0]          x,
  input  logic        [NT-1:0][B_V-2:0]  tau,   // tau[0] is unused (taken as 0)
  output logic        [B_C-1:0]          q
);

  logic [B_V-2:0] mag;
  logic [B_C-2:0] idx;
  logic [B_V-2:0] neg;

  assign neg = (B_V-1)'(-x);

  always_comb begin
    if (x[B_V-1]) begin
      mag = (x == {1'b1, {(B_V-1){1'b0}}}) ? {(B_V-1){1'b1}} : neg;
    end else begin
      mag = x[B_V-2:0];
    end
    idx = '0;
    for (int j = 1; j < NT; j++) begin
      if (mag >= tau[j]) idx = idx + 1'b1;
    end
    q = {x[B_V-1], idx};
  end

endmodule
