// vn_unit: one variable-node lane of the layered W-RCQ decoder.
//
// It holds the two halves of the paper's VN-unit diagram as combinational logic:
//   V2C half (phase PH_VC): the stored b_c-bit C2V message of this edge from the
//     previous iteration is reconstructed and weighted exactly as it was when it
//     was added to the posterior (pair and weight of the previous iteration), and
//     subtracted:  v2c = sat(l - R'(u_old)).  In the first iteration no message
//     has been added yet and the subtrahend is 0. The V2C message is then
//     quantized, q = Q(v2c), with the current iteration's quantizer and sent to
//     the check-node unit.
//   Posterior half (phase PH_CV): the new C2V message u_new from the check-node
//     unit is reconstructed, weighted with the current iteration's weight and
//     added:  l_new = sat(v2c + R'(u_new)).
// Sums saturate symmetrically to +/-(2^(b_v-1)-1) (this design's choice; the
// paper gives only the bit widths). The paper draws the weight only on the
// posterior path; applying it on the subtraction path as well is this design's
// reading of the layered update l = l - u^(t-1), which removes the message that
// was actually added.
module vn_unit #(
  parameter int unsigned B_V = wrcq_pkg::BV_DEF,
  parameter int unsigned B_C = wrcq_pkg::BC_DEF,
  localparam int unsigned NT = 1 << (B_C - 1)
) (
  // V2C half
  input  logic signed [B_V-1:0]          l_in,      // posterior, after rotation
  input  logic        [B_C-1:0]          u_old,     // stored C2V message
  input  logic                           old_valid, // 0 in the first iteration
  input  logic        [NT-1:0][B_V-2:0]  tau_prev,  // pair of the previous iteration
  input  logic        [B_V-1:0]          beta_prev,
  input  logic        [NT-1:0][B_V-2:0]  tau_cur,   // pair of this iteration
  output logic signed [B_V-1:0]          v2c,
  output logic        [B_C-1:0]          q,
  // posterior half
  input  logic signed [B_V-1:0]          v2c_in,    // V2C message read back from the buffer
  input  logic        [B_C-1:0]          u_new,
  input  logic        [B_V-1:0]          beta_cur,
  input  logic                           nms_mode,
  output logic signed [B_V-1:0]          l_out
);

  localparam logic signed [B_V:0] MAXV = (B_V+1)'((1 << (B_V-1)) - 1);

  logic signed [B_V-1:0] r_old, r_new;
  logic signed [B_V:0]   diff, sum;

  rcq_reconstruct #(.B_V(B_V), .B_C(B_C)) u_r_old (
    .d(u_old), .tau(tau_prev), .beta(beta_prev), .nms_mode(nms_mode), .y(r_old));

  rcq_reconstruct #(.B_V(B_V), .B_C(B_C)) u_r_new (
    .d(u_new), .tau(tau_cur), .beta(beta_cur), .nms_mode(nms_mode), .y(r_new));

  rcq_quantizer #(.B_V(B_V), .B_C(B_C)) u_q (
    .x(v2c), .tau(tau_cur), .q(q));

  function automatic logic signed [B_V-1:0] sat(input logic signed [B_V:0] a);
    if (a > MAXV)       return MAXV[B_V-1:0];
    else if (a < -MAXV) return -MAXV[B_V-1:0];
    else                return a[B_V-1:0];
  endfunction

  always_comb begin
    diff  = (B_V+1)'(l_in) - (old_valid ? (B_V+1)'(r_old) : '0);
    v2c   = sat(diff);
    sum   = (B_V+1)'(v2c_in) + (B_V+1)'(r_new);
    l_out = sat(sum);
  end

endmodule
