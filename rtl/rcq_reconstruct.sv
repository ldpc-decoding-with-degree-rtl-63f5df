// rcq_reconstruct: the reconstruction function R() followed by the W-RCQ
// message adjustment with a degree-specific weight beta.
//
// A b_c-bit message d = [d_msb d~] is mapped to the magnitude R*(d~) = tau_d~,
// the same threshold table the quantizer uses (tau_0 = 0). The magnitude is then
// adjusted with the weight of the edge's (check degree, variable degree) class:
//   offset mode (W-OMS-RCQ, default): m = max(0, tau - beta)   (ReLU of the offset)
//   multiplicative mode (W-NMS-RCQ):  m = round(tau * beta / 2^(b_v-1)),
//                                     beta read as an unsigned Q1.(b_v-1) number,
//                                     result saturated to 2^(b_v-1)-1.
// The output is (1 - 2*d_msb) * m as a b_v-bit two's-complement number.
// The ReLU offset follows the paper's N-2D-OMS check-node equation; the paper
// draws the adjustment in its VN-unit diagram as an adder after R(). The number
// format of beta and the rounding of the product are this design's choices.
// Purely combinational.
module rcq_reconstruct #(
  parameter int unsigned B_V = wrcq_pkg::BV_DEF,
  parameter int unsigned B_C = wrcq_pkg::BC_DEF,
  localparam int unsigned NT = 1 << (B_C - 1)
) (
  input  logic        [B_C-1:0]          d,
  input  logic        [NT-1:0][B_V-2:0]  tau,
  input  logic        [B_V-1:0]          beta,
  input  logic                           nms_mode,
  output logic signed [B_V-1:0]          y
);

  logic [B_V-2:0]       r;
  logic [B_V-2:0]       m;
  logic [2*B_V-2:0]     prod;
  logic [2*B_V-2:0]     scaled;
  logic [B_V-2:0]       diff;

  always_comb begin
    r      = (d[B_C-2:0] == '0) ? '0 : tau[d[B_C-2:0]];
    prod   = (2*B_V-1)'(r) * (2*B_V-1)'(beta);
    diff   = '0;
    scaled = (prod + (2*B_V-1)'(1 << (B_V-2))) >> (B_V-1);
    if (nms_mode) begin
      m = (scaled > (2*B_V-1)'({(B_V-1){1'b1}})) ? {(B_V-1){1'b1}} : scaled[B_V-2:0];
    end else begin
      diff = (B_V-1)'({1'b0, r} - beta);
      m    = ({1'b0, r} > beta) ? diff : '0;
    end
    y = d[B_C-1] ? -$signed({1'b0, m}) : $signed({1'b0, m});
  end

endmodule
