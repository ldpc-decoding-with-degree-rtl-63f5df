// cn_min_unit: one check-node lane ("Min" in the paper's diagrams).
//
// The b_c-bit V2C messages of one check node arrive serially, one per cycle
// (acc_en), tagged with their edge index acc_idx; acc_first marks the first
// edge of a layer and restarts the accumulation. The unit keeps the smallest
// and second-smallest magnitude index (min1, min2), the edge that gave min1
// (pos1) and the XOR of all sign bits. Because Q() is monotone, the minimum of
// the magnitude indices is the index of the minimum magnitude, so the minimum
// is taken directly on b_c-bit messages, as the paper's diagram places the Min
// block after Q(). Ties keep the earlier edge as pos1.
// Output (combinational from the registers): the C2V message for edge out_idx,
//   sign = (XOR of all signs) ^ sign_self,  magnitude = (out_idx == pos1) ? min2 : min1,
// i.e. sign product and minimum over all edges except the destination.
// sign_self is the sign of that edge's V2C message, supplied by the caller.
module cn_min_unit #(
  parameter int unsigned B_C    = wrcq_pkg::BC_DEF,
  parameter int unsigned DC_MAX = wrcq_pkg::DC_MAX_DEF,
  localparam int unsigned KW    = $clog2(DC_MAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           acc_en,
  input  logic           acc_first,
  input  logic [KW-1:0]  acc_idx,
  input  logic [B_C-1:0] q_in,
  input  logic [KW-1:0]  out_idx,
  input  logic           sign_self,
  output logic [B_C-1:0] c2v
);

  logic [B_C-2:0] min1, min2;
  logic [KW-1:0]  pos1;
  logic           sgn;

  logic [B_C-2:0] cur_min1, cur_min2;
  logic           cur_sgn;
  logic [B_C-2:0] m_in;

  always_comb begin
    cur_min1 = acc_first ? '1 : min1;
    cur_min2 = acc_first ? '1 : min2;
    cur_sgn  = acc_first ? 1'b0 : sgn;
    m_in     = q_in[B_C-2:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min1 <= '1;
      min2 <= '1;
      pos1 <= '0;
      sgn  <= 1'b0;
    end else if (acc_en) begin
      sgn <= cur_sgn ^ q_in[B_C-1];
      if (acc_first || m_in < cur_min1) begin
        min1 <= m_in;
        min2 <= cur_min1;
        pos1 <= acc_idx;
      end else begin
        min1 <= cur_min1;
        min2 <= (m_in < cur_min2) ? m_in : cur_min2;
      end
    end
  end

  assign c2v = {sgn ^ sign_self, (out_idx == pos1) ? min2 : min1};

endmodule
