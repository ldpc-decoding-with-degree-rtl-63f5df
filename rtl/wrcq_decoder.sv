// wrcq_decoder: layered weighted-RCQ (W-RCQ) decoder for quasi-cyclic LDPC codes.
//
// The decoder passes b_c-bit check-to-variable (C2V) messages and keeps b_v-bit
// posteriors and variable-to-check (V2C) messages. Each VN lane reconstructs a
// C2V message to b_v bits with R(), adjusts it with a weight beta chosen by the
// (check-node degree, variable-node degree) class of its edge and the iteration,
// and quantizes V2C messages back to b_c bits with Q() before the check-node
// minimum. Only a few Q()/R() pairs (threshold tables) exist; a per-iteration
// table selects one. Weights are offsets (W-OMS-RCQ, default) or multipliers
// (W-NMS-RCQ), chosen by a configuration bit.
//
// Organisation: Z VN lanes (vn_unit) and Z CN lanes (cn_min_unit) work on one
// Z x Z circulant per cycle. A layer is one block row of the base matrix and is
// processed in two phases of deg(m) cycles (see wrcq_ctrl):
//   PH_VC: posterior block of the circulant's block column -> rotate by the
//          shift -> v2c = l - R'(u_old) -> V2C buffer, Q(v2c) -> CN lanes;
//   PH_CV: V2C buffer -> u_new from the CN lanes -> C2V memory;
//          l = v2c + R'(u_new) -> rotate back -> posterior memory.
// After all layers, a parity pass over the hard decisions decides whether to
// stop. Posteriors live in msg_ram (one word per block column), C2V messages
// in msg_ram (one word per circulant, b_c bits per lane, as in the paper's
// diagram) and the layer's V2C messages in a third msg_ram.
//
// Interface: load tables with cfg_* (wrcq_pkg lists the map), load channel
// LLRs one block column per cycle with llr_we/llr_col/llr_data while idle,
// pulse start, wait for done. converged tells whether every parity check held,
// iters_used how many iterations ran. While idle, hd_re/hd_col read a block
// column back: one cycle later hd_data holds its hard decisions (1 = negative
// LLR) and post_data its posteriors. Writes to llr_* and reads while busy are
// ignored. The layer count in the control register limits decoding and the
// parity check to the first block rows, which selects a rate of a
// rate-compatible code whose higher-rate matrices are the top rows of one base
// matrix.
//
// What follows the paper: the VN-unit data flow (R, subtract, Q, Min, R,
// weight, add), the bit widths, the threshold-based Q/R, the degree- and
// iteration-specific weights, the layered schedule and the stopping rule. The
// circulant-serial organisation, memory layout, saturation, run-time tables and
// the parity pass are this design's own.
module wrcq_decoder
  import wrcq_pkg::*;
#(
  parameter int unsigned Z      = Z_DEF,
  parameter int unsigned MB     = MB_DEF,
  parameter int unsigned NB     = NB_DEF,
  parameter int unsigned DC_MAX = DC_MAX_DEF,
  parameter int unsigned IT_MAX = IT_MAX_DEF,
  parameter int unsigned B_V    = BV_DEF,
  parameter int unsigned B_C    = BC_DEF,
  parameter int unsigned NQ     = NQ_DEF,
  parameter int unsigned NRC    = NRC_DEF,
  parameter int unsigned NCC    = NCC_DEF,
  localparam int unsigned CW    = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned IW    = $clog2(IT_MAX + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration
  input  logic                       cfg_we,
  input  cfg_addr_t                  cfg_addr,
  input  logic [31:0]                cfg_wdata,
  // channel LLRs
  input  logic                       llr_we,
  input  logic [CW-1:0]              llr_col,
  input  logic [Z-1:0][B_V-1:0]      llr_data,
  // control and status
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic                       converged,
  output logic [IW-1:0]              iters_used,
  // result read-back
  input  logic                       hd_re,
  input  logic [CW-1:0]              hd_col,
  output logic [Z-1:0]               hd_data,
  output logic [Z-1:0][B_V-1:0]      post_data
);

  localparam int unsigned NT  = 1 << (B_C - 1);
  localparam int unsigned MW  = (MB > 1) ? $clog2(MB) : 1;
  localparam int unsigned KW  = $clog2(DC_MAX);
  localparam int unsigned DW  = $clog2(DC_MAX + 1);
  localparam int unsigned SW  = (Z > 1) ? $clog2(Z) : 1;
  localparam int unsigned NE  = MB * DC_MAX;
  localparam int unsigned EW  = (NE > 1) ? $clog2(NE) : 1;

  // ---------------- control ----------------
  logic [MW-1:0] m, b_m;
  logic [KW-1:0] k, b_k;
  logic [IW-1:0] it, max_iter;
  logic          iss_valid, b_valid, b_first, b_last, syn_clear, syn_fail;
  phase_e        iss_phase, b_phase;
  logic [DW-1:0] deg;
  logic [CW-1:0] col_i, col_b;
  logic [SW-1:0] shift_i, shift_b, shift_back;
  logic          nms_mode;
  logic [MW:0]   num_layers;

  logic [B_V-1:0]         beta_cur, beta_prev;
  logic [NT-1:0][B_V-2:0] tau_cur, tau_prev;

  wrcq_ctrl #(.MB(MB), .DC_MAX(DC_MAX), .IT_MAX(IT_MAX)) u_ctrl (
    .clk, .rst_n, .start, .deg, .max_iter, .num_layers, .syn_fail,
    .m, .k, .it, .iss_valid, .iss_phase,
    .b_valid, .b_phase, .b_m, .b_k, .b_first, .b_last, .syn_clear,
    .busy, .done, .converged, .iters_used);

  wrcq_cfg_mem #(.Z(Z), .MB(MB), .NB(NB), .DC_MAX(DC_MAX), .IT_MAX(IT_MAX),
                 .B_V(B_V), .B_C(B_C), .NQ(NQ), .NRC(NRC), .NCC(NCC)) u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .la_m(m), .la_k(k), .la_deg(deg), .la_col(col_i), .la_shift(shift_i),
    .lb_m(b_m), .lb_col(col_b), .it,
    .beta_cur, .beta_prev, .tau_cur, .tau_prev,
    .nms_mode, .max_iter, .num_layers);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_b   <= '0;
      shift_b <= '0;
    end else begin
      col_b   <= col_i;
      shift_b <= shift_i;
    end
  end

  assign shift_back = (shift_b == '0) ? '0 : SW'(Z - 32'(shift_b));

  // ---------------- memories ----------------
  logic [Z-1:0][B_V-1:0] post_rdata, post_wdata, post_rot, post_new, post_back;
  logic [Z-1:0][B_C-1:0] c2v_rdata, u_new;
  logic [Z-1:0][B_V-1:0] v2c_rdata, v2c_w;
  logic [Z-1:0][B_C-1:0] q;
  logic                  post_re, post_we;
  logic [CW-1:0]         post_raddr, post_waddr;
  logic                  vc_b, cv_b, syn_b;

  assign vc_b  = b_valid && (b_phase == PH_VC);
  assign cv_b  = b_valid && (b_phase == PH_CV);
  assign syn_b = b_valid && (b_phase == PH_SYN);

  always_comb begin
    post_re    = busy ? (iss_valid && (iss_phase != PH_CV)) : hd_re;
    post_raddr = busy ? col_i : hd_col;
    post_we    = busy ? cv_b : llr_we;
    post_waddr = busy ? col_b : llr_col;
    post_wdata = busy ? post_back : llr_data;
  end

  msg_ram #(.WIDTH(Z*B_V), .DEPTH(NB)) u_post_mem (
    .clk, .we(post_we), .waddr(post_waddr), .wdata(post_wdata),
    .re(post_re), .raddr(post_raddr), .rdata(post_rdata));

  msg_ram #(.WIDTH(Z*B_C), .DEPTH(NE)) u_c2v_mem (
    .clk, .we(cv_b), .waddr(EW'(32'(b_m) * DC_MAX + 32'(b_k))), .wdata(u_new),
    .re(iss_valid && (iss_phase == PH_VC)), .raddr(EW'(32'(m) * DC_MAX + 32'(k))),
    .rdata(c2v_rdata));

  msg_ram #(.WIDTH(Z*B_V), .DEPTH(DC_MAX)) u_v2c_buf (
    .clk, .we(vc_b), .waddr(b_k), .wdata(v2c_w),
    .re(iss_valid && (iss_phase == PH_CV)), .raddr(k), .rdata(v2c_rdata));

  // ---------------- permutation ----------------
  cyclic_shifter #(.Z(Z), .W(B_V)) u_rot_fwd (
    .din(post_rdata), .shift(shift_b), .dout(post_rot));

  cyclic_shifter #(.Z(Z), .W(B_V)) u_rot_back (
    .din(post_new), .shift(shift_back), .dout(post_back));

  // ---------------- VN and CN lanes ----------------
  logic [Z-1:0] hd_rot;

  for (genvar j = 0; j < Z; j++) begin : g_lane
    vn_unit #(.B_V(B_V), .B_C(B_C)) u_vn (
      .l_in(post_rot[j]), .u_old(c2v_rdata[j]), .old_valid(it != '0),
      .tau_prev, .beta_prev, .tau_cur,
      .v2c(v2c_w[j]), .q(q[j]),
      .v2c_in(v2c_rdata[j]), .u_new(u_new[j]), .beta_cur, .nms_mode,
      .l_out(post_new[j]));

    cn_min_unit #(.B_C(B_C), .DC_MAX(DC_MAX)) u_cn (
      .clk, .rst_n, .acc_en(vc_b), .acc_first(b_first), .acc_idx(b_k), .q_in(q[j]),
      .out_idx(b_k), .sign_self(v2c_rdata[j][B_V-1]), .c2v(u_new[j]));

    assign hd_rot[j]  = post_rot[j][B_V-1];
    assign hd_data[j] = post_rdata[j][B_V-1];
  end

  parity_check #(.Z(Z)) u_parity (
    .clk, .rst_n, .clear(syn_clear), .en(syn_b), .first(b_first), .last(b_last),
    .hd(hd_rot), .fail(syn_fail));

  assign post_data = post_rdata;

endmodule
