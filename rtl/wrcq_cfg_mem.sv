// wrcq_cfg_mem: run-time tables of the W-RCQ decoder.
//
// It is the "Memory" of the paper's W-RCQ diagram (the degree-specific weights
// beta^(t)) together with the few quantizer/dequantizer pairs and the code
// description the datapath needs:
//   * weights beta[s][rc][cc]: one b_v-bit weight per iteration set s, check-
//     degree class rc and variable-degree class cc (type-1 sharing of the paper;
//     types 2-4 and 8 are special cases of this table: in offset mode a type-2
//     pair beta_dc + alpha_dv is one table entry, in multiplicative mode the
//     product beta_dc * alpha_dv is);
//   * thresholds tau[q][j] of NQ quantizer/dequantizer pairs (tau_0 is fixed 0);
//   * qsel[t]: the pair used in iteration t;
//   * the quasi-cyclic code: circulants per layer, (block column, shift) of each
//     circulant, degree class of each layer and of each block column;
//   * control: offset (W-OMS) or multiplicative (W-NMS) mode, iterations to run,
//     the number of layers in use (a rate of a rate-compatible code whose
//     higher rates use the first rows of the base matrix; 0 means all MB),
//     and the iteration from which the weight set stays fixed (the paper's hybrid
//     decoder: distinct weights for the first iterations, one shared set after).
// Tables are written one word per cycle through cfg_we/cfg_addr/cfg_wdata (see
// wrcq_pkg for the map) and read combinationally. Writes out of range are
// ignored. Reset clears every table, sets the iteration limit and the
// shared-set start to IT_MAX and the layer count to MB. Loading at run time instead of fixing the values
// is this design's choice; the paper gives the values only for its examples.
module wrcq_cfg_mem
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
  localparam int unsigned NT    = 1 << (B_C - 1),
  localparam int unsigned MW    = (MB > 1) ? $clog2(MB) : 1,
  localparam int unsigned KW    = $clog2(DC_MAX),
  localparam int unsigned DW    = $clog2(DC_MAX + 1),
  localparam int unsigned CW    = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned SW    = (Z > 1) ? $clog2(Z) : 1,
  localparam int unsigned IW    = $clog2(IT_MAX + 1),
  localparam int unsigned QW    = (NQ > 1) ? $clog2(NQ) : 1,
  localparam int unsigned RCW   = (NRC > 1) ? $clog2(NRC) : 1,
  localparam int unsigned CCW   = (NCC > 1) ? $clog2(NCC) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration write port
  input  logic                          cfg_we,
  input  cfg_addr_t                     cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  // lookup A: circulant k of layer m
  input  logic [MW-1:0]                 la_m,
  input  logic [KW-1:0]                 la_k,
  output logic [DW-1:0]                 la_deg,
  output logic [CW-1:0]                 la_col,
  output logic [SW-1:0]                 la_shift,
  // lookup B: weights and thresholds for layer m, block column col, iteration it
  input  logic [MW-1:0]                 lb_m,
  input  logic [CW-1:0]                 lb_col,
  input  logic [IW-1:0]                 it,
  output logic [B_V-1:0]                beta_cur,
  output logic [B_V-1:0]                beta_prev,
  output logic [NT-1:0][B_V-2:0]        tau_cur,
  output logic [NT-1:0][B_V-2:0]        tau_prev,
  // control registers
  output logic                          nms_mode,
  output logic [IW-1:0]                 max_iter,
  output logic [MW:0]                   num_layers
);

  localparam int unsigned NW = IT_MAX * NRC * NCC;

  logic [DW-1:0]             layer_deg [MB];
  logic [CW-1:0]             edge_col  [MB*DC_MAX];
  logic [SW-1:0]             edge_shift[MB*DC_MAX];
  logic [RCW-1:0]            row_class [MB];
  logic [CCW-1:0]            col_class [NB];
  logic [B_V-1:0]            weight    [NW];
  logic [NT-1:0][B_V-2:0]    thresh    [NQ];
  logic [QW-1:0]             qsel      [IT_MAX];
  logic [IW-1:0]             share_from;

  int unsigned idx;
  assign idx = int'(cfg_addr.index);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MB; i++) begin
        layer_deg[i] <= '0;
        row_class[i] <= '0;
      end
      for (int i = 0; i < MB*DC_MAX; i++) begin
        edge_col[i]   <= '0;
        edge_shift[i] <= '0;
      end
      for (int i = 0; i < NB; i++) col_class[i] <= '0;
      for (int i = 0; i < NW; i++) weight[i] <= '0;
      for (int i = 0; i < NQ; i++) thresh[i] <= '0;
      for (int i = 0; i < IT_MAX; i++) qsel[i] <= '0;
      nms_mode   <= 1'b0;
      max_iter   <= IW'(IT_MAX);
      share_from <= IW'(IT_MAX);
      num_layers <= (MW+1)'(MB);
    end else if (cfg_we) begin
      unique case (cfg_addr.tbl)
        CFG_LAYER_DEG: if (idx < MB)        layer_deg[idx] <= DW'(cfg_wdata);
        CFG_EDGE:      if (idx < MB*DC_MAX) begin
                         edge_col[idx]   <= CW'(cfg_wdata[31:16]);
                         edge_shift[idx] <= SW'(cfg_wdata[15:0]);
                       end
        CFG_ROW_CLASS: if (idx < MB)        row_class[idx] <= RCW'(cfg_wdata);
        CFG_COL_CLASS: if (idx < NB)        col_class[idx] <= CCW'(cfg_wdata);
        CFG_WEIGHT:    if (idx < NW)        weight[idx] <= B_V'(cfg_wdata);
        CFG_THRESH:    if (idx < NQ*NT)     thresh[idx / NT][idx % NT] <= (B_V-1)'(cfg_wdata);
        CFG_QSEL:      if (idx < IT_MAX)    qsel[idx] <= QW'(cfg_wdata);
        CFG_CTRL: begin
          nms_mode   <= cfg_wdata[0];
          max_iter   <= IW'(cfg_wdata[15:8]);
          share_from <= IW'(cfg_wdata[23:16]);
          num_layers <= (cfg_wdata[31:24] == 8'd0 || 32'(cfg_wdata[31:24]) > MB)
                        ? (MW+1)'(MB) : (MW+1)'(cfg_wdata[31:24]);
        end
        default: ;
      endcase
    end
  end

  // ---- lookup A ----
  int unsigned ea;
  always_comb begin
    ea       = int'(la_m) * DC_MAX + int'(la_k);
    la_deg   = (int'(la_m) < MB) ? layer_deg[la_m] : '0;
    la_col   = (ea < MB*DC_MAX) ? edge_col[ea]   : '0;
    la_shift = (ea < MB*DC_MAX) ? edge_shift[ea] : '0;
  end

  // ---- lookup B ----
  function automatic int unsigned wset(input int unsigned t);
    int unsigned s;
    s = (t < int'(share_from)) ? t : int'(share_from);
    return (s < IT_MAX) ? s : IT_MAX - 1;
  endfunction

  int unsigned it_c, it_p, rc, cc, qc, qp;
  logic [$clog2(NW+1)-1:0] wc, wp;
  always_comb begin
    it_c = (int'(it) < IT_MAX) ? int'(it) : IT_MAX - 1;
    it_p = (it_c > 0) ? it_c - 1 : 0;
    rc   = (int'(lb_m) < MB) ? int'(row_class[lb_m]) : 0;
    cc   = (int'(lb_col) < NB) ? int'(col_class[lb_col]) : 0;
    if (rc >= NRC) rc = NRC - 1;
    if (cc >= NCC) cc = NCC - 1;
    wc   = $bits(wc)'((wset(it_c) * NRC + rc) * NCC + cc);
    wp   = $bits(wp)'((wset(it_p) * NRC + rc) * NCC + cc);
    qc   = int'(qsel[it_c]);
    qp   = int'(qsel[it_p]);
    if (qc >= NQ) qc = NQ - 1;
    if (qp >= NQ) qp = NQ - 1;
    beta_cur  = weight[wc];
    beta_prev = weight[wp];
    tau_cur   = thresh[qc];
    tau_prev  = thresh[qp];
    tau_cur[0]  = '0;
    tau_prev[0] = '0;
  end

endmodule
