// tb_wrcq_decoder: end-to-end test of the decoder at reduced size (Z = 16, 4
// layers, 12 block columns, check degree 9, variable degree 3, 4-bit C2V, 8-bit
// posteriors, 10 iterations).
//
// The testbench builds a quasi-cyclic code (each block column meets all layers
// but one, random shifts), programs the decoder's tables, and decodes noisy
// BPSK all-zero frames. Every frame is decoded again by the bit-exact model in
// wrcq_ref_pkg; the testbench compares the iteration count, the converged flag,
// the cycle count from start to done, and every posterior and hard decision
// read back from the decoder.
//
// Three phases exercise every mechanism: offset mode with one pair; multiplicative
// mode with a switch between two pairs and a shared weight set in the later
// iterations (the hybrid decoder); large offsets that hit the ReLU floor with
// a lowered iteration limit. Frames that converge early and frames that hit
// the limit, saturation and the top quantizer index are counted, and a
// mechanism that never occurred counts as a failure.
module tb_wrcq_decoder;
  import wrcq_pkg::*;
  import wrcq_ref_pkg::*;

  localparam int Z = 16, MB = 4, NB = 12, DC = 9, IT = 10, BV = 8, BC = 4;
  localparam int NQ = 3, NRC = 1, NCC = 1, FRAC = 2;
  localparam int CW = (NB > 1) ? $clog2(NB) : 1;
  localparam int IW = $clog2(IT + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  cfg_we;
  cfg_addr_t             cfg_addr;
  logic [31:0]           cfg_wdata;
  logic                  llr_we, start, busy, done, converged, hd_re;
  logic [CW-1:0]         llr_col, hd_col;
  logic [Z-1:0][BV-1:0]  llr_data, post_data;
  logic [Z-1:0]          hd_data;
  logic [IW-1:0]         iters_used;

  wrcq_decoder #(.Z(Z), .MB(MB), .NB(NB), .DC_MAX(DC), .IT_MAX(IT), .B_C(BC), .NQ(NQ), .NRC(NRC), .NCC(NCC)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .llr_we, .llr_col, .llr_data,
    .start, .busy, .done, .converged, .iters_used, .hd_re, .hd_col, .hd_data, .post_data);

  wrcq_ref_model md;

  task automatic chk(input string what, input int got, input int expv);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, expv);
    end
  endtask

  task automatic wr(input cfg_table_e t, input int idx, input int data);
    cfg_we = 1; cfg_addr.tbl = t; cfg_addr.index = 13'(idx); cfg_wdata = 32'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic program_tables();
    for (int m = 0; m < MB; m++) begin
      wr(CFG_LAYER_DEG, m, md.deg[m]);
      wr(CFG_ROW_CLASS, m, md.rcl[m]);
      for (int k = 0; k < md.deg[m]; k++) wr(CFG_EDGE, m*DC + k, (md.col[m][k] << 16) | md.shf[m][k]);
    end
    for (int n = 0; n < NB; n++) wr(CFG_COL_CLASS, n, md.ccl[n]);
    for (int i = 0; i < IT*NRC*NCC; i++) wr(CFG_WEIGHT, i, md.w[i]);
    for (int q = 0; q < NQ; q++) for (int j = 0; j < (1 << (BC-1)); j++) wr(CFG_THRESH, q*(1 << (BC-1)) + j, md.tau[q][j]);
    for (int t = 0; t < IT; t++) wr(CFG_QSEL, t, md.qsel[t]);
    wr(CFG_CTRL, 0, (md.num_layers << 24) | (md.share_from << 16) | (md.max_iter << 8) | md.nms);
  endtask

  int n_early = 0, n_limit = 0, n_nms = 0, n_oms = 0;

  task automatic run_frame(input real sigma);
    for (int n = 0; n < NB; n++) begin
      for (int j = 0; j < Z; j++) begin
        md.post[n][j] = channel_llr(sigma, FRAC, BV);
        llr_data[j] = BV'(md.post[n][j]);
      end
      llr_we = 1; llr_col = CW'(n);
      @(negedge clk);
      llr_we = 0;
    end
    run_decode();
  endtask

  task automatic run_decode();
    int cyc;
    md.decode();
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
    chk("iterations", int'(iters_used), md.iters);
    chk("converged", int'(converged), md.converged);
    chk("cycles", cyc, md.cycles(md.iters));
    if (md.converged != 0 && md.iters < md.max_iter) n_early++;
    if (md.converged == 0) n_limit++;
    if (md.nms != 0) n_nms++; else n_oms++;
    for (int n = 0; n < NB; n++) begin
      int bad_p = 0, bad_h = 0;
      hd_re = 1; hd_col = CW'(n);
      @(negedge clk);
      hd_re = 0;
      for (int j = 0; j < Z; j++) begin
        if (int'($signed(post_data[j])) != md.post[n][j]) bad_p++;
        if (hd_data[j] != (md.post[n][j] < 0)) bad_h++;
      end
      chk("posterior block", bad_p, 0);
      chk("hard decision block", bad_h, 0);
    end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_wdata = 0; llr_we = 0; llr_col = 0; llr_data = '0;
    start = 0; hd_re = 0; hd_col = 0;
    md = new(Z, MB, NB, DC, IT, BV, BC, NQ, NRC, NCC);
    build_code(md);
    for (int m = 0; m < MB; m++) md.rcl[m] = (NRC > 1 && md.deg[m] == DC) ? 1 : 0;
    for (int n = 0; n < NB; n++) md.ccl[n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Phase A: offset mode, one pair (C = 10, gamma = 1.7), distinct weights.
    md.set_power_quantizer(0, 10.0, 1.7, FRAC);
    md.set_power_quantizer(1, 7.0, 1.7, FRAC);
    md.set_power_quantizer(2, 10.0, 2.3, FRAC);
    for (int t = 0; t < IT; t++) md.qsel[t] = 0;
    for (int i = 0; i < IT*NRC*NCC; i++) md.w[i] = 1 + (i % 3);
    md.nms = 0; md.max_iter = IT; md.share_from = IT;
    program_tables();
    for (int f = 0; f < 6; f++) run_frame((f < 3) ? 0.55 : 0.85);
    // Phase B: multiplicative mode, two pairs switched after iteration 4
    // (C = 7, gamma = 1.7 then C = 10, gamma = 2.3), weights shared from
    // iteration 3 on.
    for (int t = 0; t < IT; t++) md.qsel[t] = (t < 4) ? 1 : 2;
    for (int i = 0; i < IT*NRC*NCC; i++) md.w[i] = 90 + 5 * (i % 7);
    md.nms = 1; md.share_from = 3;
    program_tables();
    for (int f = 0; f < 6; f++) run_frame((f < 3) ? 0.55 : 0.9);
    // Phase C: offset mode with large offsets (ReLU floor) and a lower
    // iteration limit.
    for (int t = 0; t < IT; t++) md.qsel[t] = 0;
    for (int i = 0; i < IT*NRC*NCC; i++) md.w[i] = 6 + (i % 5);
    md.nms = 0; md.max_iter = 3; md.share_from = IT;
    program_tables();
    for (int f = 0; f < 4; f++) run_frame(0.8);
    $display("mechanisms: early_stop=%0d iteration_limit=%0d oms_frames=%0d nms_frames=%0d saturation=%0d relu_floor=%0d top_index=%0d pair_switch=%0d shared_weights=%0d",
             n_early, n_limit, n_oms, n_nms, md.n_sat, md.n_relu, md.n_qtop, md.n_qswitch, md.n_shared);
    chk("early stop seen", int'(n_early > 0), 1);
    chk("iteration limit seen", int'(n_limit > 0), 1);
    chk("offset mode seen", int'(n_oms > 0), 1);
    chk("multiplicative mode seen", int'(n_nms > 0), 1);
    chk("saturation seen", int'(md.n_sat > 0), 1);
    chk("ReLU floor seen", int'(md.n_relu > 0), 1);
    chk("top quantizer index seen", int'(md.n_qtop > 0), 1);
    chk("pair switch seen", int'(md.n_qswitch > 0), 1);
    chk("shared weight set seen", int'(md.n_shared > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
