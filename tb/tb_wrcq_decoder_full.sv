// tb_wrcq_decoder_full: decodes frames with the decoder at its default size: Z
// = 256, 5 layers of 29 or 30 circulants, 37 block columns of degree 4 (the
// shape of the (9472,8192) code), 4-bit C2V and 8-bit posterior messages, one
// quantizer pair, 10 iterations.
//
// The testbench builds a quasi-cyclic code (each block column meets all layers
// but one, random shifts), programs the decoder's tables, and decodes noisy
// BPSK all-zero frames. Every frame is decoded again by the bit-exact model in
// wrcq_ref_pkg; the testbench compares the iteration count, the converged flag,
// the cycle count from start to done, and every posterior and hard decision
// read back from the decoder.
//
// The parity-check matrix of the published code is not available, so the
// shifts are random; the degree profile matches.
module tb_wrcq_decoder_full;
  import wrcq_pkg::*;
  import wrcq_ref_pkg::*;

  localparam int Z = 256, MB = 5, NB = 37, DC = 30, IT = 10, BV = 8, BC = 4;
  localparam int NQ = 3, NRC = 2, NCC = 1, FRAC = 2;
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

  wrcq_decoder  dut (
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
    // Main configuration: 4-bit W-OMS-RCQ, one pair C = 10, gamma = 1.7,
    // offsets per iteration and check-degree class, 10 iterations.
    md.set_power_quantizer(0, 10.0, 1.7, FRAC);
    md.set_power_quantizer(1, 10.0, 1.7, FRAC);
    md.set_power_quantizer(2, 10.0, 1.7, FRAC);
    for (int t = 0; t < IT; t++) md.qsel[t] = 0;
    for (int t = 0; t < IT; t++) for (int c = 0; c < NRC; c++) md.w[t*NRC + c] = (t < 3) ? 2 : 1;
    md.nms = 0; md.max_iter = IT; md.share_from = IT;
    program_tables();
    run_frame(0.42);
    run_frame(0.5);
    $display("frames: early_stop=%0d iteration_limit=%0d", n_early, n_limit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
