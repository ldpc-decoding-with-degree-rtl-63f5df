// tb_wrcq_cfg_mem: writes every table of the configuration memory with random
// contents (small sizes: 3 layers, 6 block columns, 4 iterations, 2 pairs,
// 2 x 2 degree classes), then checks every lookup against a software copy,
// including the previous-iteration weight and pair, the shared weight set from
// a chosen iteration on (hybrid weights), and the control register, including
// the layer count with its reset value and its clamp to MB.
module tb_wrcq_cfg_mem;
  import wrcq_pkg::*;
  localparam int Z = 16, MB = 3, NB = 6, DC = 5, IT = 4, BV = 8, BC = 4, NQ = 2, NRC = 2, NCC = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  cfg_addr_t cfg_addr;
  logic [31:0] cfg_wdata;
  logic [1:0] la_m, lb_m;
  logic [2:0] la_k, lb_col, la_col, la_deg;
  logic [3:0] la_shift;
  logic [2:0] it, max_iter;
  logic [2:0] num_layers;
  logic [BV-1:0] beta_cur, beta_prev;
  logic [7:0][BV-2:0] tau_cur, tau_prev;
  logic nms_mode;

  wrcq_cfg_mem #(.Z(Z), .MB(MB), .NB(NB), .DC_MAX(DC), .IT_MAX(IT), .B_V(BV), .B_C(BC),
                 .NQ(NQ), .NRC(NRC), .NCC(NCC)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .la_m, .la_k, .la_deg, .la_col, .la_shift,
    .lb_m, .lb_col, .it, .beta_cur, .beta_prev, .tau_cur, .tau_prev, .nms_mode, .max_iter, .num_layers);

  int deg_m[MB], col_e[MB*DC], sh_e[MB*DC], rcl[MB], ccl[NB], w[IT*NRC*NCC], th[NQ][8], qs[IT];

  task automatic wr(input cfg_table_e t, input int idx, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr.tbl = t; cfg_addr.index = 13'(idx); cfg_wdata = 32'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic chk(input string what, input int got, input int expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, expv);
    end
  endtask

  initial begin
    int share, ws, wsp, itp;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = 0; la_m = 0; la_k = 0; lb_m = 0; lb_col = 0; it = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 chk("max_iter reset", int'(max_iter), IT);
    chk("num_layers reset", int'(num_layers), MB);
    for (int i = 0; i < MB; i++) begin deg_m[i] = 2 + $urandom % 4; wr(CFG_LAYER_DEG, i, deg_m[i]); end
    for (int i = 0; i < MB*DC; i++) begin
      col_e[i] = $urandom % NB; sh_e[i] = $urandom % Z; wr(CFG_EDGE, i, (col_e[i] << 16) | sh_e[i]);
    end
    for (int i = 0; i < MB; i++) begin rcl[i] = $urandom % NRC; wr(CFG_ROW_CLASS, i, rcl[i]); end
    for (int i = 0; i < NB; i++) begin ccl[i] = $urandom % NCC; wr(CFG_COL_CLASS, i, ccl[i]); end
    for (int i = 0; i < IT*NRC*NCC; i++) begin w[i] = $urandom % 256; wr(CFG_WEIGHT, i, w[i]); end
    for (int q = 0; q < NQ; q++) for (int j = 0; j < 8; j++) begin
      th[q][j] = $urandom % 128; wr(CFG_THRESH, q*8 + j, th[q][j]);
    end
    for (int i = 0; i < IT; i++) begin qs[i] = $urandom % NQ; wr(CFG_QSEL, i, qs[i]); end
    wr(CFG_LAYER_DEG, 9, 1);   // out of range: ignored
    for (int pass = 0; pass < 2; pass++) begin
      share = (pass == 0) ? IT : 2;
      wr(CFG_CTRL, 0, ((pass + 1) << 24) | (share << 16) | (3 << 8) | pass);
      chk("num_layers", int'(num_layers), pass + 1);
      chk("nms", int'(nms_mode), pass);
      chk("max_iter", int'(max_iter), 3);
      for (int m = 0; m < MB; m++) for (int k = 0; k < DC; k++) begin
        la_m = 2'(m); la_k = 3'(k); #1;
        chk("deg", int'(la_deg), deg_m[m]);
        chk("col", int'(la_col), col_e[m*DC+k]);
        chk("shift", int'(la_shift), sh_e[m*DC+k]);
      end
      for (int t = 0; t < IT; t++) for (int m = 0; m < MB; m++) for (int c = 0; c < NB; c++) begin
        it = 3'(t); lb_m = 2'(m); lb_col = 3'(c); #1;
        itp = (t > 0) ? t - 1 : 0;
        ws  = (t < share) ? t : share;
        wsp = (itp < share) ? itp : share;
        chk("beta_cur",  int'(beta_cur),  w[(ws*NRC + rcl[m])*NCC + ccl[c]]);
        chk("beta_prev", int'(beta_prev), w[(wsp*NRC + rcl[m])*NCC + ccl[c]]);
        for (int j = 1; j < 8; j++) begin
          chk("tau_cur",  int'(tau_cur[j]),  th[qs[t]][j]);
          chk("tau_prev", int'(tau_prev[j]), th[qs[itp]][j]);
        end
        chk("tau0", int'(tau_cur[0]), 0);
      end
    end
    wr(CFG_CTRL, 0, (7 << 24) | (3 << 8));     // beyond MB: all layers
    chk("num_layers clamp", int'(num_layers), MB);
    wr(CFG_CTRL, 0, (3 << 8));                 // 0: all layers
    chk("num_layers zero", int'(num_layers), MB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
