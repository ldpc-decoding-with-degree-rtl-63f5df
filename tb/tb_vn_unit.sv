// tb_vn_unit: random check of one VN lane, 4-bit messages, 8-bit posteriors,
// two different quantizer pairs for the previous and current iteration, both
// weight modes, first and later iterations, and inputs near saturation. The
// reference is written in integer arithmetic from the equations:
//   v2c = sat(l - R'_prev(u_old)),  q = Q_cur(v2c),  l' = sat(v2c_in + R'_cur(u_new)).
module tb_vn_unit;
  localparam int BV = 8, BC = 4;
  int checks = 0, failures = 0;

  logic signed [BV-1:0] l_in, v2c, v2c_in, l_out;
  logic [BC-1:0]        u_old, q, u_new;
  logic                 old_valid, nms;
  logic [7:0][BV-2:0]   tau_prev, tau_cur;
  logic [BV-1:0]        beta_prev, beta_cur;

  vn_unit #(.B_V(BV), .B_C(BC)) dut (.l_in, .u_old, .old_valid, .tau_prev, .beta_prev, .tau_cur,
    .v2c, .q, .v2c_in, .u_new, .beta_cur, .nms_mode(nms), .l_out);

  int tp[8], tc[8];

  function automatic int satv(input int a);
    return (a > 127) ? 127 : (a < -127) ? -127 : a;
  endfunction

  function automatic int recon(input int d, input int t[8], input int b, input int mode);
    int r, m;
    r = t[d % 8];
    if (mode == 0) m = (r > b) ? r - b : 0;
    else begin
      m = (r * b + 64) / 128;
      if (m > 127) m = 127;
    end
    return (d >= 8) ? -m : m;
  endfunction

  function automatic int quant(input int x, input int t[8]);
    int mag, j;
    mag = (x < 0) ? -x : x;
    j = 0;
    while (j < 7 && mag >= t[j + 1]) j++;
    return ((x < 0) ? 8 : 0) + j;
  endfunction

  initial begin
    int e_v2c, e_q, e_l, bp, bc, mode;
    for (int j = 0; j < 8; j++) begin
      tp[j] = $rtoi(4.0 * 7.0 * ((j / 8.0) ** 1.3) + 0.5);
      tc[j] = $rtoi(4.0 * 10.0 * ((j / 8.0) ** 1.7) + 0.5);
      tau_prev[j] = 7'(tp[j]);
      tau_cur[j]  = 7'(tc[j]);
    end
    tp[0] = 0; tc[0] = 0;
    for (int n = 0; n < 4000; n++) begin
      mode = n % 2;
      bp = (mode == 0) ? $urandom % 12 : 64 + $urandom % 64;
      bc = (mode == 0) ? $urandom % 12 : 64 + $urandom % 64;
      l_in = (n % 5 == 0) ? 8'((($urandom % 2) != 0) ? 127 - $urandom % 6 : -128 + $urandom % 6) : 8'($urandom);
      v2c_in = (n % 7 == 0) ? 8'(120 + $urandom % 8) : 8'($urandom);
      u_old = 4'($urandom); u_new = 4'($urandom); old_valid = (n % 4 != 0);
      beta_prev = 8'(bp); beta_cur = 8'(bc); nms = mode[0];
      #1;
      e_v2c = satv(int'(l_in) - (old_valid ? recon(int'(u_old), tp, bp, mode) : 0));
      e_q   = quant(e_v2c, tc);
      e_l   = satv(int'(v2c_in) + recon(int'(u_new), tc, bc, mode));
      checks += 3;
      if (int'(v2c) != e_v2c) begin failures++; $display("FAIL v2c n=%0d got=%0d exp=%0d", n, v2c, e_v2c); end
      if (int'(q) != e_q)     begin failures++; $display("FAIL q n=%0d got=%0d exp=%0d", n, q, e_q); end
      if (int'(l_out) != e_l) begin failures++; $display("FAIL l n=%0d got=%0d exp=%0d", n, l_out, e_l); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
