// tb_rcq_quantizer: exhaustive check of the quantizer Q() for the two
// quantizer shapes used in the paper's examples: b_c = 4 with C = 10,
// gamma = 1.7, and b_c = 3 with C = 3, gamma = 1.3. Thresholds are computed in
// real arithmetic, tau_j = C*(j/2^(b_c-1))^gamma, on an LLR grid with 2
// fractional bits, and every 8-bit input is compared with a reference that
// searches the threshold interval holding |x|.
module tb_rcq_quantizer;
  localparam int BV = 8;
  int checks = 0, failures = 0;

  logic signed [BV-1:0]    x;
  logic [7:0][BV-2:0]      tau4;
  logic [3:0][BV-2:0]      tau3;
  logic [3:0]              q4;
  logic [2:0]              q3;

  rcq_quantizer #(.B_V(BV), .B_C(4)) dut4 (.x(x), .tau(tau4), .q(q4));
  rcq_quantizer #(.B_V(BV), .B_C(3)) dut3 (.x(x), .tau(tau3), .q(q3));

  function automatic int ref_q(input int xv, input int nt, input int t[8]);
    int mag, j;
    mag = (xv < 0) ? -xv : xv;
    if (mag > 127) mag = 127;
    for (j = nt - 1; j > 0; j--) if (mag >= t[j]) break;
    return ((xv < 0) ? nt : 0) + j;
  endfunction

  initial begin
    int t4[8], t3[8];
    for (int j = 0; j < 8; j++) begin
      t4[j] = $rtoi(4.0 * 10.0 * ((j / 8.0) ** 1.7) + 0.5);
      tau4[j] = 7'(t4[j]);
    end
    for (int j = 0; j < 8; j++) t3[j] = 0;
    for (int j = 0; j < 4; j++) begin
      t3[j] = $rtoi(4.0 * 3.0 * ((j / 4.0) ** 1.3) + 0.5);
      tau3[j] = 7'(t3[j]);
    end
    for (int v = -128; v < 128; v++) begin
      x = 8'(v);
      #1;
      checks++;
      if (int'(q4) != ref_q(v, 8, t4)) begin
        failures++;
        $display("FAIL b_c=4 x=%0d q=%0d exp=%0d", v, q4, ref_q(v, 8, t4));
      end
      checks++;
      if (int'(q3) != ref_q(v, 4, t3)) begin
        failures++;
        $display("FAIL b_c=3 x=%0d q=%0d exp=%0d", v, q3, ref_q(v, 4, t3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
