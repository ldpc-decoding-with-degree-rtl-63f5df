// tb_cn_min_unit: feeds random check nodes of degree 2..30 (4-bit messages,
// many ties) and checks every outgoing C2V message against a brute-force
// sign product and minimum over all other edges.
module tb_cn_min_unit;
  localparam int BC = 4, DC = 30;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_en, acc_first, sign_self;
  logic [4:0] acc_idx, out_idx;
  logic [BC-1:0] q_in, c2v;

  cn_min_unit #(.B_C(BC), .DC_MAX(DC)) dut (.clk, .rst_n, .acc_en, .acc_first, .acc_idx,
    .q_in, .out_idx, .sign_self, .c2v);

  initial begin
    int msg[DC];
    int dg, s, mn, expv;
    acc_en = 0; acc_first = 0; acc_idx = 0; q_in = 0; out_idx = 0; sign_self = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      dg = 2 + $urandom % (DC - 1);
      for (int k = 0; k < dg; k++) begin
        msg[k] = (n % 3 == 0) ? ($urandom % 2) * 8 + 2 + $urandom % 3 : $urandom % 16;
        acc_en = 1; acc_first = (k == 0); acc_idx = 5'(k); q_in = 4'(msg[k]);
        @(negedge clk);
      end
      acc_en = 0;
      for (int k = 0; k < dg; k++) begin
        out_idx = 5'(k); sign_self = msg[k][3];
        #1;
        s = 0; mn = 7;
        for (int o = 0; o < dg; o++) if (o != k) begin
          s ^= msg[o] / 8;
          if ((msg[o] % 8) < mn) mn = msg[o] % 8;
        end
        expv = s * 8 + mn;
        checks++;
        if (int'(c2v) != expv) begin
          failures++;
          $display("FAIL n=%0d k=%0d got=%0d exp=%0d", n, k, c2v, expv);
        end
      end
      @(negedge clk);
    end
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
