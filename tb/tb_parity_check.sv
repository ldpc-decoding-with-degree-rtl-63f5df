// tb_parity_check: feeds random layers of hard-decision blocks, some made to
// satisfy every parity and some not, and checks the sticky fail flag after
// each pass against a software XOR.
module tb_parity_check;
  localparam int Z = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, en, first, last, fail;
  logic [Z-1:0] hd;

  parity_check #(.Z(Z)) dut (.clk, .rst_n, .clear, .en, .first, .last, .hd, .fail);

  initial begin
    logic [Z-1:0] acc;
    bit exp_fail;
    int nl, dg;
    clear = 0; en = 0; first = 0; last = 0; hd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 60; pass++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      exp_fail = 0;
      nl = 1 + $urandom % 5;
      for (int l = 0; l < nl; l++) begin
        dg = 2 + $urandom % 8;
        acc = '0;
        for (int k = 0; k < dg; k++) begin
          if (k == dg - 1 && (pass % 2 == 0)) hd = acc;   // make this layer even
          else hd = {$urandom, $urandom};
          acc ^= hd;
          en = 1; first = (k == 0); last = (k == dg - 1);
          @(negedge clk);
        end
        en = 0; first = 0; last = 0;
        if (acc != '0) exp_fail = 1;
        @(negedge clk);
      end
      checks++;
      if (fail != exp_fail) begin
        failures++;
        $display("FAIL pass=%0d fail=%0d exp=%0d", pass, fail, exp_fail);
      end
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
