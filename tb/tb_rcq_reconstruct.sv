// tb_rcq_reconstruct: exhaustive check of R() with the weight adjustment, in
// offset mode (magnitude max(0, tau - beta)) and multiplicative mode
// (round(tau*beta/128), beta in Q1.7), for all 16 messages of a 4-bit pair with
// C = 10, gamma = 1.7 and a spread of weights, against real-number arithmetic.
module tb_rcq_reconstruct;
  localparam int BV = 8;
  int checks = 0, failures = 0;

  logic [3:0]            d;
  logic [7:0][BV-2:0]    tau;
  logic [BV-1:0]         beta;
  logic                  nms;
  logic signed [BV-1:0]  y;

  rcq_reconstruct #(.B_V(BV), .B_C(4)) dut (.d(d), .tau(tau), .beta(beta), .nms_mode(nms), .y(y));

  initial begin
    int t[8];
    int betas[8] = '{0, 1, 5, 13, 40, 64, 115, 255};
    int mag, expv;
    for (int j = 0; j < 8; j++) begin
      t[j] = $rtoi(4.0 * 10.0 * ((j / 8.0) ** 1.7) + 0.5);
      tau[j] = 7'(t[j]);
    end
    for (int mode = 0; mode < 2; mode++) begin
      for (int b = 0; b < 8; b++) begin
        for (int dv = 0; dv < 16; dv++) begin
          d = 4'(dv); beta = 8'(betas[b]); nms = mode[0];
          #1;
          if (mode == 0) begin
            mag = t[dv % 8] - betas[b];
            if (mag < 0) mag = 0;
          end else begin
            mag = $rtoi($floor(real'(t[dv % 8]) * real'(betas[b]) / 128.0 + 0.5));
            if (mag > 127) mag = 127;
          end
          expv = (dv >= 8) ? -mag : mag;
          checks++;
          if (int'(y) != expv) begin
            failures++;
            $display("FAIL mode=%0d d=%0d beta=%0d y=%0d exp=%0d", mode, dv, betas[b], y, expv);
          end
        end
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
