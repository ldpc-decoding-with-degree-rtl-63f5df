// tb_cyclic_shifter: checks rotation by every shift for Z = 256 (the default)
// and for Z = 129 (not a power of two), and that rotating left by s then by
// Z - s restores the input.
module tb_cyclic_shifter;
  localparam int ZA = 256, ZB = 129, W = 8;
  int checks = 0, failures = 0;

  logic [ZA-1:0][W-1:0] a_in, a_out, a_back;
  logic [7:0]           a_s, a_sb;
  logic [ZB-1:0][W-1:0] b_in, b_out;
  logic [7:0]           b_s;

  cyclic_shifter #(.Z(ZA), .W(W)) dut_a  (.din(a_in),  .shift(a_s),  .dout(a_out));
  cyclic_shifter #(.Z(ZA), .W(W)) dut_a2 (.din(a_out), .shift(a_sb), .dout(a_back));
  cyclic_shifter #(.Z(ZB), .W(W)) dut_b  (.din(b_in),  .shift(b_s),  .dout(b_out));

  initial begin
    int bad;
    for (int s = 0; s < ZA; s++) begin
      for (int j = 0; j < ZA; j++) a_in[j] = 8'($urandom);
      for (int j = 0; j < ZB; j++) b_in[j] = 8'($urandom);
      a_s = 8'(s); a_sb = 8'((ZA - s) % ZA); b_s = 8'(s % ZB);
      #1;
      bad = 0;
      for (int j = 0; j < ZA; j++) if (a_out[j] != a_in[(j + s) % ZA]) bad++;
      checks++; if (bad != 0) begin failures++; $display("FAIL Z=256 s=%0d", s); end
      checks++; if (a_back != a_in) begin failures++; $display("FAIL Z=256 back s=%0d", s); end
      bad = 0;
      for (int j = 0; j < ZB; j++) if (b_out[j] != b_in[(j + (s % ZB)) % ZB]) bad++;
      checks++; if (bad != 0) begin failures++; $display("FAIL Z=129 s=%0d", s % ZB); end
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
