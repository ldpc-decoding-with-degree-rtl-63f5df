// tb_msg_ram: writes random words, reads them back one cycle later, and checks
// that a read of the word being written returns the old contents.
module tb_msg_ram;
  localparam int WD = 40, DP = 37;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          we, re;
  logic [5:0]    waddr, raddr;
  logic [WD-1:0] wdata, rdata;
  logic [WD-1:0] model [DP];

  msg_ram #(.WIDTH(WD), .DEPTH(DP)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    logic [WD-1:0] expv;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DP; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      raddr = 6'($urandom % DP); re = 1;
      we = $urandom % 2; waddr = ($urandom % 4 == 0) ? raddr : 6'($urandom % DP);
      wdata = {$urandom, $urandom};
      expv = model[raddr];
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata != expv) begin
        failures++;
        $display("FAIL addr=%0d got=%h exp=%h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
