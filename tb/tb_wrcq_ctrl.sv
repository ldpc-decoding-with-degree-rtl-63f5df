// tb_wrcq_ctrl: runs the controller against a small code (3 layers of degree
// 3, 5 and 2) with a parity result that fails for a chosen number of
// iterations. It checks the issued (phase, layer, circulant) sequence against
// the expected schedule, the one-cycle-delayed copy on the b_* outputs, the
// clear pulse of the check pass, the cycle count from start to done
// (1 + iterations * (sum(2*deg+1) + sum(deg) + 2)), and the stop on parity
// success and on the iteration limit, with all layers and with only the first
// two layers in use (a higher rate of a rate-compatible code).
module tb_wrcq_ctrl;
  import wrcq_pkg::*;
  localparam int MB = 3, DC = 6, IT = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, syn_fail, iss_valid, b_valid, b_first, b_last, syn_clear, busy, done, converged;
  logic [2:0] deg, max_iter, it, iters_used, num_layers;
  logic [1:0] m, b_m;
  logic [2:0] k, b_k;
  phase_e iss_phase, b_phase;

  int degs[MB] = '{3, 5, 2};
  assign deg = 3'(degs[m]);

  wrcq_ctrl #(.MB(MB), .DC_MAX(DC), .IT_MAX(IT)) dut (.clk, .rst_n, .start, .deg, .max_iter, .num_layers,
    .syn_fail, .m, .k, .it, .iss_valid, .iss_phase, .b_valid, .b_phase, .b_m, .b_k, .b_first,
    .b_last, .syn_clear, .busy, .done, .converged, .iters_used);

  task automatic chk(input string what, input int got, input int expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, expv);
    end
  endtask

  // expected issue sequence for one iteration
  int exp_ph[$], exp_m[$], exp_k[$];
  function automatic void build_exp(input int nl);
    exp_ph.delete(); exp_m.delete(); exp_k.delete();
    for (int mm = 0; mm < nl; mm++) begin
      for (int kk = 0; kk < degs[mm]; kk++) begin exp_ph.push_back(0); exp_m.push_back(mm); exp_k.push_back(kk); end
      for (int kk = 0; kk < degs[mm]; kk++) begin exp_ph.push_back(1); exp_m.push_back(mm); exp_k.push_back(kk); end
    end
    for (int mm = 0; mm < nl; mm++)
      for (int kk = 0; kk < degs[mm]; kk++) begin exp_ph.push_back(2); exp_m.push_back(mm); exp_k.push_back(kk); end
  endfunction

  int fail_iters;      // parity fails in this many iterations
  int iter_seen;
  int pos;
  int clears;
  logic prev_valid; int prev_ph, prev_m, prev_k;

  // parity model: fail flag as seen at the decision
  always_ff @(posedge clk) if (syn_clear) iter_seen <= iter_seen + 1;
  assign syn_fail = (iter_seen <= fail_iters);

  // monitor: issue sequence and delayed copy
  always @(posedge clk) if (rst_n) begin
    if (prev_valid) begin
      chk("b_valid", int'(b_valid), 1);
      chk("b_phase", int'(b_phase), prev_ph);
      chk("b_m", int'(b_m), prev_m);
      chk("b_k", int'(b_k), prev_k);
    end
    prev_valid <= iss_valid; prev_ph <= int'(iss_phase); prev_m <= int'(m); prev_k <= int'(k);
    if (iss_valid) begin
      chk("ph", int'(iss_phase), exp_ph[pos]);
      chk("m", int'(m), exp_m[pos]);
      chk("k", int'(k), exp_k[pos]);
      pos <= (pos + 1 == exp_ph.size()) ? 0 : pos + 1;
    end
    if (syn_clear) clears <= clears + 1;
  end

  initial begin
    int cyc, per_iter, exp_it;
    start = 0; max_iter = 3'(IT); fail_iters = 0; iter_seen = 0; pos = 0; clears = 0; prev_valid = 0;
    num_layers = 3'(MB); build_exp(MB);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      fail_iters = (run == 0) ? 0 : (run == 1) ? 2 : 9;
      max_iter = (run == 3) ? 3'd2 : 3'(IT);
      num_layers = (run >= 4) ? 3'd2 : 3'(MB);
      if (run == 5) fail_iters = 1;
      build_exp(int'(num_layers));
      per_iter = 0;
      for (int mm = 0; mm < int'(num_layers); mm++) per_iter += 3 * degs[mm] + 1;
      per_iter += 2;
      iter_seen = 0; pos = 0; clears = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      exp_it = (fail_iters + 1 < int'(max_iter)) ? fail_iters + 1 : int'(max_iter);
      chk("iters_used", int'(iters_used), exp_it);
      chk("converged", int'(converged), (fail_iters + 1 <= int'(max_iter)) ? 1 : 0);
      chk("cycles", cyc, 1 + exp_it * per_iter);
      chk("clears", clears, exp_it);
      @(negedge clk);
      chk("idle", int'(busy), 0);
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
