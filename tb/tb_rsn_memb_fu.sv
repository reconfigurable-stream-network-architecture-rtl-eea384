// tb_rsn_memb_fu -- self-checking test of the MemB FU.
//
// Sequence for random K x N tiles (K = rows, N = cols):
//   1. load the bias row (N words, LPDDR port)
//   2. load tile 0 (row-major B0[k][n], LPDDR port)
//   3. load tile 1 transposed (N x K words, DDR port) while sending tile 0
//      reps times without bias
//   4. send tile 1 reps times with the bias word after each column (last)
// Expected send order: for r < reps, n < N: B[0..K-1][n] (+ bias[n]).
// The DDR port only offers data once all LPDDR words are taken, as the
// program would order it. Inputs have random gaps, the output random
// back-pressure. Also checks the FU exits.
module tb_rsn_memb_fu;
  import rsn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic uop_valid = 0, uop_ready, exited;
  uop_ent_t uop_data = '0;
  logic lp_valid = 0, lp_ready, dd_valid = 0, dd_ready, out_valid, out_ready = 0;
  word_t lp_data = '0, dd_data = '0, out_data;

  rsn_memb_fu dut (.*);

  word_t lq [$], dq [$], eq [$];
  int li = 0, di = 0, oi = 0;

  always @(posedge clk) if (rst_n) begin
    automatic int nl = li + ((lp_valid && lp_ready) ? 1 : 0);
    automatic int nd = di + ((dd_valid && dd_ready) ? 1 : 0);
    li <= nl; di <= nd;
    if (!(lp_valid && !lp_ready)) begin
      lp_valid <= (nl < lq.size()) && ($urandom_range(0, 3) != 0);
      if (nl < lq.size()) lp_data <= lq[nl];
    end
    if (!(dd_valid && !dd_ready)) begin
      dd_valid <= (nl == lq.size()) && (nd < dq.size()) && ($urandom_range(0, 3) != 0);
      if (nd < dq.size()) dd_data <= dq[nd];
    end
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      checks++;
      if (oi >= eq.size() || out_data !== eq[oi]) begin
        failures++; $display("out %0d got %h", oi, out_data);
      end
      oi <= oi + 1;
    end
  end

  task automatic issue(input int rows, cols, reps, input bit ld, sd, tr, bias, last);
    memb_uop_t u;
    u = '0; u.rows = 16'(rows); u.cols = 16'(cols); u.reps = 16'(reps);
    u.load = ld; u.send = sd; u.transpose = tr; u.bias = bias;
    @(negedge clk);
    uop_valid = 1; uop_data.bits = uop_bits_t'(u); uop_data.last = last;
    #1;
    while (!uop_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    uop_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int K, N, R;
    word_t b0 [16][16], b1 [16][16], bias [16];
    repeat (3) @(posedge clk);
    rst_n = 1;
    K = $urandom_range(2, 16); N = $urandom_range(2, 16); R = $urandom_range(1, 3);
    for (int n = 0; n < N; n++) begin bias[n] = $urandom; lq.push_back(bias[n]); end
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) begin
      b0[k][n] = $urandom; b1[k][n] = $urandom; lq.push_back(b0[k][n]);
    end
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++) dq.push_back(b1[k][n]);
    for (int r = 0; r < R; r++) for (int n = 0; n < N; n++)
      for (int k = 0; k < K; k++) eq.push_back(b0[k][n]);
    for (int r = 0; r < R; r++) for (int n = 0; n < N; n++) begin
      for (int k = 0; k < K; k++) eq.push_back(b1[k][n]);
      eq.push_back(bias[n]);
    end
    issue(0, N, 0, 1, 0, 0, 1, 0);
    issue(K, N, 0, 1, 0, 0, 0, 0);
    issue(K, N, R, 1, 1, 1, 0, 0);
    issue(K, N, R, 0, 1, 0, 1, 1);
    wait (oi == eq.size());
    repeat (3) @(negedge clk);
    checks++;
    if (!exited) begin failures++; $display("FU did not exit"); end
    checks++;
    if (li !== lq.size() || di !== dq.size()) begin failures++; $display("inputs not all consumed"); end
    $display("K=%0d N=%0d reps=%0d outputs=%0d", K, N, R, oi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
