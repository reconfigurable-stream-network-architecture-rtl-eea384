// tb_rsn_memc_fu -- self-checking test of the MemC FU.
//
// Sequence with random tile lengths L:
//   1. receive tile 0 from the MME port
//   2. receive tile 1 while sending tile 0 to DDR (ping-pong overlap)
//   3. send tile 1 to MeshA (to_mme: next layer)
//   4. send tile 1 again to DDR, transposed: tile 1 is R x C row-major, so
//      the words leave column by column (index r*C + c, c outer)
//   5. send tile 1 again to DDR in plain order (last)
// Each output word is checked for value and for the port it leaves on
// (dd_valid versus ma_valid). The input has random gaps; each output port
// has random back-pressure. Also checks overlap of receive and send, and exit.
module tb_rsn_memc_fu;
  import rsn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic uop_valid = 0, uop_ready, exited;
  uop_ent_t uop_data = '0;
  logic in_valid = 0, in_ready, dd_valid, dd_ready = 0, ma_valid, ma_ready = 0;
  word_t in_data = '0, out_data;

  rsn_memc_fu dut (.*);

  word_t iq [$], eq [$];
  bit    ep [$];             // expected port: 1 = MeshA
  int ii = 0, oi = 0, overlap = 0;

  always @(posedge clk) if (rst_n) begin
    automatic int n = ii + ((in_valid && in_ready) ? 1 : 0);
    ii <= n;
    if (!(in_valid && !in_ready)) begin
      in_valid <= (n < iq.size()) && ($urandom_range(0, 3) != 0);
      if (n < iq.size()) in_data <= iq[n];
    end
    dd_ready <= ($urandom_range(0, 3) != 0);
    ma_ready <= ($urandom_range(0, 3) != 0);
    checks++;
    if (dd_valid && ma_valid) begin failures++; $display("both output ports valid"); end
    if ((dd_valid && dd_ready) || (ma_valid && ma_ready)) begin
      checks++;
      if (oi >= eq.size() || out_data !== eq[oi] || ma_valid !== ep[oi]) begin
        failures++; $display("out %0d got %h on port %0d", oi, out_data, ma_valid);
      end
      oi <= oi + 1;
      if (in_valid && in_ready) overlap++;
    end
  end

  task automatic issue(input int rl, sl, input bit rv, sd, tm, last, input int tc = 0);
    memc_uop_t u;
    u = '0; u.recv_len = 24'(rl); u.send_len = 24'(sl); u.recv = rv; u.send = sd; u.to_mme = tm;
    u.transpose = (tc != 0); u.tcols = 16'(tc);
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
    int L0, L1, R1, C1;
    word_t t0 [$], t1 [$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    L0 = $urandom_range(20, 200); R1 = $urandom_range(2, 14); C1 = $urandom_range(2, 14); L1 = R1 * C1;
    for (int i = 0; i < L0; i++) begin t0.push_back($urandom); iq.push_back(t0[i]); end
    for (int i = 0; i < L1; i++) begin t1.push_back($urandom); iq.push_back(t1[i]); end
    for (int i = 0; i < L0; i++) begin eq.push_back(t0[i]); ep.push_back(0); end
    for (int i = 0; i < L1; i++) begin eq.push_back(t1[i]); ep.push_back(1); end
    for (int c = 0; c < C1; c++)
      for (int r = 0; r < R1; r++) begin eq.push_back(t1[r*C1 + c]); ep.push_back(0); end
    for (int i = 0; i < L1; i++) begin eq.push_back(t1[i]); ep.push_back(0); end
    issue(L0, 0, 1, 0, 0, 0);
    issue(L1, L0, 1, 1, 0, 0);
    issue(0, L1, 0, 1, 1, 0);
    issue(0, L1, 0, 1, 0, 0, C1);
    issue(0, L1, 0, 1, 0, 1);
    wait (oi == eq.size());
    repeat (3) @(negedge clk);
    checks++;
    if (!exited) begin failures++; $display("FU did not exit"); end
    checks++;
    if (overlap == 0) begin failures++; $display("receive and send never overlapped"); end
    $display("L0=%0d L1=%0d (%0dx%0d) outputs=%0d overlap=%0d", L0, L1, R1, C1, oi, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
