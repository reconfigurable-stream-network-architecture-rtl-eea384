// tb_rsn_mop_decoder -- self-checking test of the level-2 (mOP -> uOP)
// decoder.
//
// Feeds random packets: a header entry (window 0-12, reuse 0-5, random last)
// followed by `window` random mOPs. Expected output: the window repeated
// reuse times (reuse 0 counts as 1), with last set only on the final uOP of a
// packet whose header has last. The input has random gaps and the output
// random back-pressure. Checks every uOP and its last flag, and that packets
// with reuse > 1 and window > 1 were covered.
module tb_rsn_mop_decoder;
  import rsn_pkg::*;

  localparam int NPKT = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mop_valid = 0, mop_ready, uop_valid, uop_ready = 0;
  mop_ent_t mop_data = '0;
  uop_ent_t uop_data;

  rsn_mop_decoder dut (.*);

  mop_ent_t iq [$];
  uop_ent_t eq [$];
  int ii = 0, oi = 0, n_reuse = 0, n_win = 0;

  always @(posedge clk) if (rst_n) begin
    automatic int n = ii + ((mop_valid && mop_ready) ? 1 : 0);
    ii <= n;
    if (!(mop_valid && !mop_ready)) begin
      mop_valid <= (n < iq.size()) && ($urandom_range(0, 3) != 0);
      if (n < iq.size()) mop_data <= iq[n];
    end
    uop_ready <= ($urandom_range(0, 3) != 0);
    if (uop_valid && uop_ready) begin
      checks++;
      if (oi >= eq.size() || uop_data !== eq[oi]) begin
        failures++; $display("uop %0d got %h/%0d", oi, uop_data.bits, uop_data.last);
      end
      oi <= oi + 1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      pkt_hdr_t h;
      mop_ent_t e;
      uop_bits_t w [$];
      int reps;
      w.delete();
      h = '0;
      h.opcode = 4'(OP_MEMA); h.mask = 8'h01;
      h.window = 6'($urandom_range(0, 12));
      h.reuse  = 13'($urandom_range(0, 5));
      h.last   = ($urandom_range(0, 2) == 0);
      e.is_hdr = 1'b1; e.bits = {64'd0, 32'(h)};
      iq.push_back(e);
      for (int m = 0; m < int'(h.window); m++) begin
        uop_bits_t b;
        b = {$urandom, $urandom, $urandom};
        w.push_back(b);
        e.is_hdr = 1'b0; e.bits = b;
        iq.push_back(e);
      end
      reps = (h.reuse == 0) ? 1 : int'(h.reuse);
      if (reps > 1 && h.window > 0) n_reuse++;
      if (h.window > 1) n_win++;
      for (int r = 0; r < reps; r++)
        foreach (w[m]) begin
          uop_ent_t x;
          x.bits = w[m];
          x.last = h.last && (r == reps - 1) && (m == w.size() - 1);
          eq.push_back(x);
        end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (oi == eq.size() && ii == iq.size());
    repeat (20) @(negedge clk);
    checks++;
    if (oi !== eq.size()) begin failures++; $display("extra uOPs"); end
    checks++;
    if (n_reuse == 0 || n_win == 0) begin failures++; $display("coverage: reuse=%0d window=%0d", n_reuse, n_win); end
    $display("uops=%0d packets_with_reuse=%0d", oi, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
