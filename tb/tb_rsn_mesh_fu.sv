// tb_rsn_mesh_fu -- self-checking test of the Mesh FU (MeshA configuration,
// 9 sources, 6 destinations).
//
// Issues random routing uOPs: each destination is enabled with probability
// 3/4 and given a random source, so several destinations often share one
// source (fan-out copy). Source s sends the word {s, n} as its n-th word, with
// random gaps; destinations take words with random back-pressure. The model
// keeps a per-source word count, so every destination's expected sequence is
// known when the uOP is issued. Checks every delivered word, that each source
// sent exactly size words per uOP it was used in, that fan-out happened, and
// that the FU exits after the uOP marked last.
module tb_rsn_mesh_fu;
  import rsn_pkg::*;

  localparam int NSRC = 9, NDST = 6, NUOP = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic uop_valid = 0, uop_ready, exited;
  uop_ent_t uop_data = '0;
  logic [NSRC-1:0] src_valid = '0, src_ready;
  word_t           src_data [NSRC];
  logic [NDST-1:0] dst_valid, dst_ready = '0;
  word_t           dst_data [NDST];

  rsn_mesh_fu #(.NSRC(NSRC), .NDST(NDST)) dut (.*);

  int    sent [NSRC];          // words taken from each source
  int    model [NSRC];         // words each source should have sent so far
  word_t eq [NDST][$];
  int    fanout = 0;

  for (genvar s = 0; s < NSRC; s++) begin : g_src
    assign src_data[s] = {4'(s), 28'(sent[s])};
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSRC; s++) begin
      if (src_valid[s] && src_ready[s]) sent[s] <= sent[s] + 1;
      if (!(src_valid[s] && !src_ready[s])) src_valid[s] <= ($urandom_range(0, 3) != 0);
    end
    for (int d = 0; d < NDST; d++) begin
      dst_ready[d] <= ($urandom_range(0, 3) != 0);
      if (dst_valid[d] && dst_ready[d]) begin
        checks++;
        if (eq[d].size() == 0) begin failures++; $display("dst %0d: unexpected word", d); end
        else begin
          if (dst_data[d] !== eq[d][0]) begin
            failures++; $display("dst %0d got %h exp %h", d, dst_data[d], eq[d][0]);
          end
          void'(eq[d].pop_front());
        end
      end
    end
    for (int s = 0; s < NSRC; s++) begin
      int c;
      c = 0;
      for (int d = 0; d < NDST; d++) if (dst_valid[d] && dst_ready[d] && dst_data[d][31:28] == 4'(s)) c++;
      if (c > 1) fanout++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NSRC; s++) begin sent[s] = 0; model[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NUOP; k++) begin
      mesh_uop_t u;
      bit used [NSRC];
      u = '0;
      u.size = 24'($urandom_range(1, 40));
      for (int s = 0; s < NSRC; s++) used[s] = 0;
      for (int d = 0; d < NDST; d++) begin
        u.en[d]  = ($urandom_range(0, 3) != 0);
        u.src[d] = 4'($urandom_range(0, 3) == 0 ? $urandom_range(0, NSRC - 1) : $urandom_range(0, 2));
        if (u.en[d]) begin
          used[u.src[d]] = 1;
          for (int i = 0; i < int'(u.size); i++)
            eq[d].push_back({u.src[d], 28'(model[u.src[d]] + i)});
        end
      end
      for (int s = 0; s < NSRC; s++) if (used[s]) model[s] += int'(u.size);
      @(negedge clk);
      uop_valid = 1; uop_data.bits = uop_bits_t'(u); uop_data.last = (k == NUOP - 1);
      #1;
      while (!uop_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      uop_valid = 0;
    end
    wait (exited);
    repeat (3) @(negedge clk);
    for (int d = 0; d < NDST; d++) begin
      checks++;
      if (eq[d].size() !== 0) begin failures++; $display("dst %0d missing %0d words", d, eq[d].size()); end
    end
    for (int s = 0; s < NSRC; s++) begin
      checks++;
      if (sent[s] !== model[s]) begin failures++; $display("src %0d sent %0d exp %0d", s, sent[s], model[s]); end
    end
    checks++;
    if (fanout == 0) begin failures++; $display("no fan-out seen"); end
    $display("fanout_cycles=%0d", fanout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
