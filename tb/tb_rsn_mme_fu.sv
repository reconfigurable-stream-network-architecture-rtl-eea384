// tb_rsn_mme_fu -- self-checking test of the MME FU.
//
// Each round programs two uOPs: uOP 0 accumulates NUM partial sums of depth 4
// and keeps them (acck); uOP 1 continues each of them with 2 more products,
// then adds a previous-layer word (addprev), a bias, and applies scale and
// shift. A third round-independent uOP checks a plain dot product (no
// epilogue). Operands are random FP32 values, sent with random gaps; the
// output is taken with random back-pressure. Each result is compared with an
// FP32 reference computed in the same order (at most 1 ulp apart).
module tb_rsn_mme_fu;
  import rsn_pkg::*;
  import tb_fp_pkg::*;

  localparam int NUM = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_we = 0, start = 0, done;
  logic [4:0] prog_addr = '0; logic [31:0] prog_data = '0; logic [5:0] prog_len = '0;
  logic lhs_valid = 0, lhs_ready, rhs_valid = 0, rhs_ready, out_valid, out_ready = 0;
  word_t lhs_data = '0, rhs_data = '0, out_data;

  rsn_mme_fu dut (.*);

  word_t lq [$], rq [$], eq [$];
  int    li = 0, ri = 0, oi = 0;

  // operand drivers: hold while stalled, random gaps otherwise
  always @(posedge clk) if (rst_n) begin
    automatic int nl = li + ((lhs_valid && lhs_ready) ? 1 : 0);
    automatic int nr = ri + ((rhs_valid && rhs_ready) ? 1 : 0);
    li <= nl; ri <= nr;
    if (!(lhs_valid && !lhs_ready)) begin
      lhs_valid <= (nl < lq.size()) && ($urandom_range(0, 3) != 0);
      if (nl < lq.size()) lhs_data <= lq[nl];
    end
    if (!(rhs_valid && !rhs_ready)) begin
      rhs_valid <= (nr < rq.size()) && ($urandom_range(0, 3) != 0);
      if (nr < rq.size()) rhs_data <= rq[nr];
    end
    out_ready <= ($urandom_range(0, 2) != 0);
    if (out_valid && out_ready) begin
      checks++;
      if (oi >= eq.size()) begin failures++; $display("extra output %h", out_data); end
      else if (ulp_diff(out_data, eq[oi]) > 1) begin
        failures++; $display("out %0d got %h exp %h", oi, out_data, eq[oi]);
      end
      oi <= oi + 1;
    end
  end

  function automatic logic [31:0] op(input int num, accumk, input bit bias, addprev, scale, acck);
    mme_uop_t u;
    u = '0; u.num = 14'(num); u.accumk = 14'(accumk); u.bias = bias; u.addprev = addprev;
    u.scale = scale; u.acck = acck;
    return 32'(u);
  endfunction

  task automatic prog(input int a, input logic [31:0] d);
    @(negedge clk); prog_we = 1; prog_addr = 5'(a); prog_data = d;
    @(negedge clk); prog_we = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      word_t part [NUM];
      // round data and reference
      for (int o = 0; o < NUM; o++) begin
        word_t a;
        a = 32'd0;
        for (int k = 0; k < 4; k++) begin
          word_t x, y;
          x = rand_f(); y = rand_f(); lq.push_back(x); rq.push_back(y);
          a = ref_add(a, ref_mul(x, y));
        end
        part[o] = a;
      end
      for (int o = 0; o < NUM; o++) begin
        word_t a, x, y, p, b, g, s;
        a = part[o];
        for (int k = 0; k < 2; k++) begin
          x = rand_f(); y = rand_f(); lq.push_back(x); rq.push_back(y);
          a = ref_add(a, ref_mul(x, y));
        end
        p = rand_f(); lq.push_back(p); a = ref_add(a, p);
        b = rand_f(); rq.push_back(b); a = ref_add(a, b);
        g = rand_f(); s = rand_f(); rq.push_back(g); rq.push_back(s);
        a = ref_add(ref_mul(a, g), s);
        eq.push_back(a);
      end
      for (int o = 0; o < NUM; o++) begin     // plain dot product, depth 3
        word_t a, x, y;
        a = 32'd0;
        for (int k = 0; k < 3; k++) begin
          x = rand_f(); y = rand_f(); lq.push_back(x); rq.push_back(y);
          a = ref_add(a, ref_mul(x, y));
        end
        eq.push_back(a);
      end
      prog(0, op(NUM, 4, 0, 0, 0, 1));
      prog(1, op(NUM, 2, 1, 1, 1, 0));
      prog(2, op(NUM, 3, 0, 0, 0, 0));
      @(negedge clk); prog_len = 6'd3; start = 1;
      @(negedge clk); start = 0;
      @(negedge clk);
      while (!done) @(negedge clk);
      checks++;
      if (li != lq.size() || ri != rq.size()) begin
        failures++; $display("round %0d: consumed %0d/%0d lhs %0d/%0d rhs", round, li, lq.size(), ri, rq.size());
      end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (oi !== eq.size()) begin failures++; $display("got %0d outputs, expected %0d", oi, eq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
