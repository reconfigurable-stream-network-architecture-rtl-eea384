// tb_rsn_lpddr_fu -- self-checking test of the LPDDR FU.
//
// Issues random strided load uOPs (weights or bias) to a random MemB 0-2,
// including zero-length uOPs, from a 4096-word memory model that accepts
// requests with random stalls and answers in order after 1-6 cycles.
// Destination streams see random back-pressure. Checks every word (value and
// destination), that at most one destination is offered data at a time,
// that all expected words arrive, and that the FU exits after the uOP marked
// last.
module tb_rsn_lpddr_fu;
  import rsn_pkg::*;

  localparam int NUOP = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic uop_valid = 0, uop_ready, exited;
  uop_ent_t uop_data = '0;
  logic rd_req_valid, rd_req_ready = 0, rd_rsp_valid = 0;
  logic [31:0] rd_addr;
  word_t rd_rsp_data = '0, ld_data;
  logic [2:0] ld_valid, ld_ready = '0;

  rsn_lpddr_fu dut (.*);

  word_t mem [4096];
  word_t rq_d [$];
  int    rq_t [$];
  int    now = 0;
  word_t ldq [3][$];

  always @(posedge clk) if (rst_n) begin
    now <= now + 1;
    if (rd_req_valid && rd_req_ready) begin
      rq_d.push_back(mem[rd_addr[11:0]]);
      rq_t.push_back(now + $urandom_range(1, 6));
    end
    rd_req_ready <= ($urandom_range(0, 3) != 0);
    if (rq_t.size() > 0 && rq_t[0] <= now) begin
      rd_rsp_valid <= 1'b1; rd_rsp_data <= rq_d[0];
      void'(rq_d.pop_front()); void'(rq_t.pop_front());
    end else rd_rsp_valid <= 1'b0;
    for (int d = 0; d < 3; d++) begin
      ld_ready[d] <= ($urandom_range(0, 3) != 0);
      if (ld_valid[d] && ld_ready[d]) begin
        checks++;
        if (ldq[d].size() == 0 || ld_data !== ldq[d][0]) begin
          failures++; $display("load to %0d got %h", d, ld_data);
        end
        if (ldq[d].size() > 0) void'(ldq[d].pop_front());
      end
    end
    checks++;
    if ($countones(ld_valid) > 1) begin failures++; $display("several destinations valid"); end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i++) mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NUOP; k++) begin
      lpddr_uop_t u;
      int ssz, soff, scnt;
      ssz = (k % 10 == 3) ? 0 : $urandom_range(1, 8);
      soff = ssz + $urandom_range(0, 8); scnt = $urandom_range(1, 6);
      u = '0;
      u.addr = 32'($urandom_range(0, 3800));
      u.stride_size = 16'(ssz); u.stride_offset = 16'(soff); u.stride_count = 16'(scnt);
      u.dest = 3'($urandom_range(0, 2)); u.load_bias = ($urandom_range(0, 3) == 0);
      for (int c = 0; c < scnt; c++) for (int w = 0; w < ssz; w++)
        ldq[u.dest].push_back(mem[u.addr + c*soff + w]);
      @(negedge clk);
      uop_valid = 1; uop_data.bits = uop_bits_t'(u); uop_data.last = (k == NUOP - 1);
      #1;
      while (!uop_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      uop_valid = 0;
    end
    wait (exited);
    repeat (20) @(negedge clk);
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (ldq[d].size() !== 0) begin failures++; $display("dest %0d missing %0d words", d, ldq[d].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
