// tb_rsn_ddr_fu -- self-checking test of the DDR FU.
//
// Issues a random mix of load uOPs (strided patterns from the lower half of a
// 4096-word memory model to a random destFU 0-5) and store uOPs (words from a
// random srcFU 0-5 written to strided patterns in the upper half), the
// fine-grained load/store interleaving of the paper. The memory model accepts
// read requests with random stalls and answers in order after a random
// latency of 1-6 cycles; writes and destination streams see random
// back-pressure; source streams have random gaps. Checks every loaded word
// (value and destination), every write (address and value), that only the
// selected destination/source is used, and that the FU exits.
module tb_rsn_ddr_fu;
  import rsn_pkg::*;

  localparam int NUOP = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic uop_valid = 0, uop_ready, exited;
  uop_ent_t uop_data = '0;
  logic rd_req_valid, rd_req_ready = 0, rd_rsp_valid = 0, wr_valid, wr_ready = 0;
  logic [31:0] rd_addr, wr_addr;
  word_t rd_rsp_data = '0, wr_data, ld_data;
  logic [5:0] ld_valid, ld_ready = '0, st_valid = '0, st_ready;
  word_t st_data [6];

  rsn_ddr_fu dut (.*);

  word_t mem [4096];
  // read responses: data and earliest cycle
  word_t rq_d [$];
  int    rq_t [$];
  int    now = 0;
  word_t ldq [6][$];            // expected words per destination
  word_t sdq [6][$];            // words each source still has to send
  int    sdi [6];
  logic [31:0] wa_q [$];        // expected write addresses
  word_t wd_q [$];              // expected write data

  for (genvar s = 0; s < 6; s++) begin : g_st
    assign st_data[s] = (sdi[s] < sdq[s].size()) ? sdq[s][sdi[s]] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    now <= now + 1;
    // read channel
    if (rd_req_valid && rd_req_ready) begin
      rq_d.push_back(mem[rd_addr[11:0]]);
      rq_t.push_back(now + $urandom_range(1, 6));
    end
    rd_req_ready <= ($urandom_range(0, 3) != 0);
    if (rq_t.size() > 0 && rq_t[0] <= now) begin
      rd_rsp_valid <= 1'b1; rd_rsp_data <= rq_d[0];
      void'(rq_d.pop_front()); void'(rq_t.pop_front());
    end else rd_rsp_valid <= 1'b0;
    // write channel
    wr_ready <= ($urandom_range(0, 3) != 0);
    if (wr_valid && wr_ready) begin
      checks++;
      if (wa_q.size() == 0 || wr_addr !== wa_q[0] || wr_data !== wd_q[0]) begin
        failures++; $display("write %h <= %h unexpected", wr_addr, wr_data);
      end
      if (wa_q.size() > 0) begin void'(wa_q.pop_front()); void'(wd_q.pop_front()); end
      mem[wr_addr[11:0]] <= wr_data;
    end
    // load streams
    for (int d = 0; d < 6; d++) begin
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
    // store sources
    for (int s = 0; s < 6; s++) begin
      automatic int n = sdi[s] + ((st_valid[s] && st_ready[s]) ? 1 : 0);
      sdi[s] <= n;
      if (!(st_valid[s] && !st_ready[s])) st_valid[s] <= (n < sdq[s].size()) && ($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nld = 0, nst = 0;
    for (int i = 0; i < 4096; i++) mem[i] = $urandom;
    for (int s = 0; s < 6; s++) sdi[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NUOP; k++) begin
      ddr_uop_t u;
      int ssz, soff, scnt;
      bit is_ld;
      ssz = $urandom_range(1, 8); soff = ssz + $urandom_range(0, 8); scnt = $urandom_range(1, 6);
      is_ld = ($urandom_range(0, 1) == 1);
      u = '0;
      u.stride_size = 16'(ssz); u.stride_offset = 16'(soff); u.stride_count = 16'(scnt);
      if (is_ld) begin
        u.addr = 32'($urandom_range(0, 1800)); u.load = 1; u.dest = 3'($urandom_range(0, 5));
        for (int c = 0; c < scnt; c++) for (int w = 0; w < ssz; w++)
          ldq[u.dest].push_back(mem[u.addr + c*soff + w]);
        nld++;
      end else begin
        u.addr = 32'($urandom_range(2048, 3800)); u.store = 1; u.src = 3'($urandom_range(0, 5));
        for (int c = 0; c < scnt; c++) for (int w = 0; w < ssz; w++) begin
          word_t v;
          v = $urandom;
          wa_q.push_back(u.addr + 32'(c*soff + w)); wd_q.push_back(v); sdq[u.src].push_back(v);
        end
        nst++;
      end
      @(negedge clk);
      uop_valid = 1; uop_data.bits = uop_bits_t'(u); uop_data.last = (k == NUOP - 1);
      #1;
      while (!uop_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      uop_valid = 0;
    end
    wait (exited);
    repeat (20) @(negedge clk);
    for (int d = 0; d < 6; d++) begin
      checks++;
      if (ldq[d].size() !== 0) begin failures++; $display("dest %0d missing %0d words", d, ldq[d].size()); end
    end
    checks++;
    if (wa_q.size() !== 0) begin failures++; $display("%0d writes missing", wa_q.size()); end
    $display("load uops=%0d store uops=%0d", nld, nst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
