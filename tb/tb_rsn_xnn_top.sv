// tb_rsn_xnn_top -- end-to-end test of the RSN-XNN datapath at its default
// sizes.
//
// Program (two dependent layers, pipelined on chip):
//   layer 1: Y = X * W1 + b1, X 4x4 from DDR, W1 4x6 and b1 from LPDDR.
//            The N dimension is split over MME0 (columns 0-2) and MME1
//            (columns 3-5); MeshA copies the LHS from MemA0 to both (fan-out).
//            K is split into two chunks of 2: MemA0 and MemB0/1 ping-pong
//            between the chunks (load next + send current), and the MMEs keep
//            partial sums over the first chunk (acck) and add the bias on the
//            second. MemB1 receives its weights transposed.
//   layer 2: Z = Y[:,0:3] * W2, W2 3x1 from DDR into MemB2. MemC0 sends its
//            tile through MeshA to MME2 without going off chip.
//   stores:  MemC1 -> DDR is issued between DDR loads (load/store
//            interleaving); then MemC0 and MemC2 are stored.
// Packets use mask broadcast, window > 1 and reuse > 1. The off-chip models
// add random request stalls and a 3-cycle read latency.
// Checked: every stored word against an FP32 reference (at most 1 ulp apart),
// that done rises with every FU exited, and that each mechanism happened at
// least once.
module tb_rsn_xnn_top;
  import rsn_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ------------------------------------------------------------ DUT
  logic start; logic [31:0] prog_base, prog_len; logic done; logic [N_FU-1:0] fu_exited;
  logic imem_req_valid, imem_req_ready, imem_rsp_valid; logic [31:0] imem_addr, imem_rsp_data;
  logic ddr_rd_req_valid, ddr_rd_req_ready, ddr_rd_rsp_valid, ddr_wr_valid, ddr_wr_ready;
  logic [31:0] ddr_rd_addr, ddr_wr_addr; word_t ddr_rd_rsp_data, ddr_wr_data;
  logic lp_rd_req_valid, lp_rd_req_ready, lp_rd_rsp_valid; logic [31:0] lp_rd_addr; word_t lp_rd_rsp_data;
  logic [N_MME-1:0] mme_prog_we; logic [4:0] mme_prog_addr; logic [31:0] mme_prog_data;
  logic [5:0] mme_prog_len [N_MME]; logic mme_start;

  rsn_xnn_top dut (.*);

  // ------------------------------------------------------------ memories
  logic [31:0] imem [1024];
  logic [31:0] ddr  [4096];
  logic [31:0] lpd  [4096];

  // read channels: random request stall, fixed 3-cycle latency
  logic [31:0] i_pipe [3], d_pipe [3], l_pipe [3];
  logic [2:0]  i_v, d_v, l_v;
  always_ff @(posedge clk) begin
    imem_req_ready   <= ($urandom_range(0, 3) != 0);
    ddr_rd_req_ready <= ($urandom_range(0, 3) != 0);
    lp_rd_req_ready  <= ($urandom_range(0, 3) != 0);
    ddr_wr_ready     <= ($urandom_range(0, 3) != 0);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin i_v <= '0; d_v <= '0; l_v <= '0; end
    else begin
      i_v <= {i_v[1:0], imem_req_valid && imem_req_ready};
      d_v <= {d_v[1:0], ddr_rd_req_valid && ddr_rd_req_ready};
      l_v <= {l_v[1:0], lp_rd_req_valid && lp_rd_req_ready};
      i_pipe[0] <= imem[imem_addr[9:0]]; i_pipe[1] <= i_pipe[0]; i_pipe[2] <= i_pipe[1];
      d_pipe[0] <= ddr[ddr_rd_addr[11:0]]; d_pipe[1] <= d_pipe[0]; d_pipe[2] <= d_pipe[1];
      l_pipe[0] <= lpd[lp_rd_addr[11:0]]; l_pipe[1] <= l_pipe[0]; l_pipe[2] <= l_pipe[1];
      if (ddr_wr_valid && ddr_wr_ready) ddr[ddr_wr_addr[11:0]] <= ddr_wr_data;
    end
  end
  assign imem_rsp_valid = i_v[2];  assign imem_rsp_data   = i_pipe[2];
  assign ddr_rd_rsp_valid = d_v[2]; assign ddr_rd_rsp_data = d_pipe[2];
  assign lp_rd_rsp_valid = l_v[2];  assign lp_rd_rsp_data  = l_pipe[2];

  // ------------------------------------------------------------ program builder
  int pc = 0;
  task automatic hdr(input fu_type_e op, input logic [7:0] mask, input bit last,
                     input int window, input int reuse);
    pkt_hdr_t h;
    h.opcode = op; h.mask = mask; h.last = last; h.window = 6'(window); h.reuse = 13'(reuse);
    imem[pc++] = 32'(h);
  endtask
  task automatic mop(input uop_bits_t b);
    imem[pc++] = b[95:64]; imem[pc++] = b[63:32]; imem[pc++] = b[31:0];
  endtask
  function automatic uop_bits_t ddr_op(input int addr, ssz, soff, scnt, input bit ld, st,
                                       input int dst, src);
    ddr_uop_t u;
    u = '0; u.addr = 32'(addr); u.stride_size = 16'(ssz); u.stride_offset = 16'(soff);
    u.stride_count = 16'(scnt); u.load = ld; u.store = st; u.dest = 3'(dst); u.src = 3'(src);
    return uop_bits_t'(u);
  endfunction
  function automatic uop_bits_t lp_op(input int addr, ssz, soff, scnt, dst, input bit bias);
    lpddr_uop_t u;
    u = '0; u.addr = 32'(addr); u.stride_size = 16'(ssz); u.stride_offset = 16'(soff);
    u.stride_count = 16'(scnt); u.dest = 3'(dst); u.load_bias = bias;
    return uop_bits_t'(u);
  endfunction
  function automatic uop_bits_t ma_op(input int rows, cols, reps, input bit ld, sd);
    mema_uop_t u;
    u = '0; u.rows = 16'(rows); u.cols = 16'(cols); u.reps = 16'(reps); u.load = ld; u.send = sd;
    return uop_bits_t'(u);
  endfunction
  function automatic uop_bits_t mb_op(input int rows, cols, reps, input bit ld, sd, tr, bias);
    memb_uop_t u;
    u = '0; u.rows = 16'(rows); u.cols = 16'(cols); u.reps = 16'(reps);
    u.load = ld; u.send = sd; u.transpose = tr; u.bias = bias;
    return uop_bits_t'(u);
  endfunction
  function automatic uop_bits_t mc_op(input int rl, sl, input bit rv, sd, tm);
    memc_uop_t u;
    u = '0; u.recv_len = 24'(rl); u.send_len = 24'(sl); u.recv = rv; u.send = sd; u.to_mme = tm;
    return uop_bits_t'(u);
  endfunction
  function automatic uop_bits_t mesh_op(input int size, input logic [7:0] en,
                                        input int s0, s1, s2);
    mesh_uop_t u;
    u = '0; u.size = 24'(size); u.en = en;
    u.src[0] = 4'(s0); u.src[1] = 4'(s1); u.src[2] = 4'(s2);
    return uop_bits_t'(u);
  endfunction
  function automatic logic [31:0] mme_op(input int num, accumk, input bit bias, acck);
    mme_uop_t u;
    u = '0; u.num = 14'(num); u.accumk = 14'(accumk); u.bias = bias; u.acck = acck;
    return 32'(u);
  endfunction

  // ------------------------------------------------------------ data
  localparam int XA = 0, ZA = 64, YA = 128, YB = 160, W2A = 200;   // DDR
  localparam int WA = 0, WTA = 64, BA = 128;                        // LPDDR
  logic [31:0] X [4][4], W1 [4][6], B1 [6], W2 [3], Y [4][6], Z [4];

  task automatic build_data();
    for (int i = 0; i < 4096; i++) begin ddr[i] = '0; lpd[i] = '0; end
    for (int i = 0; i < 4; i++) for (int k = 0; k < 4; k++) begin
      X[i][k] = rand_f(); ddr[XA + i*4 + k] = X[i][k];
    end
    for (int k = 0; k < 4; k++) for (int n = 0; n < 6; n++) begin
      W1[k][n] = rand_f(); lpd[WA + k*6 + n] = W1[k][n]; lpd[WTA + n*4 + k] = W1[k][n];
    end
    for (int n = 0; n < 6; n++) begin B1[n] = rand_f(); lpd[BA + n] = B1[n]; end
    for (int k = 0; k < 3; k++) begin W2[k] = rand_f(); ddr[W2A + k] = W2[k]; end
    for (int i = 0; i < 4; i++) begin
      for (int n = 0; n < 6; n++) begin
        Y[i][n] = 32'd0;
        for (int k = 0; k < 4; k++) Y[i][n] = ref_add(Y[i][n], ref_mul(X[i][k], W1[k][n]));
        Y[i][n] = ref_add(Y[i][n], B1[n]);
      end
      Z[i] = 32'd0;
      for (int k = 0; k < 3; k++) Z[i] = ref_add(Z[i], ref_mul(Y[i][k], W2[k]));
    end
  endtask

  task automatic build_program();
    pc = 0;
    // LPDDR: bias rows (window 2), then K chunks of W1 for MemB0 and MemB1 (transposed)
    hdr(OP_LPDDR, 8'h01, 0, 2, 1);
    mop(lp_op(BA,     3, 3, 1, 0, 1));
    mop(lp_op(BA + 3, 3, 3, 1, 1, 1));
    hdr(OP_LPDDR, 8'h01, 1, 4, 1);
    mop(lp_op(WA,           3, 6, 2, 0, 0));   // W1[0:2, 0:3]
    mop(lp_op(WTA + 12,     2, 4, 3, 1, 0));   // W1[0:2, 3:6]^T
    mop(lp_op(WA + 12,      3, 6, 2, 0, 0));   // W1[2:4, 0:3]
    mop(lp_op(WTA + 12 + 2, 2, 4, 3, 1, 0));   // W1[2:4, 3:6]^T
    // MemB0/1: bias, chunk 0, chunk 1 + send chunk 0, send chunk 1 with bias
    hdr(OP_MEMB, 8'h03, 0, 1, 1);
    mop(mb_op(0, 3, 0, 1, 0, 0, 1));
    hdr(OP_MEMB, 8'h01, 0, 2, 1);
    mop(mb_op(2, 3, 0, 1, 0, 0, 0));
    mop(mb_op(2, 3, 4, 1, 1, 0, 0));
    hdr(OP_MEMB, 8'h02, 0, 2, 1);
    mop(mb_op(2, 3, 0, 1, 0, 1, 0));
    mop(mb_op(2, 3, 4, 1, 1, 1, 0));
    hdr(OP_MEMB, 8'h03, 1, 1, 1);
    mop(mb_op(2, 3, 4, 0, 1, 0, 1));
    // MemB2: W2 (3x1) from DDR, sent once per row of Y
    hdr(OP_MEMB, 8'h04, 1, 2, 1);
    mop(mb_op(3, 1, 0, 1, 0, 0, 0));
    mop(mb_op(3, 1, 4, 0, 1, 0, 0));
    // MemA0: prolog / steady state / epilog
    hdr(OP_MEMA, 8'h01, 0, 1, 1);  mop(ma_op(4, 2, 3, 1, 0));
    hdr(OP_MEMA, 8'h01, 0, 1, 1);  mop(ma_op(4, 2, 3, 1, 1));
    hdr(OP_MEMA, 8'h01, 1, 1, 1);  mop(ma_op(4, 2, 3, 0, 1));
    hdr(OP_MEMA, 8'h06, 1, 1, 1);  mop(ma_op(0, 0, 0, 0, 0));      // unused MemA1/2 exit
    // MeshA: copy MemA0 to MME0 and MME1 (24 words per chunk, reuse 2),
    //        then MemC0 (source 3) to MME2
    hdr(OP_MESHA, 8'h01, 0, 1, 2); mop(mesh_op(24, 8'h03, 0, 0, 0));
    hdr(OP_MESHA, 8'h01, 1, 1, 1); mop(mesh_op(12, 8'h04, 0, 0, 3));
    // MeshB: MemB0 -> MME0, MemB1 -> MME1 (24 + 36 words), then MemB2 -> MME2
    hdr(OP_MESHB, 8'h01, 0, 1, 1); mop(mesh_op(60, 8'h03, 0, 1, 0));
    hdr(OP_MESHB, 8'h01, 1, 1, 1); mop(mesh_op(12, 8'h04, 0, 0, 2));
    // MemC0: receive, send to MME2 (layer 2), send to DDR
    hdr(OP_MEMC, 8'h01, 1, 3, 1);
    mop(mc_op(12, 0, 1, 0, 0));
    mop(mc_op(0, 12, 0, 1, 1));
    mop(mc_op(0, 12, 0, 1, 0));
    hdr(OP_MEMC, 8'h02, 1, 2, 1);  mop(mc_op(12, 0, 1, 0, 0)); mop(mc_op(0, 12, 0, 1, 0));
    hdr(OP_MEMC, 8'h04, 1, 2, 1);  mop(mc_op(4, 0, 1, 0, 0));  mop(mc_op(0, 4, 0, 1, 0));
    hdr(OP_MEMC, 8'h38, 1, 1, 1);  mop(mc_op(0, 0, 0, 0, 0));       // unused MemC3-5 exit
    // DDR: X chunks (strided) to MemA0, store MemC1, W2 to MemB2, store MemC0 and MemC2
    // (chunk 0 as one strided uOP, chunk 1 as four row uOPs: more uOPs than
    // the uOP FIFO holds, so the decoder sees back-pressure)
    hdr(OP_DDR, 8'h01, 1, 9, 1);
    mop(ddr_op(XA,     2, 4, 4, 1, 0, 0, 0));
    for (int i = 0; i < 4; i++) mop(ddr_op(XA + 4*i + 2, 2, 2, 1, 1, 0, 0, 0));
    mop(ddr_op(YB,    12, 12, 1, 0, 1, 0, 1));
    mop(ddr_op(W2A,    3, 3, 1, 1, 0, 5, 0));
    mop(ddr_op(YA,    12, 12, 1, 0, 1, 0, 0));
    mop(ddr_op(ZA,     4, 4, 1, 0, 1, 0, 2));
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_reuse = 0, n_fanout = 0, n_pingpong = 0, n_pipe = 0, n_acck = 0, n_bias = 0,
      n_transpose = 0, n_stall = 0, n_bp = 0, n_stride = 0, n_interleave = 0, n_exit = 0;
  logic [31:0] last_rd = '0;
  logic        st_seen = 1'b0;
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.u_dec.g_fu[FU_MESHA].u_l2.uop_valid && dut.u_dec.g_fu[FU_MESHA].u_l2.uop_ready &&
        dut.u_dec.g_fu[FU_MESHA].u_l2.rcnt != 0) n_reuse++;
    if (dut.lhs_v[0] && dut.lhs_r[0] && dut.lhs_v[1] && dut.lhs_r[1]) n_fanout++;
    if (dut.g_mema[0].u_mema.in_fire && dut.g_mema[0].u_mema.rd_go) n_pingpong++;
    if (dut.ma_src_v[3] && dut.ma_src_r[3]) n_pipe++;
    if (dut.g_mme[0].u_mme.st == dut.g_mme[0].u_mme.S_DOT && dut.g_mme[0].u_mme.u.acck &&
        dut.g_mme[0].u_mme.kk == dut.g_mme[0].u_mme.u.accumk) n_acck++;
    if (dut.g_mme[1].u_mme.st == dut.g_mme[1].u_mme.S_BIAS && dut.g_mme[1].u_mme.r_valid) n_bias++;
    if (dut.g_memb[1].u_memb.in_fire && dut.g_memb[1].u_memb.u.transpose) n_transpose++;
    if (ddr_rd_req_valid && !ddr_rd_req_ready) n_stall++;
    if (dut.u_dec.u_l1.st == dut.u_dec.u_l1.S_PUSH_MOP && !dut.u_dec.u_l1.all_ready) n_bp++;
    if (dut.u_dec.g_fu[FU_DDR].u_l2.uop_valid && !dut.u_dec.g_fu[FU_DDR].u_l2.uop_ready) n_bp++;
    if (ddr_rd_req_valid && ddr_rd_req_ready) begin
      if (ddr_rd_addr != last_rd + 1 && ddr_rd_addr > last_rd) n_stride++;
      last_rd <= ddr_rd_addr;
      if (st_seen) n_interleave++;
    end
    if (ddr_wr_valid && ddr_wr_ready) st_seen <= 1'b1;
    if (dut.g_memc[2].u_memc.exited && !dut.g_memc[2].u_memc.busy) n_exit <= 1;
  end

  // ------------------------------------------------------------ run
  int unsigned cyc;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; prog_base = 0; prog_len = 0; mme_start = 0;
    mme_prog_we = '0; mme_prog_addr = '0; mme_prog_data = '0;
    for (int i = 0; i < N_MME; i++) mme_prog_len[i] = 6'd0;
    for (int i = 0; i < 1024; i++) imem[i] = '0;
    build_data();
    build_program();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // MME programs: MME0/1 two uOPs (partial sums, then bias), MME2 one uOP
    mme_prog_we = 6'b000011; mme_prog_addr = 0; mme_prog_data = mme_op(12, 2, 0, 1);
    @(negedge clk);
    mme_prog_we = 6'b000011; mme_prog_addr = 1; mme_prog_data = mme_op(12, 2, 1, 0);
    @(negedge clk);
    mme_prog_we = 6'b000100; mme_prog_addr = 0; mme_prog_data = mme_op(4, 3, 0, 0);
    @(negedge clk);
    mme_prog_we = '0;
    mme_prog_len[0] = 2; mme_prog_len[1] = 2; mme_prog_len[2] = 1;
    prog_base = 0; prog_len = 32'(pc);
    start = 1; mme_start = 1;
    @(negedge clk);
    start = 0; mme_start = 0;
    cyc = 0;
    @(negedge clk);
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("done never rose, exited=%b", fu_exited); end
    checks++;
    if (fu_exited !== {N_FU{1'b1}}) begin failures++; $display("not every FU exited: %b", fu_exited); end
    $display("program of %0d words ran in %0d cycles", pc, cyc);
    repeat (5) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      for (int n = 0; n < 3; n++) begin
        checks += 2;
        if (ulp_diff(ddr[YA + i*3 + n], Y[i][n]) > 1) begin
          failures++; $display("Y[%0d][%0d] got %h exp %h", i, n, ddr[YA + i*3 + n], Y[i][n]);
        end
        if (ulp_diff(ddr[YB + i*3 + n], Y[i][3+n]) > 1) begin
          failures++; $display("Y[%0d][%0d] got %h exp %h", i, 3+n, ddr[YB + i*3 + n], Y[i][3+n]);
        end
      end
      checks++;
      if (ulp_diff(ddr[ZA + i], Z[i]) > 2) begin
        failures++; $display("Z[%0d] got %h exp %h", i, ddr[ZA + i], Z[i]);
      end
    end
    $display("mechanisms: reuse=%0d fanout=%0d pingpong_overlap=%0d layer_pipeline=%0d acck=%0d bias=%0d transpose=%0d mem_stall=%0d decoder_backpressure=%0d strided=%0d ld_st_interleave=%0d exit=%0d",
             n_reuse, n_fanout, n_pingpong, n_pipe, n_acck, n_bias, n_transpose, n_stall, n_bp,
             n_stride, n_interleave, n_exit);
    begin
      int m [12];
      m = '{n_reuse, n_fanout, n_pingpong, n_pipe, n_acck, n_bias, n_transpose, n_stall, n_bp,
            n_stride, n_interleave, n_exit};
      for (int i = 0; i < 12; i++) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
