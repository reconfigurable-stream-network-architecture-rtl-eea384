// tb_rsn_mm_workload -- tiled matrix multiplication on the full datapath, at
// the sizes of the workloads the datapath is meant for.
//
// Y (M x N) = X (M x K) * W (K x N) on two MMEs, with the routing of the
// architecture's worked example: MemA0 holds X and MeshA copies it to MME0
// and MME1; W is split by columns, W[:, 0:N/2] in MemB0 for MME0 and
// W[:, N/2:N] in MemB1 for MME1; MME0/1 write MemC0/1, whose tiles the DDR FU
// stores into the two column halves of Y with strided stores. Unused FUs get
// an empty packet with last so that done can rise.
//   run 1: M=1, K=8, N=4, the 1x8x4 example (2 MME, 1 MemA, 2 MemB, 2 MemC)
//   run 2: M=16, K=64, N=16, a tile of the attention product
//          Key x Query (head dimension K = 64), as large as simulation time
//          comfortably allows at one multiply-add per MME per cycle
// The datapath is reset between runs. Off-chip models add random request
// stalls and a 3-cycle read latency. Checks every word of Y against an FP32
// reference (at most 1 ulp apart), that done rises, and that exactly M*N
// words were written.
module tb_rsn_mm_workload;
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
  logic [31:0] ddr  [8192];
  logic [31:0] lpd  [8192];

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
      d_pipe[0] <= ddr[ddr_rd_addr[12:0]]; d_pipe[1] <= d_pipe[0]; d_pipe[2] <= d_pipe[1];
      l_pipe[0] <= lpd[lp_rd_addr[12:0]]; l_pipe[1] <= l_pipe[0]; l_pipe[2] <= l_pipe[1];
      if (ddr_wr_valid && ddr_wr_ready) ddr[ddr_wr_addr[12:0]] <= ddr_wr_data;
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

  // ------------------------------------------------------------ one run
  localparam int XA = 0, YA = 4096, WA = 0;
  int n_wr = 0;
  always_ff @(posedge clk) if (rst_n && ddr_wr_valid && ddr_wr_ready) n_wr++;

  task automatic run_mm(input int M, K, N);
    logic [31:0] X [], W [], Y [];
    int H, cyc;
    H = N / 2;
    X = new[M*K]; W = new[K*N]; Y = new[M*N];
    for (int i = 0; i < 8192; i++) begin ddr[i] = '0; lpd[i] = '0; end
    for (int i = 0; i < M*K; i++) begin X[i] = rand_f(); ddr[XA + i] = X[i]; end
    for (int i = 0; i < K*N; i++) begin W[i] = rand_f(); lpd[WA + i] = W[i]; end
    for (int i = 0; i < M; i++) for (int n = 0; n < N; n++) begin
      Y[i*N + n] = 32'd0;
      for (int k = 0; k < K; k++) Y[i*N + n] = ref_add(Y[i*N + n], ref_mul(X[i*K + k], W[k*N + n]));
    end
    // program
    pc = 0;
    hdr(OP_LPDDR, 8'h01, 1, 2, 1);
    mop(lp_op(WA,     H, N, K, 0, 0));        // W[:, 0:H]  -> MemB0
    mop(lp_op(WA + H, H, N, K, 1, 0));        // W[:, H:N]  -> MemB1
    hdr(OP_MEMB, 8'h03, 1, 2, 1);
    mop(mb_op(K, H, 0, 1, 0, 0, 0));
    mop(mb_op(K, H, M, 0, 1, 0, 0));
    hdr(OP_MEMB, 8'h04, 1, 1, 1);  mop(mb_op(0, 0, 0, 0, 0, 0, 0));
    hdr(OP_MEMA, 8'h01, 1, 2, 1);
    mop(ma_op(M, K, H, 1, 0));
    mop(ma_op(M, K, H, 0, 1));
    hdr(OP_MEMA, 8'h06, 1, 1, 1);  mop(ma_op(0, 0, 0, 0, 0));
    hdr(OP_MESHA, 8'h01, 1, 1, 1); mop(mesh_op(M*H*K, 8'h03, 0, 0, 0));
    hdr(OP_MESHB, 8'h01, 1, 1, 1); mop(mesh_op(M*H*K, 8'h03, 0, 1, 0));
    hdr(OP_MEMC, 8'h03, 1, 2, 1);
    mop(mc_op(M*H, 0, 1, 0, 0));
    mop(mc_op(0, M*H, 0, 1, 0));
    hdr(OP_MEMC, 8'h3c, 1, 1, 1);  mop(mc_op(0, 0, 0, 0, 0));
    hdr(OP_DDR, 8'h01, 1, 3, 1);
    mop(ddr_op(XA,     M*K, M*K, 1, 1, 0, 0, 0));
    mop(ddr_op(YA,     H,   N,   M, 0, 1, 0, 0));
    mop(ddr_op(YA + H, H,   N,   M, 0, 1, 0, 1));
    // reset, MME programs, start
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    n_wr = 0;
    @(negedge clk);
    mme_prog_we = 6'b000011; mme_prog_addr = 0; mme_prog_data = mme_op(M*H, K, 0, 0);
    @(negedge clk);
    mme_prog_we = '0;
    for (int i = 0; i < N_MME; i++) mme_prog_len[i] = (i < 2) ? 6'd1 : 6'd0;
    prog_base = 0; prog_len = 32'(pc);
    start = 1; mme_start = 1;
    @(negedge clk);
    start = 0; mme_start = 0;
    cyc = 0;
    while (!done && cyc < 150000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("%0dx%0dx%0d: done never rose, exited=%b", M, K, N, fu_exited); end
    repeat (5) @(negedge clk);
    checks++;
    if (n_wr !== M*N) begin failures++; $display("%0dx%0dx%0d: %0d writes, expected %0d", M, K, N, n_wr, M*N); end
    for (int i = 0; i < M*N; i++) begin
      checks++;
      if (ulp_diff(ddr[YA + i], Y[i]) > 1) begin
        failures++; $display("Y[%0d][%0d] got %h exp %h", i / N, i % N, ddr[YA + i], Y[i]);
      end
    end
    $display("%0dx%0dx%0d: %0d MACs in %0d cycles (%0d program words)", M, K, N, M*K*N, cyc, pc);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
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
    repeat (3) @(posedge clk);
    run_mm(1, 8, 4);
    run_mm(16, 64, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
