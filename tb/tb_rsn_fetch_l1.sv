// tb_rsn_fetch_l1 -- self-checking test of the fetch unit and the level-1
// decoder.
//
// Writes a random program of packets (random FU type and mask, window 0-5,
// random reuse/last, plus some packets that select no FU) into an
// instruction memory model with random request stalls and a 3-cycle read
// latency. Each of the 16 level-2 FIFO inputs is ready at random. Every FU
// keeps an expected queue of the entries (header, then mOPs) of the packets
// that select it. Checks each delivered entry, that a broadcast reaches all
// its targets in the same cycle, that back-pressure occurred, that idle rises
// at the end, and that a second start runs the program again.
module tb_rsn_fetch_l1;
  import rsn_pkg::*;

  localparam int NPKT = 50;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, imem_req_valid, imem_req_ready = 0, imem_rsp_valid, idle;
  logic [31:0] prog_base = '0, prog_len = '0, imem_addr, imem_rsp_data;
  logic [N_FU-1:0] mop_valid, mop_ready = '0;
  mop_ent_t mop_data;

  rsn_fetch_l1 dut (.*);

  logic [31:0] imem [2048];
  logic [31:0] pipe [3];
  logic [2:0]  pv = '0;
  always @(posedge clk) begin
    imem_req_ready <= ($urandom_range(0, 3) != 0);
    pv      <= {pv[1:0], imem_req_valid && imem_req_ready};
    pipe[0] <= imem[imem_addr[10:0]]; pipe[1] <= pipe[0]; pipe[2] <= pipe[1];
  end
  assign imem_rsp_valid = pv[2];
  assign imem_rsp_data  = pipe[2];

  mop_ent_t eq [N_FU][$];
  int       n_bp = 0;

  always @(posedge clk) if (rst_n) begin
    for (int f = 0; f < N_FU; f++) begin
      mop_ready[f] <= ($urandom_range(0, 4) != 0);
      if (mop_valid[f] && mop_ready[f]) begin
        checks++;
        if (eq[f].size() == 0 || mop_data !== eq[f][0]) begin
          failures++; $display("FU %0d got %0d/%h", f, mop_data.is_hdr, mop_data.bits);
        end
        if (eq[f].size() > 0) void'(eq[f].pop_front());
      end
    end
    if ((dut.st == dut.S_PUSH_HDR || dut.st == dut.S_PUSH_MOP) && !dut.all_ready) n_bp++;
    // a broadcast goes to every target together
    if (mop_valid != '0) begin
      checks++;
      if ((mop_valid & mop_ready) !== mop_valid) begin failures++; $display("partial broadcast"); end
    end
  end

  function automatic logic [N_FU-1:0] tgt(input pkt_hdr_t h);
    logic [N_FU-1:0] t;
    t = '0;
    case (h.opcode)
      4'(OP_DDR):   t[FU_DDR]   = h.mask[0];
      4'(OP_LPDDR): t[FU_LPDDR] = h.mask[0];
      4'(OP_MEMA):  for (int i = 0; i < N_MEMA; i++) t[FU_MEMA0+i] = h.mask[i];
      4'(OP_MEMB):  for (int i = 0; i < N_MEMB; i++) t[FU_MEMB0+i] = h.mask[i];
      4'(OP_MEMC):  for (int i = 0; i < N_MEMC; i++) t[FU_MEMC0+i] = h.mask[i];
      4'(OP_MESHA): t[FU_MESHA] = h.mask[0];
      4'(OP_MESHB): t[FU_MESHB] = h.mask[0];
      default:      t = '0;
    endcase
    return t;
  endfunction

  int plen = 0;
  task automatic expect_program();
    int pc;
    pc = 0;
    while (pc < plen) begin
      pkt_hdr_t h;
      logic [N_FU-1:0] t;
      mop_ent_t e;
      h = pkt_hdr_t'(imem[pc]); pc++;
      t = tgt(h);
      e.is_hdr = 1'b1; e.bits = {64'd0, 32'(h)};
      for (int f = 0; f < N_FU; f++) if (t[f]) eq[f].push_back(e);
      for (int m = 0; m < int'(h.window); m++) begin
        e.is_hdr = 1'b0; e.bits = {imem[pc], imem[pc+1], imem[pc+2]}; pc += 3;
        for (int f = 0; f < N_FU; f++) if (t[f]) eq[f].push_back(e);
      end
    end
  endtask

  task automatic run_and_wait(input int base);
    @(negedge clk); prog_base = 32'(base); prog_len = 32'(plen); start = 1;
    @(negedge clk); start = 0;
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (10) @(negedge clk);
    for (int f = 0; f < N_FU; f++) begin
      checks++;
      if (eq[f].size() !== 0) begin failures++; $display("FU %0d missing %0d entries", f, eq[f].size()); end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2048; i++) imem[i] = '0;
    for (int p = 0; p < NPKT; p++) begin
      pkt_hdr_t h;
      h = '0;
      h.opcode = 4'($urandom_range(0, 7));          // 7 selects no FU
      h.mask   = 8'($urandom_range(1, 255));
      h.window = 6'($urandom_range(0, 5));
      h.reuse  = 13'($urandom_range(1, 4));
      h.last   = ($urandom_range(0, 1) == 1);
      imem[plen++] = 32'(h);
      for (int m = 0; m < 3 * int'(h.window); m++) imem[plen++] = $urandom;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (!idle) begin failures++; $display("not idle before start"); end
    expect_program();
    run_and_wait(0);
    // run it again from a copy at another base address
    for (int i = 0; i < plen; i++) imem[1024 + i] = imem[i];
    expect_program();
    run_and_wait(1024);
    checks++;
    if (n_bp == 0) begin failures++; $display("no back-pressure seen"); end
    $display("program words=%0d backpressure_cycles=%0d", plen, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
