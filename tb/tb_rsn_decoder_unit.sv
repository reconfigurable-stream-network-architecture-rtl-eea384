// tb_rsn_decoder_unit -- self-checking test of the whole three-level decoder
// front end (fetch, level 1, per-FU mOP FIFO, level 2, uOP FIFO).
//
// Writes a random program of packets (random FU type and mask, window 0-5,
// reuse 0-4, random last, plus some packets that select no FU) into an
// instruction memory model with random request stalls and a 3-cycle read
// latency. Each FU takes uOPs at random, and some FUs are slow, so the FIFOs
// fill and back-pressure reaches the level-1 decoder. The expected uOP stream
// of each FU is the window of each packet that selects it, repeated reuse
// times, with last on the final uOP of a packet marked last. Checks every
// uOP, that back-pressure occurred, that every expected uOP arrives after idle
// (idle covers level 1) and no extra one follows, and that a second start runs the program again.
module tb_rsn_decoder_unit;
  import rsn_pkg::*;

  localparam int NPKT = 120;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, imem_req_valid, imem_req_ready = 0, imem_rsp_valid, idle;
  logic [31:0] prog_base = '0, prog_len = '0, imem_addr, imem_rsp_data;
  logic [N_FU-1:0] uop_valid, uop_ready = '0;
  uop_ent_t uop_data [N_FU];

  rsn_decoder_unit dut (.*);

  logic [31:0] imem [4096];
  logic [31:0] pipe [3];
  logic [2:0]  pv = '0;
  always @(posedge clk) begin
    imem_req_ready <= ($urandom_range(0, 3) != 0);
    pv      <= {pv[1:0], imem_req_valid && imem_req_ready};
    pipe[0] <= imem[imem_addr[11:0]]; pipe[1] <= pipe[0]; pipe[2] <= pipe[1];
  end
  assign imem_rsp_valid = pv[2];
  assign imem_rsp_data  = pipe[2];

  uop_ent_t eq [N_FU][$];
  int       n_bp = 0;

  always @(posedge clk) if (rst_n) begin
    for (int f = 0; f < N_FU; f++) begin
      uop_ready[f] <= ($urandom_range(0, f == 0 ? 12 : 2) == 0);
      if (uop_valid[f] && uop_ready[f]) begin
        checks++;
        if (eq[f].size() == 0 || uop_data[f] !== eq[f][0]) begin
          failures++; $display("FU %0d got %0d/%h", f, uop_data[f].last, uop_data[f].bits);
        end
        if (eq[f].size() > 0) void'(eq[f].pop_front());
      end
    end
    if ((dut.u_l1.st == dut.u_l1.S_PUSH_HDR || dut.u_l1.st == dut.u_l1.S_PUSH_MOP) &&
        !dut.u_l1.all_ready) n_bp++;
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
      uop_ent_t e;
      int reps, p0;
      h = pkt_hdr_t'(imem[pc]); pc++;
      t = tgt(h);
      reps = (h.reuse == 0) ? 1 : int'(h.reuse);
      p0 = pc;
      for (int r = 0; r < reps; r++)
        for (int m = 0; m < int'(h.window); m++) begin
          e.bits = {imem[p0+3*m], imem[p0+3*m+1], imem[p0+3*m+2]};
          e.last = h.last && (r == reps - 1) && (m == int'(h.window) - 1);
          for (int f = 0; f < N_FU; f++) if (t[f]) eq[f].push_back(e);
        end
      pc += 3 * int'(h.window);
    end
  endtask

  task automatic run_and_wait(input int base);
    @(negedge clk); prog_base = 32'(base); prog_len = 32'(plen); start = 1;
    @(negedge clk); start = 0;
    @(negedge clk);
    while (!idle) @(negedge clk);
    // idle covers level 1; the FIFOs and level 2 drain afterwards
    for (int f = 0; f < N_FU; f++) while (eq[f].size() != 0) @(negedge clk);
    repeat (20) @(negedge clk);
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
    for (int i = 0; i < 4096; i++) imem[i] = '0;
    for (int p = 0; p < NPKT; p++) begin
      pkt_hdr_t h;
      h = '0;
      h.opcode = ($urandom_range(0, 1) == 0) ? 4'(OP_DDR)   // half go to the slow DDR FU
                                             : 4'($urandom_range(0, 7));   // 7 selects no FU
      h.mask   = 8'($urandom_range(1, 255));
      h.window = 6'($urandom_range(0, 5));
      h.reuse  = 13'($urandom_range(0, 4));
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
    for (int i = 0; i < plen; i++) imem[2048 + i] = imem[i];
    expect_program();
    run_and_wait(2048);
    checks++;
    if (n_bp == 0) begin failures++; $display("no back-pressure seen"); end
    $display("program words=%0d backpressure_cycles=%0d", plen, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
