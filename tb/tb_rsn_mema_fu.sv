// tb_rsn_mema_fu -- self-checking test of the MemA FU.
//
// Runs the Fig. 13 pattern for a series of random LHS tiles of one shape: load tile 0
// (prolog); load tile t+1 while sending tile t (steady state); send the last
// tile (epilog); then one extra send-only uOP re-sends the last tile, which
// must come from the same bank. The tile shape and the repeat count are random.
// The input stream has random gaps and the output random back-pressure.
// Expected output of a send: for each row i, reps times, the row's cols words.
// Also checks that load and send overlapped in time and that the FU exits
// after the uOP marked last.
module tb_rsn_mema_fu;
  import rsn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic uop_valid = 0, uop_ready, exited;
  uop_ent_t uop_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data = '0, out_data;

  rsn_mema_fu dut (.*);

  word_t iq [$], eq [$];
  int ii = 0, oi = 0, overlap = 0;

  always @(posedge clk) if (rst_n) begin
    automatic int n = ii + ((in_valid && in_ready) ? 1 : 0);
    ii <= n;
    if (!(in_valid && !in_ready)) begin
      in_valid <= (n < iq.size()) && ($urandom_range(0, 3) != 0);
      if (n < iq.size()) in_data <= iq[n];
    end
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      checks++;
      if (oi >= eq.size() || out_data !== eq[oi]) begin
        failures++; $display("out %0d got %h", oi, out_data);
      end
      oi <= oi + 1;
    end
    if (in_valid && in_ready && out_valid && out_ready) overlap++;
  end

  task automatic issue(input int rows, cols, reps, input bit ld, sd, last);
    mema_uop_t u;
    u = '0; u.rows = 16'(rows); u.cols = 16'(cols); u.reps = 16'(reps); u.load = ld; u.send = sd;
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
    int nt, rows [8], cols [8], reps;
    word_t tile [8][$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    nt = 6;
    reps = $urandom_range(1, 3);
    rows[0] = $urandom_range(2, 8); cols[0] = $urandom_range(2, 16);
    for (int t = 0; t < nt; t++) begin
      rows[t] = rows[0]; cols[t] = cols[0];
      for (int w = 0; w < rows[t] * cols[t]; w++) begin
        tile[t].push_back($urandom); iq.push_back(tile[t][w]);
      end
    end
    for (int t = 0; t <= nt; t++)   // expected sends: tiles 0..nt-1, then tile nt-1 again
      begin
        int s;
        s = (t < nt) ? t : nt - 1;
        for (int i = 0; i < rows[s]; i++)
          for (int j = 0; j < reps; j++)
            for (int k = 0; k < cols[s]; k++) eq.push_back(tile[s][i*cols[s] + k]);
      end
    // prolog, steady state (load t+1 and send t in one uOP), epilog, resend
    issue(rows[0], cols[0], reps, 1, 0, 0);
    for (int t = 0; t < nt - 1; t++) issue(rows[t], cols[t], reps, 1, 1, 0);
    issue(rows[nt-1], cols[nt-1], reps, 0, 1, 0);
    issue(rows[nt-1], cols[nt-1], reps, 0, 1, 1);
    wait (oi == eq.size());
    repeat (3) @(negedge clk);
    checks++;
    if (!exited) begin failures++; $display("FU did not exit"); end
    checks++;
    if (overlap == 0) begin failures++; $display("load and send never overlapped"); end
    $display("outputs=%0d overlap_cycles=%0d", oi, overlap);
    checks++;
    if (ii !== iq.size()) begin failures++; $display("consumed %0d of %0d inputs", ii, iq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
