// tb_rsn_fifo -- self-checking test of rsn_fifo.
// Random push and pop pressure on a 6-deep FIFO; every word read must be the
// oldest word written (checked against a queue), in_ready must be low exactly
// when 6 words are held, and a full FIFO must be reached at least once.
module tb_rsn_fifo;
  localparam int DEPTH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0, full_seen = 0, cycles = 0;
  logic [31:0] q[$];
  logic fired = 1'b1;

  rsn_fifo #(.W(32), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      checks++;
      if (in_ready !== (q.size() < DEPTH)) begin failures++; $display("ready mismatch size=%0d", q.size()); end
      if (q.size() == DEPTH) full_seen++;
      if (!in_valid || fired) begin
        in_valid = ($urandom_range(0, 99) < (n < 2000 ? 70 : 30));
        in_data  = $urandom;
      end
      out_ready = ($urandom_range(0, 99) < (n < 2000 ? 30 : 70));
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data !== q[0]) begin failures++; $display("data mismatch"); end
        if (q.size() != 0) void'(q.pop_front());
      end
      fired = in_valid && in_ready;
      if (fired) q.push_back(in_data);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
