// rsn_fifo -- synchronous valid/ready FIFO.
//
// Used for every latency-insensitive link in the datapath: between the
// decoder levels (the paper's Fig. 11 puts a FIFO with back-pressure between
// fetch, level 1, level 2 and the FU) and at the stream inputs of the FUs.
// A word is written when in_valid && in_ready and read when
// out_valid && out_ready. in_ready is low when DEPTH words are held, which is
// the back-pressure the paper describes ("a decoder is back-pressured if its
// downstream FIFO is full"). Storage is a register array; the read data is
// the head entry, so a word written into an empty FIFO is visible on the
// next cycle (one cycle of latency, no fall-through). The implementation is
// this design's own.
module rsn_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // The producer must hold its word until it is taken.
  logic         held_valid;
  logic [W-1:0] held_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) held_valid <= 1'b0;
    else begin
      held_valid <= in_valid && !in_ready;
      held_data  <= in_data;
    end
  end
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           held_valid |-> (in_valid && in_data == held_data))
    else $error("rsn_fifo: input dropped or changed while stalled");
endmodule
