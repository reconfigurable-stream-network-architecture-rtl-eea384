// rsn_lpddr_fu -- LPDDR FU: loads weights and biases from off-chip LPDDR.
//
// Each uOP (rsn_pkg::lpddr_uop_t; Table 2 of the paper: addr, stride size,
// stride offset, stride count, destFU, load bias) reads stride_count bursts
// of stride_size words, burst s starting at addr + s*stride_offset, and
// streams the words to destFU (MemB0-2). LPDDR only holds read-only data, so
// there is no store path. The load-bias flag is decoded but does not change
// what this FU does: whether the words are a bias row is decided by the
// receiving MemB's own uOP (this design's choice). A uOP with last set makes
// the FU exit after it.
//
// Off-chip read channel as in rsn_ddr_fu: request valid/ready, response valid
// only, at most RD_DEPTH words in flight or buffered. Timing: one word per
// cycle at best.
module rsn_lpddr_fu
  import rsn_pkg::*;
#(
  parameter int unsigned N_DST    = 3,
  parameter int unsigned RD_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              uop_valid,
  output logic              uop_ready,
  input  uop_ent_t          uop_data,
  output logic              exited,
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [31:0]       rd_addr,
  input  logic              rd_rsp_valid,
  input  word_t             rd_rsp_data,
  output logic [N_DST-1:0]  ld_valid,
  input  logic [N_DST-1:0]  ld_ready,
  output word_t             ld_data
);
  lpddr_uop_t u;
  logic       busy, last_q, issue_done, issue, q_valid, q_ready, q_pop;
  logic [15:0] rw, rs;
  logic [31:0] rbase, sent, total;
  logic [$clog2(RD_DEPTH+1)-1:0] occ;

  assign total        = 32'(u.stride_size) * 32'(u.stride_count);
  assign rd_req_valid = busy && !issue_done && (occ < ($bits(occ))'(RD_DEPTH));
  assign rd_addr      = rbase + 32'(rw);
  assign issue        = rd_req_valid && rd_req_ready;

  // the credit count (occ) guarantees room for every response
  logic rsp_room;
  a_credit: assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> rsp_room);

  rsn_fifo #(.W(32), .DEPTH(RD_DEPTH)) u_rdq (
    .clk, .rst_n,
    .in_valid(rd_rsp_valid), .in_ready(rsp_room), .in_data(rd_rsp_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(ld_data)
  );
  always_comb begin
    ld_valid = '0;
    q_ready  = 1'b0;
    for (int d = 0; d < N_DST; d++)
      if (busy && u.dest == 3'(d)) begin
        ld_valid[d] = q_valid;
        q_ready     = ld_ready[d];
      end
  end
  assign q_pop     = q_valid && q_ready;
  assign uop_ready = !busy && !exited;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; busy <= 1'b0; last_q <= 1'b0; exited <= 1'b0; issue_done <= 1'b0;
      rw <= '0; rs <= '0; rbase <= '0; sent <= '0; occ <= '0;
    end else begin
      occ <= occ + ($bits(occ))'(issue) - ($bits(occ))'(q_pop);
      if (!busy) begin
        if (uop_valid && uop_ready) begin
          lpddr_uop_t n;
          n = lpddr_uop_t'(uop_data.bits);
          u <= n; busy <= 1'b1; last_q <= uop_data.last;
          rw <= '0; rs <= '0; rbase <= n.addr; sent <= '0;
          issue_done <= (n.stride_size == '0) || (n.stride_count == '0);
          if ((n.stride_size == '0) || (n.stride_count == '0)) begin
            busy <= 1'b0;
            if (uop_data.last) exited <= 1'b1;
          end
        end
      end else begin
        if (issue) begin
          if (rw + 16'd1 == u.stride_size) begin
            rw <= '0; rs <= rs + 16'd1; rbase <= rbase + 32'(u.stride_offset);
            if (rs + 16'd1 == u.stride_count) issue_done <= 1'b1;
          end else rw <= rw + 16'd1;
        end
        if (q_pop) begin
          sent <= sent + 32'd1;
          if (sent + 32'd1 == total) begin
            busy <= 1'b0;
            if (last_q) exited <= 1'b1;
          end
        end
      end
    end
  end
endmodule
