// rsn_ddr_fu -- DDR FU: loads and stores feature maps in off-chip DDR.
//
// Each uOP (rsn_pkg::ddr_uop_t, the paper's Table 2 control plane: addr,
// stride size, stride offset, stride count, load, destFU, store, srcFU) runs
// one kernel. The address pattern is stride_count bursts of stride_size
// words; burst s starts at addr + s*stride_offset. With load set, the FU
// reads that pattern and streams the words to destFU (MemA0-2 or MemB0-2);
// with store set, it takes the same number of words from srcFU (MemC0-5)
// and writes them to the pattern. If both are set they run in parallel on the
// read and write channels. Fine-grained load/store interleaving, the paper's
// bandwidth optimisation (Fig. 15, way 3), comes from the order of uOPs:
// software alternates short load uOPs and store uOPs. The next uOP starts
// when both parts of the current one are done; a uOP with last set makes the
// FU exit.
//
// Off-chip interface (this design's choice): a read channel with request
// valid/ready and a response valid without ready, kept safe by allowing at
// most RD_DEPTH reads in flight or buffered; a write channel with
// valid/ready carrying address and data together. Word addresses.
// Timing: one read request and one write per cycle at best.
module rsn_ddr_fu
  import rsn_pkg::*;
#(
  parameter int unsigned N_DST    = 6,
  parameter int unsigned N_SRC    = 6,
  parameter int unsigned RD_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // uOPs
  input  logic              uop_valid,
  output logic              uop_ready,
  input  uop_ent_t          uop_data,
  output logic              exited,
  // off-chip memory
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [31:0]       rd_addr,
  input  logic              rd_rsp_valid,
  input  word_t             rd_rsp_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [31:0]       wr_addr,
  output word_t             wr_data,
  // load streams to destFUs
  output logic [N_DST-1:0]  ld_valid,
  input  logic [N_DST-1:0]  ld_ready,
  output word_t             ld_data,
  // store streams from srcFUs
  input  logic [N_SRC-1:0]  st_valid,
  output logic [N_SRC-1:0]  st_ready,
  input  word_t             st_data [N_SRC]
);
  ddr_uop_t u;
  logic     busy, ld_act, st_act, last_q;

  // ---------------------------------------------------------- address gens
  logic [15:0] rw, rs, ww, ws;          // word-in-burst, burst index
  logic [31:0] rbase, wbase;
  logic [31:0] ld_sent, total;
  logic        rd_issue_done, wr_done, ld_done;
  logic [$clog2(RD_DEPTH+1)-1:0] occ;
  logic        issue, q_valid, q_ready, q_pop, wr_fire;
  word_t       q_data;

  assign total         = 32'(u.stride_size) * 32'(u.stride_count);
  assign rd_req_valid  = busy && ld_act && !rd_issue_done && (occ < ($bits(occ))'(RD_DEPTH));
  assign rd_addr       = rbase + 32'(rw);
  assign issue         = rd_req_valid && rd_req_ready;

  // the credit count (occ) guarantees room for every response
  logic rsp_room;
  a_credit: assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> rsp_room);

  rsn_fifo #(.W(32), .DEPTH(RD_DEPTH)) u_rdq (
    .clk, .rst_n,
    .in_valid(rd_rsp_valid), .in_ready(rsp_room), .in_data(rd_rsp_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
  );
  always_comb begin
    ld_valid = '0;
    if (q_valid && busy && ld_act && u.dest < 3'(N_DST)) ld_valid[u.dest] = 1'b1;
  end
  assign ld_data = q_data;
  assign q_ready = busy && ld_act && (u.dest < 3'(N_DST)) && ld_ready[u.dest];
  assign q_pop   = q_valid && q_ready;
  assign ld_done = !ld_act || (ld_sent == total);

  always_comb begin
    st_ready = '0;
    if (busy && st_act && !wr_done && u.src < 3'(N_SRC)) st_ready[u.src] = wr_ready;
  end
  assign wr_valid = busy && st_act && !wr_done && (u.src < 3'(N_SRC)) && st_valid[u.src];
  assign wr_addr  = wbase + 32'(ww);
  assign wr_data  = (u.src < 3'(N_SRC)) ? st_data[u.src] : '0;
  assign wr_fire  = wr_valid && wr_ready;

  assign uop_ready = !busy && !exited;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; busy <= 1'b0; ld_act <= 1'b0; st_act <= 1'b0; last_q <= 1'b0;
      exited <= 1'b0;
      rw <= '0; rs <= '0; ww <= '0; ws <= '0; rbase <= '0; wbase <= '0;
      ld_sent <= '0; rd_issue_done <= 1'b0; wr_done <= 1'b0; occ <= '0;
    end else begin
      occ <= occ + ($bits(occ))'(issue) - ($bits(occ))'(q_pop);
      if (!busy) begin
        if (uop_valid && uop_ready) begin
          ddr_uop_t n;
          n = ddr_uop_t'(uop_data.bits);
          u      <= n;
          busy   <= 1'b1;
          last_q <= uop_data.last;
          ld_act <= n.load;
          st_act <= n.store;
          rw <= '0; rs <= '0; ww <= '0; ws <= '0;
          rbase <= n.addr; wbase <= n.addr;
          ld_sent <= '0;
          rd_issue_done <= (n.stride_size == '0) || (n.stride_count == '0);
          wr_done       <= (n.stride_size == '0) || (n.stride_count == '0);
        end
      end else begin
        if (issue) begin
          if (rw + 16'd1 == u.stride_size) begin
            rw    <= '0;
            rs    <= rs + 16'd1;
            rbase <= rbase + 32'(u.stride_offset);
            if (rs + 16'd1 == u.stride_count) rd_issue_done <= 1'b1;
          end else rw <= rw + 16'd1;
        end
        if (q_pop) ld_sent <= ld_sent + 32'd1;
        if (wr_fire) begin
          if (ww + 16'd1 == u.stride_size) begin
            ww    <= '0;
            ws    <= ws + 16'd1;
            wbase <= wbase + 32'(u.stride_offset);
            if (ws + 16'd1 == u.stride_count) wr_done <= 1'b1;
          end else ww <= ww + 16'd1;
        end
        if ((ld_done || (q_pop && ld_sent + 32'd1 == total)) &&
            (!st_act || wr_done || (wr_fire && ww + 16'd1 == u.stride_size && ws + 16'd1 == u.stride_count))) begin
          busy <= 1'b0;
          if (last_q) exited <= 1'b1;
        end
      end
    end
  end
endmodule
