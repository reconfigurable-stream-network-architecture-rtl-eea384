// rsn_memc_fu -- MemC FU: double-buffered scratchpad for MME results.
//
// Each MemC is fed by one MME (the paper creates no mesh on the AIE-to-PL
// return path because "each MME consistently communicates with the same
// MemC"). Ping-pong as in the other Mem FUs: results are received into the
// bank the flag points to, sent from the other, and a uOP that receives
// flips the flag for the next kernel, so receiving the next output tile
// overlaps draining the previous one (Fig. 14 of the paper).
//   recv: recv_len words from the MME, stored in arrival order.
//   send: send_len words, in order, either to the DDR FU (store off-chip) or,
//         with to_mme set, to MeshA, which feeds them to an MME as the LHS of
//         the next layer (pipelined layers, Fig. 13 / Table 7).
//         With transpose set, the buffered tile is taken as a row-major tile
//         of tcols columns and sent column by column (word r*tcols + c, c
//         outer), one of the paper's MemC operations. The read address
//         steps by tcols and wraps to the next column, so no divider is
//         needed; send_len should be a multiple of tcols.
// Receive and send in one uOP run in parallel. The next uOP starts when both
// are done; last makes the FU exit.
//
// Not built: the paper's MemC also runs Softmax, GELU and LayerNorm
// mean/variance/normalisation on the buffered tile; the flags are decoded but the data passes unchanged (see the
// assertion). Control plane after Table 2, with the four size fields reduced
// to recv_len and send_len (this design's choice). Size: 1 MB per MemC
// (Fig. 19), BANK_WORDS = 131072 FP32 words per bank. Timing: one word in and
// one word out per cycle, registered output.
module rsn_memc_fu
  import rsn_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 131072
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     uop_valid,
  output logic     uop_ready,
  input  uop_ent_t uop_data,
  output logic     exited,
  input  logic     in_valid,
  output logic     in_ready,
  input  word_t    in_data,
  output logic     dd_valid,
  input  logic     dd_ready,
  output logic     ma_valid,
  input  logic     ma_ready,
  output word_t    out_data
);
  localparam int unsigned AW = $clog2(2 * BANK_WORDS);

  word_t     mem [2 * BANK_WORDS];
  memc_uop_t u;
  logic      busy, last_q, rx_ping, rx_bank, tx_bank, to_mme_q;
  logic      rv_done, sd_done, in_fire, rd_go, ov, o_ready;
  logic [23:0] rv_cnt, sd_cnt, sa, tcol, step;
  logic [24:0] sa_nx;

  assign uop_ready = !busy && !exited && !ov;
  assign in_ready  = busy && !rv_done;
  assign in_fire   = in_valid && in_ready;
  assign o_ready   = to_mme_q ? ma_ready : dd_ready;
  assign dd_valid  = ov && !to_mme_q;
  assign ma_valid  = ov &&  to_mme_q;
  assign rd_go     = busy && !sd_done && (!ov || o_ready);
  // Read address walk: down a column in steps of `step` words, then on to the
  // top of the next column. step = 1 gives the plain in-order send.
  assign sa_nx     = 25'(sa) + 25'(step);

  always_ff @(posedge clk) begin
    if (in_fire) mem[AW'(rx_bank) * AW'(BANK_WORDS) + AW'(rv_cnt)] <= in_data;
    if (rd_go)   out_data <= mem[AW'(tx_bank) * AW'(BANK_WORDS) + AW'(sa)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; busy <= 1'b0; last_q <= 1'b0; exited <= 1'b0; rx_ping <= 1'b1;
      rx_bank <= 1'b0; tx_bank <= 1'b1; to_mme_q <= 1'b0; rv_done <= 1'b0;
      sd_done <= 1'b0; rv_cnt <= '0; sd_cnt <= '0; ov <= 1'b0;
      sa <= '0; tcol <= '0; step <= 24'd1;
    end else begin
      if (rd_go) ov <= 1'b1;
      else if (o_ready) ov <= 1'b0;

      if (!busy) begin
        if (uop_valid && uop_ready) begin
          memc_uop_t n;
          n = memc_uop_t'(uop_data.bits);
          u <= n; busy <= 1'b1; last_q <= uop_data.last;
          rx_bank <= !rx_ping;
          tx_bank <= rx_ping;
          if (n.recv) rx_ping <= !rx_ping;
          to_mme_q <= n.to_mme;
          rv_done <= !n.recv || (n.recv_len == '0);
          sd_done <= !n.send || (n.send_len == '0);
          rv_cnt <= '0; sd_cnt <= '0; sa <= '0; tcol <= '0;
          step <= (n.transpose && n.tcols != '0) ? 24'(n.tcols) : 24'd1;
        end
      end else begin
        if (in_fire) begin
          rv_cnt <= rv_cnt + 24'd1;
          if (rv_cnt + 24'd1 == u.recv_len) rv_done <= 1'b1;
        end
        if (rd_go) begin
          sd_cnt <= sd_cnt + 24'd1;
          if (sa_nx < 25'(u.send_len)) sa <= sa_nx[23:0];
          else begin
            sa <= tcol + 24'd1; tcol <= tcol + 24'd1;
          end
          if (sd_cnt + 24'd1 == u.send_len) sd_done <= 1'b1;
        end
        if (rv_done && sd_done) begin
          busy <= 1'b0;
          if (last_q) exited <= 1'b1;
        end
      end
    end
  end

  memc_uop_t nu;
  assign nu = memc_uop_t'(uop_data.bits);
  a_nonmm: assert property (@(posedge clk) disable iff (!rst_n)
                            (uop_valid && uop_ready) |-> !(nu.softmax || nu.gelu || nu.norm))
    else $warning("rsn_memc_fu: non-MM operation requested but not implemented");
endmodule
