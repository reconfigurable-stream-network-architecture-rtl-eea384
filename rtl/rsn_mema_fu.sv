// rsn_mema_fu -- MemA FU: double-buffered scratchpad for LHS tiles.
//
// The buffer is split into a ping and a pong bank of BANK_WORDS words. The
// FU keeps a ping-pong flag between kernels, as in the paper's LHS FU kernel
// (Fig. 10): for each uOP the receive bank is the one the flag points to and
// the send bank is the other; a uOP with load set flips the flag for the
// next kernel. Load and send in the same uOP run in parallel, which overlaps
// loading the next tile with sending the current one.
//   load: rows*cols words from DDR, stored row-major.
//   send: for i < rows, for j < reps, for k < cols: send row i element k,
//         i.e. each LHS row is streamed once per output column (reps = N of
//         the tile), the order the MME dot-product kernel consumes.
// The next uOP is taken when both parts are done; last makes the FU exit.
//
// Follows the paper: Table 2 control plane (matrix size, tile size, srcFU,
// load, send), double buffering, the Fig. 10 kernel and flag rule, 0.25 MB
// per MemA (Fig. 19). This design's choices: one FP32 word per stream beat
// (the paper's MemA handles 256 floats in parallel), DDR as the only source
// (srcFU must be 0), and "matrix size"/"tile size" expressed as rows, cols
// and reps. Timing: one word in and one word out per cycle; the output is
// registered (one cycle after the read).
module rsn_mema_fu
  import rsn_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 32768
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
  output logic     out_valid,
  input  logic     out_ready,
  output word_t    out_data
);
  localparam int unsigned AW = $clog2(2 * BANK_WORDS);

  word_t     mem [2 * BANK_WORDS];
  mema_uop_t u;
  logic      busy, last_q, rx_ping, rx_bank, tx_bank;
  logic      ld_act, sd_act, ld_done, sd_done;
  logic [31:0] ld_cnt, ld_total;
  logic [15:0] si, sj, sk;
  logic [31:0] srow;
  logic      rd_go, in_fire;

  assign uop_ready = !busy && !exited;
  assign ld_total  = 32'(u.rows) * 32'(u.cols);
  assign in_ready  = busy && ld_act && !ld_done;
  assign in_fire   = in_valid && in_ready;
  assign rd_go     = busy && sd_act && !sd_done && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (in_fire) mem[AW'(rx_bank) * AW'(BANK_WORDS) + AW'(ld_cnt)] <= in_data;
    if (rd_go)   out_data <= mem[AW'(tx_bank) * AW'(BANK_WORDS) + AW'(srow) + AW'(sk)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; busy <= 1'b0; last_q <= 1'b0; exited <= 1'b0; rx_ping <= 1'b1;
      rx_bank <= 1'b0; tx_bank <= 1'b1; ld_act <= 1'b0; sd_act <= 1'b0;
      ld_done <= 1'b0; sd_done <= 1'b0; ld_cnt <= '0; si <= '0; sj <= '0; sk <= '0;
      srow <= '0; out_valid <= 1'b0;
    end else begin
      if (rd_go) out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;

      if (!busy) begin
        if (uop_valid && uop_ready) begin
          mema_uop_t n;
          n = mema_uop_t'(uop_data.bits);
          u <= n; busy <= 1'b1; last_q <= uop_data.last;
          rx_bank <= !rx_ping;            // ping = bank 0
          tx_bank <= rx_ping;
          if (n.load) rx_ping <= !rx_ping;
          ld_act  <= n.load;
          sd_act  <= n.send;
          ld_done <= !n.load || (n.rows == '0) || (n.cols == '0);
          sd_done <= !n.send || (n.rows == '0) || (n.cols == '0) || (n.reps == '0);
          ld_cnt <= '0; si <= '0; sj <= '0; sk <= '0; srow <= '0;
        end
      end else begin
        if (in_fire) begin
          ld_cnt <= ld_cnt + 32'd1;
          if (ld_cnt + 32'd1 == ld_total) ld_done <= 1'b1;
        end
        if (rd_go) begin
          if (sk + 16'd1 == u.cols) begin
            sk <= '0;
            if (sj + 16'd1 == u.reps) begin
              sj <= '0;
              si <= si + 16'd1;
              srow <= srow + 32'(u.cols);
              if (si + 16'd1 == u.rows) sd_done <= 1'b1;
            end else sj <= sj + 16'd1;
          end else sk <= sk + 16'd1;
        end
        if (ld_done && sd_done) begin
          busy <= 1'b0;
          if (last_q) exited <= 1'b1;
        end
      end
    end
  end

  mema_uop_t nu;
  assign nu = mema_uop_t'(uop_data.bits);
  a_src: assert property (@(posedge clk) disable iff (!rst_n)
                          (uop_valid && uop_ready) |-> (nu.src == 3'd0))
    else $error("rsn_mema_fu: srcFU other than DDR");
endmodule
