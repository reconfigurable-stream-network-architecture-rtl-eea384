// rsn_memb_fu -- MemB FU: double-buffered scratchpad for RHS (weight) tiles.
//
// Same ping-pong scheme as MemA (Fig. 10 of the paper): the receive bank is
// the one the flag points to, the send bank the other, and a uOP that loads a
// tile flips the flag for the next kernel. Control plane
// (rsn_pkg::memb_uop_t) after Table 2: matrix/tile size as rows (K), cols (N)
// and reps, load, send, transpose input, load bias.
//   load, bias = 0: rows*cols words; stored row-major as B[k][n], or, with
//         transpose set, the words arrive as B^T (N x K row-major) and are
//         stored transposed.
//   load, bias = 1: cols words go to a separate bias row; the flag does not
//         flip.
//   send: for r < reps, for n < cols: B[0..rows-1][n] (one column per output,
//         the order the MME dot-product kernel consumes); with bias set the
//         bias word of column n follows each column, for the MME's add-bias.
// Words arrive from LPDDR (weights, bias) or from DDR (feature maps used as
// RHS, e.g. K or V in attention); the paper lists no srcFU for MemB, so the
// two inputs are merged here, LPDDR first. Load and send run in parallel.
//
// This design's choices: the field encoding above, the bias row size
// BIAS_WORDS, one FP32 word per beat. Sizes: 0.5 MB for MemB0/1 and 0.25 MB
// for MemB2 (Fig. 19), i.e. BANK_WORDS = 65536 / 32768. Timing: one word in
// and one word out per cycle, registered output.
module rsn_memb_fu
  import rsn_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 65536,
  parameter int unsigned BIAS_WORDS = 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     uop_valid,
  output logic     uop_ready,
  input  uop_ent_t uop_data,
  output logic     exited,
  input  logic     lp_valid,
  output logic     lp_ready,
  input  word_t    lp_data,
  input  logic     dd_valid,
  output logic     dd_ready,
  input  word_t    dd_data,
  output logic     out_valid,
  input  logic     out_ready,
  output word_t    out_data
);
  localparam int unsigned AW = $clog2(2 * BANK_WORDS);
  localparam int unsigned BW = $clog2(BIAS_WORDS);

  word_t     mem  [2 * BANK_WORDS];
  word_t     bmem [BIAS_WORDS];
  memb_uop_t u;
  logic      busy, last_q, rx_ping, rx_bank, tx_bank;
  logic      ld_done, sd_done, in_valid, in_ready, in_fire, rd_go, rd_bias;
  word_t     in_data;
  logic [31:0] ld_cnt, ld_total, waddr, wcol;
  logic [15:0] wb, sr, sn, sk;
  logic [31:0] raddr;

  assign uop_ready = !busy && !exited;
  assign in_valid  = lp_valid || dd_valid;
  assign in_data   = lp_valid ? lp_data : dd_data;
  assign in_ready  = busy && !ld_done;
  assign lp_ready  = in_ready;
  assign dd_ready  = in_ready && !lp_valid;
  assign in_fire   = in_valid && in_ready;
  assign ld_total  = u.bias ? 32'(u.cols) : 32'(u.rows) * 32'(u.cols);
  assign rd_go     = busy && !sd_done && (!out_valid || out_ready);
  // with bias, position sk == rows of each column is the bias word
  assign rd_bias   = u.bias && (sk == u.rows);

  always_ff @(posedge clk) begin
    if (in_fire && !u.bias) mem[AW'(rx_bank) * AW'(BANK_WORDS) + AW'(waddr)] <= in_data;
    if (in_fire &&  u.bias) bmem[BW'(ld_cnt)] <= in_data;
    if (rd_go) out_data <= rd_bias ? bmem[BW'(sn)]
                                   : mem[AW'(tx_bank) * AW'(BANK_WORDS) + AW'(raddr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; busy <= 1'b0; last_q <= 1'b0; exited <= 1'b0; rx_ping <= 1'b1;
      rx_bank <= 1'b0; tx_bank <= 1'b1; ld_done <= 1'b0; sd_done <= 1'b0;
      ld_cnt <= '0; waddr <= '0; wcol <= '0; wb <= '0; sr <= '0; sn <= '0; sk <= '0;
      raddr <= '0; out_valid <= 1'b0;
    end else begin
      if (rd_go) out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;

      if (!busy) begin
        if (uop_valid && uop_ready) begin
          memb_uop_t n;
          n = memb_uop_t'(uop_data.bits);
          u <= n; busy <= 1'b1; last_q <= uop_data.last;
          rx_bank <= !rx_ping;
          tx_bank <= rx_ping;
          if (n.load && !n.bias) rx_ping <= !rx_ping;
          ld_done <= !n.load || (n.cols == '0) || (!n.bias && n.rows == '0);
          sd_done <= !n.send || (n.rows == '0) || (n.cols == '0) || (n.reps == '0);
          ld_cnt <= '0; waddr <= '0; wcol <= '0; wb <= '0;
          sr <= '0; sn <= '0; sk <= '0; raddr <= '0;
        end
      end else begin
        if (in_fire) begin
          ld_cnt <= ld_cnt + 32'd1;
          if (ld_cnt + 32'd1 == ld_total) ld_done <= 1'b1;
          if (!u.transpose) waddr <= waddr + 32'd1;
          else if (wb + 16'd1 == u.rows) begin   // next incoming row = next column n
            wb    <= '0;
            wcol  <= wcol + 32'd1;
            waddr <= wcol + 32'd1;
          end else begin
            wb    <= wb + 16'd1;
            waddr <= waddr + 32'(u.cols);
          end
        end
        if (rd_go) begin
          if (sk + 16'd1 == u.rows + 16'(u.bias)) begin
            sk <= '0;
            if (sn + 16'd1 == u.cols) begin
              sn <= '0;
              raddr <= '0;
              sr <= sr + 16'd1;
              if (sr + 16'd1 == u.reps) sd_done <= 1'b1;
            end else begin
              sn    <= sn + 16'd1;
              raddr <= 32'(sn) + 32'd1;
            end
          end else begin
            sk <= sk + 16'd1;
            if (!rd_bias) raddr <= raddr + 32'(u.cols);
          end
        end
        if (ld_done && sd_done) begin
          busy <= 1'b0;
          if (last_q) exited <= 1'b1;
        end
      end
    end
  end
endmodule
