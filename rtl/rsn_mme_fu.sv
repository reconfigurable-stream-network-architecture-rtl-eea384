// rsn_mme_fu -- MME FU: matrix-multiplication engine with fused epilogue.
//
// Computes dot products from two streams, following the paper's Compute FU
// kernel (Fig. 10): for each of `num` outputs, sum `accumk` products of one
// LHS word and one RHS word, then write the result to the output stream
// (to this MME's MemC). The Mem FUs send operands in matching order (MemA
// repeats each LHS row per output column, MemB sends the RHS column), so a
// tile of M x N outputs with depth K is num = M*N, accumk = K.
// Table 2 options, each per output and applied in this order:
//   acck    : do not emit; keep the sum in the local partial-sum buffer. The
//             next uOP then starts each output from that partial sum
//             (accumulation along K over several uOPs).
//   addprev : add one more LHS word (output of a previous layer, residual add).
//   bias    : add one more RHS word (bias).
//   scale   : multiply by one RHS word and add another (LayerNorm scale and
//             shift).
// uOPs are 4 bytes (rsn_pkg::mme_uop_t) and, as in the paper, are pre-stored
// in the MME rather than sent through the PL decoder: prog_we/prog_addr/
// prog_data write the local uOP store, start runs uOPs 0..prog_len-1 once,
// done rises when they have all completed.
//
// This design's own: the MME runs in programmable logic with one FP32
// multiply-add per cycle (the paper maps each MME on 64 AI Engine tiles,
// 4x4x4, about 1.1 TFLOPS); the operand order of the epilogue words; the
// uOP-store depth; the partial-sum buffer depth ACC_DEPTH. Operands enter
// through 2-deep FIFOs so that its ready signals never depend on the other
// operand's valid. Timing: one product per cycle when both operands are
// there, one cycle per epilogue word, one cycle to emit.
module rsn_mme_fu
  import rsn_pkg::*;
#(
  parameter int unsigned UOP_DEPTH = 32,
  parameter int unsigned ACC_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        prog_we,
  input  logic [4:0]  prog_addr,
  input  logic [31:0] prog_data,
  input  logic        start,
  input  logic [5:0]  prog_len,
  output logic        done,
  input  logic        lhs_valid,
  output logic        lhs_ready,
  input  word_t       lhs_data,
  input  logic        rhs_valid,
  output logic        rhs_ready,
  input  word_t       rhs_data,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data
);
  localparam int unsigned CW = $clog2(ACC_DEPTH);

  mme_uop_t    ustore [UOP_DEPTH];
  word_t       accbuf [ACC_DEPTH];
  mme_uop_t    u;
  logic [5:0]  pc;
  logic        running, acc_pending;
  logic [13:0] oi, kk;
  word_t       acc, gamma;

  typedef enum logic [2:0] {S_IDLE, S_DOT, S_PREV, S_BIAS, S_GAMMA, S_BETA, S_EMIT} st_e;
  st_e st;

  logic  l_valid, l_ready, r_valid, r_ready;
  word_t l_data, r_data;
  rsn_fifo #(.W(32), .DEPTH(2)) u_lq (.clk, .rst_n,
    .in_valid(lhs_valid), .in_ready(lhs_ready), .in_data(lhs_data),
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data));
  rsn_fifo #(.W(32), .DEPTH(2)) u_rq (.clk, .rst_n,
    .in_valid(rhs_valid), .in_ready(rhs_ready), .in_data(rhs_data),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data));

  logic dot_go, emit_go;
  assign dot_go  = (st == S_DOT) && (kk != u.accumk) && l_valid && r_valid;
  assign emit_go = (st == S_EMIT) && (!out_valid || out_ready);
  assign l_ready = dot_go || ((st == S_PREV) && l_valid);
  assign r_ready = dot_go || (((st == S_BIAS) || (st == S_GAMMA) || (st == S_BETA)) && r_valid);
  assign done    = !running && (st == S_IDLE);

  always_ff @(posedge clk) begin
    if (prog_we) ustore[prog_addr] <= mme_uop_t'(prog_data);
    if ((st == S_DOT) && (kk == u.accumk) && u.acck) accbuf[CW'(oi)] <= acc;
  end

  // state after the dot product of one output
  function automatic st_e after_dot(input mme_uop_t x);
    if (x.acck)    return S_IDLE;   // handled by the caller
    if (x.addprev) return S_PREV;
    if (x.bias)    return S_BIAS;
    if (x.scale)   return S_GAMMA;
    return S_EMIT;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; u <= '0; pc <= '0; running <= 1'b0; acc_pending <= 1'b0;
      oi <= '0; kk <= '0; acc <= '0; gamma <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (st)
        S_IDLE: begin
          if (start) begin
            running <= 1'b1;
            pc      <= '0;
          end else if (running) begin
            if (pc == prog_len) running <= 1'b0;
            else begin
              u  <= ustore[pc[4:0]];
              pc <= pc + 6'd1;
              oi <= '0;
              kk <= '0;
              acc <= acc_pending ? accbuf[0] : '0;
              st <= (ustore[pc[4:0]].num == '0) ? S_IDLE : S_DOT;
            end
          end
        end
        S_DOT: begin
          if (kk == u.accumk) begin
            if (u.acck) begin                    // partial sum stored (see above)
              if (oi + 14'd1 == u.num) begin
                acc_pending <= 1'b1;
                st <= S_IDLE;
              end else begin
                oi  <= oi + 14'd1;
                kk  <= '0;
                acc <= acc_pending ? accbuf[CW'(oi + 14'd1)] : '0;
              end
            end else st <= after_dot(u);
          end else if (dot_go) begin
            acc <= fp_add(acc, fp_mul(l_data, r_data));
            kk  <= kk + 14'd1;
          end
        end
        S_PREV: if (l_valid) begin
          acc <= fp_add(acc, l_data);
          st  <= u.bias ? S_BIAS : (u.scale ? S_GAMMA : S_EMIT);
        end
        S_BIAS: if (r_valid) begin
          acc <= fp_add(acc, r_data);
          st  <= u.scale ? S_GAMMA : S_EMIT;
        end
        S_GAMMA: if (r_valid) begin
          gamma <= r_data;
          st    <= S_BETA;
        end
        S_BETA: if (r_valid) begin
          acc <= fp_add(fp_mul(acc, gamma), r_data);
          st  <= S_EMIT;
        end
        S_EMIT: if (emit_go) begin
          out_valid <= 1'b1;
          out_data  <= acc;
          if (oi + 14'd1 == u.num) begin
            acc_pending <= 1'b0;
            st <= S_IDLE;
          end else begin
            oi  <= oi + 14'd1;
            kk  <= '0;
            acc <= acc_pending ? accbuf[CW'(oi + 14'd1)] : '0;
            st  <= S_DOT;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
