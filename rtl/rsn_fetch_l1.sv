// rsn_fetch_l1 -- fetch unit and top-level (level-1) instruction decoder.
//
// The program is a single sequence of 32-bit words in instruction memory,
// made of packets: a header word (rsn_pkg::pkt_hdr_t: opcode, mask, last,
// window, reuse) followed by `window` mOPs of MOP_WORDS words each, most
// significant word first. After `start`, the fetch side reads prog_len words
// from prog_base, keeping at most IF_DEPTH words in flight or buffered
// (credit scheme, so the memory response needs no ready). The level-1
// decoder turns the opcode and mask into a set of target FUs
// (flat numbering in rsn_pkg) and broadcasts first the header, then each
// mOP, to the level-2 FIFOs of all targets. A broadcast happens in one cycle
// and only when every target FIFO has room, so a full FIFO stalls the whole
// decode (the paper's back-pressure, Fig. 11).
//
// Follows the paper: packet format (32-bit header with the five fields), the
// conversion of payload into mOPs routed by opcode and mask, back-pressure.
// This design's choices: field widths, 3-word mOPs, a packet whose mask
// selects no existing FU is consumed and dropped, one word fetched per cycle.
//
// Timing: one instruction word per cycle at best; a header or mOP broadcast
// takes one cycle once its words are in.
module rsn_fetch_l1
  import rsn_pkg::*;
#(
  parameter int unsigned IF_DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [31:0]           prog_base,
  input  logic [31:0]           prog_len,
  // instruction memory read port
  output logic                  imem_req_valid,
  input  logic                  imem_req_ready,
  output logic [31:0]           imem_addr,
  input  logic                  imem_rsp_valid,
  input  logic [31:0]           imem_rsp_data,
  // to the level-2 FIFOs
  output logic [N_FU-1:0]       mop_valid,
  input  logic [N_FU-1:0]       mop_ready,
  output mop_ent_t              mop_data,
  output logic                  idle
);
  // ------------------------------------------------------------ fetch
  logic [31:0] fetch_cnt, fetch_addr;
  logic [$clog2(IF_DEPTH+1)-1:0] occ;
  logic        iw_valid, iw_ready;
  logic [31:0] iw_data;
  logic        issue, pop_w, run, rsp_room;

  assign imem_req_valid = run && !start && (fetch_cnt < prog_len) && (occ < ($bits(occ))'(IF_DEPTH));
  assign imem_addr      = fetch_addr;
  assign issue          = imem_req_valid && imem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetch_cnt  <= '0;
      fetch_addr <= '0;
      run        <= 1'b0;
      occ        <= '0;
    end else begin
      if (start) begin
        run        <= 1'b1;
        fetch_cnt  <= '0;
        fetch_addr <= prog_base;
      end else if (issue) begin
        fetch_cnt  <= fetch_cnt + 32'd1;
        fetch_addr <= fetch_addr + 32'd1;
      end
      occ <= occ + ($bits(occ))'(issue) - ($bits(occ))'(pop_w);
    end
  end

  rsn_fifo #(.W(32), .DEPTH(IF_DEPTH)) u_ififo (
    .clk, .rst_n,
    .in_valid (imem_rsp_valid), .in_ready (rsp_room), .in_data (imem_rsp_data),
    .out_valid(iw_valid), .out_ready(iw_ready), .out_data(iw_data)
  );
  assign pop_w = iw_valid && iw_ready;
  // the credit count guarantees room for every response
  a_credit: assert property (@(posedge clk) disable iff (!rst_n) imem_rsp_valid |-> rsp_room);

  // ------------------------------------------------------------ level 1
  typedef enum logic [1:0] {S_HDR, S_PUSH_HDR, S_WORD, S_PUSH_MOP} st_e;
  st_e         st;
  pkt_hdr_t    hdr;
  logic [N_FU-1:0] sel;
  uop_bits_t   mop;
  logic [1:0]  wcnt;
  logic [5:0]  mcnt;
  logic        all_ready, fire;

  function automatic logic [N_FU-1:0] targets(input pkt_hdr_t h);
    logic [N_FU-1:0] t;
    t = '0;
    case (fu_type_e'(h.opcode))
      OP_DDR:   t[FU_DDR]   = h.mask[0];
      OP_LPDDR: t[FU_LPDDR] = h.mask[0];
      OP_MEMA:  for (int i = 0; i < N_MEMA; i++) t[FU_MEMA0+i] = h.mask[i];
      OP_MEMB:  for (int i = 0; i < N_MEMB; i++) t[FU_MEMB0+i] = h.mask[i];
      OP_MEMC:  for (int i = 0; i < N_MEMC; i++) t[FU_MEMC0+i] = h.mask[i];
      OP_MESHA: t[FU_MESHA] = h.mask[0];
      OP_MESHB: t[FU_MESHB] = h.mask[0];
      default:  t = '0;
    endcase
    return t;
  endfunction

  assign all_ready = ((mop_ready & sel) == sel);
  assign iw_ready  = (st == S_HDR) || (st == S_WORD);
  assign fire      = ((st == S_PUSH_HDR) || (st == S_PUSH_MOP)) && all_ready;
  assign mop_valid = ((st == S_PUSH_HDR) || (st == S_PUSH_MOP)) && all_ready ? sel : '0;
  always_comb begin
    mop_data.is_hdr = (st == S_PUSH_HDR);
    mop_data.bits   = (st == S_PUSH_HDR) ? {64'd0, 32'(hdr)} : mop;
  end
  assign idle = (st == S_HDR) && !iw_valid && (occ == '0) && (!run || fetch_cnt == prog_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_HDR;
      hdr  <= '0;
      sel  <= '0;
      mop  <= '0;
      wcnt <= '0;
      mcnt <= '0;
    end else begin
      case (st)
        S_HDR: if (iw_valid) begin
          hdr <= pkt_hdr_t'(iw_data);
          sel <= targets(pkt_hdr_t'(iw_data));
          st  <= S_PUSH_HDR;
        end
        S_PUSH_HDR: if (fire) begin
          wcnt <= '0;
          mcnt <= '0;
          st   <= (hdr.window == '0) ? S_HDR : S_WORD;
        end
        S_WORD: if (iw_valid) begin
          mop  <= {mop[UOP_W-33:0], iw_data};
          wcnt <= wcnt + 2'd1;
          if (wcnt == 2'(MOP_WORDS - 1)) st <= S_PUSH_MOP;
        end
        S_PUSH_MOP: if (fire) begin
          wcnt <= '0;
          mcnt <= mcnt + 6'd1;
          st   <= (mcnt + 6'd1 == hdr.window) ? S_HDR : S_WORD;
        end
        default: st <= S_HDR;
      endcase
    end
  end
endmodule
