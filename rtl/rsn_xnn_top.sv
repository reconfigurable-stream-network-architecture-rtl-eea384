// rsn_xnn_top -- RSN-XNN datapath: a reconfigurable stream network for
// transformer encoders.
//
// The datapath is a network of functional units (FUs) joined by valid/ready
// streams; a computation is a path through it that the program triggers by
// giving each FU on the path a uOP. Units and links (after Fig. 13 and
// Fig. 19 of the paper, with i = 6 MMEs, j = 3 MemBs, k = 3 MemAs, m = 6
// MemCs):
//   decoder unit  instruction memory -> fetch -> level 1 -> level 2 -> uOP
//                 FIFOs of the 16 PL FUs
//   DDR FU        off-chip DDR -> MemA0-2 / MemB0-2 (load),
//                 MemC0-5 -> off-chip DDR (store)
//   LPDDR FU      off-chip LPDDR -> MemB0-2 (weights, bias)
//   MemA0-2       -> MeshA                  (LHS tiles)
//   MemB0-2       -> MeshB                  (RHS tiles)
//   MeshA         MemA0-2, MemC0-5 -> LHS of MME0-5
//   MeshB         MemB0-2 -> RHS of MME0-5
//   MME0-5        -> MemC0-5, one to one
//   MemC0-5       -> DDR FU, or -> MeshA (output of one layer feeds the next)
// The MMEs take their uOPs from local stores written through mme_prog_*
// (the paper pre-stores them in the AI Engines), all other FUs from the
// program. done is high when the program has been decoded, every PL FU has
// executed a uOP marked last, and every MME has finished its uOP list.
//
// Off-chip memories and the instruction memory are outside: the ports are
// simple read/write channels (see rsn_ddr_fu). The instruction memory is a
// separate port here; on the board it lives in LPDDR.
module rsn_xnn_top
  import rsn_pkg::*;
#(
  parameter int unsigned MEMA_BANK      = 32768,   // 0.25 MB per MemA
  parameter int unsigned MEMB01_BANK    = 65536,   // 0.5 MB per MemB0/1
  parameter int unsigned MEMB2_BANK     = 32768,   // 0.25 MB MemB2
  parameter int unsigned MEMC_BANK      = 131072,  // 1 MB per MemC
  parameter int unsigned MME_ACC_DEPTH  = 4096,
  parameter int unsigned UOP_FIFO_DEPTH = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        prog_base,
  input  logic [31:0]        prog_len,
  output logic               done,
  output logic [N_FU-1:0]    fu_exited,
  // instruction memory
  output logic               imem_req_valid,
  input  logic               imem_req_ready,
  output logic [31:0]        imem_addr,
  input  logic               imem_rsp_valid,
  input  logic [31:0]        imem_rsp_data,
  // off-chip DDR
  output logic               ddr_rd_req_valid,
  input  logic               ddr_rd_req_ready,
  output logic [31:0]        ddr_rd_addr,
  input  logic               ddr_rd_rsp_valid,
  input  word_t              ddr_rd_rsp_data,
  output logic               ddr_wr_valid,
  input  logic               ddr_wr_ready,
  output logic [31:0]        ddr_wr_addr,
  output word_t              ddr_wr_data,
  // off-chip LPDDR (read only)
  output logic               lp_rd_req_valid,
  input  logic               lp_rd_req_ready,
  output logic [31:0]        lp_rd_addr,
  input  logic               lp_rd_rsp_valid,
  input  word_t              lp_rd_rsp_data,
  // MME local uOP stores
  input  logic [N_MME-1:0]   mme_prog_we,
  input  logic [4:0]         mme_prog_addr,
  input  logic [31:0]        mme_prog_data,
  input  logic [5:0]         mme_prog_len [N_MME],
  input  logic               mme_start
);
  // ------------------------------------------------------------ decoder
  logic [N_FU-1:0] uv, ur;
  uop_ent_t        ud [N_FU];
  logic            dec_idle;

  rsn_decoder_unit #(.UOP_FIFO_DEPTH(UOP_FIFO_DEPTH)) u_dec (
    .clk, .rst_n, .start, .prog_base, .prog_len,
    .imem_req_valid, .imem_req_ready, .imem_addr, .imem_rsp_valid, .imem_rsp_data,
    .uop_valid(uv), .uop_ready(ur), .uop_data(ud), .idle(dec_idle)
  );

  // ------------------------------------------------------------ streams
  logic [5:0]  ddr_ld_v, ddr_ld_r;  word_t ddr_ld_d;
  logic [5:0]  ddr_st_v, ddr_st_r;  word_t ddr_st_d [6];
  logic [2:0]  lp_ld_v, lp_ld_r;    word_t lp_ld_d;
  logic [8:0]  ma_src_v, ma_src_r;  word_t ma_src_d [9];
  logic [2:0]  mb_src_v, mb_src_r;  word_t mb_src_d [3];
  logic [5:0]  lhs_v, lhs_r, rhs_v, rhs_r, res_v, res_r;
  word_t       lhs_d [6], rhs_d [6], res_d [6];
  logic [N_MME-1:0] mme_done;

  rsn_ddr_fu #(.N_DST(6), .N_SRC(6)) u_ddr (
    .clk, .rst_n,
    .uop_valid(uv[FU_DDR]), .uop_ready(ur[FU_DDR]), .uop_data(ud[FU_DDR]), .exited(fu_exited[FU_DDR]),
    .rd_req_valid(ddr_rd_req_valid), .rd_req_ready(ddr_rd_req_ready), .rd_addr(ddr_rd_addr),
    .rd_rsp_valid(ddr_rd_rsp_valid), .rd_rsp_data(ddr_rd_rsp_data),
    .wr_valid(ddr_wr_valid), .wr_ready(ddr_wr_ready), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data),
    .ld_valid(ddr_ld_v), .ld_ready(ddr_ld_r), .ld_data(ddr_ld_d),
    .st_valid(ddr_st_v), .st_ready(ddr_st_r), .st_data(ddr_st_d)
  );

  rsn_lpddr_fu #(.N_DST(3)) u_lpddr (
    .clk, .rst_n,
    .uop_valid(uv[FU_LPDDR]), .uop_ready(ur[FU_LPDDR]), .uop_data(ud[FU_LPDDR]), .exited(fu_exited[FU_LPDDR]),
    .rd_req_valid(lp_rd_req_valid), .rd_req_ready(lp_rd_req_ready), .rd_addr(lp_rd_addr),
    .rd_rsp_valid(lp_rd_rsp_valid), .rd_rsp_data(lp_rd_rsp_data),
    .ld_valid(lp_ld_v), .ld_ready(lp_ld_r), .ld_data(lp_ld_d)
  );

  for (genvar k = 0; k < N_MEMA; k++) begin : g_mema
    rsn_mema_fu #(.BANK_WORDS(MEMA_BANK)) u_mema (
      .clk, .rst_n,
      .uop_valid(uv[FU_MEMA0+k]), .uop_ready(ur[FU_MEMA0+k]), .uop_data(ud[FU_MEMA0+k]),
      .exited(fu_exited[FU_MEMA0+k]),
      .in_valid(ddr_ld_v[k]), .in_ready(ddr_ld_r[k]), .in_data(ddr_ld_d),
      .out_valid(ma_src_v[k]), .out_ready(ma_src_r[k]), .out_data(ma_src_d[k])
    );
  end

  for (genvar j = 0; j < N_MEMB; j++) begin : g_memb
    rsn_memb_fu #(.BANK_WORDS(j < 2 ? MEMB01_BANK : MEMB2_BANK)) u_memb (
      .clk, .rst_n,
      .uop_valid(uv[FU_MEMB0+j]), .uop_ready(ur[FU_MEMB0+j]), .uop_data(ud[FU_MEMB0+j]),
      .exited(fu_exited[FU_MEMB0+j]),
      .lp_valid(lp_ld_v[j]), .lp_ready(lp_ld_r[j]), .lp_data(lp_ld_d),
      .dd_valid(ddr_ld_v[3+j]), .dd_ready(ddr_ld_r[3+j]), .dd_data(ddr_ld_d),
      .out_valid(mb_src_v[j]), .out_ready(mb_src_r[j]), .out_data(mb_src_d[j])
    );
  end

  for (genvar m = 0; m < N_MEMC; m++) begin : g_memc
    word_t od;
    rsn_memc_fu #(.BANK_WORDS(MEMC_BANK)) u_memc (
      .clk, .rst_n,
      .uop_valid(uv[FU_MEMC0+m]), .uop_ready(ur[FU_MEMC0+m]), .uop_data(ud[FU_MEMC0+m]),
      .exited(fu_exited[FU_MEMC0+m]),
      .in_valid(res_v[m]), .in_ready(res_r[m]), .in_data(res_d[m]),
      .dd_valid(ddr_st_v[m]), .dd_ready(ddr_st_r[m]),
      .ma_valid(ma_src_v[3+m]), .ma_ready(ma_src_r[3+m]),
      .out_data(od)
    );
    assign ddr_st_d[m]   = od;
    assign ma_src_d[3+m] = od;
  end

  rsn_mesh_fu #(.NSRC(9), .NDST(6)) u_mesha (
    .clk, .rst_n,
    .uop_valid(uv[FU_MESHA]), .uop_ready(ur[FU_MESHA]), .uop_data(ud[FU_MESHA]), .exited(fu_exited[FU_MESHA]),
    .src_valid(ma_src_v), .src_ready(ma_src_r), .src_data(ma_src_d),
    .dst_valid(lhs_v), .dst_ready(lhs_r), .dst_data(lhs_d)
  );

  rsn_mesh_fu #(.NSRC(3), .NDST(6)) u_meshb (
    .clk, .rst_n,
    .uop_valid(uv[FU_MESHB]), .uop_ready(ur[FU_MESHB]), .uop_data(ud[FU_MESHB]), .exited(fu_exited[FU_MESHB]),
    .src_valid(mb_src_v), .src_ready(mb_src_r), .src_data(mb_src_d),
    .dst_valid(rhs_v), .dst_ready(rhs_r), .dst_data(rhs_d)
  );

  for (genvar i = 0; i < N_MME; i++) begin : g_mme
    rsn_mme_fu #(.ACC_DEPTH(MME_ACC_DEPTH)) u_mme (
      .clk, .rst_n,
      .prog_we(mme_prog_we[i]), .prog_addr(mme_prog_addr), .prog_data(mme_prog_data),
      .start(mme_start), .prog_len(mme_prog_len[i]), .done(mme_done[i]),
      .lhs_valid(lhs_v[i]), .lhs_ready(lhs_r[i]), .lhs_data(lhs_d[i]),
      .rhs_valid(rhs_v[i]), .rhs_ready(rhs_r[i]), .rhs_data(rhs_d[i]),
      .out_valid(res_v[i]), .out_ready(res_r[i]), .out_data(res_d[i])
    );
  end

  assign done = dec_idle && (&fu_exited) && (&mme_done);
endmodule
