// rsn_decoder_unit -- the three-level instruction decoder of the RSN datapath.
//
// Fetch and the level-1 decoder (rsn_fetch_l1) read the single RSN
// instruction stream and broadcast headers and mOPs into one mOP FIFO per PL
// FU. Each FIFO feeds that FU's level-2 decoder (rsn_mop_decoder), which
// replays packet windows into a uOP FIFO. The uOP FIFOs are the outputs; the
// FUs hold the level-3 uOP decoders. Every link has back-pressure, so a FU
// that is busy stalls its uOP FIFO, then its level-2 decoder, then its mOP
// FIFO and finally the fetch (Fig. 11 of the paper).
//
// Follows the paper: three decode levels, FIFOs with back-pressure between
// them, uOP FIFO depth 6 ("setting FIFO depths to six between uOP and mOP
// decoders is deadlock-free in our implementation"). This design's choice:
// the mOP FIFOs are also 6 deep. The MME FUs are not served here: as in the
// paper, their uOPs are stored locally in each MME.
//
// Interface: start/prog_base/prog_len start a program; imem_* reads
// instruction words; uop_valid/ready/data[i] go to FU i (flat numbering in
// rsn_pkg). idle is high when the whole program has been fetched and decoded
// by level 1.
module rsn_decoder_unit
  import rsn_pkg::*;
#(
  parameter int unsigned MOP_FIFO_DEPTH = 6,
  parameter int unsigned UOP_FIFO_DEPTH = 6,
  parameter int unsigned WIN_MAX        = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       prog_base,
  input  logic [31:0]       prog_len,
  output logic              imem_req_valid,
  input  logic              imem_req_ready,
  output logic [31:0]       imem_addr,
  input  logic              imem_rsp_valid,
  input  logic [31:0]       imem_rsp_data,
  output logic [N_FU-1:0]   uop_valid,
  input  logic [N_FU-1:0]   uop_ready,
  output uop_ent_t          uop_data [N_FU],
  output logic              idle
);
  logic [N_FU-1:0] m_valid, m_ready;
  mop_ent_t        m_data;

  rsn_fetch_l1 u_l1 (
    .clk, .rst_n, .start, .prog_base, .prog_len,
    .imem_req_valid, .imem_req_ready, .imem_addr, .imem_rsp_valid, .imem_rsp_data,
    .mop_valid(m_valid), .mop_ready(m_ready), .mop_data(m_data), .idle
  );

  for (genvar i = 0; i < N_FU; i++) begin : g_fu
    logic     q_valid, q_ready, d_valid, d_ready;
    mop_ent_t q_data;
    uop_ent_t d_data;

    rsn_fifo #(.W($bits(mop_ent_t)), .DEPTH(MOP_FIFO_DEPTH)) u_mop_q (
      .clk, .rst_n,
      .in_valid(m_valid[i]), .in_ready(m_ready[i]), .in_data(m_data),
      .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
    );
    rsn_mop_decoder #(.WIN_MAX(WIN_MAX)) u_l2 (
      .clk, .rst_n,
      .mop_valid(q_valid), .mop_ready(q_ready), .mop_data(q_data),
      .uop_valid(d_valid), .uop_ready(d_ready), .uop_data(d_data)
    );
    rsn_fifo #(.W($bits(uop_ent_t)), .DEPTH(UOP_FIFO_DEPTH)) u_uop_q (
      .clk, .rst_n,
      .in_valid(d_valid), .in_ready(d_ready), .in_data(d_data),
      .out_valid(uop_valid[i]), .out_ready(uop_ready[i]), .out_data(uop_data[i])
    );
  end
endmodule
