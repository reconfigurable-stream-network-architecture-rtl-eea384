// rsn_mesh_fu -- Mesh FU (MeshA / MeshB): circuit-switched stream router.
//
// Connects Mem FUs to MME FUs. One uOP (rsn_pkg::mesh_uop_t; Table 2 of the
// paper: size, srcFUs, destFUs) sets up a circuit for each enabled
// destination d from source src[d] and moves `size` words on every circuit;
// then the next uOP may change the routing. Several circuits run at once, and
// one source may feed several destinations (fan-out copy, e.g. MeshA copying
// the LHS of MemA0 to MME0 and MME1 in the paper's Fig. 13 example). A word
// leaves a source only when every destination it feeds can take it, so the
// copies stay in step; a stalled destination stalls its source. This is the
// paper's Mesh FU kernel of Fig. 10 ("route data from streamX or streamY to
// streamZ based on srcFU for N iterations"), widened to many circuits.
//
// MeshA: sources MemA0-2 and MemC0-5, destinations the LHS ports of MME0-5.
// MeshB: sources MemB0-2, destinations the RHS ports of MME0-5.
// Mesh FUs have no storage (Fig. 19: 0 MB). Destination valid is only raised
// together with all the ready signals of its copy group, so a word is
// never offered and then withdrawn. Timing: combinational, one word per
// circuit per cycle. A uOP with last set makes the FU exit.
module rsn_mesh_fu
  import rsn_pkg::*;
#(
  parameter int unsigned NSRC = 9,
  parameter int unsigned NDST = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            uop_valid,
  output logic            uop_ready,
  input  uop_ent_t        uop_data,
  output logic            exited,
  input  logic [NSRC-1:0] src_valid,
  output logic [NSRC-1:0] src_ready,
  input  word_t           src_data [NSRC],
  output logic [NDST-1:0] dst_valid,
  input  logic [NDST-1:0] dst_ready,
  output word_t           dst_data [NDST]
);
  mesh_uop_t       u;
  logic            busy, last_q;
  logic [23:0]     cnt [NDST];
  logic [NDST-1:0] act, done_d;
  logic [NSRC-1:0] grp_ok, grp_any;

  assign uop_ready = !busy && !exited;

  always_comb begin
    for (int d = 0; d < NDST; d++) begin
      act[d]    = busy && u.en[d] && (cnt[d] != u.size) && (32'(u.src[d]) < NSRC);
      done_d[d] = !u.en[d] || (cnt[d] == u.size) || (32'(u.src[d]) >= NSRC);
    end
    for (int s = 0; s < NSRC; s++) begin
      grp_ok[s]  = 1'b1;
      grp_any[s] = 1'b0;
      for (int d = 0; d < NDST; d++) begin
        if (act[d] && 32'(u.src[d]) == s) begin
          grp_any[s] = 1'b1;
          if (!dst_ready[d]) grp_ok[s] = 1'b0;
        end
      end
      src_ready[s] = grp_any[s] && grp_ok[s];
    end
    for (int d = 0; d < NDST; d++) begin
      dst_valid[d] = 1'b0;
      dst_data[d]  = '0;
      for (int s = 0; s < NSRC; s++) begin
        if (act[d] && 32'(u.src[d]) == s) begin
          dst_valid[d] = src_valid[s] && grp_ok[s];
          dst_data[d]  = src_data[s];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; busy <= 1'b0; last_q <= 1'b0; exited <= 1'b0;
      for (int d = 0; d < NDST; d++) cnt[d] <= '0;
    end else begin
      if (!busy) begin
        if (uop_valid && uop_ready) begin
          u <= mesh_uop_t'(uop_data.bits); busy <= 1'b1; last_q <= uop_data.last;
          for (int d = 0; d < NDST; d++) cnt[d] <= '0;
        end
      end else begin
        for (int d = 0; d < NDST; d++)
          if (dst_valid[d] && dst_ready[d]) cnt[d] <= cnt[d] + 24'd1;
        if (&done_d) begin
          busy <= 1'b0;
          if (last_q) exited <= 1'b1;
        end
      end
    end
  end
endmodule
