// rsn_mop_decoder -- second-level (mOP to uOP) decoder with packet reuse.
//
// One instance sits in front of each PL FU. It reads its level-2 FIFO: first
// a packet header, then `window` mOPs, which it keeps in a local window
// buffer. It then issues the window as uOPs `reuse` times in order
// (w0, w1, ... w0, w1, ...). The uOP that closes a packet whose header has
// `last` set carries last = 1, which tells the FU to exit after it. This is
// the paper's mechanism for repeated uOP patterns ("send to FU1 and then FU2,
// repeating 128 times" is one packet with window 2 and reuse 128).
//
// In this datapath an mOP and a uOP hold the same 96 bits, so the conversion
// step is a copy; the window buffer and the replay are the real work. The
// decoder takes the whole window before it issues the first uOP (this
// design's choice). A reuse of 0 is treated as 1.
//
// Interface: mop_* is a valid/ready input of rsn_pkg::mop_ent_t, uop_* a
// valid/ready output of rsn_pkg::uop_ent_t. Timing: one mOP accepted or one
// uOP issued per cycle.
module rsn_mop_decoder
  import rsn_pkg::*;
#(
  parameter int unsigned WIN_MAX = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mop_valid,
  output logic     mop_ready,
  input  mop_ent_t mop_data,
  output logic     uop_valid,
  input  logic     uop_ready,
  output uop_ent_t uop_data
);
  typedef enum logic [1:0] {S_IDLE, S_FILL, S_PLAY} st_e;
  st_e        st;
  pkt_hdr_t   hdr;
  uop_bits_t  win [WIN_MAX];
  logic [5:0] wcnt;
  logic [12:0] rcnt, reuse_n;
  logic       last_w, last_r;

  assign mop_ready = (st == S_IDLE) || (st == S_FILL);
  assign uop_valid = (st == S_PLAY);
  assign last_w    = (wcnt + 6'd1 == hdr.window);
  assign last_r    = (rcnt + 13'd1 >= reuse_n);
  assign uop_data.bits = win[wcnt];
  assign uop_data.last = hdr.last && last_w && last_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      hdr     <= '0;
      wcnt    <= '0;
      rcnt    <= '0;
      reuse_n <= '0;
    end else begin
      case (st)
        S_IDLE: if (mop_valid && mop_data.is_hdr) begin
          hdr     <= pkt_hdr_t'(mop_data.bits[31:0]);
          reuse_n <= (mop_data.bits[12:0] == '0) ? 13'd1 : mop_data.bits[12:0];
          wcnt    <= '0;
          rcnt    <= '0;
          st      <= (mop_data.bits[18:13] == '0) ? S_IDLE : S_FILL;
        end
        S_FILL: if (mop_valid) begin
          wcnt <= last_w ? '0 : wcnt + 6'd1;
          if (last_w) st <= S_PLAY;
        end
        S_PLAY: if (uop_ready) begin
          if (last_w) begin
            wcnt <= '0;
            rcnt <= rcnt + 13'd1;
            if (last_r) st <= S_IDLE;
          end else begin
            wcnt <= wcnt + 6'd1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_FILL && mop_valid) win[wcnt] <= mop_data.bits;
  end

  a_order: assert property (@(posedge clk) disable iff (!rst_n)
                            (st == S_FILL && mop_valid) |-> !mop_data.is_hdr)
    else $error("rsn_mop_decoder: header inside a packet window");
endmodule
