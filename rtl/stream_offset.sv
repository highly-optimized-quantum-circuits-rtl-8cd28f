// Dynamic stream offset.
//
// Keeps the last 2^NQ elements of a stream in an on-chip memory written
// once per stream slot, so that any element up to 2^NQ slots in the past
// can be read back; together with the fixed 2^(NQ-1) delay of the other
// arm this gives the +-2^t offsets a gate needs, the largest being
// +-2^(NQ-1). Distance 0 returns the element being written in the same
// slot (bypass); distance 2^NQ returns the oldest stored element, which
// the read-before-write order of the memory still delivers.
//
// Interface: on every `adv` the element `din` is written and the element
// `rdist` slots back is registered into `dout`; `dout` holds while `adv`
// is low. One cycle of read latency. Memory depth 2^NQ as in the paper;
// the bypass and the read-first order are this design's choices.
module stream_offset
  import qgd_pkg::*;
#(
  parameter int NQ = 9,
  parameter int W  = 2*FXW
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          adv,
  input  logic [W-1:0]  din,
  input  logic [NQ:0]   rdist,      // 0 .. 2^NQ
  output logic [W-1:0]  dout
);
  localparam int DEPTH = 1 << NQ;

  logic [W-1:0]    mem [DEPTH];
  logic [NQ-1:0]   wp;
  logic [NQ-1:0]   ra;

  assign ra = wp - rdist[NQ-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
    end else if (adv) begin
      wp <= wp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      dout    <= (rdist == '0) ? din : mem[ra];
      mem[wp] <= din;
    end
  end
endmodule
