// Synchronous FIFO with valid/ready on both sides.
//
// Used between two Gate groups, so that groups need not advance in lock
// step and the long data path of the chain is cut into short ones, and as
// the small kernel queue in front of every Gate block. A circular memory of
// DEPTH words (DEPTH a power of two) with a fill counter; the output is
// read straight from the memory (first-word fall-through).
//
// Interface: `in_ready` is high while the FIFO is not full, `out_valid`
// while it is not empty; a word moves on valid && ready. One cycle from
// write to read. The paper only says that FIFOs join the groups; the depth
// and the fall-through form are this design's choices.
module group_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          wr, rd;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (wr) wp <= wp + 1'b1;
      if (rd) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) cnt <= (AW+1)'(DEPTH));
endmodule
