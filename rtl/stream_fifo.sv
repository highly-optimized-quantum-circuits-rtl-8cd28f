// Stream FIFO: fixed-length delay of one arm of the unitary stream.
//
// A circular memory of DEPTH entries read before it is written at the same
// pointer, followed by the output register, delays the stream by exactly
// DEPTH+1 slots. In a Gate block DEPTH = 2^(NQ-1)-1, so that with the
// output register the direct arm is delayed by 2^(NQ-1) slots, balancing
// the latency of the stream offset on the other arm as the paper describes.
//
// Interface: on every `adv` the word `din` enters and the word that entered
// DEPTH+1 advances earlier appears on `dout` (registered). Stalls hold.
// After reset the memory is swept to zero, one entry per cycle; `init_done`
// goes high after DEPTH cycles and `adv` must stay low until then.
// The circular-memory form and the reset sweep are this design's choices.
module stream_fifo #(
  parameter int W     = 65,
  parameter int DEPTH = 255
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          adv,
  input  logic [W-1:0]  din,
  output logic [W-1:0]  dout,
  output logic          init_done
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;
  logic          sweeping;

  assign init_done = !sweeping;

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr      <= '0;
      dout     <= '0;
      sweeping <= 1'b1;
    end else if (sweeping) begin
      ptr      <= (ptr == AW'(DEPTH-1)) ? '0 : ptr + 1'b1;
      sweeping <= (ptr != AW'(DEPTH-1));
    end else if (adv) begin
      ptr  <= (ptr == AW'(DEPTH-1)) ? '0 : ptr + 1'b1;
      dout <= mem[ptr];
    end
  end

  always_ff @(posedge clk) begin
    if (sweeping)  mem[ptr] <= '0;
    else if (adv)  mem[ptr] <= din;
  end
endmodule
