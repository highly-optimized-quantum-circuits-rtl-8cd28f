// Index counter state machine of a Gate block.
//
// Walks the basis index I = 0, 1, ..., 2^n-1 of the rows of one column of
// the column-major unitary stream, and the column index alongside it, so
// that both wrap after 2^n x 2^n elements. From the binary form of I it
// derives, in the same cycle, the state of the target qubit (bit t of I),
// the state of the control qubit (bit c of I) and hence the signed offset
// to the partner amplitude, +2^t when bit t is 0 and -2^t when it is 1.
// The target-qubit state also picks the row of the 2x2 kernel.
//
// Interface: `step` advances the counter by one element; `clear` returns
// it to (0,0). Outputs are combinational from the counter state.
// The counting and the bit rules follow the paper; the separate column
// counter (used to find matrix boundaries) is this design's addition.
module index_counter
  import qgd_pkg::*;
#(
  parameter int NQ = 9                 // largest supported qubit count
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            clear,
  input  logic            step,
  input  logic [QLW-1:0]  n,           // qubits of the current job, 1..NQ
  input  logic [QLW-1:0]  t,           // target qubit
  input  logic [QLW-1:0]  c,           // control qubit
  output logic [NQ-1:0]   idx,         // row index I within the column
  output logic [NQ-1:0]   col,         // column index
  output logic            tbit,        // state of the target qubit in I
  output logic            cbit,        // state of the control qubit in I
  output logic            row_first,   // I == 0
  output logic            mat_first,   // first element of a matrix
  output logic            mat_last     // last element of a matrix
);
  logic [NQ-1:0] top;

  always_comb begin
    top       = NQ'((1 << n) - 1);
    tbit      = idx[t[$clog2(NQ)-1:0]];
    cbit      = idx[c[$clog2(NQ)-1:0]];
    row_first = (idx == '0);
    mat_first = row_first && (col == '0);
    mat_last  = (idx == top) && (col == top);
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      idx <= '0;
      col <= '0;
    end else if (step) begin
      if (idx == top) begin
        idx <= '0;
        col <= (col == top) ? '0 : col + 1'b1;
      end else begin
        idx <= idx + 1'b1;
      end
    end
  end
endmodule
