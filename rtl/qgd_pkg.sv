// Shared types and constants of the data-flow quantum circuit simulator.
//
// Numbers are 32-bit signed fixed point with one sign bit, one integer bit
// and 30 fractional bits (Q2.30), so every amplitude of a unitary, whose
// magnitude never exceeds one, is representable. A complex number is a pair
// of them. A gate kernel is the 2x2 complex matrix applied on the target
// qubit together with the labels of the target and control qubits.
// The number format follows the paper; the field layout of the structs and
// the host word formats are this design's own.
package qgd_pkg;

  localparam int FXW  = 32;             // fixed-point word width
  localparam int FRAC = 30;             // fractional bits
  localparam int QLW  = 4;              // width of a qubit label
  localparam int CORDIC_ITER = 30;      // CORDIC micro-rotations

  typedef logic signed [FXW-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cpx_t;

  // Which free parameter of a gate a kernel is differentiated by.
  typedef enum logic [1:0] {
    D_NONE   = 2'd0,
    D_THETA  = 2'd1,
    D_PHI    = 2'd2,
    D_LAMBDA = 2'd3
  } dsel_t;

  typedef struct packed {
    cpx_t             u00;
    cpx_t             u01;
    cpx_t             u10;
    cpx_t             u11;
    logic [QLW-1:0]   target;
    logic [QLW-1:0]   control;
    logic             ctrl_en;   // 1: controlled two-qubit gate
    logic             deriv;     // 1: kernel is a derivative (control-0 part becomes zero)
  } kernel_t;

  // Job description shared by the blocks of one SLR engine.
  typedef struct packed {
    logic [QLW-1:0] n_qubits;  // n, the unitary is 2^n x 2^n
    logic [15:0]    n_gates;   // gates in the circuit
    logic [7:0]     n_mats;    // matrices per pass: 1 (cost) + gradient components
  } job_t;

  // Round a Q.60 product sum back to Q2.30 (round half up).
  function automatic fx_t round60(input logic signed [66:0] s);
    logic signed [66:0] r;
    r = (s + (67'sd1 <<< (FRAC-1))) >>> FRAC;
    return r[FXW-1:0];
  endfunction

  localparam fx_t FX_ONE = fx_t'(1) <<< FRAC;

endpackage
