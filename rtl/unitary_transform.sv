// "Apply unitary transformation" block of a Gate.
//
// Receives, in one slot, the amplitude V[I] from the direct arm, its
// partner V[I xor 2^t] from the offset arm, and the kernel row picked by
// the target-qubit state of I: (u00, u01) when bit t of I is 0 and
// (u11, u10) when it is 1. It forms ua*V[I] + ub*V[partner] with two
// complex multiplications and one complex addition (18 fixed-point
// operations per slot with the 3M multipliers), rounding to Q2.30 only
// after the final sum. The mode input implements the control qubit: an
// element whose control bit is 0 passes unchanged, or, for a derivative
// kernel, becomes zero (the derivative of the identity part).
//
// Timing: two pipeline stages, both advancing on `en`; `pre_valid` is the
// valid bit of the first stage, i.e. what `out_valid` becomes on the next
// `en`. The arithmetic and the pass-through rule follow the paper; zeroing
// the control-0 part of a derivative and the stage split are this design's.
module unitary_transform
  import qgd_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        vin,
  input  cpx_t        vmain,
  input  cpx_t        vpart,
  input  cpx_t        ua,
  input  cpx_t        ub,
  input  logic [1:0]  mode,        // 0 transform, 1 pass, 2 zero
  output cpx_t        vout,
  output logic        out_valid,
  output logic        pre_valid
);
  logic signed [2*FXW+1:0] p1r, p1i, p2r, p2i;
  logic signed [2*FXW+1:0] s1_p1r, s1_p1i, s1_p2r, s1_p2i;
  cpx_t                    s1_main;
  logic [1:0]              s1_mode;
  logic                    s1_v;

  cmul3 u_m1 (.ar(ua.re), .ai(ua.im), .br(vmain.re), .bi(vmain.im), .pr(p1r), .pi(p1i));
  cmul3 u_m2 (.ar(ub.re), .ai(ub.im), .br(vpart.re), .bi(vpart.im), .pr(p2r), .pi(p2i));

  assign pre_valid = s1_v;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_v      <= 1'b0;
      out_valid <= 1'b0;
    end else if (en) begin
      s1_v      <= vin;
      out_valid <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      s1_p1r  <= p1r;
      s1_p1i  <= p1i;
      s1_p2r  <= p2r;
      s1_p2i  <= p2i;
      s1_main <= vmain;
      s1_mode <= mode;
      unique case (s1_mode)
        2'd1:    vout <= s1_main;
        2'd2:    vout <= '0;
        default: begin
          vout.re <= round60(67'(s1_p1r) + 67'(s1_p2r));
          vout.im <= round60(67'(s1_p1i) + 67'(s1_p2i));
        end
      endcase
    end
  end
endmodule
