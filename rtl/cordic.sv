// Pipelined CORDIC producing cosine and sine of a binary angle.
//
// The angle is a 32-bit unsigned binary fraction of a full turn
// (2^32 = 2*pi). Angles in the left half plane are first turned by pi
// (result negated), leaving |a| <= pi/2, inside the convergence range of
// rotation mode. CORDIC_ITER micro-rotations by atan(2^-i), one per
// pipeline stage, then turn the pre-scaled vector (K, 0) with
// K = prod 1/sqrt(1+2^-2i) = 0.607252935 to (cos a, sin a) in Q2.30.
// The rotation constants atan(2^-i)/(2*pi)*2^32 are listed in the
// function below. A tag travels with each angle.
//
// Timing: a new angle may enter on every `en`; the result appears
// CORDIC_ITER+2 enables later. `busy` is high while any angle is inside. The whole pipeline holds while `en` is low.
// The paper uses the trigonometric functions of its framework without
// describing them; this unit is this design's own.
module cordic
  import qgd_pkg::*;
#(
  parameter int TAGW = 16
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            en,
  input  logic            in_valid,
  input  logic [31:0]     angle,
  input  logic [TAGW-1:0] in_tag,
  output logic            out_valid,
  output fx_t             cos_o,
  output fx_t             sin_o,
  output logic [TAGW-1:0] out_tag,
  output logic            busy
);
  localparam int N  = CORDIC_ITER;
  localparam int IW = 34;
  localparam logic signed [IW-1:0] KSCALE = 34'sd652032874;

  function automatic logic signed [IW-1:0] atan_tab(input int i);
    case (i)
      0:  return 34'sd536870912;   1: return 34'sd316933406;
      2:  return 34'sd167458907;   3: return 34'sd85004756;
      4:  return 34'sd42667331;    5: return 34'sd21354465;
      6:  return 34'sd10679838;    7: return 34'sd5340245;
      8:  return 34'sd2670163;     9: return 34'sd1335087;
      10: return 34'sd667544;     11: return 34'sd333772;
      12: return 34'sd166886;     13: return 34'sd83443;
      14: return 34'sd41722;      15: return 34'sd20861;
      16: return 34'sd10430;      17: return 34'sd5215;
      18: return 34'sd2608;       19: return 34'sd1304;
      20: return 34'sd652;        21: return 34'sd326;
      22: return 34'sd163;        23: return 34'sd81;
      24: return 34'sd41;         25: return 34'sd20;
      26: return 34'sd10;         27: return 34'sd5;
      28: return 34'sd3;          29: return 34'sd1;
      default: return 34'sd1;
    endcase
  endfunction

  logic signed [IW-1:0] x [N+1];
  logic signed [IW-1:0] y [N+1];
  logic signed [IW-1:0] z [N+1];
  logic                 neg [N+1];
  logic                 v   [N+1];
  logic [TAGW-1:0]      tg  [N+1];

  // stage 0: quadrant reduction
  always_ff @(posedge clk) begin
    if (rst) begin
      v[0] <= 1'b0;
    end else if (en) begin
      v[0] <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      logic [31:0] a;
      logic        flip;
      flip   = (angle[31:30] == 2'b01) || (angle[31:30] == 2'b10);
      a      = flip ? angle + 32'h8000_0000 : angle;
      x[0]   <= KSCALE;
      y[0]   <= '0;
      z[0]   <= IW'($signed(a));
      neg[0] <= flip;
      tg[0]  <= in_tag;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) begin
        v[i+1] <= 1'b0;
      end else if (en) begin
        v[i+1] <= v[i];
      end
    end
    always_ff @(posedge clk) begin
      if (en) begin
        if (!z[i][IW-1]) begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
          z[i+1] <= z[i] - atan_tab(i);
        end else begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
          z[i+1] <= z[i] + atan_tab(i);
        end
        neg[i+1] <= neg[i];
        tg[i+1]  <= tg[i];
      end
    end
  end

  always_comb begin
    busy = out_valid;
    for (int i = 0; i <= N; i++) busy |= v[i];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= v[N];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      cos_o   <= neg[N] ? -fx_t'(x[N]) : fx_t'(x[N]);
      sin_o   <= neg[N] ? -fx_t'(y[N]) : fx_t'(y[N]);
      out_tag <= tg[N];
    end
  end
endmodule
