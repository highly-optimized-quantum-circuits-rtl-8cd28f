// Gate kernel generator.
//
// The host uploads the circuit as a sequence of gates, each split into four
// 32-bit pockets sent one after the other:
//   pocket 0: [3:0] target qubit, [7:4] control qubit, [8] controlled
//   pocket 1: theta/2 as a binary angle (2^32 = 2*pi, i.e. theta in 4*pi units)
//   pocket 2: phi    as a binary angle (2^32 = 2*pi)
//   pocket 3: lambda as a binary angle
// and, for every gradient matrix m >= 1 of a job, which gate and which of its
// parameters that matrix differentiates (derivative table, entry m-1).
//
// For a job of P passes and M matrices per pass it then produces, in the
// order pass, matrix, chain position g, the kernel of gate i = pass*NC + g,
// U = [[cos(t/2), -e^{i l} sin(t/2)], [e^{i p} sin(t/2), e^{i(p+l)} cos(t/2)]],
// tagged with g, for the Gate block at position g. Positions beyond the last
// gate get the identity. A derivative kernel follows the parameter shift
// rule with the elements independent of the parameter set to zero:
//   d/dtheta  = U(theta+pi)/2
//   d/dphi    = U(phi+pi/2)    with row 0 zeroed
//   d/dlambda = U(lambda+pi/2) with column 0 zeroed
// A single pipelined CORDIC is shared: every gate issues its four angles
// theta/2, phi, lambda, phi+lambda on four consecutive cycles, so one kernel
// is completed every four cycles, after CORDIC_ITER+3 cycles of latency.
// The kernel output is valid/ready; the whole pipeline holds while a
// finished kernel waits.
// The kernel formula, the four-pocket upload, the four cycles per gate and
// the derivative rule follow the paper; the pocket layout, the angle
// encoding, the tables and the shared CORDIC are this design's choices.
module kernel_generator
  import qgd_pkg::*;
#(
  parameter int NC   = 108,    // Gate blocks in the chain
  parameter int MAXG = 1024,   // gate table depth
  parameter int TAGW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic            clk,
  input  logic            rst,
  // gate upload, four pockets per gate
  input  logic            gw_clear,
  input  logic            gw_valid,
  input  logic [31:0]     gw_data,
  // derivative table
  input  logic            dt_we,
  input  logic [7:0]      dt_addr,
  input  logic [15:0]     dt_gate,
  input  dsel_t           dt_sel,
  // job
  input  logic            start,
  input  logic [15:0]     n_gates,
  input  logic [7:0]      n_mats,
  input  logic [15:0]     n_passes,
  output logic            busy,
  // kernel stream to the chain
  output logic            k_valid,
  input  logic            k_ready,
  output logic [TAGW-1:0] k_tag,
  output kernel_t         k_kern
);
  localparam int GAW = $clog2(MAXG);

  typedef struct packed {
    logic [31:0] w0, w1, w2, w3;
  } gate_rec_t;

  typedef struct packed {
    logic [1:0]      ph;
    logic [QLW-1:0]  target;
    logic [QLW-1:0]  control;
    logic            ctrl_en;
    dsel_t           dsel;
    logic            ident;
    logic [TAGW-1:0] dest;
  } ctag_t;

  gate_rec_t   gtab [MAXG];
  logic [15:0] dgate [256];
  dsel_t       dsel_tab [256];

  // ---------------- upload ----------------
  logic [GAW-1:0] gwa;
  logic [1:0]     gwp;
  logic [95:0]    gacc;

  always_ff @(posedge clk) begin
    if (rst || gw_clear) begin
      gwa <= '0;
      gwp <= '0;
    end else if (gw_valid) begin
      gwp <= gwp + 2'd1;
      if (gwp == 2'd3) gwa <= gwa + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (gw_valid) begin
      gacc <= {gacc[63:0], gw_data};
      if (gwp == 2'd3) gtab[gwa] <= {gacc, gw_data};
    end
    if (dt_we) begin
      dgate[dt_addr]    <= dt_gate;
      dsel_tab[dt_addr] <= dt_sel;
    end
  end

  // ---------------- sequencer ----------------
  logic            en, running;
  logic [1:0]      ph;
  logic [TAGW-1:0] g;
  logic [7:0]      m;
  logic [15:0]     r, ibase, gi;
  gate_rec_t       rec;
  dsel_t           ds;
  logic            ident;
  logic [31:0]     ang_h, ang_p, ang_l, ang;
  ctag_t           itag, otag;
  logic            c_ov, c_busy;
  fx_t             c_cos, c_sin;
  logic [$bits(ctag_t)-1:0] c_tag;

  assign en = !k_valid || k_ready;

  always_comb begin
    gi    = ibase + 16'(g);
    ident = (gi >= n_gates);
    rec   = gtab[gi[GAW-1:0]];
    ds    = D_NONE;
    if (m != 8'd0 && dgate[m - 8'd1] == gi) ds = dsel_tab[m - 8'd1];
    ang_h = rec.w1 + ((ds == D_THETA)  ? 32'h4000_0000 : 32'h0);
    ang_p = rec.w2 + ((ds == D_PHI)    ? 32'h4000_0000 : 32'h0);
    ang_l = rec.w3 + ((ds == D_LAMBDA) ? 32'h4000_0000 : 32'h0);
    unique case (ph)
      2'd0:    ang = ang_h;
      2'd1:    ang = ang_p;
      2'd2:    ang = ang_l;
      default: ang = ang_p + ang_l;
    endcase
    itag.ph      = ph;
    itag.target  = rec.w0[3:0];
    itag.control = rec.w0[7:4];
    itag.ctrl_en = rec.w0[8] && !ident;
    itag.dsel    = ident ? D_NONE : ds;
    itag.ident   = ident;
    itag.dest    = g;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      ph      <= '0;
      g       <= '0;
      m       <= '0;
      r       <= '0;
      ibase   <= '0;
    end else if (start) begin
      running <= (n_passes != 16'd0) && (n_mats != 8'd0);
      ph      <= '0;
      g       <= '0;
      m       <= '0;
      r       <= '0;
      ibase   <= '0;
    end else if (en && running) begin
      ph <= ph + 2'd1;
      if (ph == 2'd3) begin
        if (g == TAGW'(NC-1)) begin
          g <= '0;
          if (m == n_mats - 8'd1) begin
            m     <= '0;
            r     <= r + 16'd1;
            ibase <= ibase + 16'(NC);
            if (r == n_passes - 16'd1) running <= 1'b0;
          end else begin
            m <= m + 8'd1;
          end
        end else begin
          g <= g + 1'b1;
        end
      end
    end
  end

  cordic #(.TAGW($bits(ctag_t))) u_cordic (
    .clk, .rst, .en,
    .in_valid(running), .angle(ang), .in_tag(itag),
    .out_valid(c_ov), .cos_o(c_cos), .sin_o(c_sin), .out_tag(c_tag), .busy(c_busy)
  );
  assign otag = ctag_t'(c_tag);

  // ---------------- kernel assembly ----------------
  function automatic fx_t fxmul(input fx_t a, input fx_t b);
    logic signed [2*FXW-1:0] p;
    p = (2*FXW)'(a) * (2*FXW)'(b);
    p = p + (64'sd1 <<< (FRAC-1));
    return fx_t'(p >>> FRAC);
  endfunction

  fx_t     ct, st, cp, sp, cl, sl;
  kernel_t nk;

  always_comb begin
    fx_t c, s;
    c = ct;
    s = st;
    if (otag.dsel == D_THETA) begin
      c = ct >>> 1;
      s = st >>> 1;
    end
    nk.u00.re = c;
    nk.u00.im = '0;
    nk.u01.re = -fxmul(cl, s);
    nk.u01.im = -fxmul(sl, s);
    nk.u10.re = fxmul(cp, s);
    nk.u10.im = fxmul(sp, s);
    nk.u11.re = fxmul(c_cos, c);
    nk.u11.im = fxmul(c_sin, c);
    if (otag.dsel == D_PHI)    begin nk.u00 = '0; nk.u01 = '0; end
    if (otag.dsel == D_LAMBDA) begin nk.u00 = '0; nk.u10 = '0; end
    if (otag.ident) begin
      nk.u00 = '{re: FX_ONE, im: '0};
      nk.u01 = '0;
      nk.u10 = '0;
      nk.u11 = '{re: FX_ONE, im: '0};
    end
    nk.target  = otag.target;
    nk.control = otag.control;
    nk.ctrl_en = otag.ctrl_en;
    nk.deriv   = (otag.dsel != D_NONE);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      k_valid <= 1'b0;
    end else begin
      if (en && c_ov && otag.ph == 2'd3) k_valid <= 1'b1;
      else if (k_ready)                  k_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (en && c_ov) begin
      unique case (otag.ph)
        2'd0: begin ct <= c_cos; st <= c_sin; end
        2'd1: begin cp <= c_cos; sp <= c_sin; end
        2'd2: begin cl <= c_cos; sl <= c_sin; end
        default: begin
          k_kern <= nk;
          k_tag  <= otag.dest;
        end
      endcase
    end
  end

  assign busy = running || c_busy || k_valid;
endmodule
