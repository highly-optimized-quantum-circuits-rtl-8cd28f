// Testbench host for one SLR engine: plays the part of the CPU and of the
// on-board memory (through ddr_model).
//
// After `go` it uploads a random circuit of NG gates on N qubits (random
// angles, targets, controls, half of the gates controlled) as four pockets
// per gate, fills the derivative table so that matrix m >= 1
// differentiates a random gate by theta, phi or lambda in turn, writes a
// random U^dagger (columns of norm 0.9) into the memory and starts the job.
// When the engine is done it compares the trace of every matrix with the
// floating-point model (Tr of the circuit applied to U^dagger, with the
// analytic derivative for gradient matrices) and the cost-function matrix
// left in the memory element by element. It also counts the cycles the
// engine spent waiting for a buffered matrix, the memory stalls, and the
// passes, for the caller to check.
module slr_host
  import qgd_pkg::*;
  import ref_pkg::*;
#(
  parameter int N     = 3,
  parameter int NG    = 7,
  parameter int NM    = 4,
  parameter int NC    = 4,
  parameter int ABITS = 14,
  parameter int AW    = 32,
  parameter int TW    = 48,
  parameter bit STALL = 1'b1,
  parameter real TOL  = 1e-5
) (
  input  logic            clk,
  input  logic            go,
  output logic            finished,
  output int              checks,
  output int              failures,
  output int              n_wait,
  output int              n_memstall,
  // engine host side
  output logic            gw_clear,
  output logic            gw_valid,
  output logic [31:0]     gw_data,
  output logic            dt_we,
  output logic [7:0]      dt_addr,
  output logic [15:0]     dt_gate,
  output dsel_t           dt_sel,
  output logic            job_start,
  output job_t            job,
  input  logic            done,
  input  logic            tr_valid,
  input  logic [TW-1:0]   tr_re,
  input  logic [TW-1:0]   tr_im,
  input  logic [7:0]      tr_mat,
  // engine memory side
  input  logic            mrq_valid,
  output logic            mrq_ready,
  input  logic [AW-1:0]   mrq_addr,
  output logic            mrd_valid,
  input  logic            mrd_ready,
  output cpx_t            mrd_data,
  input  logic            mwr_valid,
  output logic            mwr_ready,
  input  logic [AW-1:0]   mwr_addr,
  input  cpx_t            mwr_data,
  input  logic            rd_wait
);
  localparam int DIM = 1 << N;
  localparam int NP  = (NG + NC - 1) / NC;

  ddr_model #(.ABITS(ABITS), .AW(AW), .STALL(STALL)) u_ddr (
    .clk, .rq_valid(mrq_valid), .rq_ready(mrq_ready), .rq_addr(mrq_addr),
    .rd_valid(mrd_valid), .rd_ready(mrd_ready), .rd_data(mrd_data),
    .wr_valid(mwr_valid), .wr_ready(mwr_ready), .wr_addr(mwr_addr), .wr_data(mwr_data)
  );

  logic [31:0] gw [NG][4];
  int   dg [NM], ds [NM];
  real  tre [NM], tim [NM];
  bit   got [NM];
  int   ntr = 0;
  bit   armed = 0;
  real  ure[], uim[];

  initial begin
    finished = 0; checks = 0; failures = 0; n_wait = 0; n_memstall = 0;
    gw_clear = 0; gw_valid = 0; gw_data = '0; dt_we = 0; dt_addr = '0; dt_gate = '0;
    dt_sel = D_NONE; job_start = 0; job = '0;
  end

  always @(posedge clk) begin
    if (rd_wait) n_wait <= n_wait + 1;
    if ((mwr_valid && !mwr_ready) || (mrq_valid && !mrq_ready)) n_memstall <= n_memstall + 1;
    if (tr_valid && armed) begin
      int m;
      m = int'(tr_mat);
      if (m < NM) begin
        tre[m] = real'($signed(tr_re)) / real'(64'd1 << FRAC);
        tim[m] = real'($signed(tr_im)) / real'(64'd1 << FRAC);
        got[m] = 1;
      end
      ntr <= ntr + 1;
    end
  end

  initial begin
    wait (go);
    @(posedge clk); #1;
    // circuit upload, four pockets per gate
    for (int i = 0; i < NG; i++) begin
      int t, c;
      t = $urandom % N; c = (t + 1 + $urandom % (N-1)) % N;
      gw[i][0] = {23'd0, 1'($urandom % 2), 4'(c), 4'(t)};
      gw[i][1] = $urandom; gw[i][2] = $urandom; gw[i][3] = $urandom;
    end
    gw_clear = 1; @(posedge clk); #1 gw_clear = 0;
    for (int i = 0; i < NG; i++)
      for (int p = 0; p < 4; p++) begin
        gw_valid = 1; gw_data = gw[i][p];
        @(posedge clk); #1 gw_valid = 0;
      end
    for (int m = 1; m < NM; m++) begin
      dg[m] = $urandom % NG; ds[m] = 1 + (m-1) % 3;
      dt_we = 1; dt_addr = 8'(m-1); dt_gate = 16'(dg[m]); dt_sel = dsel_t'(ds[m]);
      @(posedge clk); #1 dt_we = 0;
    end
    // U^dagger into region 0
    random_matrix(ure, uim, N);
    for (int e = 0; e < DIM*DIM; e++) begin
      cpx_t v;
      v.re = r2fx(ure[e]); v.im = r2fx(uim[e]);
      u_ddr.mem[e] = v;
      ure[e] = fx2r(v.re); uim[e] = fx2r(v.im);
    end
    for (int m = 0; m < NM; m++) got[m] = 0;
    job.n_qubits = QLW'(N); job.n_gates = 16'(NG); job.n_mats = 8'(NM);
    armed = 1;
    job_start = 1; @(posedge clk); #1 job_start = 0;
    @(posedge clk); #1;
    wait (done && ntr == NM);
    // reference
    for (int m = 0; m < NM; m++) begin
      real mre[], mim[], sr, si;
      mre = ure; mim = uim;
      for (int i = 0; i < NG; i++)
        apply_kernel(mre, mim, N, gate_kernel(gw[i][0], gw[i][1], gw[i][2], gw[i][3],
                                              (m > 0 && dg[m] == i) ? ds[m] : 0));
      sr = 0.0; si = 0.0;
      for (int k = 0; k < DIM; k++) begin sr += mre[k*DIM+k]; si += mim[k*DIM+k]; end
      checks++;
      if (!got[m] || (tre[m]-sr) > TOL*DIM || (sr-tre[m]) > TOL*DIM ||
          (tim[m]-si) > TOL*DIM || (si-tim[m]) > TOL*DIM) begin
        failures++;
        $display("TRACE MISMATCH n=%0d mat %0d: got (%f,%f) exp (%f,%f)", N, m, tre[m], tim[m], sr, si);
      end
      if (m == 0) begin
        int base, bad;
        base = (1 + ((NP-1) % 2)*NM) * DIM*DIM;
        bad = 0;
        for (int e = 0; e < DIM*DIM; e++) begin
          real dr, di;
          dr = fx2r(u_ddr.mem[base+e].re) - mre[e];
          di = fx2r(u_ddr.mem[base+e].im) - mim[e];
          checks++;
          if (dr > TOL || dr < -TOL || di > TOL || di < -TOL) begin
            bad++;
            failures++;
          end
        end
        if (bad > 0) $display("n=%0d: %0d elements of the final matrix wrong", N, bad);
      end
    end
    $display("SLR job n=%0d gates=%0d mats=%0d passes=%0d: waits %0d, memory stalls %0d",
             N, NG, NM, NP, n_wait, n_memstall);
    finished = 1;
  end
endmodule
