// Self-checking testbench of gate_group: one group of four Gate
// blocks with their kernel queues, at NQ = 3.
// Several matrices with normalised columns are streamed through the
// blocks; every block receives, over the tagged kernel bus, a different
// random gate (random angles, target, control, controlled or not,
// derivative or not) for every matrix. Input pauses, output back-pressure
// and kernel-bus pauses are random. Each output element is compared with
// the floating-point model applying the same kernels in chain order
// (tolerance a few LSB per gate).
module tb_gate_group;
  import qgd_pkg::*;
  import ref_pkg::*;

  localparam int NQ   = 3;
  localparam int NG   = 4;
  localparam int NMAT = 3;
  localparam int TAGW = 3;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [QLW-1:0] n;
  logic in_valid, in_ready, out_valid, out_ready, kbus_valid, kbus_ready;
  cpx_t in_data, out_data;
  logic [TAGW-1:0] kbus_tag;
  kernel_t kbus_kern;

  gate_group #(.NQ(NQ), .GPG(NG), .BASE(0), .TAGW(TAGW)) dut (
    .clk, .rst, .n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .kbus_valid, .kbus_ready, .kbus_tag, .kbus_kern
  );

  int checks = 0, failures = 0;
  int total, ip, op, kp, nk;
  cpx_t    stream [NMAT << (2*NQ)];
  cpx_t    expv   [NMAT << (2*NQ)];
  kernel_t kl     [NMAT*NG];
  int n_in_gaps = 0, n_bp = 0, n_kgap = 0;

  task automatic build(input int nq);
    int dim;
    dim = 1 << nq;
    total = NMAT*dim*dim;
    nk = NMAT*NG;
    for (int m = 0; m < NMAT; m++) begin
      real mre[], mim[];
      random_matrix(mre, mim, nq);
      for (int e = 0; e < dim*dim; e++) begin
        stream[m*dim*dim+e].re = r2fx(mre[e]);
        stream[m*dim*dim+e].im = r2fx(mim[e]);
        mre[e] = fx2r(stream[m*dim*dim+e].re);
        mim[e] = fx2r(stream[m*dim*dim+e].im);
      end
      for (int g = 0; g < NG; g++) begin
        rkern_t rk;
        kernel_t k;
        logic [31:0] w0;
        int t, c;
        t = $urandom % nq;
        c = (t + 1 + $urandom % (nq-1)) % nq;
        w0 = {23'd0, 1'($urandom % 2), 4'(c), 4'(t)};
        rk = gate_kernel(w0, $urandom, $urandom, $urandom, int'($urandom % 6 == 0 ? 1 + $urandom % 3 : 0));
        k.u00 = '{re: r2fx(rk.re[0]), im: r2fx(rk.im[0])};
        k.u01 = '{re: r2fx(rk.re[1]), im: r2fx(rk.im[1])};
        k.u10 = '{re: r2fx(rk.re[2]), im: r2fx(rk.im[2])};
        k.u11 = '{re: r2fx(rk.re[3]), im: r2fx(rk.im[3])};
        k.target = QLW'(t); k.control = QLW'(c);
        k.ctrl_en = w0[8]; k.deriv = rk.deriv;
        kl[m*NG+g] = k;
        apply_kernel(mre, mim, nq, from_fx(k));
      end
      for (int e = 0; e < dim*dim; e++) begin
        expv[m*dim*dim+e].re = r2fx(mre[e]);
        expv[m*dim*dim+e].im = r2fx(mim[e]);
      end
    end
  endtask

  assign kbus_tag  = TAGW'(kp % NG);
  assign kbus_kern = kl[kp < nk ? kp : 0];

  always @(posedge clk) begin
    int nip;
    if (rst) begin
      in_valid <= 1'b0; ip <= 0; kp <= 0; out_ready <= 1'b0; kbus_valid <= 1'b0;
    end else begin
      nip = ip + ((in_valid && in_ready) ? 1 : 0);
      ip <= nip;
      in_valid <= (nip < total) && ($urandom % 5 != 0);
      in_data  <= stream[nip < total ? nip : 0];
      if (nip < total && !in_valid && ip > 0) n_in_gaps++;
      if (out_valid && !out_ready) n_bp++;
      out_ready <= ($urandom % 4 != 0);
      if (kbus_valid && kbus_ready) kp <= kp + 1;
      kbus_valid <= ((kp + ((kbus_valid && kbus_ready) ? 1 : 0)) < nk) && ($urandom % 3 != 0);
      if (!kbus_valid && kp < nk) n_kgap++;
    end
  end

  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      longint dr, di;
      dr = longint'(out_data.re) - longint'(expv[op].re);
      di = longint'(out_data.im) - longint'(expv[op].im);
      checks++;
      if (dr > 3*NG+2 || dr < -3*NG-2 || di > 3*NG+2 || di < -3*NG-2) begin
        failures++;
        if (failures < 8) $display("MISMATCH elem %0d: got (%0d,%0d) exp (%0d,%0d)", op,
                                   out_data.re, out_data.im, expv[op].re, expv[op].im);
      end
      op <= op + 1;
    end
  end

  task automatic run(input int nq);
    rst = 1'b1;
    n = QLW'(nq);
    build(nq);
    op = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    wait (op == total);
    repeat (5) @(posedge clk);
    checks++;
    if (kp != nk) begin failures++; $display("kernels used %0d of %0d", kp, nk); end
  endtask

  initial begin
    run(NQ);
    run(NQ-1);
    $display("input gaps %0d, back-pressure %0d, kernel gaps %0d", n_in_gaps, n_bp, n_kgap);
    checks++; if (n_in_gaps == 0 || n_bp == 0 || n_kgap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
