// Self-checking testbench of gate_block.
//
// Streams several matrices back to back through one Gate block, each with
// its own random kernel (random target, control, controlled or not,
// derivative or not), and compares every output element with the gate rule
// worked out here in floating point:
//   out[I] = u_a*V[I] + u_b*V[I xor 2^t],  (u_a,u_b) = (u00,u01) if bit t of I
//   is 0, else (u11,u10); control bit 0 -> V[I] (or 0 for a derivative).
// The first run is unstalled and checks the latency (D+3 cycles) and the
// rate (one element per cycle); later runs stall input and output at random
// and check that empty slots between columns flush the block.
module tb_gate_block;
  import qgd_pkg::*;

  localparam int NQ   = 4;
  localparam int D    = 1 << (NQ-1);
  localparam int MAXE = 4 * (1 << (2*NQ));
  localparam int NMAT = 4;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [QLW-1:0] n;
  logic    in_valid, in_ready, out_valid, out_ready, kern_valid, kern_ready;
  cpx_t    in_data, out_data;
  kernel_t kern;

  gate_block #(.NQ(NQ)) dut (
    .clk, .rst, .n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .kern_valid, .kern_ready, .kern
  );

  int checks = 0, failures = 0;
  int total, nm;
  cpx_t    stream [MAXE];
  cpx_t    expv   [MAXE];
  kernel_t kq     [NMAT];
  int ip, op, kp;
  bit stall_in, stall_out;
  longint cyc = 0;
  longint first_in_cyc, first_out_cyc, last_out_cyc;
  int n_in_gaps = 0, n_backpressure = 0, n_bubbles = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real r(input fx_t x);
    return real'(x) / real'(64'd1 << FRAC);
  endfunction
  function automatic fx_t rnd_fx(input real lim);
    int unsigned span;
    span = int'(lim * 2.0 * real'(64'd1 << FRAC));
    return fx_t'($urandom % span) - fx_t'(span / 2);
  endfunction
  function automatic cpx_t rnd_c(input real lim);
    cpx_t c;
    c.re = rnd_fx(lim);
    c.im = rnd_fx(lim);
    return c;
  endfunction

  // ---------------- reference model ----------------
  task automatic build(input int nq, input int nmat);
    int dim;
    dim = 1 << nq;
    nm = nmat;
    total = nmat * dim * dim;
    for (int i = 0; i < total; i++) stream[i] = rnd_c(0.7);
    for (int k = 0; k < nmat; k++) begin
      kernel_t kk;
      kk.u00 = rnd_c(0.7); kk.u01 = rnd_c(0.7);
      kk.u10 = rnd_c(0.7); kk.u11 = rnd_c(0.7);
      kk.target  = QLW'($urandom % nq);
      kk.control = QLW'((int'(kk.target) + 1 + int'($urandom % (nq-1))) % nq);
      kk.ctrl_en = (k % 2 == 1);
      kk.deriv   = (k % 4 == 3);
      kq[k] = kk;
      for (int col = 0; col < dim; col++)
        for (int row = 0; row < dim; row++) begin
          int base, t, c, p, tb;
          real ar, ai, br, bi, vr, vi, pr, pi, er, ei;
          cpx_t ua, ub, e;
          base = k*dim*dim + col*dim;
          t = int'(kk.target); c = int'(kk.control);
          tb = (row >> t) & 1;
          p  = row ^ (1 << t);
          if (kk.ctrl_en && (((row >> c) & 1) == 0)) begin
            e = kk.deriv ? '0 : stream[base+row];
          end else begin
            ua = tb ? kk.u11 : kk.u00;
            ub = tb ? kk.u10 : kk.u01;
            ar = r(ua.re); ai = r(ua.im); br = r(ub.re); bi = r(ub.im);
            vr = r(stream[base+row].re); vi = r(stream[base+row].im);
            pr = r(stream[base+p].re);   pi = r(stream[base+p].im);
            er = ar*vr - ai*vi + br*pr - bi*pi;
            ei = ar*vi + ai*vr + br*pi + bi*pr;
            e.re = fx_t'($rtoi(er * real'(64'd1 << FRAC) + (er >= 0 ? 0.5 : -0.5)));
            e.im = fx_t'($rtoi(ei * real'(64'd1 << FRAC) + (ei >= 0 ? 0.5 : -0.5)));
          end
          expv[base+row] = e;
        end
    end
  endtask

  // ---------------- drivers ----------------
  assign kern_valid = (kp < nm);
  assign kern       = kq[kp < nm ? kp : 0];

  always @(posedge clk) begin
    int nip;
    if (rst) begin
      in_valid <= 1'b0;
      ip <= 0; kp <= 0;
      out_ready <= 1'b0;
    end else begin
      nip = ip + ((in_valid && in_ready) ? 1 : 0);
      if (in_valid && in_ready && ip == 0) first_in_cyc = cyc;
      ip <= nip;
      in_valid <= (nip < total) && (!stall_in || ($urandom % 4 != 0));
      in_data  <= stream[nip < total ? nip : 0];
      if (nip < total && in_valid == 1'b0 && ip > 0) n_in_gaps++;
      if (kern_valid && kern_ready) kp <= kp + 1;
      out_ready <= !stall_out || ($urandom % 3 != 0);
      if (out_valid && !out_ready) n_backpressure++;
      if (dut.adv && !dut.in_valid) n_bubbles++;
    end
  end

  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      longint dr, di;
      if (op == 0) first_out_cyc = cyc;
      last_out_cyc = cyc;
      dr = longint'(out_data.re) - longint'(expv[op].re);
      di = longint'(out_data.im) - longint'(expv[op].im);
      checks++;
      if (dr > 2 || dr < -2 || di > 2 || di < -2) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH elem %0d: got (%0d,%0d) exp (%0d,%0d)", op,
                   out_data.re, out_data.im, expv[op].re, expv[op].im);
      end
      op <= op + 1;
    end
  end

  task automatic run(input int nq, input int nmat, input bit si, input bit so);
    rst = 1'b1;
    n = QLW'(nq);
    stall_in = si; stall_out = so;
    build(nq, nmat);
    op = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    wait (op == total);
    repeat (5) @(posedge clk);
    checks++;
    if (kp != nmat) begin failures++; $display("kernels used %0d of %0d", kp, nmat); end
  endtask

  initial begin
    // run 1: unstalled, n = NQ, checks latency and rate
    run(NQ, NMAT, 1'b0, 1'b0);
    checks++;
    if (first_out_cyc - first_in_cyc != D + 3) begin
      failures++;
      $display("latency %0d, expected %0d", first_out_cyc - first_in_cyc, D + 3);
    end
    checks++;
    if (last_out_cyc - first_out_cyc != total - 1) begin
      failures++;
      $display("rate: %0d cycles for %0d elements", last_out_cyc - first_out_cyc + 1, total);
    end
    // run 2: random input and output stalls, smaller register
    run(NQ-1, NMAT, 1'b1, 1'b1);
    // run 3: n = NQ with stalls
    run(NQ, NMAT, 1'b1, 1'b1);
    $display("input gaps %0d, output backpressure %0d, flush slots %0d",
             n_in_gaps, n_backpressure, n_bubbles);
    checks++; if (n_in_gaps == 0)      failures++;
    checks++; if (n_backpressure == 0) failures++;
    checks++; if (n_bubbles == 0)      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
