// Self-checking testbench of kernel_generator, with a chain of NC = 4
// blocks and a circuit of 6 gates (two passes, the last two positions of
// pass 1 padded with identities) and 4 matrices per pass: the cost
// function and derivatives by theta of gate 1, by phi of gate 4 and by
// lambda of gate 2. Gates are uploaded as four pockets each. Every kernel
// is compared with the analytic kernel or derivative computed here in
// floating point (tolerance 2e-7), and its tag, labels and flags with the
// expected ones. The first job runs with a ready consumer and checks that
// a kernel leaves every 4 cycles; the second with random back-pressure.
module tb_kernel_generator;
  import qgd_pkg::*;
  import ref_pkg::*;
  localparam int NC = 4, NGT = 6, NM = 4, NP = 2;
  logic clk = 0, rst = 1;
  logic gw_clear = 0, gw_valid = 0, dt_we = 0, start = 0, busy;
  logic [31:0] gw_data;
  logic [7:0] dt_addr;
  logic [15:0] dt_gate;
  dsel_t dt_sel;
  logic k_valid, k_ready;
  logic [1:0] k_tag;
  kernel_t k_kern;
  logic [31:0] gw [NGT][4];
  int dg [NM], ds [NM];
  int checks = 0, failures = 0, nk = 0, last_t = -1, gaps_ok = 0, cyc = 0;
  bit bp = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  kernel_generator #(.NC(NC), .MAXG(16), .TAGW(2)) dut (
    .clk, .rst, .gw_clear, .gw_valid, .gw_data, .dt_we, .dt_addr, .dt_gate, .dt_sel,
    .start, .n_gates(16'(NGT)), .n_mats(8'(NM)), .n_passes(16'(NP)), .busy,
    .k_valid, .k_ready, .k_tag, .k_kern);

  function automatic bit close(input fx_t x, input real e);
    real d;
    d = fx2r(x) - e;
    return (d < 2e-7) && (d > -2e-7);
  endfunction

  always @(posedge clk) begin
    if (rst) k_ready <= 1'b0;
    else k_ready <= !bp || ($urandom % 3 != 0);
    if (!rst && k_valid && k_ready) begin
      int r, m, g, i, dsel;
      rkern_t e;
      bit ok;
      r = nk / (NM*NC); m = (nk / NC) % NM; g = nk % NC;
      i = r*NC + g;
      dsel = (m > 0 && dg[m] == i) ? ds[m] : 0;
      if (i >= NGT) e = identity();
      else e = gate_kernel(gw[i][0], gw[i][1], gw[i][2], gw[i][3], dsel);
      ok = close(k_kern.u00.re, e.re[0]) && close(k_kern.u00.im, e.im[0]) &&
           close(k_kern.u01.re, e.re[1]) && close(k_kern.u01.im, e.im[1]) &&
           close(k_kern.u10.re, e.re[2]) && close(k_kern.u10.im, e.im[2]) &&
           close(k_kern.u11.re, e.re[3]) && close(k_kern.u11.im, e.im[3]) &&
           int'(k_tag) == g && k_kern.deriv == (dsel != 0);
      if (i < NGT)
        ok = ok && int'(k_kern.target) == e.target && int'(k_kern.control) == e.control &&
             k_kern.ctrl_en == e.ctrl_en;
      else
        ok = ok && !k_kern.ctrl_en && k_kern.u00.re == FX_ONE && k_kern.u11.re == FX_ONE;
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 6) $display("MISMATCH kernel %0d (pass %0d mat %0d pos %0d dsel %0d): u00=%f exp %f u11=%f exp %f",
                                   nk, r, m, g, dsel, fx2r(k_kern.u00.re), e.re[0], fx2r(k_kern.u11.re), e.re[3]);
      end
      if (!bp && last_t >= 0) begin
        checks++;
        if (cyc - last_t != 4) begin failures++; $display("kernel interval %0d", cyc - last_t); end
      end
      last_t = cyc;
      nk++;
    end
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < NGT; i++) begin
      int t, c;
      t = $urandom % 5; c = (t + 1 + $urandom % 4) % 5;
      gw[i][0] = {23'd0, 1'(i % 2), 4'(c), 4'(t)};
      gw[i][1] = $urandom; gw[i][2] = $urandom; gw[i][3] = $urandom;
    end
    gw_clear = 1; @(posedge clk); #1 gw_clear = 0;
    for (int i = 0; i < NGT; i++)
      for (int p = 0; p < 4; p++) begin
        gw_valid = 1; gw_data = gw[i][p];
        @(posedge clk); #1 gw_valid = 0;
      end
    dg[1] = 1; ds[1] = 1; dg[2] = 4; ds[2] = 2; dg[3] = 2; ds[3] = 3;
    for (int m = 1; m < NM; m++) begin
      dt_we = 1; dt_addr = 8'(m-1); dt_gate = 16'(dg[m]); dt_sel = dsel_t'(ds[m]);
      @(posedge clk); #1 dt_we = 0;
    end
    for (int job = 0; job < 2; job++) begin
      bp = (job == 1);
      nk = 0; last_t = -1;
      start = 1; @(posedge clk); #1 start = 0;
      wait (nk == NP*NM*NC);
      repeat (50) @(posedge clk);
      checks++;
      if (busy || nk != NP*NM*NC) begin failures++; $display("job %0d busy=%0d kernels=%0d run=%0d kv=%0d", job, busy, nk, dut.running, k_valid); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
