// Testbench of the top, qgd_dfe, with one engine at its full default size:
// NQ = 9, a chain of 6 groups of 18 Gate blocks (NC = 108); only the number
// of engines is reduced to one. Job: 5 qubits, 120 gates (2 passes, the
// second padded with identities), 4 matrices.
// Every engine gets its own random circuit, derivative table and U^dagger
// from a slr_host (CPU and memory stand-in), which checks the traces of
// the cost function and of every gradient matrix, and the final cost
// matrix, against the floating-point model. The testbench counts how often
// each mechanism of the design was exercised and fails if one never was:
// multi-pass jobs, identity padding of the last pass, derivative kernels
// by theta, phi and lambda, controlled gates, reads waiting for a buffered
// matrix, memory stalls, kernel-bus back-pressure, and empty slots
// flushing a Gate block.
module tb_qgd_dfe_slr;
  import qgd_pkg::*;

  localparam int NSLR = 1;
  localparam int NC   = 108;

  // per-engine jobs: qubits, gates, matrices
  function automatic int jn(input int s);  return 5; endfunction
  function automatic int jg(input int s);  return 120; endfunction
  function automatic int jm(input int s);  return 4; endfunction

  logic clk = 0, rst = 1, go = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [NSLR-1:0]        gw_clear, gw_valid, dt_we, job_start, done, tr_valid;
  logic  [NSLR-1:0][31:0]  gw_data;
  logic  [NSLR-1:0][7:0]   dt_addr, tr_mat;
  logic  [NSLR-1:0][15:0]  dt_gate;
  dsel_t [NSLR-1:0]        dt_sel;
  job_t  [NSLR-1:0]        job;
  logic  [NSLR-1:0][47:0]  tr_re, tr_im;
  logic  [NSLR-1:0]        mrq_valid, mrq_ready, mrd_valid, mrd_ready, mwr_valid, mwr_ready, rd_wait;
  logic  [NSLR-1:0][31:0]  mrq_addr, mwr_addr;
  cpx_t  [NSLR-1:0]        mrd_data, mwr_data;
  logic  [NSLR-1:0]        fin;
  int hc [NSLR], hf [NSLR], hw [NSLR], hs [NSLR];

  qgd_dfe #(.NSLR(1)) dut (
    .clk, .rst, .gw_clear, .gw_valid, .gw_data, .dt_we, .dt_addr, .dt_gate, .dt_sel,
    .job_start, .job, .done, .tr_valid, .tr_re, .tr_im, .tr_mat,
    .mrq_valid, .mrq_ready, .mrq_addr, .mrd_valid, .mrd_ready, .mrd_data,
    .mwr_valid, .mwr_ready, .mwr_addr, .mwr_data, .rd_wait
  );

  for (genvar s = 0; s < NSLR; s++) begin : g_host
    slr_host #(.N(jn(s)), .NG(jg(s)), .NM(jm(s)), .NC(NC), .ABITS(14), .STALL(s % 2 == 0)) u_host (
      .clk, .go, .finished(fin[s]), .checks(hc[s]), .failures(hf[s]), .n_wait(hw[s]), .n_memstall(hs[s]),
      .gw_clear(gw_clear[s]), .gw_valid(gw_valid[s]), .gw_data(gw_data[s]),
      .dt_we(dt_we[s]), .dt_addr(dt_addr[s]), .dt_gate(dt_gate[s]), .dt_sel(dt_sel[s]),
      .job_start(job_start[s]), .job(job[s]), .done(done[s]), .tr_valid(tr_valid[s]),
      .tr_re(tr_re[s]), .tr_im(tr_im[s]), .tr_mat(tr_mat[s]),
      .mrq_valid(mrq_valid[s]), .mrq_ready(mrq_ready[s]), .mrq_addr(mrq_addr[s]),
      .mrd_valid(mrd_valid[s]), .mrd_ready(mrd_ready[s]), .mrd_data(mrd_data[s]),
      .mwr_valid(mwr_valid[s]), .mwr_ready(mwr_ready[s]), .mwr_addr(mwr_addr[s]),
      .mwr_data(mwr_data[s]), .rd_wait(rd_wait[s])
    );
  end

  // mechanism counters, observed on engine 0 and on the ports
  int n_multipass = 0, n_pad = 0, n_dth = 0, n_dph = 0, n_dla = 0, n_ctrl = 0;
  int n_wait = 0, n_mstall = 0, n_kbp = 0, n_flush = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.g_slr[0].u_slr.kv && dut.g_slr[0].u_slr.kr) begin
      kernel_t k;
      k = dut.g_slr[0].u_slr.kk;
      if (k.ctrl_en) n_ctrl++;
      if (k.u00.re == FX_ONE && k.u11.re == FX_ONE && k.u01 == '0 && k.u10 == '0 && !k.deriv) n_pad++;
    end
    if (dut.g_slr[0].u_slr.u_kgen.en && dut.g_slr[0].u_slr.u_kgen.running &&
        dut.g_slr[0].u_slr.u_kgen.ph == 2'd0) begin
      case (dut.g_slr[0].u_slr.u_kgen.ds)
        D_THETA:  n_dth++;
        D_PHI:    n_dph++;
        D_LAMBDA: n_dla++;
        default: ;
      endcase
    end
    if (dut.g_slr[0].u_slr.kv && !dut.g_slr[0].u_slr.kr) n_kbp++;
    if (dut.g_slr[0].u_slr.u_chain.g_grp[0].u_grp.g_gate[0].u_gate.adv &&
        !dut.g_slr[0].u_slr.u_chain.g_grp[0].u_grp.g_gate[0].u_gate.in_valid) n_flush++;
    if (|rd_wait) n_wait++;
    if (|((mwr_valid & ~mwr_ready) | (mrq_valid & ~mrq_ready))) n_mstall++;
  end

  initial begin
    repeat (4) @(posedge clk); #1 rst = 0;
    wait (dut.g_slr[0].u_slr.u_chain.g_grp[0].u_grp.g_gate[0].u_gate.init_done);
    go = 1;
    wait (&fin);
    for (int s = 0; s < NSLR; s++) begin
      checks += hc[s];
      failures += hf[s];
      if (dut.g_slr[0].u_slr.n_passes > 1) n_multipass = 1;
    end
    $display("mechanisms: multipass %0d, padded kernels %0d, d/dtheta %0d, d/dphi %0d, d/dlambda %0d, controlled %0d,",
             n_multipass, n_pad, n_dth, n_dph, n_dla, n_ctrl);
    $display("            read waits %0d, memory stalls %0d, kernel-bus back-pressure %0d, flush slots %0d",
             n_wait, n_mstall, n_kbp, n_flush);
    checks += 10;
    if (n_multipass == 0) failures++;
    if (n_pad == 0)       failures++;
    if (n_dth == 0)       failures++;
    if (n_dph == 0)       failures++;
    if (n_dla == 0)       failures++;
    if (n_ctrl == 0)      failures++;
    if (n_wait == 0)      failures++;
    if (n_mstall == 0)    failures++;
    if (n_kbp == 0)       failures++;
    if (n_flush == 0)     failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
