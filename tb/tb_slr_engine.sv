// End-to-end testbench of one slr_engine at reduced size (NQ = 4, two
// groups of two Gate blocks). Two engines run side by side, one on a
// 4-qubit circuit of 7 gates (two passes, one padded position) with the
// cost function and three gradient matrices, one on a 2-qubit circuit of 9
// gates (three passes) with two matrices, short enough that reads of a
// pass must wait for the previous pass to be written. The memory stalls at
// random. Traces and the final matrix are checked by slr_host; the
// testbench also requires that waits, memory stalls and multi-pass jobs
// all happened.
module tb_slr_engine;
  import qgd_pkg::*;
  logic clk = 0, rst = 1, go = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  `define SLR_INST(I, NQB, NGB, NMB) \
    logic gw_clear``I, gw_valid``I, dt_we``I, job_start``I, done``I, tr_valid``I; \
    logic [31:0] gw_data``I; logic [7:0] dt_addr``I, tr_mat``I; logic [15:0] dt_gate``I; \
    dsel_t dt_sel``I; job_t job``I; logic [47:0] tr_re``I, tr_im``I; \
    logic mrq_valid``I, mrq_ready``I, mrd_valid``I, mrd_ready``I, mwr_valid``I, mwr_ready``I, rd_wait``I; \
    logic [31:0] mrq_addr``I, mwr_addr``I; cpx_t mrd_data``I, mwr_data``I; \
    logic fin``I; int hc``I, hf``I, hw``I, hs``I; \
    slr_engine #(.NQ(4), .NGRP(2), .GPG(2), .MAXG(32)) dut``I ( \
      .clk, .rst, .gw_clear(gw_clear``I), .gw_valid(gw_valid``I), .gw_data(gw_data``I), \
      .dt_we(dt_we``I), .dt_addr(dt_addr``I), .dt_gate(dt_gate``I), .dt_sel(dt_sel``I), \
      .job_start(job_start``I), .job(job``I), .done(done``I), .tr_valid(tr_valid``I), \
      .tr_re(tr_re``I), .tr_im(tr_im``I), .tr_mat(tr_mat``I), .mrq_valid(mrq_valid``I), \
      .mrq_ready(mrq_ready``I), .mrq_addr(mrq_addr``I), .mrd_valid(mrd_valid``I), \
      .mrd_ready(mrd_ready``I), .mrd_data(mrd_data``I), .mwr_valid(mwr_valid``I), \
      .mwr_ready(mwr_ready``I), .mwr_addr(mwr_addr``I), .mwr_data(mwr_data``I), .rd_wait(rd_wait``I)); \
    slr_host #(.N(NQB), .NG(NGB), .NM(NMB), .NC(4), .ABITS(14)) host``I ( \
      .clk, .go, .finished(fin``I), .checks(hc``I), .failures(hf``I), .n_wait(hw``I), .n_memstall(hs``I), \
      .gw_clear(gw_clear``I), .gw_valid(gw_valid``I), .gw_data(gw_data``I), \
      .dt_we(dt_we``I), .dt_addr(dt_addr``I), .dt_gate(dt_gate``I), .dt_sel(dt_sel``I), \
      .job_start(job_start``I), .job(job``I), .done(done``I), .tr_valid(tr_valid``I), \
      .tr_re(tr_re``I), .tr_im(tr_im``I), .tr_mat(tr_mat``I), .mrq_valid(mrq_valid``I), \
      .mrq_ready(mrq_ready``I), .mrq_addr(mrq_addr``I), .mrd_valid(mrd_valid``I), \
      .mrd_ready(mrd_ready``I), .mrd_data(mrd_data``I), .mwr_valid(mwr_valid``I), \
      .mwr_ready(mwr_ready``I), .mwr_addr(mwr_addr``I), .mwr_data(mwr_data``I), .rd_wait(rd_wait``I));

  `SLR_INST(0, 4, 7, 4)
  `SLR_INST(1, 2, 9, 2)

  initial begin
    repeat (4) @(posedge clk); #1 rst = 0;
    wait (dut0.u_chain.g_grp[0].u_grp.g_gate[0].u_gate.init_done);
    go = 1;
    wait (fin0 && fin1);
    checks = hc0 + hc1 + 3;
    failures = hf0 + hf1;
    if (hw0 + hw1 == 0) begin failures++; $display("no read ever waited for a buffered matrix"); end
    if (hs0 + hs1 == 0) begin failures++; $display("no memory stall happened"); end
    if (!(dut0.n_passes > 1 && dut1.n_passes > 2)) begin failures++; $display("multi-pass jobs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
