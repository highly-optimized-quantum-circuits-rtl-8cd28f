// Top level: the data-flow engine with NSLR independent SLR engines.
//
// The FPGA of the paper has four super logic regions; the wires between
// them are few and slow, so each region carries a complete simulator
// (kernel generator, 108-block Gate chain with trace, address generator)
// and works on its own job, e.g. its own share of the gradient components.
// This top places NSLR such engines side by side; every engine has its own
// host ports and its own memory-controller ports (the four on-board DRAM
// channels). Port arrays are indexed by the engine number. The memory
// controllers, the DRAM and the PCIe link are outside this design.
// Timing: as slr_engine, per engine; all engines share one clock.
module qgd_dfe
  import qgd_pkg::*;
#(
  parameter int NSLR = 4,
  parameter int NQ   = 9,
  parameter int NGRP = 6,
  parameter int GPG  = 18,
  parameter int MAXG = 1024,
  parameter int AW   = 32,
  parameter int TW   = 48
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic  [NSLR-1:0]          gw_clear,
  input  logic  [NSLR-1:0]          gw_valid,
  input  logic  [NSLR-1:0][31:0]    gw_data,
  input  logic  [NSLR-1:0]          dt_we,
  input  logic  [NSLR-1:0][7:0]     dt_addr,
  input  logic  [NSLR-1:0][15:0]    dt_gate,
  input  dsel_t [NSLR-1:0]          dt_sel,
  input  logic  [NSLR-1:0]          job_start,
  input  job_t  [NSLR-1:0]          job,
  output logic  [NSLR-1:0]          done,
  output logic  [NSLR-1:0]          tr_valid,
  output logic  [NSLR-1:0][TW-1:0]  tr_re,
  output logic  [NSLR-1:0][TW-1:0]  tr_im,
  output logic  [NSLR-1:0][7:0]     tr_mat,
  output logic  [NSLR-1:0]          mrq_valid,
  input  logic  [NSLR-1:0]          mrq_ready,
  output logic  [NSLR-1:0][AW-1:0]  mrq_addr,
  input  logic  [NSLR-1:0]          mrd_valid,
  output logic  [NSLR-1:0]          mrd_ready,
  input  cpx_t  [NSLR-1:0]          mrd_data,
  output logic  [NSLR-1:0]          mwr_valid,
  input  logic  [NSLR-1:0]          mwr_ready,
  output logic  [NSLR-1:0][AW-1:0]  mwr_addr,
  output cpx_t  [NSLR-1:0]          mwr_data,
  output logic  [NSLR-1:0]          rd_wait
);
  for (genvar s = 0; s < NSLR; s++) begin : g_slr
    slr_engine #(.NQ(NQ), .NGRP(NGRP), .GPG(GPG), .MAXG(MAXG), .AW(AW), .TW(TW)) u_slr (
      .clk, .rst,
      .gw_clear(gw_clear[s]), .gw_valid(gw_valid[s]), .gw_data(gw_data[s]),
      .dt_we(dt_we[s]), .dt_addr(dt_addr[s]), .dt_gate(dt_gate[s]), .dt_sel(dt_sel[s]),
      .job_start(job_start[s]), .job(job[s]), .done(done[s]),
      .tr_valid(tr_valid[s]), .tr_re(tr_re[s]), .tr_im(tr_im[s]), .tr_mat(tr_mat[s]),
      .mrq_valid(mrq_valid[s]), .mrq_ready(mrq_ready[s]), .mrq_addr(mrq_addr[s]),
      .mrd_valid(mrd_valid[s]), .mrd_ready(mrd_ready[s]), .mrd_data(mrd_data[s]),
      .mwr_valid(mwr_valid[s]), .mwr_ready(mwr_ready[s]), .mwr_addr(mwr_addr[s]),
      .mwr_data(mwr_data[s]), .rd_wait(rd_wait[s])
    );
  end
endmodule
