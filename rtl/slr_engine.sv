// One SLR engine: a complete, independent circuit simulator.
//
// A job evaluates, for a circuit of N_G gates on n qubits, the matrix
// V U^dagger for the cost function and for M-1 gradient components (each
// with one gate replaced by its derivative) and returns the trace of each.
// The engine streams U^dagger (or the partial products buffered in the
// on-board memory) element by element through the chain of NGRP*GPG Gate
// blocks, writes the transformed matrices back to the memory, and repeats
// this ceil(N_G / (NGRP*GPG)) times, each pass applying the next slice of
// the gate sequence. The kernel generator feeds every Gate block the kernel
// it needs for every matrix of every pass; the address generator supplies
// the read and write addresses; the trace unit forms the traces in the
// last pass. One complete evaluation therefore streams
// 4^n * M * ceil(N_G/NC) elements at one element per cycle.
//
// Interfaces: host side (gate pockets, derivative table, job start, trace
// pulses), memory side (element read requests, read data, writes; the
// memory controller and the DRAM are outside). All valid/ready except the
// host writes and the trace pulse. A job is started by `job_start` with
// `job`; `done` is high when the engine is idle.
// The structure follows the paper; the single clock and the interfaces are
// this design's choices.
module slr_engine
  import qgd_pkg::*;
#(
  parameter int NQ   = 9,
  parameter int NGRP = 6,
  parameter int GPG  = 18,
  parameter int MAXG = 1024,
  parameter int AW   = 32,
  parameter int TW   = 48
) (
  input  logic            clk,
  input  logic            rst,
  // host: circuit upload and job control
  input  logic            gw_clear,
  input  logic            gw_valid,
  input  logic [31:0]     gw_data,
  input  logic            dt_we,
  input  logic [7:0]      dt_addr,
  input  logic [15:0]     dt_gate,
  input  dsel_t           dt_sel,
  input  logic            job_start,
  input  job_t            job,
  output logic            done,
  // host: traces of the last pass
  output logic            tr_valid,
  output logic signed [TW-1:0] tr_re,
  output logic signed [TW-1:0] tr_im,
  output logic [7:0]      tr_mat,
  // memory controller
  output logic            mrq_valid,
  input  logic            mrq_ready,
  output logic [AW-1:0]   mrq_addr,
  input  logic            mrd_valid,
  output logic            mrd_ready,
  input  cpx_t            mrd_data,
  output logic            mwr_valid,
  input  logic            mwr_ready,
  output logic [AW-1:0]   mwr_addr,
  output cpx_t            mwr_data,
  // status
  output logic            rd_wait
);
  localparam int NC   = NGRP * GPG;
  localparam int TAGW = (NC > 1) ? $clog2(NC) : 1;

  job_t            cfg;
  logic [15:0]     n_passes;
  logic            go, kbusy, adone;
  logic            kv, kr;
  logic [TAGW-1:0] ktag;
  kernel_t         kk;
  logic            wr_fire;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg      <= '0;
      n_passes <= '0;
      go       <= 1'b0;
    end else begin
      go <= job_start;
      if (job_start) begin
        cfg      <= job;
        n_passes <= (job.n_gates == 16'd0) ? 16'd1
                  : 16'((32'(job.n_gates) + 32'(NC) - 32'd1) / 32'(NC));
      end
    end
  end

  kernel_generator #(.NC(NC), .MAXG(MAXG), .TAGW(TAGW)) u_kgen (
    .clk, .rst, .gw_clear, .gw_valid, .gw_data,
    .dt_we, .dt_addr, .dt_gate, .dt_sel,
    .start(go), .n_gates(cfg.n_gates), .n_mats(cfg.n_mats), .n_passes,
    .busy(kbusy),
    .k_valid(kv), .k_ready(kr), .k_tag(ktag), .k_kern(kk)
  );

  gate_chain #(.NQ(NQ), .NGRP(NGRP), .GPG(GPG), .TAGW(TAGW)) u_chain (
    .clk, .rst, .n(cfg.n_qubits),
    .in_valid(mrd_valid), .in_ready(mrd_ready), .in_data(mrd_data),
    .out_valid(mwr_valid), .out_ready(mwr_ready), .out_data(mwr_data),
    .kbus_valid(kv), .kbus_ready(kr), .kbus_tag(ktag), .kbus_kern(kk)
  );

  assign wr_fire = mwr_valid && mwr_ready;

  mem_addr_gen #(.NQ(NQ), .AW(AW)) u_agen (
    .clk, .rst, .start(go), .n(cfg.n_qubits), .n_mats(cfg.n_mats), .n_passes,
    .rq_valid(mrq_valid), .rq_ready(mrq_ready), .rq_addr(mrq_addr),
    .wr_fire, .wr_addr(mwr_addr), .rd_wait, .done(adone)
  );

  trace_unit #(.NQ(NQ), .TW(TW)) u_trace (
    .clk, .rst, .start(go), .n(cfg.n_qubits), .n_mats(cfg.n_mats), .n_passes,
    .s_fire(wr_fire), .s_data(mwr_data),
    .tr_valid, .tr_re, .tr_im, .tr_mat
  );

  assign done = adone && !kbusy && !go && !job_start;
endmodule
