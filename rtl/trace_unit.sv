// Trace unit attached to the last Gate block of the chain.
//
// Watches the element stream leaving the chain, keeps the row and column
// of each element with an index counter, and adds up the diagonal
// elements (row == column) of every matrix. Matrices leave the chain in
// the order pass 0 matrix 0..M-1, pass 1 matrix 0..M-1, and so on; for
// each matrix of the last pass, when its final element has passed, the
// complex trace is presented on the trace output together with the
// matrix number m (0: cost function, m>0: gradient component m).
// For the cost function f = d - Re Tr(V U^dagger) the host needs only Re.
//
// Interface: `start` clears the counters at the beginning of a job.
// `s_fire` marks an element transfer on the monitored stream. The trace
// output is a one-cycle pulse (the host side is taken to be always ready).
// The accumulator has TW bits with 30 fraction bits, enough for the sum of
// 2^NQ elements of magnitude <= 1. Following the paper, the trace is formed
// in the last pass only; the pulse output and the widths are this design's.
module trace_unit
  import qgd_pkg::*;
#(
  parameter int NQ = 9,
  parameter int TW = 48
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [QLW-1:0]       n,
  input  logic [7:0]           n_mats,
  input  logic [15:0]          n_passes,
  input  logic                 s_fire,
  input  cpx_t                 s_data,
  output logic                 tr_valid,
  output logic signed [TW-1:0] tr_re,
  output logic signed [TW-1:0] tr_im,
  output logic [7:0]           tr_mat
);
  logic [NQ-1:0]        idx, col;
  logic                 tb, cb, rf, mf, ml;
  logic signed [TW-1:0] acc_re, acc_im, nre, nim;
  logic [7:0]           m;
  logic [15:0]          pass;
  logic                 diag;

  index_counter #(.NQ(NQ)) u_ctr (
    .clk, .rst, .clear(start), .step(s_fire), .n, .t('0), .c('0),
    .idx, .col, .tbit(tb), .cbit(cb), .row_first(rf), .mat_first(mf), .mat_last(ml)
  );

  always_comb begin
    diag = (idx == col);
    nre  = acc_re + (diag ? TW'($signed(s_data.re)) : '0);
    nim  = acc_im + (diag ? TW'($signed(s_data.im)) : '0);
  end

  always_ff @(posedge clk) begin
    if (rst || start) begin
      acc_re   <= '0;
      acc_im   <= '0;
      m        <= '0;
      pass     <= '0;
      tr_valid <= 1'b0;
      tr_re    <= '0;
      tr_im    <= '0;
      tr_mat   <= '0;
    end else begin
      tr_valid <= 1'b0;
      if (s_fire) begin
        if (ml) begin
          acc_re <= '0;
          acc_im <= '0;
          if (pass == n_passes - 16'd1) begin
            tr_valid <= 1'b1;
            tr_re    <= nre;
            tr_im    <= nim;
            tr_mat   <= m;
          end
          if (m == n_mats - 8'd1) begin
            m    <= '0;
            pass <= pass + 16'd1;
          end else begin
            m <= m + 8'd1;
          end
        end else begin
          acc_re <= nre;
          acc_im <= nim;
        end
      end
    end
  end
endmodule
