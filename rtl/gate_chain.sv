// Gate chain of one SLR: NGRP Gate groups joined by FIFO-buffered streams.
//
// The unitary stream enters the first group, and leaves the last one;
// between consecutive groups a group_fifo decouples them. One kernel bus,
// driven by the gate kernel generator, reaches all groups; a kernel is
// taken by the group that holds the addressed block.
// With the defaults (6 groups of 18) the chain has the paper's 108 Gate
// blocks, so one pass of a matrix through it applies up to 108 gates.
//
// Interface: valid/ready unitary stream in and out, kernel bus in
// (valid/ready, tag 0..NGRP*GPG-1). Latency per Gate block D+3 cycles plus
// one cycle per inter-group FIFO on an unstalled stream.
module gate_chain
  import qgd_pkg::*;
#(
  parameter int NQ    = 9,
  parameter int NGRP  = 6,
  parameter int GPG   = 18,
  parameter int FIFOD = 16,
  parameter int TAGW  = (NGRP*GPG > 1) ? $clog2(NGRP*GPG) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [QLW-1:0]  n,
  input  logic            in_valid,
  output logic            in_ready,
  input  cpx_t            in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output cpx_t            out_data,
  input  logic            kbus_valid,
  output logic            kbus_ready,
  input  logic [TAGW-1:0] kbus_tag,
  input  kernel_t         kbus_kern
);
  logic gv [NGRP+1];
  logic gr [NGRP+1];
  cpx_t gd [NGRP+1];
  logic [NGRP-1:0] grp_kready;

  assign gv[0]    = in_valid;
  assign in_ready = gr[0];
  assign gd[0]    = in_data;

  for (genvar k = 0; k < NGRP; k++) begin : g_grp
    logic ov, orr;
    cpx_t od;

    gate_group #(.NQ(NQ), .GPG(GPG), .BASE(k*GPG), .TAGW(TAGW)) u_grp (
      .clk, .rst, .n,
      .in_valid(gv[k]), .in_ready(gr[k]), .in_data(gd[k]),
      .out_valid(ov), .out_ready(orr), .out_data(od),
      .kbus_valid, .kbus_ready(grp_kready[k]), .kbus_tag, .kbus_kern
    );

    if (k < NGRP-1) begin : g_fifo
      group_fifo #(.W(2*FXW), .DEPTH(FIFOD)) u_fifo (
        .clk, .rst,
        .in_valid(ov), .in_ready(orr), .in_data(od),
        .out_valid(gv[k+1]), .out_ready(gr[k+1]), .out_data(gd[k+1])
      );
    end else begin : g_last
      assign gv[k+1] = ov;
      assign orr     = gr[k+1];
      assign gd[k+1] = od;
    end
  end

  assign out_valid   = gv[NGRP];
  assign gr[NGRP]    = out_ready;
  assign out_data    = gd[NGRP];
  assign kbus_ready  = |grp_kready;
endmodule
