// Gate group: GPG Gate blocks chained synchronously.
//
// The output stream of each Gate block feeds the input of the next one
// directly (valid/ready). Each Gate block has a small kernel queue; a kernel
// arriving on the group's kernel bus is written into the queue of the block
// whose chain position equals its destination tag. BASE is the chain
// position of the first block of the group.
//
// Interface: unitary stream in and out (valid/ready, one complex element),
// kernel bus in (valid/ready, destination tag, kernel). `kbus_ready` is the
// ready of the addressed queue. Grouping follows the paper (108 blocks in
// 6 groups of 18); the kernel queues and the tag routing are this design's.
module gate_group
  import qgd_pkg::*;
#(
  parameter int NQ    = 9,
  parameter int GPG   = 18,
  parameter int BASE  = 0,
  parameter int TAGW  = 7,
  parameter int KQ    = 4
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
  logic    v   [GPG+1];
  logic    r   [GPG+1];
  cpx_t    d   [GPG+1];
  logic    kq_in_ready [GPG];
  logic    kq_v  [GPG];
  logic    kq_r  [GPG];
  kernel_t kq_d  [GPG];
  logic [GPG-1:0] sel_ready;

  assign v[0]      = in_valid;
  assign in_ready  = r[0];
  assign d[0]      = in_data;
  assign out_valid = v[GPG];
  assign r[GPG]    = out_ready;
  assign out_data  = d[GPG];

  for (genvar g = 0; g < GPG; g++) begin : g_gate
    logic hit;
    assign hit          = kbus_valid && (kbus_tag == TAGW'(BASE + g));
    assign sel_ready[g] = (kbus_tag == TAGW'(BASE + g)) && kq_in_ready[g];

    group_fifo #(.W($bits(kernel_t)), .DEPTH(KQ)) u_kq (
      .clk, .rst,
      .in_valid(hit), .in_ready(kq_in_ready[g]), .in_data(kbus_kern),
      .out_valid(kq_v[g]), .out_ready(kq_r[g]), .out_data(kq_d[g])
    );

    gate_block #(.NQ(NQ)) u_gate (
      .clk, .rst, .n,
      .in_valid(v[g]), .in_ready(r[g]), .in_data(d[g]),
      .out_valid(v[g+1]), .out_ready(r[g+1]), .out_data(d[g+1]),
      .kern_valid(kq_v[g]), .kern_ready(kq_r[g]), .kern(kq_d[g])
    );
  end

  assign kbus_ready = |sel_ready;
endmodule
