// Gate block: one single-qubit or controlled two-qubit gate applied on the
// column-major stream of a unitary V, one complex element per slot.
//
// The incoming stream is split in two arms. The direct arm goes through a
// stream FIFO that delays it by D = 2^(NQ-1) slots; the other arm is written
// into the dynamic stream offset, from which the partner amplitude
// V[I xor 2^t] is read D - (+-2^t) slots back. The index counter, running on
// the delayed elements, gives the row index I and with it the target and
// control states; the unitary_transform block combines the two arms with the
// kernel row picked by the target state.
//
// The held kernel (2x2 matrix, target, control) is taken from the kernel
// input when the first element of a matrix reaches the transformation, and
// is kept for the 4^n elements of that matrix, so a stream of several
// matrices back to back can use a different kernel for each.
//
// Flow control: elements advance only when a new one is accepted, except at
// a column boundary of the input, where empty slots are inserted to flush
// the elements still inside (a column is self-contained, so empty slots
// between columns do not disturb the offsets). The block also stalls when
// the output is not taken or the next kernel has not arrived.
// Interfaces are valid/ready; the latency is D+3 cycles on an unstalled
// stream, the rate one element per cycle. After reset the block is not
// ready for 2^(NQ-1)-1 cycles while its FIFO memory is cleared.
// The arm structure and the offsets follow the paper; the flush rule, the
// kernel hand-over and the handshakes are this design's choices.
module gate_block
  import qgd_pkg::*;
#(
  parameter int NQ = 9
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [QLW-1:0] n,
  // unitary stream in
  input  logic           in_valid,
  output logic           in_ready,
  input  cpx_t           in_data,
  // unitary stream out
  output logic           out_valid,
  input  logic           out_ready,
  output cpx_t           out_data,
  // kernel stream
  input  logic           kern_valid,
  output logic           kern_ready,
  input  kernel_t        kern
);
  localparam int D = 1 << (NQ-1);

  logic           init_done, adv, space, kern_ok, need, bubble_ok;
  logic           s1_v, taken, out_pending, ut_valid, ut_pre;
  cpx_t           s1_d, part, s2_main;
  logic           s2_v;
  cpx_t           s2_ua, s2_ub;
  logic [1:0]     s2_mode;
  kernel_t        cur_kern, akern;
  logic [NQ:0]    rdist;
  logic [NQ+1:0]  inflight;
  logic [NQ-1:0]  in_idx, in_col, o_idx, o_col;
  logic           in_tb, in_cb, in_first, in_mf, in_ml;
  logic           o_tb, o_cb, o_rf, o_mf, o_ml;

  // ---------------- flow control ----------------
  assign out_pending = ut_valid && !taken;
  assign space       = !out_pending || out_ready;
  assign need        = s1_v && o_mf;
  assign kern_ok     = !need || kern_valid;
  assign bubble_ok   = in_first && (inflight != '0);
  assign in_ready    = init_done && space && kern_ok;
  assign adv         = in_ready && (in_valid || bubble_ok);
  assign kern_ready  = adv && need;
  assign akern       = need ? kern : cur_kern;

  always_ff @(posedge clk) begin
    if (rst) begin
      inflight <= '0;
      taken    <= 1'b0;
      cur_kern <= '0;
    end else begin
      inflight <= inflight + (NQ+2)'(adv && in_valid) - (NQ+2)'(adv && ut_pre);
      if (adv)                          taken <= 1'b0;
      else if (out_pending && out_ready) taken <= 1'b1;
      if (kern_ready) cur_kern <= kern;
    end
  end

  // ---------------- input side: column position of the next element -----
  index_counter #(.NQ(NQ)) u_in_ctr (
    .clk, .rst, .clear(1'b0), .step(adv && in_valid), .n,
    .t('0), .c('0), .idx(in_idx), .col(in_col), .tbit(in_tb), .cbit(in_cb),
    .row_first(in_first), .mat_first(in_mf), .mat_last(in_ml)
  );

  // ---------------- direct arm: stream FIFO ----------------
  stream_fifo #(.W(1 + 2*FXW), .DEPTH(D-1)) u_fifo (
    .clk, .rst, .adv,
    .din({adv && in_valid, in_data}),
    .dout({s1_v, s1_d}),
    .init_done
  );

  // ---------------- index counter state machine on the delayed arm ------
  index_counter #(.NQ(NQ)) u_idx (
    .clk, .rst, .clear(1'b0), .step(adv && s1_v), .n,
    .t(akern.target), .c(akern.control), .idx(o_idx), .col(o_col),
    .tbit(o_tb), .cbit(o_cb), .row_first(o_rf), .mat_first(o_mf), .mat_last(o_ml)
  );

  // partner offset +2^t (target bit 0) or -2^t (target bit 1), as distance
  always_comb begin
    logic [NQ:0] pw;
    pw   = (NQ+1)'(1) << akern.target;
    rdist = o_tb ? ((NQ+1)'(D) + pw) : ((NQ+1)'(D) - pw);
  end

  // ---------------- offset arm ----------------
  stream_offset #(.NQ(NQ), .W(2*FXW)) u_off (
    .clk, .rst, .adv, .din(in_data), .rdist, .dout(part)
  );

  // ---------------- kernel row selection ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      s2_v <= 1'b0;
    end else if (adv) begin
      s2_v <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      s2_main <= s1_d;
      s2_ua   <= o_tb ? akern.u11 : akern.u00;
      s2_ub   <= o_tb ? akern.u10 : akern.u01;
      if (akern.ctrl_en && !o_cb) s2_mode <= akern.deriv ? 2'd2 : 2'd1;
      else                        s2_mode <= 2'd0;
    end
  end

  unitary_transform u_ut (
    .clk, .rst, .en(adv), .vin(s2_v), .vmain(s2_main), .vpart(part),
    .ua(s2_ua), .ub(s2_ub), .mode(s2_mode),
    .vout(out_data), .out_valid(ut_valid), .pre_valid(ut_pre)
  );

  assign out_valid = out_pending;

  // The offset read and the FIFO must never move before the sweep ends.
  a_no_adv_in_init: assert property (@(posedge clk) disable iff (rst) !init_done |-> !adv);
endmodule
