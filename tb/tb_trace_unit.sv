// Self-checking testbench of trace_unit: random elements of 3 passes of
// 2 matrices each are fed with random gaps; only the matrices of the last
// pass may produce a trace, which must equal the integer sum of their
// diagonal elements and carry the right matrix number. Repeated for two
// register sizes.
module tb_trace_unit;
  import qgd_pkg::*;
  localparam int NQ = 4;
  logic clk = 0, rst = 1, start = 0, s_fire = 0;
  logic [QLW-1:0] n;
  logic [7:0] n_mats = 8'd2;
  logic [15:0] n_passes = 16'd3;
  cpx_t s_data;
  logic tr_valid;
  logic signed [47:0] tr_re, tr_im;
  logic [7:0] tr_mat;
  int checks = 0, failures = 0, ntr = 0;
  longint er [8], ei [8];
  always #5 clk = ~clk;

  trace_unit #(.NQ(NQ), .TW(48)) dut (.clk, .rst, .start, .n, .n_mats, .n_passes,
                                      .s_fire, .s_data, .tr_valid, .tr_re, .tr_im, .tr_mat);

  always @(posedge clk) if (tr_valid && !rst) begin
    int q;
    q = 4 + int'(tr_mat);
    ntr++;
    checks++;
    if (tr_re != 48'(er[q]) || tr_im != 48'(ei[q])) begin
      failures++;
      $display("MISMATCH mat %0d: got %0d exp %0d", tr_mat, tr_re, er[q]);
    end
  end

  initial begin
    for (int nq = NQ; nq >= NQ-1; nq--) begin
      int dim;
      dim = 1 << nq;
      n = QLW'(nq);
      rst = 1; @(posedge clk); #1 rst = 0;
      start = 1; @(posedge clk); #1 start = 0;
      ntr = 0;
      for (int q = 0; q < 6; q++) begin
        er[q] = 0; ei[q] = 0;
        for (int e = 0; e < dim*dim; e++) begin
          while ($urandom % 4 == 0) begin @(posedge clk); #1; end
          s_data.re = fx_t'($urandom); s_data.im = fx_t'($urandom);
          if ((e % dim) == (e / dim)) begin er[q] += longint'(s_data.re); ei[q] += longint'(s_data.im); end
          s_fire = 1;
          @(posedge clk); #1 s_fire = 0;
        end
      end
      repeat (3) @(posedge clk);
      checks++;
      if (ntr != 2) begin failures++; $display("%0d traces, expected 2", ntr); end
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
