// Self-checking testbench of index_counter: steps through two whole
// matrices for several register sizes, with random pauses, and checks the
// row and column indices, the target and control bits against the binary
// form of the expected index, and the matrix first/last flags.
module tb_index_counter;
  import qgd_pkg::*;
  localparam int NQ = 5;
  logic clk = 0, rst = 1, clear = 0, step = 0;
  logic [QLW-1:0] n, t, c;
  logic [NQ-1:0] idx, col;
  logic tbit, cbit, row_first, mat_first, mat_last;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  index_counter #(.NQ(NQ)) dut (.clk, .rst, .clear, .step, .n, .t, .c, .idx, .col,
                                .tbit, .cbit, .row_first, .mat_first, .mat_last);

  initial begin
    for (int nq = 2; nq <= NQ; nq++) begin
      int dim, e;
      dim = 1 << nq;
      n = QLW'(nq);
      rst = 1; @(posedge clk); #1 rst = 0;
      e = 0;
      while (e < 2*dim*dim) begin
        int er, ec;
        t = QLW'($urandom % nq); c = QLW'($urandom % nq);
        step = ($urandom % 4 != 0);
        #1;
        er = e % dim; ec = (e / dim) % dim;
        checks++;
        if (int'(idx) != er || int'(col) != ec || tbit != ((er >> t) & 1) ||
            cbit != ((er >> c) & 1) || row_first != (er == 0) ||
            mat_first != (er == 0 && ec == 0) ||
            mat_last != (er == dim-1 && ec == dim-1)) begin
          failures++;
          if (failures < 5) $display("MISMATCH e=%0d idx=%0d col=%0d", e, idx, col);
        end
        @(posedge clk);
        if (step) e++;
        #1 step = 0;
      end
      // clear returns to zero
      clear = 1; @(posedge clk); #1 clear = 0;
      checks++; if (idx != '0 || col != '0) failures++;
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
