// Self-checking testbench of cmul3: random Q2.30 operands, the full
// precision product compared with the textbook (4-multiplication) product
// computed here with 128-bit integers, including the extreme values -2 and
// just under +2 of the format.
module tb_cmul3;
  import qgd_pkg::*;
  fx_t ar, ai, br, bi;
  logic signed [2*FXW+1:0] pr, pi;
  int checks = 0, failures = 0;

  cmul3 dut (.ar, .ai, .br, .bi, .pr, .pi);

  task automatic check();
    logic signed [127:0] er, ei;
    #1;
    er = 128'(ar) * 128'(br) - 128'(ai) * 128'(bi);
    ei = 128'(ar) * 128'(bi) + 128'(ai) * 128'(br);
    checks++;
    if (128'(pr) != er || 128'(pi) != ei) begin
      failures++;
      if (failures < 5) $display("MISMATCH a=(%0d,%0d) b=(%0d,%0d)", ar, ai, br, bi);
    end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      ar = fx_t'($urandom); ai = fx_t'($urandom); br = fx_t'($urandom); bi = fx_t'($urandom);
      check();
    end
    ar = 32'sh8000_0000; ai = 32'sh8000_0000; br = 32'sh8000_0000; bi = 32'sh8000_0000; check();
    ar = 32'sh7fff_ffff; ai = 32'sh8000_0000; br = 32'sh7fff_ffff; bi = 32'sh7fff_ffff; check();
    ar = FX_ONE; ai = '0; br = 32'sh1234_5678; bi = -32'sh0765_4321; check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
