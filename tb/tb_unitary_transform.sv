// Self-checking testbench of unitary_transform: random amplitudes and
// kernel rows in all three modes (transform, pass, zero), with random
// pauses of the enable; every result, two enables after its inputs, is
// compared with u_a*v + u_b*p computed here in floating point (pass: v,
// zero: 0).
module tb_unitary_transform;
  import qgd_pkg::*;
  logic clk = 0, rst = 1, en = 0, vin = 0;
  cpx_t vmain, vpart, ua, ub, vout;
  logic [1:0] mode;
  logic out_valid, pre_valid;
  int checks = 0, failures = 0;
  cpx_t expq [$];
  always #5 clk = ~clk;

  unitary_transform dut (.clk, .rst, .en, .vin, .vmain, .vpart, .ua, .ub, .mode,
                         .vout, .out_valid, .pre_valid);

  function automatic real r(input fx_t x);
    return real'(x) / real'(64'd1 << FRAC);
  endfunction
  function automatic fx_t q(input real x);
    return fx_t'($rtoi(x * real'(64'd1 << FRAC) + (x >= 0 ? 0.5 : -0.5)));
  endfunction
  function automatic fx_t rf();
    return fx_t'($urandom % 32'h5000_0000) - fx_t'(32'h2800_0000);
  endfunction

  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 3000; k++) begin
      cpx_t e;
      en  = ($urandom % 4 != 0);
      vin = ($urandom % 5 != 0);
      vmain = '{re: rf(), im: rf()}; vpart = '{re: rf(), im: rf()};
      ua = '{re: rf(), im: rf()};    ub = '{re: rf(), im: rf()};
      mode = 2'($urandom % 3);
      case (mode)
        2'd1: e = vmain;
        2'd2: e = '0;
        default: begin
          e.re = q(r(ua.re)*r(vmain.re) - r(ua.im)*r(vmain.im) + r(ub.re)*r(vpart.re) - r(ub.im)*r(vpart.im));
          e.im = q(r(ua.re)*r(vmain.im) + r(ua.im)*r(vmain.re) + r(ub.re)*r(vpart.im) + r(ub.im)*r(vpart.re));
        end
      endcase
      if (en && vin) expq.push_back(e);
      @(posedge clk);
      #1;
      if (en && out_valid) begin
        cpx_t x;
        longint dr, di;
        x = expq.pop_front();
        dr = longint'(vout.re) - longint'(x.re);
        di = longint'(vout.im) - longint'(x.im);
        checks++;
        if (dr > 2 || dr < -2 || di > 2 || di < -2) begin
          failures++;
          if (failures < 5) $display("MISMATCH got (%0d,%0d) exp (%0d,%0d)", vout.re, vout.im, x.re, x.im);
        end
      end
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
