// Self-checking testbench of cordic: random binary angles over the whole
// turn plus the quadrant edges, with random pauses of the enable; cosine
// and sine are compared with $cos and $sin (tolerance 64 LSB of Q2.30,
// 6e-8), the tag with the one sent, and the latency (CORDIC_ITER+2
// enables) is checked on an unpaused stream.
module tb_cordic;
  import qgd_pkg::*;
  logic clk = 0, rst = 1, en = 0, in_valid = 0, out_valid, busy;
  logic [31:0] angle;
  logic [15:0] in_tag, out_tag;
  fx_t cos_o, sin_o;
  int checks = 0, failures = 0;
  logic [31:0] aq [$];
  int lat_start = -1, cyc = 0;
  always #5 clk = ~clk;

  cordic #(.TAGW(16)) dut (.clk, .rst, .en, .in_valid, .angle, .in_tag,
                           .out_valid, .cos_o, .sin_o, .out_tag, .busy);

  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 3000; k++) begin
      en = (k < 100) ? 1'b1 : ($urandom % 4 != 0);
      in_valid = (k < 100) ? (k == 0) : ($urandom % 3 != 0);
      case (k % 7)
        0: angle = 32'h0000_0000;
        1: angle = 32'h4000_0000;
        2: angle = 32'h8000_0000;
        3: angle = 32'hC000_0000;
        default: angle = $urandom;
      endcase
      in_tag = angle[15:0] ^ 16'h5a5a;
      if (en && in_valid) begin
        aq.push_back(angle);
        if (k == 0) lat_start = cyc;
      end
      @(posedge clk);
      #1 cyc++;
      if (en && out_valid) begin
        logic [31:0] a;
        real ph, ec, es;
        longint dc, ds;
        a = aq.pop_front();
        if (k < 100) begin
          checks++;
          if (cyc - lat_start != CORDIC_ITER + 2) begin
            failures++; $display("latency %0d", cyc - lat_start);
          end
        end
        ph = real'(a) / 4294967296.0 * 2.0 * 3.14159265358979323846;
        ec = $cos(ph) * 1073741824.0;
        es = $sin(ph) * 1073741824.0;
        dc = longint'(cos_o) - longint'($rtoi(ec));
        ds = longint'(sin_o) - longint'($rtoi(es));
        checks++;
        if (dc > 64 || dc < -64 || ds > 64 || ds < -64 || out_tag != (a[15:0] ^ 16'h5a5a)) begin
          failures++;
          if (failures < 5) $display("MISMATCH angle %h: cos %0d exp %0f sin %0d exp %0f", a, cos_o, ec, sin_o, es);
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
