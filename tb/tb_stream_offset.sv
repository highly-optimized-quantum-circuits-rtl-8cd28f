// Self-checking testbench of stream_offset: writes a numbered stream with
// random pauses and reads back at random distances 0..2^NQ, checking that
// each read returns the element written that many slots earlier (0 being
// the element written in the same slot) and that the output holds while
// the stream pauses.
module tb_stream_offset;
  localparam int NQ = 4;
  localparam int W  = 16;
  logic clk = 0, rst = 1, adv = 0;
  logic [W-1:0] din, dout;
  logic [NQ:0] rdist;
  int checks = 0, failures = 0;
  int slot = 0, last_exp = -1;
  always #5 clk = ~clk;

  stream_offset #(.NQ(NQ), .W(W)) dut (.clk, .rst, .adv, .din, .rdist, .dout);

  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 3000; k++) begin
      int d;
      adv = ($urandom % 5 != 0);
      din = W'(slot);
      d = (slot >= (1 << NQ)) ? int'($urandom % ((1 << NQ) + 1)) : 0;
      rdist = (NQ+1)'(d);
      @(posedge clk);
      #1;
      if (adv) begin
        last_exp = slot - d;
        slot++;
      end
      if (last_exp >= 0) begin
        checks++;
        if (dout != W'(last_exp)) begin
          failures++;
          if (failures < 5) $display("MISMATCH got %0d exp %0d", dout, last_exp);
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
