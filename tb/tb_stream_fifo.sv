// Self-checking testbench of stream_fifo: after the reset sweep (checked to
// take DEPTH cycles and to leave zeros), a numbered stream with random
// pauses must come out delayed by exactly DEPTH+1 slots.
module tb_stream_fifo;
  localparam int DEPTH = 7;
  localparam int W     = 16;
  logic clk = 0, rst = 1, adv = 0;
  logic [W-1:0] din, dout;
  logic init_done;
  int checks = 0, failures = 0, slot = 0, wait_cyc = 0;
  always #5 clk = ~clk;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst, .adv, .din, .dout, .init_done);

  initial begin
    @(posedge clk); #1 rst = 0;
    while (!init_done) begin @(posedge clk); #1 wait_cyc++; end
    checks++;
    if (wait_cyc != DEPTH) begin failures++; $display("sweep took %0d", wait_cyc); end
    for (int k = 0; k < 2000; k++) begin
      adv = ($urandom % 4 != 0);
      din = W'(slot + 1);
      @(posedge clk);
      #1;
      if (adv) slot++;
      if (slot > 0) begin
        int e;
        e = (slot - 1 - DEPTH >= 0) ? slot - DEPTH : 0;
        checks++;
        if (dout != W'(e)) begin
          failures++;
          if (failures < 5) $display("MISMATCH slot %0d got %0d exp %0d", slot, dout, e);
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
