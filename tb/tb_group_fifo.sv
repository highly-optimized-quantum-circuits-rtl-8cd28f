// Self-checking testbench of group_fifo: random pushes and pops against a
// queue model; checks data order, that the FIFO reports full after DEPTH
// words and empty when drained, and that words are neither lost nor
// duplicated.
module tb_group_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, nfull = 0, nempty = 0;
  logic [W-1:0] model [$];
  always #5 clk = ~clk;

  group_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst, .in_valid, .in_ready, .in_data,
                                          .out_valid, .out_ready, .out_data);

  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 4000; k++) begin
      bit phase;
      phase = (k / 200) % 2;   // alternate filling and draining bias
      in_valid  = phase ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      in_data   = W'($urandom);
      out_ready = phase ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      #1;
      checks++;
      if (in_ready != (model.size() < DEPTH) || out_valid != (model.size() > 0)) begin
        failures++;
        if (failures < 5) $display("flag mismatch size=%0d", model.size());
      end
      if (!in_ready) nfull++;
      if (!out_valid) nempty++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) failures++;
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #1;
    end
    checks++; if (nfull == 0 || nempty == 0) failures++;
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
