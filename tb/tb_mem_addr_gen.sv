// Self-checking testbench of mem_addr_gen: a job of 3 passes of 2
// matrices on n = 2. Every read and write address is compared with the
// bank layout (pass 0 reads region 0; pass r reads bank (r-1) mod 2 and
// writes bank r mod 2; region(p,m) = 1 + p*M + m; address = region*4^n +
// element). Writes lag reads by a long random delay, so reads of the
// next pass must wait: the testbench checks that no read of matrix m of
// pass r is issued before that matrix of pass r-1 is completely written,
// that the wait happened, and that `done` rises at the end.
module tb_mem_addr_gen;
  import qgd_pkg::*;
  localparam int NQ = 3;
  logic clk = 0, rst = 1, start = 0;
  logic [QLW-1:0] n = 4'd2;
  logic [7:0] n_mats = 8'd2;
  logic [15:0] n_passes = 16'd3;
  logic rq_valid, rq_ready, wr_fire = 0, rd_wait, done;
  logic [31:0] rq_addr, wr_addr;
  int checks = 0, failures = 0, nrd = 0, nwr = 0, nwait = 0;
  localparam int E = 16, M = 2, P = 3;
  always #5 clk = ~clk;

  mem_addr_gen #(.NQ(NQ), .AW(32)) dut (.clk, .rst, .start, .n, .n_mats, .n_passes,
    .rq_valid, .rq_ready, .rq_addr, .wr_fire, .wr_addr, .rd_wait, .done);

  function automatic int exp_addr(input int k, input bit rd);
    int q, r, m, e, reg_i;
    e = k % E; q = k / E; m = q % M; r = q / M;
    if (rd) reg_i = (r == 0) ? 0 : 1 + ((r-1) % 2)*M + m;
    else    reg_i = 1 + (r % 2)*M + m;
    return reg_i*E + e;
  endfunction

  always @(posedge clk) begin
    if (!rst) begin
      rq_ready <= ($urandom % 3 != 0);
      if (rd_wait) nwait++;
      if (rq_valid && rq_ready) begin
        int q;
        checks++;
        if (int'(rq_addr) != exp_addr(nrd, 1)) begin
          failures++; $display("read %0d: addr %0d exp %0d", nrd, rq_addr, exp_addr(nrd, 1));
        end
        q = nrd / E;
        checks++;
        if (q >= M && nwr < (q - M + 1)*E) begin
          failures++; $display("read of matrix %0d before its source was written", q);
        end
        nrd <= nrd + 1;
      end
      if (wr_fire) begin
        checks++;
        if (int'(wr_addr) != exp_addr(nwr, 0)) begin
          failures++; $display("write %0d: addr %0d exp %0d", nwr, wr_addr, exp_addr(nwr, 0));
        end
        nwr <= nwr + 1;
      end
      // writes trail the reads by 12 elements while reads can go on
      begin
        int nw, nr;
        nw = nwr + (wr_fire ? 1 : 0);
        nr = nrd + ((rq_valid && rq_ready) ? 1 : 0);
        wr_fire <= (nw < nr - 12 || ((rd_wait || nr == P*M*E) && nw < nr)) && ($urandom % 2 == 0);
      end
    end
  end

  initial begin
    rq_ready = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    start = 1; @(posedge clk); #1 start = 0;
    checks++; if (done) failures++;
    wait (nwr == P*M*E);
    repeat (3) @(posedge clk);
    checks++; if (!done || nrd != P*M*E) begin failures++; $display("done=%0d reads=%0d", done, nrd); end
    checks++; if (nwait == 0) begin failures++; $display("read wait never happened"); end
    $display("read waits %0d cycles", nwait);
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
