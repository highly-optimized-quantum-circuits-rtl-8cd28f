// Behavioural model of the on-board memory together with its controller,
// as seen by an SLR engine: element-wide read requests answered in order
// after a fixed latency, element-wide writes. Not synthesizable design
// logic; it stands in for the DRAM and vendor controller in testbenches.
// With STALL set, the model withholds read data and write readiness at
// random to exercise back-pressure.
module ddr_model
  import qgd_pkg::*;
#(
  parameter int ABITS = 20,
  parameter int AW    = 32,
  parameter int LAT   = 6,
  parameter bit STALL = 1'b0
) (
  input  logic          clk,
  input  logic          rq_valid,
  output logic          rq_ready,
  input  logic [AW-1:0] rq_addr,
  output logic          rd_valid,
  input  logic          rd_ready,
  output cpx_t          rd_data,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [AW-1:0] wr_addr,
  input  cpx_t          wr_data
);
  cpx_t   mem [1 << ABITS];
  cpx_t   q_d [16];
  longint q_t [16];
  int     wp = 0, rp = 0, cnt = 0;
  longint cyc = 0;
  logic   hold = 1'b0;
  logic   wstall = 1'b0;

  assign rq_ready = (cnt < 16);
  assign rd_valid = (cnt > 0) && (q_t[rp] <= cyc) && !hold;
  assign rd_data  = q_d[rp];
  assign wr_ready = !wstall;

  always @(posedge clk) begin
    int c;
    c = cnt;
    cyc <= cyc + 1;
    hold   <= STALL && ($urandom % 8 == 0);
    wstall <= STALL && ($urandom % 8 == 0);
    if (rd_valid && rd_ready) begin
      rp <= (rp + 1) % 16;
      c--;
    end
    if (rq_valid && rq_ready) begin
      q_d[wp] <= mem[rq_addr[ABITS-1:0]];
      q_t[wp] <= cyc + 64'(LAT);
      wp <= (wp + 1) % 16;
      c++;
    end
    cnt <= c;
    if (wr_valid && wr_ready) mem[wr_addr[ABITS-1:0]] <= wr_data;
  end

  a_addr_range: assert property (@(posedge clk) disable iff (cyc < 64) rq_valid |-> (rq_addr >> ABITS) == 0);
endmodule
