// Memory address generator for the on-board buffers of one SLR.
//
// The on-board memory holds, in units of one complex element, the input
// U^dagger at region 0 and two banks of M matrix buffers after it:
//   region(p, m) = 1 + p*M + m,  address = region*4^n + element
// In pass 0 all M matrices of the job (cost function and gradient
// components) are read from the U^dagger region; in pass r > 0 matrix m is
// read from bank (r-1) mod 2, and the output of pass r is written to bank
// r mod 2. Elements are addressed in column-major order, as they stream.
// Because the chain may still be writing a matrix when the next pass wants
// it (short matrices, long chains), a read of matrix m in pass r waits until
// that matrix of pass r-1 has been written completely; `rd_wait` shows this.
//
// Interface: `start` loads a job; read requests are valid/ready with an
// element address; `wr_fire` marks one element written at `wr_addr`.
// `done` rises when every matrix of the last pass has been written.
// The paper states that addresses are generated on chip for the staggered
// stream; the bank layout and the wait rule are this design's choices.
module mem_addr_gen
  import qgd_pkg::*;
#(
  parameter int NQ = 9,
  parameter int AW = 32
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  input  logic [QLW-1:0] n,
  input  logic [7:0]     n_mats,
  input  logic [15:0]    n_passes,
  output logic           rq_valid,
  input  logic           rq_ready,
  output logic [AW-1:0]  rq_addr,
  input  logic           wr_fire,
  output logic [AW-1:0]  wr_addr,
  output logic           rd_wait,
  output logic           done
);
  localparam int EW = 2*NQ;

  logic          rd_act, wr_act;
  logic [EW-1:0] e_r, e_w, e_top;
  logic [7:0]    m_r, m_w;
  logic [15:0]   r_r, r_w;
  logic [23:0]   q_r, wm;       // matrix sequence numbers
  logic [AW-1:0] reg_r, reg_w;

  always_comb begin
    e_top = EW'((64'd1 << (2*n)) - 1);
    if (r_r == 16'd0) reg_r = '0;
    else              reg_r = AW'(1) + AW'(r_r[0] ? 8'd0 : n_mats) + AW'(m_r);
    // r_r odd -> bank 0 ((r-1) mod 2 = 0), r_r even -> bank 1
    reg_w   = AW'(1) + AW'(r_w[0] ? n_mats : 8'd0) + AW'(m_w);
    rq_addr = (reg_r << (2*n)) + AW'(e_r);
    wr_addr = (reg_w << (2*n)) + AW'(e_w);
    rd_wait = rd_act && (r_r != 16'd0) && !(wm > q_r - 24'(n_mats));
    rq_valid = rd_act && !rd_wait;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_act <= 1'b0;
      wr_act <= 1'b0;
      e_r <= '0; m_r <= '0; r_r <= '0; q_r <= '0;
      e_w <= '0; m_w <= '0; r_w <= '0; wm  <= '0;
    end else if (start) begin
      rd_act <= (n_passes != 16'd0) && (n_mats != 8'd0);
      wr_act <= (n_passes != 16'd0) && (n_mats != 8'd0);
      e_r <= '0; m_r <= '0; r_r <= '0; q_r <= '0;
      e_w <= '0; m_w <= '0; r_w <= '0; wm  <= '0;
    end else begin
      if (rq_valid && rq_ready) begin
        if (e_r == e_top) begin
          e_r <= '0;
          q_r <= q_r + 24'd1;
          if (m_r == n_mats - 8'd1) begin
            m_r <= '0;
            r_r <= r_r + 16'd1;
            if (r_r == n_passes - 16'd1) rd_act <= 1'b0;
          end else begin
            m_r <= m_r + 8'd1;
          end
        end else begin
          e_r <= e_r + 1'b1;
        end
      end
      if (wr_fire && wr_act) begin
        if (e_w == e_top) begin
          e_w <= '0;
          wm  <= wm + 24'd1;
          if (m_w == n_mats - 8'd1) begin
            m_w <= '0;
            r_w <= r_w + 16'd1;
            if (r_w == n_passes - 16'd1) wr_act <= 1'b0;
          end else begin
            m_w <= m_w + 8'd1;
          end
        end else begin
          e_w <= e_w + 1'b1;
        end
      end
    end
  end

  assign done = !rd_act && !wr_act;
endmodule
