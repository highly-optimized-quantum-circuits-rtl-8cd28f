// Floating-point reference model used by the testbenches.
//
// Matrices are column-major arrays of reals, element (row, col) at index
// col*2^n + row. apply_kernel applies a 2x2 kernel (as carried by a
// kernel_t, converted to reals) on the target qubit of every column, with
// the control rule of the Gate block. gate_kernel builds the kernel of a
// gate from its three angles, or its analytic derivative by one of them,
// without the parameter-shift shortcut the hardware uses.
package ref_pkg;
  import qgd_pkg::*;

  localparam real PI = 3.14159265358979323846;

  typedef struct {
    real re [4];   // u00, u01, u10, u11
    real im [4];
    int  target;
    int  control;
    bit  ctrl_en;
    bit  deriv;
  } rkern_t;

  function automatic real fx2r(input fx_t x);
    return real'(x) / real'(64'd1 << FRAC);
  endfunction

  function automatic fx_t r2fx(input real x);
    return fx_t'($rtoi(x * real'(64'd1 << FRAC) + (x >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic rkern_t from_fx(input kernel_t k);
    rkern_t r;
    r.re[0] = fx2r(k.u00.re); r.im[0] = fx2r(k.u00.im);
    r.re[1] = fx2r(k.u01.re); r.im[1] = fx2r(k.u01.im);
    r.re[2] = fx2r(k.u10.re); r.im[2] = fx2r(k.u10.im);
    r.re[3] = fx2r(k.u11.re); r.im[3] = fx2r(k.u11.im);
    r.target = int'(k.target); r.control = int'(k.control);
    r.ctrl_en = k.ctrl_en; r.deriv = k.deriv;
    return r;
  endfunction

  // angles: w1 = theta/2 in turns*2^32, w2 = phi, w3 = lambda (turns*2^32)
  function automatic rkern_t gate_kernel(input logic [31:0] w0, input logic [31:0] w1,
                                         input logic [31:0] w2, input logic [31:0] w3,
                                         input int dsel);
    rkern_t r;
    real h, p, l, ch, sh;
    h = real'(w1) / 4294967296.0 * 2.0 * PI;
    p = real'(w2) / 4294967296.0 * 2.0 * PI;
    l = real'(w3) / 4294967296.0 * 2.0 * PI;
    ch = $cos(h); sh = $sin(h);
    case (dsel)
      1: begin // d/dtheta
        r.re[0] = -0.5*sh;            r.im[0] = 0.0;
        r.re[1] = -0.5*$cos(l)*ch;    r.im[1] = -0.5*$sin(l)*ch;
        r.re[2] =  0.5*$cos(p)*ch;    r.im[2] =  0.5*$sin(p)*ch;
        r.re[3] = -0.5*$cos(p+l)*sh;  r.im[3] = -0.5*$sin(p+l)*sh;
      end
      2: begin // d/dphi
        r.re[0] = 0.0; r.im[0] = 0.0; r.re[1] = 0.0; r.im[1] = 0.0;
        r.re[2] = -$sin(p)*sh;   r.im[2] = $cos(p)*sh;
        r.re[3] = -$sin(p+l)*ch; r.im[3] = $cos(p+l)*ch;
      end
      3: begin // d/dlambda
        r.re[0] = 0.0; r.im[0] = 0.0; r.re[2] = 0.0; r.im[2] = 0.0;
        r.re[1] = $sin(l)*sh;    r.im[1] = -$cos(l)*sh;
        r.re[3] = -$sin(p+l)*ch; r.im[3] = $cos(p+l)*ch;
      end
      default: begin
        r.re[0] = ch;             r.im[0] = 0.0;
        r.re[1] = -$cos(l)*sh;    r.im[1] = -$sin(l)*sh;
        r.re[2] = $cos(p)*sh;     r.im[2] = $sin(p)*sh;
        r.re[3] = $cos(p+l)*ch;   r.im[3] = $sin(p+l)*ch;
      end
    endcase
    r.target  = int'(w0[3:0]);
    r.control = int'(w0[7:4]);
    r.ctrl_en = w0[8];
    r.deriv   = (dsel != 0);
    return r;
  endfunction

  function automatic rkern_t identity();
    rkern_t r;
    for (int i = 0; i < 4; i++) begin r.re[i] = 0.0; r.im[i] = 0.0; end
    r.re[0] = 1.0; r.re[3] = 1.0;
    r.target = 0; r.control = 0; r.ctrl_en = 0; r.deriv = 0;
    return r;
  endfunction

  task automatic apply_kernel(ref real mre[], ref real mim[], input int n, input rkern_t k);
    int dim;
    real ore[], oim[];
    dim = 1 << n;
    ore = new[dim*dim]; oim = new[dim*dim];
    for (int col = 0; col < dim; col++)
      for (int row = 0; row < dim; row++) begin
        int b, p, tb, ia, ib;
        b  = col*dim;
        tb = (row >> k.target) & 1;
        p  = row ^ (1 << k.target);
        if (k.ctrl_en && (((row >> k.control) & 1) == 0)) begin
          ore[b+row] = k.deriv ? 0.0 : mre[b+row];
          oim[b+row] = k.deriv ? 0.0 : mim[b+row];
        end else begin
          ia = (tb != 0) ? 3 : 0;
          ib = (tb != 0) ? 2 : 1;
          ore[b+row] = k.re[ia]*mre[b+row] - k.im[ia]*mim[b+row] + k.re[ib]*mre[b+p] - k.im[ib]*mim[b+p];
          oim[b+row] = k.re[ia]*mim[b+row] + k.im[ia]*mre[b+row] + k.re[ib]*mim[b+p] + k.im[ib]*mre[b+p];
        end
      end
    mre = ore; mim = oim;
  endtask

  // random matrix whose columns have norm 0.9, so that unitary gates keep
  // every element inside the Q2.30 range
  task automatic random_matrix(ref real mre[], ref real mim[], input int n);
    int dim;
    dim = 1 << n;
    mre = new[dim*dim]; mim = new[dim*dim];
    for (int col = 0; col < dim; col++) begin
      real s;
      s = 0.0;
      for (int row = 0; row < dim; row++) begin
        mre[col*dim+row] = real'($urandom % 2000) / 1000.0 - 1.0;
        mim[col*dim+row] = real'($urandom % 2000) / 1000.0 - 1.0;
        s += mre[col*dim+row]**2 + mim[col*dim+row]**2;
      end
      s = 0.9 / $sqrt(s);
      for (int row = 0; row < dim; row++) begin
        mre[col*dim+row] *= s;
        mim[col*dim+row] *= s;
      end
    end
  endtask
endpackage
