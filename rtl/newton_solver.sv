// newton_solver: ARCHITECT datapath for the Newton iteration x' = x/2 + 3/(2 a x).
//
// The paper's second case study (Sec. IV, Fig. 9 right) iterates
//     x^(k) = x^(k-1)/2 + 3/(2 a x^(k-1)),
// built from a divider followed by a three-digit parallel adder, with datapath
// online delay DELTA = 4. Here the whole update is one online divide-add
// (ap_div): dividend c = 3/(2a) (a constant input), divisor x^(k-1), and addend
// x^(k-1)/2, which in signed-digit form is x^(k-1) delayed by one digit, so no
// multiplier by 1/2 is needed. The figure prints the constants as -1/2 and
// -3/(2a); this design follows the equation in the text (positive constants).
//
// How it works. The scheduling FSM (ALPHA = 2, divider timing) walks the (k, i)
// plane. A step (k, i) starts the divider with dividend digit c[i], divisor
// digit x^(k-1)[i] and addend digit x^(k-1)[i-1]; approximant 0 is the initial
// guess (from the ports), approximants k >= 1 come from the digit RAM. After
// 2 (floor(i/U) + 1) cycles digit i - 4 of x^(k) is written to the RAM, compared
// with approximant k-1 by the don't-change detector, and put on the output
// stream. The run ends on stop or on memory exhaustion (exhausted set).
// As in the Jacobi datapath, don't-change pointers are detected and reported but
// every approximant is computed from digit 0 (see the README).
//
// Interface: c and the guess are CW-digit signed-digit vectors, digit i at bit
// CW-1-i. The divisor must stay in [1/2, 1) and the result below 1, i.e. the
// guess and sqrt(3/a) in [1/2, 1): a in (3, 12]; other a need the operands
// scaled by powers of two outside this datapath.
module newton_solver
  import architect_pkg::*;
#(
  parameter int unsigned U  = 8,     // RAM width in digits (paper: U = 8)
  parameter int unsigned D  = 1024,  // RAM depth in words (paper: D = 2^10)
  parameter int unsigned KW = 10,
  parameter int unsigned IW = 16,
  parameter int unsigned CW = 32,
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          stop,
  input  logic [CW-1:0] c_p, c_n,     // 3/(2a)
  input  logic [CW-1:0] g_p, g_n,     // initial guess x^(0)
  output logic          running,
  output logic          done,
  output logic          exhausted,
  output logic          out_valid,
  output logic [KW-1:0] out_k,
  output logic [IW-1:0] out_p,
  output sd_t           out_x,
  output logic          out_same,
  output logic [IW-1:0] psi_next,
  output logic [IW-1:0] psi_own,
  output logic [AW-1:0] step_addr,
  output logic          op_error,
  output logic          ev_step,
  output logic          ev_acc,
  output logic          ev_desc,
  output logic          ev_snap,
  output logic          ev_stable
);
  localparam int unsigned DELTA = 4;

  function automatic sd_t cdig(input logic [CW-1:0] p, input logic [CW-1:0] n,
                               input logic [IW-1:0] j);
    if (j < IW'(CW)) return '{p: p[CW-1-int'(j)], n: n[CW-1-int'(j)]};
    return SD_ZERO;
  endfunction

  logic [KW-1:0] k;
  logic          elide;
  logic [IW-1:0] i;
  logic          ovf, step, busy, oerr, zv;
  sd_t           z;
  logic [KW-1:0] zk;
  logic [IW-1:0] zj;

  cpf_addr #(.D(D), .KW(KW), .CW(IW)) u_addr (
    .k(k), .c(i / IW'(U)), .addr(step_addr), .ovf(ovf));

  sched_fsm #(.DELTA(DELTA), .U(U), .ALPHA(2), .ELISION(1'b0), .KW(KW), .IW(IW)) u_fsm (
    .clk, .rst_n, .start, .stop, .ovf, .psi(psi_next), .k, .i, .step, .running, .done,
    .exhausted, .ev_acc, .ev_desc, .ev_snap, .ev_elide(elide));

  // digit RAM: ports 0/1 feed divisor and addend, port 2 the comparison
  logic          we;
  logic [IW-1:0] wp;
  logic [2:0][KW-1:0] rk;
  logic [2:0][IW-1:0] rp;
  sd_t  [2:0]    rd;
  sd_t           yd, ed, prev;

  digit_store #(.U(U), .D(D), .KW(KW), .IW(IW), .NR(3)) u_x (
    .clk, .we, .wk(zk), .wp, .wd(z), .rk, .rp, .rd);

  always_comb begin
    wp = zj - IW'(DELTA);
    rk[0] = k - 1'b1;  rp[0] = i;
    rk[1] = k - 1'b1;  rp[1] = i - 1'b1;
    rk[2] = zk - 1'b1; rp[2] = wp;
    yd   = (k == KW'(1)) ? cdig(g_p, g_n, i) : rd[0];
    if (i == '0)            ed = SD_ZERO;
    else if (k == KW'(1))   ed = cdig(g_p, g_n, i - 1'b1);
    else                    ed = rd[1];
    prev = (zk == KW'(1)) ? cdig(g_p, g_n, wp) : rd[2];
    we = zv && (zj >= IW'(DELTA));
  end

  ap_div #(.U(U), .D(D), .KW(KW), .IW(IW)) u_div (
    .clk, .rst_n, .start(step), .k, .j(i), .x_j(cdig(c_p, c_n, i)), .y_j(yd), .e_j(ed),
    .busy, .ovf(oerr), .zvalid(zv), .z, .zk, .zj);

  dontchange_detect #(.DELTA(DELTA), .ELISION(1'b0), .KW(KW), .IW(IW)) u_dc (
    .clk, .dvalid(we), .dk(zk), .dp(wp), .dsame(out_same), .qk(k), .psi_next(psi_next),
    .psi_cur(psi_own), .ev_stable(ev_stable));

  always_comb begin
    out_same  = sd_eq(z, prev);
    out_valid = we;
    out_k     = zk;
    out_p     = wp;
    out_x     = z;
    ev_step   = step;
    op_error  = elide || oerr || (step && busy);
  end
endmodule
