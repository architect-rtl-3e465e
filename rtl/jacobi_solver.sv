// jacobi_solver: ARCHITECT datapath for the Jacobi method on a 2x2 system.
//
// The paper's first case study solves A x = b by Jacobi iteration,
//     x0' = c0 * x1 + d0,     x1' = c1 * x0 + d1,
// with c0 = -a01/a00, c1 = -a10/a11, d0 = b0/a00, d1 = b1/a11 (Sec. IV, Fig. 9
// left). Each update is one online multiply-add (ap_mac: the paper's multiplier
// with the following three-digit adder folded into its residual), so the datapath
// online delay is DELTA = 3 as stated in the paper.
//
// How it works. The scheduling FSM (ALPHA = 1) walks the (k, i) plane. For a
// step (k, i) both multiply-adds start together with input digits
//     mac0: x = x1^(k-1)[i], y = c0[i], d = d0[i]
//     mac1: x = x0^(k-1)[i], y = c1[i], d = d1[i]
// where approximant 0 is the initial guess (read directly from the ports) and
// approximants k >= 1 are read from the two digit RAMs. After 1 + floor(i/U)
// cycles the operators return digit i - 3 of x0^(k) and x1^(k), which is written
// to the RAMs, compared with approximant k-1 by the don't-change detector, and
// presented on the output stream. The run ends on stop or when the next step's
// RAM word does not exist (memory exhaustion, flagged by exhausted).
//
// Don't-change digits are detected and their pointers reported (psi_next, the
// start step the next approximant could use, and ev_stable), but the schedule
// computes every approximant from digit 0: the paper does not describe how an
// operator's residual state would be obtained for an approximant whose first
// groups are skipped, so skipping is not enabled in this datapath (the FSM and
// detector support it; see the README).
//
// Interface: constants and the initial guess are CW-digit signed-digit vectors,
// digit i (weight 2^-(i+1)) at bit CW-1-i of the *_p / *_n planes; digits beyond
// CW are zero. start (one cycle) begins a run. out_valid marks an output digit
// (out_k, out_p, out_x0, out_x1); out_same says both equal those of approximant
// out_k - 1. Values must keep |x| < 1 and |c| < 1.
module jacobi_solver
  import architect_pkg::*;
#(
  parameter int unsigned U  = 8,     // RAM width in digits (paper: U = 8)
  parameter int unsigned D  = 1024,  // RAM depth in words (paper: D = 2^10)
  parameter int unsigned KW = 10,
  parameter int unsigned IW = 16,
  parameter int unsigned CW = 32,    // digits of each constant / initial guess
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          stop,
  input  logic [CW-1:0] c0_p, c0_n, c1_p, c1_n,
  input  logic [CW-1:0] d0_p, d0_n, d1_p, d1_n,
  input  logic [CW-1:0] g0_p, g0_n, g1_p, g1_n,
  output logic          running,
  output logic          done,
  output logic          exhausted,
  output logic          out_valid,
  output logic [KW-1:0] out_k,
  output logic [IW-1:0] out_p,
  output sd_t           out_x0,
  output sd_t           out_x1,
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
  localparam int unsigned DELTA = 3;

  function automatic sd_t cdig(input logic [CW-1:0] p, input logic [CW-1:0] n,
                               input logic [IW-1:0] j);
    if (j < IW'(CW)) return '{p: p[CW-1-int'(j)], n: n[CW-1-int'(j)]};
    return SD_ZERO;
  endfunction

  logic [KW-1:0] k;
  logic          elide;
  logic [IW-1:0] i;
  logic          ovf, step, busy0, busy1, oerr0, oerr1;
  logic          zv0, zv1;
  sd_t           z0, z1;
  logic [KW-1:0] zk0, zk1;
  logic [IW-1:0] zj0, zj1;

  cpf_addr #(.D(D), .KW(KW), .CW(IW)) u_addr (
    .k(k), .c(i / IW'(U)), .addr(step_addr), .ovf(ovf));

  sched_fsm #(.DELTA(DELTA), .U(U), .ALPHA(1), .ELISION(1'b0), .KW(KW), .IW(IW)) u_fsm (
    .clk, .rst_n, .start, .stop, .ovf, .psi(psi_next), .k, .i, .step, .running, .done,
    .exhausted, .ev_acc, .ev_desc, .ev_snap, .ev_elide(elide));

  // digit RAMs: port 0 feeds the operators, port 1 the don't-change comparison
  logic          we;
  logic [IW-1:0] wp;
  logic [1:0][KW-1:0] rk;
  logic [1:0][IW-1:0] rp;
  sd_t  [1:0]    rd0, rd1;
  sd_t           xa0, xa1, prev0, prev1;

  digit_store #(.U(U), .D(D), .KW(KW), .IW(IW), .NR(2)) u_x0 (
    .clk, .we, .wk(zk0), .wp, .wd(z0), .rk, .rp, .rd(rd0));
  digit_store #(.U(U), .D(D), .KW(KW), .IW(IW), .NR(2)) u_x1 (
    .clk, .we, .wk(zk0), .wp, .wd(z1), .rk, .rp, .rd(rd1));

  always_comb begin
    wp = zj0 - IW'(DELTA);
    rk[0] = k - 1'b1;   rp[0] = i;
    rk[1] = zk0 - 1'b1; rp[1] = wp;
    xa0 = (k == KW'(1)) ? cdig(g0_p, g0_n, i) : rd0[0];
    xa1 = (k == KW'(1)) ? cdig(g1_p, g1_n, i) : rd1[0];
    prev0 = (zk0 == KW'(1)) ? cdig(g0_p, g0_n, wp) : rd0[1];
    prev1 = (zk0 == KW'(1)) ? cdig(g1_p, g1_n, wp) : rd1[1];
    we = zv0 && (zj0 >= IW'(DELTA));
  end

  ap_mac #(.U(U), .D(D), .KW(KW), .IW(IW)) u_mac0 (
    .clk, .rst_n, .start(step), .k, .j(i), .x_j(xa1), .y_j(cdig(c0_p, c0_n, i)),
    .d_j(cdig(d0_p, d0_n, i)), .busy(busy0), .ovf(oerr0), .zvalid(zv0), .z(z0), .zk(zk0), .zj(zj0));
  ap_mac #(.U(U), .D(D), .KW(KW), .IW(IW)) u_mac1 (
    .clk, .rst_n, .start(step), .k, .j(i), .x_j(xa0), .y_j(cdig(c1_p, c1_n, i)),
    .d_j(cdig(d1_p, d1_n, i)), .busy(busy1), .ovf(oerr1), .zvalid(zv1), .z(z1), .zk(zk1), .zj(zj1));

  dontchange_detect #(.DELTA(DELTA), .ELISION(1'b0), .KW(KW), .IW(IW)) u_dc (
    .clk, .dvalid(we), .dk(zk0), .dp(wp), .dsame(out_same), .qk(k), .psi_next(psi_next),
    .psi_cur(psi_own), .ev_stable(ev_stable));

  // the two operators run in lockstep; any disagreement, a step issued while
  // busy, a step beyond the RAM or an elided group is reported on op_error
  always_comb begin
    out_same  = sd_eq(z0, prev0) && sd_eq(z1, prev1);
    out_valid = we;
    out_k     = zk0;
    out_p     = wp;
    out_x0    = z0;
    out_x1    = z1;
    ev_step   = step;
    op_error  = elide || oerr0 || oerr1 || (zv0 != zv1) || (zk0 != zk1) || (zj0 != zj1) ||
                (step && (busy0 || busy1));
  end
endmodule
