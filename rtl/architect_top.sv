// architect_top: the two ARCHITECT case-study datapaths of the paper side by side.
//
// The top holds one Jacobi datapath (2x2 linear system, multiply-add operators,
// DELTA = 3) and one Newton datapath (x' = x/2 + 3/(2 a x), divide-add operator,
// DELTA = 4), each with its own scheduling FSM, CPF-addressed digit RAMs and
// don't-change detector, as in the paper's Fig. 9 where every iterative method
// gets its own instance. The two run independently from a common clock and
// reset; each has its own start/stop, constants and output digit stream.
//
// Ports are the solvers' ports prefixed jac_ and nwt_; see jacobi_solver and
// newton_solver for their meaning and timing. Output digits are streamed as
// (valid, approximant k, position p, digit); the host of the paper's system
// (a CPU over PCIe) is outside this design.
// Default sizes follow the paper's qualitative experiments: U = 8, D = 2^10.
module architect_top
  import architect_pkg::*;
#(
  parameter int unsigned U  = 8,
  parameter int unsigned D  = 1024,
  parameter int unsigned KW = 10,
  parameter int unsigned IW = 16,
  parameter int unsigned CW = 32,
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // Jacobi
  input  logic          jac_start,
  input  logic          jac_stop,
  input  logic [CW-1:0] jac_c0_p, jac_c0_n, jac_c1_p, jac_c1_n,
  input  logic [CW-1:0] jac_d0_p, jac_d0_n, jac_d1_p, jac_d1_n,
  input  logic [CW-1:0] jac_g0_p, jac_g0_n, jac_g1_p, jac_g1_n,
  output logic          jac_running,
  output logic          jac_done,
  output logic          jac_exhausted,
  output logic          jac_out_valid,
  output logic [KW-1:0] jac_out_k,
  output logic [IW-1:0] jac_out_p,
  output sd_t           jac_out_x0,
  output sd_t           jac_out_x1,
  output logic          jac_out_same,
  output logic [IW-1:0] jac_psi_next,
  output logic [IW-1:0] jac_psi_own,
  output logic [AW-1:0] jac_step_addr,
  output logic          jac_op_error,
  output logic [4:0]    jac_ev,       // {stable, snap, desc, acc, step}
  // Newton
  input  logic          nwt_start,
  input  logic          nwt_stop,
  input  logic [CW-1:0] nwt_c_p, nwt_c_n,
  input  logic [CW-1:0] nwt_g_p, nwt_g_n,
  output logic          nwt_running,
  output logic          nwt_done,
  output logic          nwt_exhausted,
  output logic          nwt_out_valid,
  output logic [KW-1:0] nwt_out_k,
  output logic [IW-1:0] nwt_out_p,
  output sd_t           nwt_out_x,
  output logic          nwt_out_same,
  output logic [IW-1:0] nwt_psi_next,
  output logic [IW-1:0] nwt_psi_own,
  output logic [AW-1:0] nwt_step_addr,
  output logic          nwt_op_error,
  output logic [4:0]    nwt_ev        // {stable, snap, desc, acc, step}
);
  jacobi_solver #(.U(U), .D(D), .KW(KW), .IW(IW), .CW(CW)) u_jacobi (
    .clk, .rst_n, .start(jac_start), .stop(jac_stop),
    .c0_p(jac_c0_p), .c0_n(jac_c0_n), .c1_p(jac_c1_p), .c1_n(jac_c1_n),
    .d0_p(jac_d0_p), .d0_n(jac_d0_n), .d1_p(jac_d1_p), .d1_n(jac_d1_n),
    .g0_p(jac_g0_p), .g0_n(jac_g0_n), .g1_p(jac_g1_p), .g1_n(jac_g1_n),
    .running(jac_running), .done(jac_done), .exhausted(jac_exhausted),
    .out_valid(jac_out_valid), .out_k(jac_out_k), .out_p(jac_out_p),
    .out_x0(jac_out_x0), .out_x1(jac_out_x1), .out_same(jac_out_same),
    .psi_next(jac_psi_next), .psi_own(jac_psi_own), .step_addr(jac_step_addr), .op_error(jac_op_error),
    .ev_step(jac_ev[0]), .ev_acc(jac_ev[1]), .ev_desc(jac_ev[2]), .ev_snap(jac_ev[3]),
    .ev_stable(jac_ev[4]));

  newton_solver #(.U(U), .D(D), .KW(KW), .IW(IW), .CW(CW)) u_newton (
    .clk, .rst_n, .start(nwt_start), .stop(nwt_stop),
    .c_p(nwt_c_p), .c_n(nwt_c_n), .g_p(nwt_g_p), .g_n(nwt_g_n),
    .running(nwt_running), .done(nwt_done), .exhausted(nwt_exhausted),
    .out_valid(nwt_out_valid), .out_k(nwt_out_k), .out_p(nwt_out_p),
    .out_x(nwt_out_x), .out_same(nwt_out_same),
    .psi_next(nwt_psi_next), .psi_own(nwt_psi_own), .step_addr(nwt_step_addr), .op_error(nwt_op_error),
    .ev_step(nwt_ev[0]), .ev_acc(nwt_ev[1]), .ev_desc(nwt_ev[2]), .ev_snap(nwt_ev[3]),
    .ev_stable(nwt_ev[4]));
endmodule
