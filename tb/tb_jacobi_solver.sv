// tb_jacobi_solver: end-to-end check of the Jacobi datapath.
//
// System: c0 = c1 = -3/4 (the A_m family with m = 2), d0, d1 random in [0, 1/8),
// initial guess 0. The run ends on memory exhaustion. Every output digit is
// collected; afterwards each approximant k is checked against one exact Jacobi
// update of approximant k-1 in wide fixed point:
//     |x0^(k) - (c0 x1^(k-1) + d0)| <= 3 * 2^-p_k   (and likewise x1),
// p_k being the number of digits produced for approximant k. Also checked: digits
// of an approximant arrive in order, approximant k-1 always holds at least 3 more
// digits than approximant k, each output step took 1 + floor(i/U) cycles, the
// deepest approximant is close to the exact solution, and every mechanism
// (accumulation, descent, snap-back, don't-change detection, exhaustion) occurred.
// A second run with stop on demand reuses the (uncleared) RAMs.
module tb_jacobi_solver;
  import architect_pkg::*;
  localparam int U = 8, D = 128, KW = 10, IW = 16, CW = 32;
  localparam int NK = 64, NP = 512, FB = 400, W = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stop = 0;
  logic [CW-1:0] c0_p, c0_n, c1_p, c1_n, d0_p, d0_n, d1_p, d1_n;
  logic [CW-1:0] g0_p = '0, g0_n = '0, g1_p = '0, g1_n = '0;
  logic running, done, exhausted, ov, same, operr;
  logic [KW-1:0] ok;
  logic [IW-1:0] op, psin, psio;
  sd_t o0, o1;
  logic [$clog2(D)-1:0] sa;
  logic evs, eva, evd, evn, evt;

  jacobi_solver #(.U(U), .D(D), .KW(KW), .IW(IW), .CW(CW)) dut (
    .clk, .rst_n, .start, .stop, .c0_p, .c0_n, .c1_p, .c1_n, .d0_p, .d0_n, .d1_p, .d1_n,
    .g0_p, .g0_n, .g1_p, .g1_n, .running, .done, .exhausted, .out_valid(ov), .out_k(ok),
    .out_p(op), .out_x0(o0), .out_x1(o1), .out_same(same), .psi_next(psin), .psi_own(psio),
    .step_addr(sa), .op_error(operr), .ev_step(evs), .ev_acc(eva), .ev_desc(evd),
    .ev_snap(evn), .ev_stable(evt));

  int dg0 [NK][NP], dg1 [NK][NP];
  int plen [NK];
  int cyc = 0, last_step = 0, n_out = 0, n_same = 0, n_acc = 0, n_desc = 0, n_snap = 0, n_stab = 0;
  int n_err = 0, order_err = 0, cyc_err = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    if (evs) last_step = cyc;
    if (ov) begin
      n_out++;
      if (int'(ok) >= NK || int'(op) >= NP || int'(op) != plen[ok]) order_err++;
      else begin
        dg0[ok][op] = sd_val(o0); dg1[ok][op] = sd_val(o1); plen[ok]++;
      end
      if (cyc - last_step != (int'(op) + 3) / U) cyc_err++;
      n_same += same;
    end
    n_acc += eva; n_desc += evd; n_snap += evn; n_stab += evt; n_err += operr;
  end

  function automatic logic signed [W-1:0] val(input logic [CW-1:0] p, input logic [CW-1:0] n);
    logic signed [W-1:0] v = '0;
    for (int i = 0; i < CW; i++) v += (W'(p[CW-1-i]) - W'(n[CW-1-i])) <<< (FB - 1 - i);
    return v;
  endfunction

  function automatic logic signed [W-1:0] vec(input int which, input int k);
    logic signed [W-1:0] v = '0;
    for (int p = 0; p < plen[k]; p++)
      v += W'(signed'(which == 0 ? dg0[k][p] : dg1[k][p])) <<< (FB - 1 - p);
    return v;
  endfunction

  // approximant k-1 of a variable; approximant 0 is the initial guess (zero)
  function automatic logic signed [W-1:0] prev(input int which, input int k);
    logic signed [W-1:0] z = '0;
    if (k == 1) return z;
    return vec(which, k - 1);
  endfunction

  function automatic logic signed [W-1:0] absv(input logic signed [W-1:0] a);
    return a < 0 ? -a : a;
  endfunction

  task automatic run(input bit on_demand);
    for (int k = 0; k < NK; k++) plen[k] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    fork
      begin
        if (on_demand) begin
          wait (n_out >= 300); @(negedge clk) stop = 1;
          @(negedge clk) stop = 0;
        end
        wait (done);
      end
      begin repeat (2000000) @(posedge clk); $display("FAIL watchdog"); failures++; end
    join_any
    disable fork;
  endtask

  initial begin
    logic signed [W-1:0] C0, C1, D0, D1, e0, e1, tol, X0s, X1s, det, one;
    int kmax, pmax;
    c0_p = '0; c0_n = 32'hC000_0000; c1_p = '0; c1_n = 32'hC000_0000;
    d0_p = {3'b000, 8'($urandom), 21'd0}; d0_n = '0;
    d1_p = {3'b000, 8'($urandom), 21'd0}; d1_n = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b0);
    checks++; if (!exhausted) begin failures++; $display("FAIL not exhausted"); end
    C0 = val(c0_p, c0_n); C1 = val(c1_p, c1_n); D0 = val(d0_p, d0_n); D1 = val(d1_p, d1_n);
    kmax = 0; pmax = plen[1];
    for (int k = 1; k < NK; k++) begin
      if (plen[k] == 0) continue;
      kmax = k;
      e0 = vec(0, k) - (((C0 * prev(1, k)) >>> FB) + D0);
      e1 = vec(1, k) - (((C1 * prev(0, k)) >>> FB) + D1);
      tol = W'(3) <<< (FB - plen[k]);
      checks += 2;
      if (absv(e0) > tol || absv(e1) > tol) begin
        failures++; $display("FAIL approximant %0d (%0d digits) off by more than 3 ulp: %0d %0d", k, plen[k], e0 >>> (FB - plen[k]), e1 >>> (FB - plen[k]));
      end
      if (k > 1) begin
        checks++;
        if (plen[k - 1] < plen[k] + 3) begin failures++; $display("FAIL dependency k=%0d", k); end
      end
    end
    // exact solution: x0 = (d0 + c0 d1) / (1 - c0 c1)
    one = W'(1) <<< FB;
    det = one - ((C0 * C1) >>> FB);
    X0s = ((D0 + ((C0 * D1) >>> FB)) <<< FB) / det;
    X1s = ((D1 + ((C1 * D0) >>> FB)) <<< FB) / det;
    checks++;
    if (absv(vec(0, kmax) - X0s) > (one >>> 4) || absv(vec(1, kmax) - X1s) > (one >>> 4)) begin
      failures++; $display("FAIL deepest approximant %0d far from the solution", kmax);
    end
    checks++; if (order_err != 0) begin failures++; $display("FAIL %0d digits out of order", order_err); end
    checks++; if (cyc_err != 0) begin failures++; $display("FAIL %0d steps with wrong cycle count", cyc_err); end
    checks++; if (n_err != 0) begin failures++; $display("FAIL op_error %0d", n_err); end
    checks++; if (n_acc == 0) begin failures++; $display("FAIL no accumulation"); end
    checks++; if (n_desc == 0) begin failures++; $display("FAIL no descent"); end
    checks++; if (n_snap == 0) begin failures++; $display("FAIL no snap-back"); end
    checks++; if (n_stab == 0 || n_same == 0) begin failures++; $display("FAIL no don't-change digits"); end
    $display("run 1: K=%0d approximants, P=%0d digits of approximant 1, %0d outputs, %0d stable groups",
             kmax, pmax, n_out, n_stab);
    // second run: stop on demand, RAM content of run 1 still present
    d0_p = {3'b000, 8'($urandom), 21'd0};
    n_out = 0;
    run(1'b1);
    checks++; if (!done || exhausted) begin failures++; $display("FAIL stop on demand"); end
    C0 = val(c0_p, c0_n); D0 = val(d0_p, d0_n);
    for (int k = 1; k < NK; k++) begin
      if (plen[k] == 0) continue;
      e0 = vec(0, k) - (((C0 * prev(1, k)) >>> FB) + D0);
      checks++;
      if (absv(e0) > (W'(3) <<< (FB - plen[k]))) begin failures++; $display("FAIL run 2 approximant %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
