// tb_newton_solver: end-to-end check of the Newton datapath.
//
// Run 1: a = 4 (c = 3/(2a) = 3/8), guess 0.75, run to memory exhaustion.
// Run 2: a = 5 (c = 0.3 to 32 bits), same guess, stopped on demand; it reuses the
// uncleared RAMs of run 1.
// Every output digit is collected; each approximant k is compared with one exact
// update of approximant k-1 in wide fixed point,
//     |x^(k) - (x^(k-1)/2 + c/x^(k-1))| <= 3 * 2^-p_k,
// and approximants from k = 5 on (where the quadratic convergence has used up the
// digits) must lie within 4 * 2^-p_k of sqrt(2c) (= sqrt(3/a)). Also checked:
// digit order, approximant k-1 at least 4 digits ahead of approximant k, each
// output step taking 2 (1 + floor(i/U)) cycles, and that every mechanism occurred.
module tb_newton_solver;
  import architect_pkg::*;
  localparam int U = 8, D = 128, KW = 10, IW = 16, CW = 32;
  localparam int NK = 64, NP = 512, FB = 400, W = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stop = 0;
  logic [CW-1:0] c_p, c_n = '0, g_p = 32'hC000_0000, g_n = '0;
  logic running, done, exhausted, ov, same, operr;
  logic [KW-1:0] ok;
  logic [IW-1:0] op, psin, psio;
  sd_t ox;
  logic [$clog2(D)-1:0] sa;
  logic evs, eva, evd, evn, evt;

  newton_solver #(.U(U), .D(D), .KW(KW), .IW(IW), .CW(CW)) dut (
    .clk, .rst_n, .start, .stop, .c_p, .c_n, .g_p, .g_n, .running, .done, .exhausted,
    .out_valid(ov), .out_k(ok), .out_p(op), .out_x(ox), .out_same(same), .psi_next(psin),
    .psi_own(psio), .step_addr(sa), .op_error(operr), .ev_step(evs), .ev_acc(eva),
    .ev_desc(evd), .ev_snap(evn), .ev_stable(evt));

  int dg [NK][NP];
  int plen [NK];
  int cyc = 0, last_step = 0, n_out = 0, n_same = 0, n_acc = 0, n_desc = 0, n_snap = 0, n_stab = 0;
  int n_err = 0, order_err = 0, cyc_err = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    if (evs) last_step = cyc;
    if (ov) begin
      n_out++;
      if (int'(ok) >= NK || int'(op) >= NP || int'(op) != plen[ok]) order_err++;
      else begin dg[ok][op] = sd_val(ox); plen[ok]++; end
      if (cyc - last_step != 2 * ((int'(op) + 4) / U + 1) - 1) cyc_err++;
      n_same += same;
    end
    n_acc += eva; n_desc += evd; n_snap += evn; n_stab += evt; n_err += operr;
  end

  function automatic logic signed [W-1:0] val(input logic [CW-1:0] p, input logic [CW-1:0] n);
    logic signed [W-1:0] v = '0;
    for (int i = 0; i < CW; i++) v += (W'(p[CW-1-i]) - W'(n[CW-1-i])) <<< (FB - 1 - i);
    return v;
  endfunction

  function automatic logic signed [W-1:0] vec(input int k);
    logic signed [W-1:0] v = '0;
    if (k == 0) return val(g_p, g_n);
    for (int p = 0; p < plen[k]; p++) v += W'(signed'(dg[k][p])) <<< (FB - 1 - p);
    return v;
  endfunction

  function automatic logic signed [W-1:0] absv(input logic signed [W-1:0] a);
    return a < 0 ? -a : a;
  endfunction

  function automatic logic signed [W-1:0] isqrt(input logic signed [W-1:0] s);
    // floor(sqrt(s * 2^FB)) by bisection, in FB fractional bits
    logic signed [W-1:0] lo = '0, hi, mid, t;
    hi = W'(1) <<< FB;
    t = s <<< FB;
    for (int n = 0; n < FB + 2; n++) begin
      mid = (lo + hi) >>> 1;
      if (mid * mid <= t) lo = mid; else hi = mid;
    end
    return lo;
  endfunction

  task automatic run(input bit on_demand);
    for (int k = 0; k < NK; k++) plen[k] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    fork
      begin
        if (on_demand) begin
          wait (n_out >= 200); @(negedge clk) stop = 1;
          @(negedge clk) stop = 0;
        end
        wait (done);
      end
      begin repeat (4000000) @(posedge clk); $display("FAIL watchdog"); failures++; end
    join_any
    disable fork;
  endtask

  task automatic check_run(input string tag);
    logic signed [W-1:0] C, V, e, xs;
    int kmax = 0;
    C = val(c_p, c_n);
    xs = isqrt(C <<< 1);
    for (int k = 1; k < NK; k++) begin
      if (plen[k] == 0) continue;
      kmax = k;
      V = vec(k - 1);
      e = vec(k) - ((V >>> 1) + ((C <<< FB) / V));
      checks++;
      if (absv(e) > (W'(3) <<< (FB - plen[k]))) begin
        failures++; $display("FAIL %s approximant %0d (%0d digits): error %0d ulp", tag, k, plen[k], e >>> (FB - plen[k]));
      end
      if (k >= 5) begin
        checks++;
        if (absv(vec(k) - xs) > (W'(4) <<< (FB - plen[k]))) begin
          failures++; $display("FAIL %s approximant %0d not at sqrt(3/a)", tag, k);
        end
      end
      if (k > 1) begin
        checks++;
        if (plen[k - 1] < plen[k] + 4) begin failures++; $display("FAIL %s dependency k=%0d", tag, k); end
      end
    end
    $display("%s: K=%0d approximants, P=%0d digits of approximant 1, %0d outputs, %0d stable groups",
             tag, kmax, plen[1], n_out, n_stab);
  endtask

  initial begin
    c_p = 32'h6000_0000;        // 3/8
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b0);
    checks++; if (!exhausted) begin failures++; $display("FAIL not exhausted"); end
    check_run("run 1");
    checks++; if (order_err != 0) begin failures++; $display("FAIL %0d digits out of order", order_err); end
    checks++; if (cyc_err != 0) begin failures++; $display("FAIL %0d steps with wrong cycle count", cyc_err); end
    checks++; if (n_err != 0) begin failures++; $display("FAIL op_error %0d", n_err); end
    checks++; if (n_acc == 0) begin failures++; $display("FAIL no accumulation"); end
    checks++; if (n_desc == 0) begin failures++; $display("FAIL no descent"); end
    checks++; if (n_snap == 0) begin failures++; $display("FAIL no snap-back"); end
    checks++; if (n_stab == 0 || n_same == 0) begin failures++; $display("FAIL no don't-change digits"); end
    c_p = 32'h4CCC_CCCC;        // 0.3 = 3/(2*5)
    n_out = 0;
    run(1'b1);
    checks++; if (!done || exhausted) begin failures++; $display("FAIL stop on demand"); end
    check_run("run 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
