// tb_architect_top: end-to-end, full-size test of the ARCHITECT top.
//
// The top runs at its default sizes (U = 8, D = 2^10 words per RAM). Both
// datapaths run at the same time:
//   Jacobi: c0 = c1 = -3/4, d0, d1 random in [0, 1/8), guess 0;
//   Newton: a = 4 (c = 3/8), guess 0.75;
// first to memory exhaustion, then a second run of both (new d0, d1; a = 5) in
// which Newton is stopped on demand, over the uncleared RAMs of run 1.
// Every output digit is collected and each approximant checked against one exact
// update of its predecessor in wide fixed point (error <= 3 * 2^-p_k), digit
// order and the DELTA-digit lag between consecutive approximants are checked,
// and the cycles per output step must be 1 + floor(i/U) (Jacobi) and
// 2 (1 + floor(i/U)) (Newton). Each mechanism is counted and a failure is
// recorded for any that never occurred: accumulation, descent to the next
// approximant, snap-back to approximant 1, don't-change detection, memory
// exhaustion and stop on demand, for both datapaths.
module tb_architect_top;
  import architect_pkg::*;
  localparam int U = 8, D = 1024, KW = 10, IW = 16, CW = 32;
  localparam int NK = 64, NP = 512, FB = 420, W = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic jstart = 0, jstop = 0, nstart = 0, nstop = 0;
  logic [CW-1:0] c0_p = '0, c0_n = 32'hC000_0000, c1_p = '0, c1_n = 32'hC000_0000;
  logic [CW-1:0] d0_p, d0_n = '0, d1_p, d1_n = '0;
  logic [CW-1:0] g0_p = '0, g0_n = '0, g1_p = '0, g1_n = '0;
  logic [CW-1:0] nc_p, nc_n = '0, ng_p = 32'hC000_0000, ng_n = '0;
  logic jrun, jdone, jexh, jov, jsame, jerr, nrun, ndone, nexh, nov, nsame, nerr;
  logic [KW-1:0] jk, nk;
  logic [IW-1:0] jp, np, jpsin, jpsio, npsin, npsio;
  sd_t jx0, jx1, nx;
  logic [9:0] jsa, nsa;
  logic [4:0] jev, nev;

  architect_top dut (
    .clk, .rst_n,
    .jac_start(jstart), .jac_stop(jstop),
    .jac_c0_p(c0_p), .jac_c0_n(c0_n), .jac_c1_p(c1_p), .jac_c1_n(c1_n),
    .jac_d0_p(d0_p), .jac_d0_n(d0_n), .jac_d1_p(d1_p), .jac_d1_n(d1_n),
    .jac_g0_p(g0_p), .jac_g0_n(g0_n), .jac_g1_p(g1_p), .jac_g1_n(g1_n),
    .jac_running(jrun), .jac_done(jdone), .jac_exhausted(jexh), .jac_out_valid(jov),
    .jac_out_k(jk), .jac_out_p(jp), .jac_out_x0(jx0), .jac_out_x1(jx1), .jac_out_same(jsame),
    .jac_psi_next(jpsin), .jac_psi_own(jpsio), .jac_step_addr(jsa), .jac_op_error(jerr), .jac_ev(jev),
    .nwt_start(nstart), .nwt_stop(nstop), .nwt_c_p(nc_p), .nwt_c_n(nc_n), .nwt_g_p(ng_p), .nwt_g_n(ng_n),
    .nwt_running(nrun), .nwt_done(ndone), .nwt_exhausted(nexh), .nwt_out_valid(nov),
    .nwt_out_k(nk), .nwt_out_p(np), .nwt_out_x(nx), .nwt_out_same(nsame),
    .nwt_psi_next(npsin), .nwt_psi_own(npsio), .nwt_step_addr(nsa), .nwt_op_error(nerr), .nwt_ev(nev));

  int jd0 [NK][NP], jd1 [NK][NP], nd [NK][NP];
  int jlen [NK], nlen [NK];
  int cyc = 0, jlast = 0, nlast = 0, jout = 0, nout = 0;
  int jcnt [5], ncnt [5];
  int jsame_n = 0, nsame_n = 0, jerr_n = 0, nerr_n = 0, order_err = 0, cyc_err = 0;
  int n_exh = 0, n_ondemand = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    if (jev[0]) jlast = cyc;
    if (nev[0]) nlast = cyc;
    if (jov) begin
      jout++;
      if (int'(jk) >= NK || int'(jp) >= NP || int'(jp) != jlen[jk]) order_err++;
      else begin jd0[jk][jp] = sd_val(jx0); jd1[jk][jp] = sd_val(jx1); jlen[jk]++; end
      if (cyc - jlast != (int'(jp) + 3) / U) cyc_err++;
      jsame_n += jsame;
    end
    if (nov) begin
      nout++;
      if (int'(nk) >= NK || int'(np) >= NP || int'(np) != nlen[nk]) order_err++;
      else begin nd[nk][np] = sd_val(nx); nlen[nk]++; end
      if (cyc - nlast != 2 * ((int'(np) + 4) / U + 1) - 1) cyc_err++;
      nsame_n += nsame;
    end
    for (int e = 0; e < 5; e++) begin jcnt[e] += jev[e]; ncnt[e] += nev[e]; end
    jerr_n += jerr; nerr_n += nerr;
  end

  function automatic logic signed [W-1:0] val(input logic [CW-1:0] p, input logic [CW-1:0] n);
    logic signed [W-1:0] v = '0;
    for (int i = 0; i < CW; i++) v += (W'(p[CW-1-i]) - W'(n[CW-1-i])) <<< (FB - 1 - i);
    return v;
  endfunction

  // approximant k of Jacobi variable 0/1 (k = 0: zero guess) or of Newton (2)
  function automatic logic signed [W-1:0] vec(input int which, input int k);
    logic signed [W-1:0] v = '0;
    int len;
    if (k == 0) return (which == 2) ? val(ng_p, ng_n) : v;
    len = (which == 2) ? nlen[k] : jlen[k];
    for (int p = 0; p < len; p++)
      v += W'(signed'(which == 0 ? jd0[k][p] : which == 1 ? jd1[k][p] : nd[k][p])) <<< (FB - 1 - p);
    return v;
  endfunction

  function automatic logic signed [W-1:0] absv(input logic signed [W-1:0] a);
    return a < 0 ? -a : a;
  endfunction

  task automatic check_runs(input string tag);
    logic signed [W-1:0] C0, C1, D0, D1, NC, V, e0, e1, tol;
    int jk_max = 0, nk_max = 0;
    C0 = val(c0_p, c0_n); C1 = val(c1_p, c1_n); D0 = val(d0_p, d0_n); D1 = val(d1_p, d1_n);
    NC = val(nc_p, nc_n);
    for (int k = 1; k < NK; k++) begin
      if (jlen[k] != 0) begin
        jk_max = k;
        e0 = vec(0, k) - (((C0 * vec(1, k - 1)) >>> FB) + D0);
        e1 = vec(1, k) - (((C1 * vec(0, k - 1)) >>> FB) + D1);
        tol = W'(3) <<< (FB - jlen[k]);
        checks++;
        if (absv(e0) > tol || absv(e1) > tol) begin failures++; $display("FAIL %s Jacobi approximant %0d", tag, k); end
        if (k > 1) begin checks++; if (jlen[k - 1] < jlen[k] + 3) begin failures++; $display("FAIL %s Jacobi lag k=%0d", tag, k); end end
      end
      if (nlen[k] != 0) begin
        nk_max = k;
        V = vec(2, k - 1);
        e0 = vec(2, k) - ((V >>> 1) + ((NC <<< FB) / V));
        checks++;
        if (absv(e0) > (W'(3) <<< (FB - nlen[k]))) begin failures++; $display("FAIL %s Newton approximant %0d", tag, k); end
        if (k > 1) begin checks++; if (nlen[k - 1] < nlen[k] + 4) begin failures++; $display("FAIL %s Newton lag k=%0d", tag, k); end end
      end
    end
    $display("%s: Jacobi K=%0d P=%0d, Newton K=%0d P=%0d, cycle %0d", tag, jk_max, jlen[1], nk_max, nlen[1], cyc);
  endtask

  task automatic run(input bit nwt_on_demand);
    for (int k = 0; k < NK; k++) begin jlen[k] = 0; nlen[k] = 0; end
    jout = 0; nout = 0;
    @(negedge clk) begin jstart = 1; nstart = 1; end
    @(negedge clk) begin jstart = 0; nstart = 0; end
    fork
      begin
        fork
          begin wait (jdone); end
          begin
            if (nwt_on_demand) begin
              wait (nout >= 1000); @(negedge clk) nstop = 1;
              @(negedge clk) nstop = 0;
            end
            wait (ndone);
          end
        join
      end
      begin repeat (3000000) @(posedge clk); $display("FAIL watchdog"); failures++; end
    join_any
    disable fork;
    n_exh += jexh + nexh;
    n_ondemand += (ndone && !nexh);
  endtask

  initial begin
    for (int e = 0; e < 5; e++) begin jcnt[e] = 0; ncnt[e] = 0; end
    d0_p = {3'b000, 8'($urandom), 21'd0};
    d1_p = {3'b000, 8'($urandom), 21'd0};
    nc_p = 32'h6000_0000;                // a = 4
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b0);
    checks++; if (!jexh || !nexh) begin failures++; $display("FAIL run 1 should end by exhaustion"); end
    check_runs("run 1");
    d0_p = {3'b000, 8'($urandom), 21'd0};
    d1_p = {3'b000, 8'($urandom), 21'd0};
    nc_p = 32'h4CCC_CCCC;                // a = 5
    run(1'b1);
    checks++; if (!jexh || nexh) begin failures++; $display("FAIL run 2 end conditions"); end
    check_runs("run 2");
    checks++; if (order_err != 0) begin failures++; $display("FAIL %0d digits out of order", order_err); end
    checks++; if (cyc_err != 0) begin failures++; $display("FAIL %0d steps with wrong cycle count", cyc_err); end
    checks++; if (jerr_n + nerr_n != 0) begin failures++; $display("FAIL operator errors"); end
    // mechanisms: {stable, snap, desc, acc, step}
    checks++; if (jcnt[1] == 0) begin failures++; $display("FAIL Jacobi: no accumulation"); end
    checks++; if (ncnt[1] == 0) begin failures++; $display("FAIL Newton: no accumulation"); end
    checks++; if (jcnt[2] == 0) begin failures++; $display("FAIL Jacobi: no descent"); end
    checks++; if (ncnt[2] == 0) begin failures++; $display("FAIL Newton: no descent"); end
    checks++; if (jcnt[3] == 0) begin failures++; $display("FAIL Jacobi: no snap-back"); end
    checks++; if (ncnt[3] == 0) begin failures++; $display("FAIL Newton: no snap-back"); end
    checks++; if (jcnt[4] == 0 || jsame_n == 0) begin failures++; $display("FAIL Jacobi: no don't-change digits"); end
    checks++; if (ncnt[4] == 0 || nsame_n == 0) begin failures++; $display("FAIL Newton: no don't-change digits"); end
    checks++; if (n_exh < 3) begin failures++; $display("FAIL memory exhaustion seen %0d times", n_exh); end
    checks++; if (n_ondemand == 0) begin failures++; $display("FAIL no stop on demand"); end
    $display("events Jacobi step/acc/desc/snap/stable %0d %0d %0d %0d %0d; Newton %0d %0d %0d %0d %0d",
             jcnt[0], jcnt[1], jcnt[2], jcnt[3], jcnt[4], ncnt[0], ncnt[1], ncnt[2], ncnt[3], ncnt[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
