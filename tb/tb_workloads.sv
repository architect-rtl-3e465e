// tb_workloads: the two benchmark families run on the top at its default size
// (U = 8, D = 2^10) with on-demand termination at accuracy eta = 2^-6.
//
// Jacobi: A_m = [[1, 1-2^-m], [1-2^-m, 1]], x^(0) = 0, for m = 0..4, so c0 = c1 =
// -(1 - 2^-m) and d = b. b0, b1 are random in [0, 2^-(m+1)), which keeps every
// iterate inside (-1, 1) (|x^(k)| <= b / (2^-m) < 1/2). A host model watches the
// digit stream; once approximant k has 18 digits it evaluates the residual
// ||A x^(k) - b|| from them and asserts stop when it is below eta / 2^(m+1),
// which is the benchmark's accuracy for the unscaled system.
// Newton: a in {4, 5, 8, 12}, guess 0.75, stop when |x^2 - 3/a| < eta.
// Checked for Jacobi m <= 3 and all Newton cases: the run stops on demand before
// memory exhaustion, and the accepted approximant is within the accuracy that
// eta implies of the exact solution. m = 4 is run and reported (it may need more
// iterations than the 44 that fit at D = 2^10). Iteration counts and cycles are
// printed.
module tb_workloads;
  import architect_pkg::*;
  localparam int CW = 32, NK = 64, FB = 60, PCHK = 18;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic jstart = 0, jstop = 0, nstart = 0, nstop = 0;
  logic [CW-1:0] c0_p = '0, c0_n, c1_p = '0, c1_n, d0_p, d0_n = '0, d1_p, d1_n = '0;
  logic [CW-1:0] g_z = '0, nc_p, nc_n = '0, ng_p = 32'hC000_0000, ng_n = '0;
  logic jrun, jdone, jexh, jov, jsame, jerr, nrun, ndone, nexh, nov, nsame, nerr;
  logic [9:0] jk, nk, jsa, nsa;
  logic [15:0] jp, np, jpsin, jpsio, npsin, npsio;
  sd_t jx0, jx1, nx;
  logic [4:0] jev, nev;

  architect_top dut (
    .clk, .rst_n,
    .jac_start(jstart), .jac_stop(jstop),
    .jac_c0_p(c0_p), .jac_c0_n(c0_n), .jac_c1_p(c1_p), .jac_c1_n(c1_n),
    .jac_d0_p(d0_p), .jac_d0_n(d0_n), .jac_d1_p(d1_p), .jac_d1_n(d1_n),
    .jac_g0_p(g_z), .jac_g0_n(g_z), .jac_g1_p(g_z), .jac_g1_n(g_z),
    .jac_running(jrun), .jac_done(jdone), .jac_exhausted(jexh), .jac_out_valid(jov),
    .jac_out_k(jk), .jac_out_p(jp), .jac_out_x0(jx0), .jac_out_x1(jx1), .jac_out_same(jsame),
    .jac_psi_next(jpsin), .jac_psi_own(jpsio), .jac_step_addr(jsa), .jac_op_error(jerr), .jac_ev(jev),
    .nwt_start(nstart), .nwt_stop(nstop), .nwt_c_p(nc_p), .nwt_c_n(nc_n), .nwt_g_p(ng_p), .nwt_g_n(ng_n),
    .nwt_running(nrun), .nwt_done(ndone), .nwt_exhausted(nexh), .nwt_out_valid(nov),
    .nwt_out_k(nk), .nwt_out_p(np), .nwt_out_x(nx), .nwt_out_same(nsame),
    .nwt_psi_next(npsin), .nwt_psi_own(npsio), .nwt_step_addr(nsa), .nwt_op_error(nerr), .nwt_ev(nev));

  // leading PCHK digits of each approximant, as FB-bit fixed point
  longint jv0 [NK], jv1 [NK], nv [NK];
  int jcnt [NK], ncnt [NK];
  int jacc = -1, nacc = -1;          // approximant accepted by the host model
  longint A, B0, B1, NC, ETA, JETA;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint fx_mul(longint a, longint b);
    return longint'((128'(signed'(a)) * 128'(signed'(b))) >>> FB);
  endfunction
  function automatic longint fabs(longint a);
    return a < 0 ? -a : a;
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (jov && int'(jk) < NK && int'(jp) < PCHK) begin
      jv0[int'(jk)] += longint'(sd_val(jx0)) <<< (FB - 1 - 32'(jp));
      jv1[int'(jk)] += longint'(sd_val(jx1)) <<< (FB - 1 - 32'(jp));
      jcnt[int'(jk)]++;
      if (jcnt[int'(jk)] == PCHK && jacc < 0) begin
        // ||A x - b||: row 0 = x0 + a x1 - b0, row 1 = a x0 + x1 - b1
        if (fabs(jv0[int'(jk)] + fx_mul(A, jv1[int'(jk)]) - B0) < JETA &&
            fabs(fx_mul(A, jv0[int'(jk)]) + jv1[int'(jk)] - B1) < JETA) begin
          jacc = int'(jk); jstop <= 1'b1;
        end
      end
    end
    if (nov && int'(nk) < NK && int'(np) < PCHK) begin
      nv[int'(nk)] += longint'(sd_val(nx)) <<< (FB - 1 - 32'(np));
      ncnt[int'(nk)]++;
      if (ncnt[int'(nk)] == PCHK && nacc < 0 && fabs(fx_mul(nv[int'(nk)], nv[int'(nk)]) - 2 * NC) < ETA) begin
        nacc = int'(nk); nstop <= 1'b1;
      end
    end
  end

  task automatic clear();
    for (int k = 0; k < NK; k++) begin jv0[k] = 0; jv1[k] = 0; nv[k] = 0; jcnt[k] = 0; ncnt[k] = 0; end
    jacc = -1; nacc = -1;
  endtask

  initial begin
    int t0, m, a;
    longint X0, X1, det, err0, err1, bound;
    ETA = longint'(1) <<< (FB - 6);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (m = 0; m <= 4; m++) begin
      clear();
      // c = -(1 - 2^-m): the first m digits of the n plane (m = 0: zero)
      c0_n = '0;
      for (int i = 0; i < m; i++) c0_n[CW - 1 - i] = 1'b1;
      c1_n = c0_n;
      A = 0;
      for (int i = 0; i < m; i++) A += longint'(1) <<< (FB - 1 - i);
      d0_p = '0; d1_p = '0;
      d0_p[CW - 2 - m -: 8] = 8'($urandom);
      d1_p[CW - 2 - m -: 8] = 8'($urandom);
      // the scaled system A x = b / 2^(m+1) to accuracy eta / 2^(m+1) is the
      // benchmark system A x' = b to accuracy eta, with x' = 2^(m+1) x
      JETA = ETA >>> (m + 1);
      B0 = 0; B1 = 0;
      for (int i = 0; i < CW; i++) begin
        B0 += longint'(d0_p[CW - 1 - i]) <<< (FB - 1 - i);
        B1 += longint'(d1_p[CW - 1 - i]) <<< (FB - 1 - i);
      end
      @(negedge clk) jstart = 1; t0 = cyc;
      @(negedge clk) jstart = 0;
      fork
        wait (jdone);
        begin repeat (400000) @(posedge clk); $display("FAIL watchdog"); failures++; end
      join_any
      disable fork;
      @(negedge clk) jstop = 0;
      checks++;
      if (m <= 3) begin
        if (jexh || jacc < 0) begin failures++; $display("FAIL Jacobi m=%0d did not converge", m); end
        else begin
          // exact solution of A x = b
          det = (longint'(1) <<< FB) - fx_mul(A, A);             // 1 - a^2
          X0 = longint'((128'(signed'(B0 - fx_mul(A, B1))) <<< FB) / 128'(signed'(det)));
          X1 = longint'((128'(signed'(B1 - fx_mul(A, B0))) <<< FB) / 128'(signed'(det)));
          err0 = fabs(jv0[jacc] - X0); err1 = fabs(jv1[jacc] - X1);
          // ||x - x*|| <= ||A^-1|| * (eta + truncation), ||A^-1|| = 1/(2^-m) for this A
          bound = (JETA + (longint'(1) <<< (FB - PCHK + 2))) <<< m;
          checks++;
          if (err0 > bound || err1 > bound) begin failures++; $display("FAIL Jacobi m=%0d accepted approximant off", m); end
          $display("Jacobi m=%0d: accepted x^(%0d) after %0d cycles", m, jacc, cyc - t0);
        end
      end else if (jexh) begin
        $display("Jacobi m=%0d: memory exhausted before eta was met", m);
      end else begin
        $display("Jacobi m=%0d: accepted x^(%0d) after %0d cycles", m, jacc, cyc - t0);
      end
    end
    for (int n = 0; n < 4; n++) begin
      a = (n == 0) ? 4 : (n == 1) ? 5 : (n == 2) ? 8 : 12;
      clear();
      nc_p = CW'((64'd3 << CW) / 64'(2 * a));
      NC = 0;
      for (int i = 0; i < CW; i++) NC += longint'(nc_p[CW - 1 - i]) <<< (FB - 1 - i);
      @(negedge clk) nstart = 1; t0 = cyc;
      @(negedge clk) nstart = 0;
      fork
        wait (ndone);
        begin repeat (400000) @(posedge clk); $display("FAIL watchdog"); failures++; end
      join_any
      disable fork;
      @(negedge clk) nstop = 0;
      checks++;
      if (nexh || nacc < 0) begin failures++; $display("FAIL Newton a=%0d did not converge", a); end
      else begin
        checks++;
        // |x^2 - 3/a| < eta with x >= 1/2 gives |x - sqrt(3/a)| < eta
        if (fabs(fx_mul(nv[nacc], nv[nacc]) - 2 * NC) >= ETA) failures++;
        $display("Newton a=%0d: accepted x^(%0d) after %0d cycles", a, nacc, cyc - t0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
