// tb_dontchange_detect: self-checking test of the don't-change digit detector.
//
// A model iteration produces approximants whose leading digits settle: the
// digits of approximant k equal a fixed "true" vector up to a random length that
// grows with k, and are random beyond it. Two detectors are driven:
//   E0 (no elision): all approximants are produced from digit 0, interleaved
//      round-robin as in the real schedule;
//   E1 (elision): approximants are produced one after another, each starting at
//      digit psi(k) - DELTA as read back from the detector.
// After each approximant, psi(k+1) must equal its start plus the matched prefix
// (from the start) rounded down to whole groups of DELTA digits. The forwarded
// pointer is checked in the cycle of each digit as well.
module tb_dontchange_detect;
  import architect_pkg::*;
  localparam int DELTA = 3, KW = 10, IW = 16, NK = 12, NP = 60;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dv0 = 0, ds0 = 0, dv1 = 0, ds1 = 0;
  logic [KW-1:0] dk0 = '0, qk0 = '0, dk1 = '0, qk1 = '0;
  logic [IW-1:0] dp0 = '0, dp1 = '0, pn0, pc0, pn1, pc1;
  logic st0, st1;
  dontchange_detect #(.DELTA(DELTA), .ELISION(1'b0), .KW(KW), .IW(IW)) u0 (.clk,
    .dvalid(dv0), .dk(dk0), .dp(dp0), .dsame(ds0), .qk(qk0), .psi_next(pn0), .psi_cur(pc0), .ev_stable(st0));
  dontchange_detect #(.DELTA(DELTA), .ELISION(1'b1), .KW(KW), .IW(IW)) u1 (.clk,
    .dvalid(dv1), .dk(dk1), .dp(dp1), .dsame(ds1), .qk(qk1), .psi_next(pn1), .psi_cur(pc1), .ev_stable(st1));

  int dig [NK + 1][NP];   // approximant 0 is the initial guess
  int tru [NP];
  int nstable = 0;

  function automatic int ref_psi(int k, int from);
    int m = 0;
    while (from + m < NP && dig[k][from + m] == dig[k - 1][from + m]) m++;
    return from + (m / DELTA) * DELTA;
  endfunction

  initial begin
    int nxt [NK + 1];
    int first [NK + 1];
    int left, len;
    for (int p = 0; p < NP; p++) tru[p] = $urandom_range(2) - 1;
    for (int k = 0; k <= NK; k++) begin
      len = (k == 0) ? 0 : 4 * k + $urandom_range(3);
      for (int p = 0; p < NP; p++) dig[k][p] = (p < len) ? tru[p] : $urandom_range(2) - 1;
    end
    fork begin
      repeat (2) @(posedge clk);
      rst_n = 1;
      // E0: interleaved, every approximant from digit 0
      for (int k = 1; k <= NK; k++) nxt[k] = 0;
      left = NK * NP;
      while (left > 0) begin
        for (int k = 1; k <= NK; k++) if (nxt[k] < NP) begin
          @(negedge clk);
          dv0 = 1; dk0 = KW'(k); dp0 = IW'(nxt[k]); ds0 = (dig[k][nxt[k]] == dig[k - 1][nxt[k]]);
          qk0 = KW'(k);
          #1;
          checks++;
          if (nxt[k] % DELTA == DELTA - 1 && pn0 != IW'(ref_psi_prefix(k, nxt[k] + 1))) begin
            failures++; $display("FAIL forward k=%0d p=%0d psi=%0d", k, nxt[k], pn0);
          end
          nxt[k]++; left--;
        end
      end
      @(negedge clk); dv0 = 0;
      for (int k = 1; k <= NK; k++) begin
        qk0 = KW'(k); #1;
        checks++;
        if (pn0 != IW'(ref_psi(k, 0))) begin failures++; $display("FAIL E0 psi(%0d)=%0d ref %0d", k + 1, pn0, ref_psi(k, 0)); end
      end
      // E1: sequential, each approximant from its own start
      for (int k = 1; k <= NK; k++) begin
        qk1 = KW'(k); #1;
        first[k] = (k == 1 || pc1 < DELTA) ? 0 : pc1 - DELTA;
        checks++;
        if (k > 1 && pc1 != IW'(ref_psi(k - 1, first[k - 1]))) begin failures++; $display("FAIL E1 psi_cur k=%0d", k); end
        for (int p = first[k]; p < NP; p++) begin
          @(negedge clk);
          dv1 = 1; dk1 = KW'(k); dp1 = IW'(p); ds1 = (dig[k][p] == dig[k - 1][p]);
        end
        @(negedge clk); dv1 = 0; #1;
        checks++;
        if (pn1 != IW'(ref_psi(k, first[k]))) begin failures++; $display("FAIL E1 psi(%0d)=%0d ref %0d", k + 1, pn1, ref_psi(k, first[k])); end
      end
      checks++; if (nstable == 0) begin failures++; $display("FAIL no stable group seen"); end
    end
    begin #1000000; $display("FAIL watchdog"); failures++; end
    join_any
    disable fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pointer expected after digits 0..n-1 of approximant k: groups matched so far
  function automatic int ref_psi_prefix(int k, int n);
    int m = 0;
    while (m < n && dig[k][m] == dig[k - 1][m]) m++;
    return (m / DELTA) * DELTA;
  endfunction

  always @(posedge clk) if (st0 || st1) nstable++;
endmodule
