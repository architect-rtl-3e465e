// tb_sched_fsm: self-checking test of the scheduling FSM.
//
// Four configurations run side by side:
//   A  DELTA=3, multiplier timing, no elision, stops on memory exhaustion
//   B  DELTA=3, multiplier timing, elision with a fixed pointer table
//   C  DELTA=4, divider timing, no elision, stopped on demand
//   D  DELTA=2, adder timing (one cycle per step)
// Each issued step (k, i) is compared with a reference model of the schedule;
// the first 19 steps of A are also compared with the zig-zag order drawn in the
// paper's Fig. 4. The number of cycles between steps is checked against
// 1 + floor(i/U) (multiplier), 2 + 2 floor(i/U) (divider) and 1 (adder).
module tb_sched_fsm;
  import architect_pkg::*;
  localparam int U = 8, KW = 10, IW = 16, DA = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stopc = 0;
  logic [KW-1:0] kA, kB, kC, kD;
  logic [IW-1:0] iA, iB, iC, iD, psiB;
  logic stA, stB, stC, stD, dnA, dnB, dnC, dnD, exA, exB, exC, exD;
  logic [3:0] evA, evB, evC, evD;
  logic ovfA, ovfB, ovfD;
  assign ovfA = cpf(32'(kA), 32'(iA / U)) >= DA;
  assign ovfB = cpf(32'(kB), 32'(iB / U)) >= DA;
  assign ovfD = cpf(32'(kD), 32'(iD / U)) >= DA;
  // pointer table for B: approximant 3 starts at step 3, approximant 4 also at 3
  assign psiB = (kB == 2) ? 16'd3 : (kB == 3) ? 16'd3 : 16'd0;

  sched_fsm #(.DELTA(3), .U(U), .ALPHA(1), .ELISION(0)) uA (.clk, .rst_n, .start, .stop(1'b0),
    .ovf(ovfA), .psi('0), .k(kA), .i(iA), .step(stA), .running(), .done(dnA), .exhausted(exA),
    .ev_acc(evA[0]), .ev_desc(evA[1]), .ev_snap(evA[2]), .ev_elide(evA[3]));
  sched_fsm #(.DELTA(3), .U(U), .ALPHA(1), .ELISION(1)) uB (.clk, .rst_n, .start, .stop(1'b0),
    .ovf(ovfB), .psi(psiB), .k(kB), .i(iB), .step(stB), .running(), .done(dnB), .exhausted(exB),
    .ev_acc(evB[0]), .ev_desc(evB[1]), .ev_snap(evB[2]), .ev_elide(evB[3]));
  sched_fsm #(.DELTA(4), .U(U), .ALPHA(2), .ELISION(0)) uC (.clk, .rst_n, .start, .stop(stopc),
    .ovf(1'b0), .psi('0), .k(kC), .i(iC), .step(stC), .running(), .done(dnC), .exhausted(exC),
    .ev_acc(evC[0]), .ev_desc(evC[1]), .ev_snap(evC[2]), .ev_elide(evC[3]));
  sched_fsm #(.DELTA(2), .U(U), .ALPHA(0), .ELISION(0)) uD (.clk, .rst_n, .start, .stop(1'b0),
    .ovf(ovfD), .psi('0), .k(kD), .i(iD), .step(stD), .running(), .done(dnD), .exhausted(exD),
    .ev_acc(evD[0]), .ev_desc(evD[1]), .ev_snap(evD[2]), .ev_elide(evD[3]));

  // reference schedule
  task automatic ref_next(input int delta, input bit elis, input int psi,
                          inout int k, inout int i);
    if (i % delta != delta - 1) i = i + 1;
    else if (i == delta - 1) begin i = i + (k - 1) * delta + 1; k = 1; end
    else if (elis && (i - psi == delta - 1)) begin i = i + (k - 1) * delta + 1; k = 1; end
    else begin k = k + 1; i = i - 2 * delta + 1; end
  endtask

  function automatic int cyc_of(int alpha, int i);
    if (alpha == 0) return 1;
    if (alpha == 1) return 1 + i / U;
    return 2 + 2 * (i / U);
  endfunction

  int fig3_k[19] = '{1,1,1,1,1,1,2,2,2,1,1,1,2,2,2,3,3,3,1};
  int fig3_i[19] = '{0,1,2,3,4,5,0,1,2,6,7,8,3,4,5,0,1,2,9};

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // per-configuration checkers
  int rkA = 1, riA = 0, nA = 0, lastA = -1, liA = 0;
  int rkB = 1, riB = 0, nB = 0, lastB = -1, liB = 0, elB = 0, lowB = 0;
  int rkC = 1, riC = 0, nC = 0, lastC = -1, liC = 0;
  int rkD = 1, riD = 0, nD = 0, lastD = -1, liD = 0;
  int accA = 0, descA = 0, snapA = 0;

  always @(negedge clk) if (rst_n) begin
    if (stA) begin
      checks++;
      if (kA != rkA || iA != riA) begin failures++; $display("FAIL A step %0d: (%0d,%0d) ref (%0d,%0d)", nA, kA, iA, rkA, riA); end
      if (nA < 19) begin checks++; if (kA != fig3_k[nA] || iA != fig3_i[nA]) begin failures++; $display("FAIL A fig3 %0d", nA); end end
      if (lastA >= 0) begin checks++; if (cyc - lastA != cyc_of(1, liA)) begin failures++; $display("FAIL A cycles %0d vs %0d at i=%0d", cyc - lastA, cyc_of(1, liA), liA); end end
      lastA = cyc; liA = iA; nA++;
      ref_next(3, 0, 0, rkA, riA);
    end
    accA += evA[0]; descA += evA[1]; snapA += evA[2];
    if (stB) begin
      checks++;
      if (kB != rkB || iB != riB) begin failures++; $display("FAIL B step %0d: (%0d,%0d) ref (%0d,%0d)", nB, kB, iB, rkB, riB); end
      if ((kB == 3 && iB < 3) || (kB == 4 && iB < 3)) lowB++;
      if (lastB >= 0) begin checks++; if (cyc - lastB != cyc_of(1, liB)) failures++; end
      lastB = cyc; liB = iB; nB++;
      ref_next(3, 1, (rkB == 2) ? 3 : (rkB == 3) ? 3 : 0, rkB, riB);
    end
    elB += evB[3];
    if (stC) begin
      checks++;
      if (kC != rkC || iC != riC) begin failures++; $display("FAIL C step %0d", nC); end
      if (lastC >= 0) begin checks++; if (cyc - lastC != cyc_of(2, liC)) begin failures++; $display("FAIL C cycles %0d vs %0d", cyc - lastC, cyc_of(2, liC)); end end
      lastC = cyc; liC = iC; nC++;
      ref_next(4, 0, 0, rkC, riC);
    end
    if (stD) begin
      checks++;
      if (kD != rkD || iD != riD) begin failures++; $display("FAIL D step %0d", nD); end
      if (lastD >= 0) begin checks++; if (cyc - lastD != 1) failures++; end
      lastD = cyc; liD = iD; nD++;
      ref_next(2, 0, 0, rkD, riD);
    end
    if (nC == 300) stopc <= 1'b1;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    fork
      begin wait (dnA && dnB && dnC && dnD); end
      begin repeat (200000) @(posedge clk); $display("FAIL watchdog"); failures++; end
    join_any
    disable fork;
    repeat (2) @(posedge clk);
    checks++; if (!exA || !exB || !exD) begin failures++; $display("FAIL exhaustion flags"); end
    checks++; if (exC) begin failures++; $display("FAIL C should stop on demand"); end
    checks++; if (nC != 300) begin failures++; $display("FAIL C stopped after %0d steps", nC); end
    // A exhausts at the first step whose word address is >= DA
    checks++; if (cpf(32'(kA), 32'(iA / U)) < DA) failures++;
    checks++; if (accA == 0 || descA == 0 || snapA == 0) begin failures++; $display("FAIL A events"); end
    checks++; if (elB == 0) begin failures++; $display("FAIL B never elided"); end
    checks++; if (lowB != 0) begin failures++; $display("FAIL B computed %0d stable steps", lowB); end
    checks++; if (nB >= nA) begin failures++; $display("FAIL B did not save steps (%0d vs %0d)", nB, nA); end
    $display("steps A=%0d B=%0d C=%0d D=%0d", nA, nB, nC, nD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
