// dontchange_detect: runtime detection of don't-change digits (paper Sec. III-D).
//
// While approximant k is generated, each new output digit (at position p) is
// compared with the same digit of approximant k-1 (the caller supplies the result
// as dsame; for several variables it is the AND over all of them). As long as
// every digit so far has matched, the pointer of approximant k+1 is advanced
// whenever a whole group of DELTA digits has matched: psi(k+1) = p + 1. By the
// online-delay argument of the paper (Fig. 5), if approximants k-1 and k agree
// in their first q + DELTA digits, approximant k+1 agrees with them in its first
// q digits, so its computation may start at step psi(k+1) = q + DELTA, whose
// output is digit q. Digits below an approximant's own start are equal to its
// predecessor's by construction, so the comparison of approximant k begins at its
// first computed digit, first_p = psi(k) - DELTA (0 if psi(k) = 0).
//
// The pointers live in a small RAM indexed by approximant (the paper's "pointer
// storage"); entries are written by approximant k-1 before approximant k is
// read, so the RAM needs no clearing. Read port: qk -> psi_next = psi(qk + 1),
// psi_cur = psi(qk); a pointer being written in the current cycle is forwarded
// to psi_next. The comparison state is updated at the clock edge of dvalid.
// With ELISION = 0 all approximants are computed from digit 0 and the pointers
// are only reported.
// ev_stable pulses when a new stable group is recorded.
module dontchange_detect #(
  parameter int unsigned DELTA   = 3,
  parameter bit          ELISION = 1'b1,  // 0: every approximant starts at digit 0
  parameter int unsigned KW      = 10,
  parameter int unsigned IW    = 16
) (
  input  logic          clk,
  input  logic          dvalid,
  input  logic [KW-1:0] dk,
  input  logic [IW-1:0] dp,
  input  logic          dsame,
  input  logic [KW-1:0] qk,
  output logic [IW-1:0] psi_next,
  output logic [IW-1:0] psi_cur,
  output logic          ev_stable
);
  localparam int unsigned KN = 1 << KW;
  logic [IW-1:0] psi_mem [KN];
  logic          eq_mem  [KN];

  logic [IW-1:0] own, first_p, newpsi;
  logic          first, eq_now, grp_end, wr;

  always_comb begin
    own     = (dk <= KW'(1) || !ELISION) ? '0 : psi_mem[dk];
    first_p = (own >= IW'(DELTA)) ? own - IW'(DELTA) : '0;
    first   = (dp == first_p);
    eq_now  = dsame && (first || eq_mem[dk]);
    grp_end = ((dp + 1'b1) % IW'(DELTA)) == '0;
    wr      = dvalid && (dk != KW'(KN - 1)) && (first || (eq_now && grp_end));
    newpsi  = (eq_now && grp_end) ? dp + 1'b1 : first_p;
    // the pointer written by the digit of this cycle is forwarded, so the
    // scheduler sees it in the same cycle as the step that produced it
    if (qk == KW'(KN - 1))               psi_next = '0;
    else if (wr && (dk == qk))           psi_next = newpsi;
    else                                 psi_next = psi_mem[qk + 1'b1];
    psi_cur  = (qk <= KW'(1)) ? '0 : psi_mem[qk];
    ev_stable = dvalid && eq_now && grp_end;
  end

  always_ff @(posedge clk) begin
    if (dvalid) begin
      eq_mem[dk] <= eq_now;
      if (wr) psi_mem[dk + 1'b1] <= newpsi;
    end
  end
endmodule
