// ap_div: ARCHITECT arbitrary-precision online divider, z = x / y + e.
//
// This is the paper's Algorithm 4 (radix-2 ARCHITECT division, online delay
// delta = 4) with one addition: an addend digit stream e, folded into the
// dividend as x + e*y so that the quotient comes out as x/y + e. With e = 0 it is
// exactly the paper's divider. The addend is this design's way of realising the
// "divider followed by a three-digit parallel adder" of the Newton datapath with
// the datapath delay the paper states (delta = 4); see the README.
//
// How it works. Per approximant k the operator keeps, in RAMs of U-digit words
// addressed by cpf(k, c), the divisor vector Y, the addend vector E, the quotient
// vector Z and the scaled residual R = 16w (two's complement: signed head of HW
// bits beside chunk 0, U-bit fraction chunks). One step consumes x_j, y_j, e_j:
//   pass 1:  V = 2R + x_j + (E_old - Z_old)*y_j + Y_new*e_j     (16 * Alg. 4 l. 5)
//            z_{j-4} = sel(V/16)                               (Alg. 4 l. 7)
//   pass 2:  R = V - 16 z_{j-4} Y_new                          (Alg. 4 l. 9)
// Each pass walks the chunks from the least significant, c = floor(j/U), to c = 0,
// one per clock, carrying binary carries in a register; these are the paper's
// two accumulation loops. Selection is exact: v >= 1/4 <=> head >= 4 and
// v < -1/4 <=> head <= -5. No digit is selected for j < 4. 16*Y is Y shifted
// four digits towards the most significant end, so pass 2 reads chunks c and c+1
// of Y in the same cycle (a second read port).
// The divisor must lie in [1/2, 1) and the result in (-1, 1); the paper likewise
// leaves alignment to the choice of inputs. U must be at least 4.
//
// Interface and timing: start for one cycle with k, j and the digits; the step
// then takes 2n cycles, n = floor(j/U) + 1, the start cycle included. (The paper's
// FSM allows 2n - 1; binary carries force the second pass to start from the least
// significant chunk again, which costs one more cycle.) zvalid marks the last
// cycle, with z = z_{j-4} and the step's k, j on zk, zj.
module ap_div
  import architect_pkg::*;
#(
  parameter int unsigned U  = 8,     // RAM width in digits (paper: 8)
  parameter int unsigned D  = 1024,  // RAM depth in words (paper: 2^10)
  parameter int unsigned KW = 10,
  parameter int unsigned IW = 16,
  parameter int unsigned HW = 8,     // residual head width
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [KW-1:0] k,
  input  logic [IW-1:0] j,
  input  sd_t           x_j,
  input  sd_t           y_j,
  input  sd_t           e_j,
  output logic          busy,
  output logic          ovf,
  output logic          zvalid,
  output sd_t           z,
  output logic [KW-1:0] zk,
  output logic [IW-1:0] zj
);
  localparam int unsigned SW = U + 4;

  logic [HW+U-1:0] rmem [D];
  logic [U-1:0]    ypm [D], ynm [D], epm [D], enm [D], zpm [D], znm [D];

  logic          act_q, pass2_q;
  logic [KW-1:0] k_q;
  logic [IW-1:0] j_q, c_q;
  sd_t           x_q, y_q, e_q;
  logic signed [1:0] z_q;
  logic signed [3:0] carry_q;
  logic          msb_q;

  logic [KW-1:0] kc;
  logic [IW-1:0] ju, zu;
  logic [IW-1:0] jc, cc, top, zpos, ztop;
  sd_t           xc, yc, ec;
  logic          p2, is_top, fresh, zfresh, zvis, last;
  logic [31:0]   full, full1;
  logic [AW-1:0] addr, addr1;
  logic          oob;

  logic [HW+U-1:0] rw;
  logic [U-1:0]    rf, yp, yn, ep, en, zp, zn, onehot, zhot, y16p, y16n, nf;
  logic [3:0]      y1p, y1n;
  logic signed [HW-1:0] hd;
  logic [U-1:0]    two_r;
  logic signed [SW-1:0] t1, t2, t3, s;
  logic signed [3:0] cin, cout;
  logic signed [HW+1:0] hnew, ival;
  logic signed [1:0] zsel, zuse;

  always_comb begin
    kc = start ? k   : k_q;
    jc = start ? j   : j_q;
    xc = start ? x_j : x_q;
    yc = start ? y_j : y_q;
    ec = start ? e_j : e_q;
    p2 = !start && pass2_q;
    top = jc / IW'(U);
    cc  = start ? top : c_q;
    is_top = (cc == top);
    fresh  = !p2 && is_top && ((jc % IW'(U)) == '0);
    last   = act_q && p2 && (cc == '0);
    zpos   = jc - IW'(4);                  // position of z_{j-4}
    ztop   = zpos / IW'(U);
    zfresh = (zpos % IW'(U)) == '0;
    // Z_old (z_0 .. z_{j-5}) is visible in chunk c only if c*U <= j-5
    zvis   = (jc > IW'(4)) && (cc * IW'(U) < zpos);
    full  = cpf(32'(kc), 32'(cc));
    full1 = cpf(32'(kc), 32'(cc) + 32'd1);
    addr  = full[AW-1:0];
    addr1 = full1[AW-1:0];
    oob   = (full >= 32'(D));

    rw = fresh ? '0 : rmem[addr];
    rf = rw[U-1:0];
    hd = (cc == '0 && !fresh) ? $signed(rw[HW+U-1:U]) : '0;
    yp = fresh ? '0 : ypm[addr];
    yn = fresh ? '0 : ynm[addr];
    ep = fresh ? '0 : epm[addr];
    en = fresh ? '0 : enm[addr];
    zp = zvis ? zpm[addr] : '0;
    zn = zvis ? znm[addr] : '0;
    y1p = (is_top || full1 >= 32'(D)) ? '0 : ypm[addr1][U-1:U-4];
    y1n = (is_top || full1 >= 32'(D)) ? '0 : ynm[addr1][U-1:U-4];
    onehot = '0;
    ju = jc % IW'(U);
    if (is_top) onehot[U-1-int'(ju)] = 1'b1;
    if (!p2 && is_top) begin
      if (yc.p) yp = yp | onehot;
      if (yc.n) yn = yn | onehot;
    end
    zhot = '0;
    zu = zpos % IW'(U);
    zhot[U-1-int'(zu)] = 1'b1;

    // 16*Y chunk c: digits 4..U+3 of the window starting at chunk c
    y16p = {yp[U-5:0], y1p};
    y16n = {yn[U-5:0], y1n};
    ival = (HW+2)'($signed({1'b0, yp[U-1:U-4]})) - (HW+2)'($signed({1'b0, yn[U-1:U-4]}));

    two_r = {rf[U-2:0], (is_top ? 1'b0 : msb_q)};
    cin   = is_top ? '0 : carry_q;
    t1 = '0; t2 = '0; t3 = '0;
    zsel = '0;
    zuse = z_q;
    if (!p2) begin
      // (E_old - Z_old) * y_j
      if (yc.p) t1 = $signed({4'b0, ep}) - $signed({4'b0, en}) - $signed({4'b0, zp}) + $signed({4'b0, zn});
      if (yc.n) t1 = -$signed({4'b0, ep}) + $signed({4'b0, en}) + $signed({4'b0, zp}) - $signed({4'b0, zn});
      // Y_new * e_j
      if (ec.p) t2 = $signed({4'b0, yp}) - $signed({4'b0, yn});
      if (ec.n) t2 = -$signed({4'b0, yp}) + $signed({4'b0, yn});
      s = $signed({4'b0, two_r}) + t1 + t2 + SW'(cin);
    end else begin
      // - z * 16 Y
      if (z_q > 0) t3 = -$signed({4'b0, y16p}) + $signed({4'b0, y16n});
      if (z_q < 0) t3 = $signed({4'b0, y16p}) - $signed({4'b0, y16n});
      s = $signed({4'b0, rf}) + t3 + SW'(cin);
    end
    nf   = s[U-1:0];
    cout = 4'(s >>> U);
    if (!p2) begin
      hnew = (HW+2)'(hd) * 2 + (HW+2)'($signed({1'b0, rf[U-1]})) + (HW+2)'(cout)
           + (HW+2)'(sd_val(xc));
      if (jc >= IW'(4)) begin
        if (hnew >= 4)       zsel = 2'sd1;
        else if (hnew <= -5) zsel = -2'sd1;
      end
    end else begin
      hnew = (HW+2)'(hd) - (HW+2)'(z_q) * ival + (HW+2)'(cout);
    end
  end

  always_ff @(posedge clk) begin
    if ((start || act_q) && !oob) begin
      if (cc == '0) rmem[addr] <= {HW'(hnew), nf};
      else          rmem[addr] <= {rw[HW+U-1:U], nf};
      if (!p2 && is_top) begin
        ypm[addr] <= yp;
        ynm[addr] <= yn;
        epm[addr] <= ep | (ec.p ? onehot : '0);
        enm[addr] <= en | (ec.n ? onehot : '0);
      end
      if (p2 && jc >= IW'(4) && cc == ztop) begin
        zpm[addr] <= (zfresh ? '0 : zpm[addr]) | ((zuse > 0) ? zhot : '0);
        znm[addr] <= (zfresh ? '0 : znm[addr]) | ((zuse < 0) ? zhot : '0);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= 1'b0; pass2_q <= 1'b0;
      k_q <= '0; j_q <= '0; c_q <= '0;
      x_q <= SD_ZERO; y_q <= SD_ZERO; e_q <= SD_ZERO;
      z_q <= '0; carry_q <= '0; msb_q <= 1'b0;
    end else begin
      if (start) begin
        k_q <= k; j_q <= j; x_q <= x_j; y_q <= y_j; e_q <= e_j;
        pass2_q <= 1'b0;
      end
      if (start || act_q) begin
        carry_q <= cout;
        msb_q   <= rf[U-1];
        if (cc == '0) begin
          if (!p2) begin                 // end of pass 1: keep digit, restart at LS chunk
            z_q     <= zsel;
            pass2_q <= 1'b1;
            c_q     <= top;
            act_q   <= 1'b1;
          end else begin                 // end of pass 2
            act_q   <= 1'b0;
            pass2_q <= 1'b0;
          end
        end else begin
          c_q   <= cc - 1'b1;
          act_q <= 1'b1;
        end
      end
    end
  end

  assign busy   = act_q;
  assign ovf    = start && oob;
  assign zvalid = last;
  assign z      = sd_of(z_q);
  assign zk     = kc;
  assign zj     = jc;

  assert property (@(posedge clk) start |-> !act_q);
endmodule
