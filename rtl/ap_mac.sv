// ap_mac: ARCHITECT arbitrary-precision online multiplier, z = x*y + d.
//
// This is the paper's Algorithm 3 (radix-2 ARCHITECT multiplication, online delay
// delta = 3) with one addition: an addend digit stream d, which enters the
// residual at the same weight as the input digits. With d = 0 it is exactly the
// paper's multiplier. The addend is this design's way of realising the
// "multiplier followed by a three-digit parallel adder" of the Jacobi datapath
// with the datapath delay the paper states (delta = 3); see the README.
//
// How it works. For every approximant k the operator keeps, in RAMs of U-digit
// words addressed by cpf(k, c), the digit vectors X and Y received so far and the
// scaled residual R = 8w. One "step" consumes input digits x_j, y_j, d_j of
// approximant k and performs
//     R' = 2R + X_old*y_j + Y_new*x_j + d_j,       (8 * Alg. 3, line 5)
//     z_{j-3} = sel(R'/8), R = R' - 8 z_{j-3}.      (Alg. 3, lines 10-11)
// The residual is held in two's complement: a small signed head (integer part,
// HW bits, stored beside chunk 0) plus U-bit fraction chunks. The chunks are
// processed one per clock from the least significant chunk c = floor(j/U) down
// to c = 0, as the loop of Alg. 3 does, so binary carries and the bit shifted in
// by 2R travel from chunk to chunk in a register. Selection is exact because the
// fraction is non-negative: v >= 1/2 <=> head >= 4, v < -1/2 <=> head <= -5.
// For j < 3 no digit is selected (z = 0, "digits z_j, j < 0, are ignored").
// A chunk touched for the first time (j mod U == 0) is read as zero, so the RAMs
// need no clearing between runs.
//
// Interface and timing: assert start for one cycle with k, j and the three input
// digits. The operator then takes n = floor(j/U) + 1 cycles, the start cycle
// included (the paper's 1 + floor(i/U) cycles per digit for multiplication).
// In the last of them zvalid is high and z holds z_{j-3} (zero for j < 3),
// together with the step's k and j on zk/zj. start must not be asserted while
// busy. ovf flags, in the start cycle, that the step's chunk address falls
// beyond the RAM; such a step writes nothing.
module ap_mac
  import architect_pkg::*;
#(
  parameter int unsigned U  = 8,     // RAM width in digits (paper: 8)
  parameter int unsigned D  = 1024,  // RAM depth in words (paper: 2^10)
  parameter int unsigned KW = 10,    // approximant index width
  parameter int unsigned IW = 16,    // digit index width
  parameter int unsigned HW = 6,     // residual head width
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [KW-1:0] k,
  input  logic [IW-1:0] j,
  input  sd_t           x_j,
  input  sd_t           y_j,
  input  sd_t           d_j,
  output logic          busy,
  output logic          ovf,
  output logic          zvalid,
  output sd_t           z,
  output logic [KW-1:0] zk,
  output logic [IW-1:0] zj
);
  localparam int unsigned SW = U + 4;   // chunk sum width (signed)

  // residual RAM: {head, fraction chunk}; digit-vector RAMs as (p, n) bit planes.
  // Digit u of a word sits at bit U-1-u so a chunk reads as a binary fraction.
  logic [HW+U-1:0] rmem [D];
  logic [U-1:0]    xpm [D], xnm [D], ypm [D], ynm [D];

  // step registers
  logic          act_q;
  logic [KW-1:0] k_q;
  logic [IW-1:0] j_q, c_q;
  sd_t           x_q, y_q, d_q;
  logic signed [3:0] carry_q;
  logic          msb_q;

  // current-cycle view (the start cycle works on the step's first chunk)
  logic [KW-1:0] kc;
  logic [IW-1:0] ju;
  logic [IW-1:0] jc, cc, top;
  sd_t           xc, yc, dc;
  logic          fresh, is_top, last;
  logic [31:0]   full;
  logic [AW-1:0] addr;
  logic          oob;

  logic [HW+U-1:0] rw;
  logic [U-1:0]    rf, xp, xn, yp, yn, onehot;
  logic signed [HW-1:0] hd;
  logic [U-1:0]    two_r;
  logic signed [SW-1:0] tx, ty, s;
  logic signed [3:0] cin, cout;
  logic signed [HW+1:0] hnew;
  logic signed [1:0] zsel;
  logic [U-1:0]    nf;

  always_comb begin
    kc  = start ? k   : k_q;
    jc  = start ? j   : j_q;
    xc  = start ? x_j : x_q;
    yc  = start ? y_j : y_q;
    dc  = start ? d_j : d_q;
    top = jc / IW'(U);
    cc  = start ? top : c_q;
    is_top = (cc == top);
    fresh  = is_top && ((jc % IW'(U)) == '0);
    last   = (start || act_q) && (cc == '0);
    full = cpf(32'(kc), 32'(cc));
    addr = full[AW-1:0];
    oob  = (full >= 32'(D));

    rw = fresh ? '0 : rmem[addr];
    rf = rw[U-1:0];
    hd = (cc == '0 && !fresh) ? $signed(rw[HW+U-1:U]) : '0;
    xp = fresh ? '0 : xpm[addr];
    xn = fresh ? '0 : xnm[addr];
    yp = fresh ? '0 : ypm[addr];
    yn = fresh ? '0 : ynm[addr];
    onehot = '0;
    ju = jc % IW'(U);
    if (is_top) onehot[U-1-int'(ju)] = 1'b1;
    if (is_top) begin                       // Y_new includes y_j
      if (yc.p) yp = yp | onehot;
      if (yc.n) yn = yn | onehot;
    end

    // 2R: shift the chunk up, bringing in the old top bit of chunk c+1
    two_r = {rf[U-2:0], (is_top ? 1'b0 : msb_q)};
    tx = '0;                                 // X_old * y_j
    if (yc.p) tx = tx + $signed({4'b0, xp}) - $signed({4'b0, xn});
    if (yc.n) tx = tx - $signed({4'b0, xp}) + $signed({4'b0, xn});
    ty = '0;                                 // Y_new * x_j
    if (xc.p) ty = ty + $signed({4'b0, yp}) - $signed({4'b0, yn});
    if (xc.n) ty = ty - $signed({4'b0, yp}) + $signed({4'b0, yn});
    cin = is_top ? '0 : carry_q;
    s = $signed({4'b0, two_r}) + tx + ty + SW'(cin);
    nf   = s[U-1:0];
    cout = 4'(s >>> U);

    // head and digit selection (chunk 0 only)
    hnew = (HW+2)'(hd) * 2 + (HW+2)'($signed({1'b0, rf[U-1]})) + (HW+2)'(cout)
         + (HW+2)'(sd_val(dc));
    zsel = '0;
    if (jc >= IW'(3)) begin
      if (hnew >= 4)       zsel = 2'sd1;
      else if (hnew <= -5) zsel = -2'sd1;
    end
  end

  always_ff @(posedge clk) begin
    if ((start || act_q) && !oob) begin
      if (cc == '0) rmem[addr] <= {HW'(hnew - (HW+2)'(8 * zsel)), nf};
      else          rmem[addr] <= {rw[HW+U-1:U], nf};
      if (is_top) begin
        xpm[addr] <= xp | (xc.p ? onehot : '0);
        xnm[addr] <= xn | (xc.n ? onehot : '0);
        ypm[addr] <= yp;
        ynm[addr] <= yn;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= 1'b0;
      k_q <= '0; j_q <= '0; c_q <= '0;
      x_q <= SD_ZERO; y_q <= SD_ZERO; d_q <= SD_ZERO;
      carry_q <= '0; msb_q <= 1'b0;
    end else begin
      if (start) begin
        k_q <= k; j_q <= j; x_q <= x_j; y_q <= y_j; d_q <= d_j;
      end
      if (start || act_q) begin
        carry_q <= cout;
        msb_q   <= rf[U-1];
        act_q   <= (cc != '0);
        c_q     <= cc - 1'b1;
      end
    end
  end

  assign busy   = act_q;
  assign ovf    = start && oob;
  assign zvalid = last;
  assign z      = sd_of(zsel);
  assign zk     = kc;
  assign zj     = jc;

  // A new step may only start once the previous one has finished.
  assert property (@(posedge clk) start |-> !act_q);
endmodule
