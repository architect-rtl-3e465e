// digit_store: CPF-addressed digit-vector RAM of one variable (paper Sec. III-A).
//
// Digit p of approximant k lives in word cpf(k, floor(p/U)), digit position
// p mod U, of a D-word RAM of U signed digits (two bit planes). Writing the first
// digit of a word (p mod U = 0) clears the rest of the word, so words reused from
// an earlier run read as zero beyond the digits written in this one and the RAM
// needs no clearing. Digits of one approximant must be written in order.
//
// Ports: one write port (we, wk, wp, wd; written at the clock edge) and NR
// asynchronous read ports (rk, rp -> rd). A read or write beyond the RAM returns
// zero / is dropped. The paper keeps consecutive words in alternating banks to
// read three contiguous digits per cycle; this design reads single digits and
// needs no banking (see the datapaths).
module digit_store
  import architect_pkg::*;
#(
  parameter int unsigned U  = 8,
  parameter int unsigned D  = 1024,
  parameter int unsigned KW = 10,
  parameter int unsigned IW = 16,
  parameter int unsigned NR = 2,
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [KW-1:0]          wk,
  input  logic [IW-1:0]          wp,
  input  sd_t                    wd,
  input  logic [NR-1:0][KW-1:0]  rk,
  input  logic [NR-1:0][IW-1:0]  rp,
  output sd_t  [NR-1:0]          rd
);
  logic [U-1:0] pm [D], nm [D];

  logic [31:0]   wfull;
  logic [AW-1:0] waddr;
  logic [U-1:0]  wbit, wp_old, wn_old;
  logic [IW-1:0] wu;
  always_comb begin
    wfull = cpf(32'(wk), 32'(wp / IW'(U)));
    waddr = wfull[AW-1:0];
    wbit  = '0;
    wu   = wp % IW'(U);
    wbit[U-1-int'(wu)] = 1'b1;
    wp_old = (wu == '0) ? '0 : pm[waddr];
    wn_old = (wu == '0) ? '0 : nm[waddr];
  end

  always_ff @(posedge clk) begin
    if (we && wfull < 32'(D)) begin
      pm[waddr] <= wd.p ? (wp_old | wbit) : (wp_old & ~wbit);
      nm[waddr] <= wd.n ? (wn_old | wbit) : (wn_old & ~wbit);
    end
  end

  for (genvar r = 0; r < NR; r++) begin : g_rd
    logic [31:0]   full;
    logic [AW-1:0] addr;
    logic [IW-1:0] u;
    always_comb begin
      full = cpf(32'(rk[r]), 32'(rp[r] / IW'(U)));
      addr = full[AW-1:0];
      u    = rp[r] % IW'(U);
      if (full < 32'(D)) rd[r] = '{p: pm[addr][U-1-int'(u)], n: nm[addr][U-1-int'(u)]};
      else               rd[r] = SD_ZERO;
    end
  end
endmodule
