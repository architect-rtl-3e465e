// architect_pkg: types and functions shared by every ARCHITECT block.
//
// A radix-2 signed digit x_i in {-1, 0, 1} is carried as a bit pair (p, n) with
// x_i = p - n, the usual two-bit encoding of online arithmetic. (1,1) is a legal
// encoding of zero and is accepted everywhere.
//
// cpf() is the Cantor pairing function cpf(k, c) = (k + c)(k + c + 1)/2 + c that
// maps an (approximant index, chunk index) pair onto a single RAM word address.
// It is the paper's Eq. (1). The widths used here (32-bit arguments) are this
// design's choice.
package architect_pkg;

  typedef struct packed {
    logic p;
    logic n;
  } sd_t;

  localparam sd_t SD_ZERO = '{p: 1'b0, n: 1'b0};
  localparam sd_t SD_POS  = '{p: 1'b1, n: 1'b0};
  localparam sd_t SD_NEG  = '{p: 1'b0, n: 1'b1};

  // Value of a digit as a small signed integer.
  function automatic logic signed [1:0] sd_val(input sd_t d);
    return $signed({1'b0, d.p}) - $signed({1'b0, d.n});
  endfunction

  // Canonical encoding of a selected digit.
  function automatic sd_t sd_of(input logic signed [1:0] v);
    if (v > 0)      return SD_POS;
    else if (v < 0) return SD_NEG;
    else            return SD_ZERO;
  endfunction

  // Digits are equal in value (so (1,1) equals (0,0)).
  function automatic logic sd_eq(input sd_t a, input sd_t b);
    return sd_val(a) == sd_val(b);
  endfunction

  // Cantor pairing function, Eq. (1).
  function automatic logic [31:0] cpf(input logic [31:0] k, input logic [31:0] c);
    // s (s + 1) is even, so the halving is exact;
    // arguments are far below 2^16 in use, so 33 product bits suffice
    logic [31:0] s;
    logic [32:0] t;
    s = k + c;
    t = {1'b0, s} * {1'b0, s + 32'd1};
    return 32'(t >> 1) + c;
  endfunction

endpackage
