// cpf_addr: RAM word address of chunk c of approximant k.
//
// ARCHITECT stores the digit vectors (and operator residuals) of all approximants
// of one variable in a single RAM of U-digit words. The three-dimensional index
// (approximant k, chunk c, digit u) is flattened by sending (k, c) through the
// Cantor pairing function cpf(k, c) = (k + c)(k + c + 1)/2 + c (paper Eq. (1),
// Fig. 3); u selects the digit within the word. Because the pairing function is a
// bijection of N x N onto N, every word of a D-word RAM is used and precision
// (c) and iteration count (k) can both grow until the RAM is full.
//
// Interface: purely combinational. addr = cpf(k, c) truncated to the RAM's address
// width; ovf is high when cpf(k, c) >= D, i.e. the access would fall beyond the
// RAM (the paper's "memory exhaustion" termination condition).
module cpf_addr
  import architect_pkg::*;
#(
  parameter int unsigned D  = 1024,  // RAM depth in words (paper: 2^10 ... 2^19)
  parameter int unsigned KW = 10,    // approximant index width
  parameter int unsigned CW = 16,    // chunk index width
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic [KW-1:0] k,
  input  logic [CW-1:0] c,
  output logic [AW-1:0] addr,
  output logic          ovf
);
  logic [31:0] full;
  always_comb begin
    full = cpf(32'(k), 32'(c));
    addr = full[AW-1:0];
    ovf  = (full >= 32'(D));
  end
endmodule
