// tb_cpf_addr: checks cpf_addr against the closed form of the Cantor pairing
// function, checks that the first D addresses are produced exactly once by the
// pairs with k + c below the diagonal that fills the RAM, and checks the
// overflow flag. Also spot-checks the four words drawn in the storage figure:
// cpf(0,0)=0, cpf(1,0)=1, cpf(0,1)=2, cpf(2,0)=3.
module tb_cpf_addr;
  localparam int D = 1024;
  logic [9:0]  k;
  logic [15:0] c;
  logic [9:0]  addr;
  logic        ovf;
  int checks = 0, failures = 0;
  bit seen [D];

  cpf_addr #(.D(D), .KW(10), .CW(16)) dut (.k(k), .c(c), .addr(addr), .ovf(ovf));

  task automatic probe(input int kk, input int cc);
    longint exp;
    k = 10'(kk); c = 16'(cc);
    #1;
    exp = ((kk + cc) * (kk + cc + 1)) / 2 + cc;
    checks++;
    if (ovf !== (exp >= D) || (exp < D && addr !== 10'(exp))) begin
      failures++;
      $display("FAIL cpf(%0d,%0d): addr=%0d ovf=%0d exp=%0d", kk, cc, addr, ovf, exp);
    end
    if (exp < D && !ovf) seen[exp] = 1'b1;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    probe(0, 0); probe(1, 0); probe(0, 1); probe(2, 0);
    for (int kk = 0; kk < 60; kk++)
      for (int cc = 0; cc < 60; cc++)
        probe(kk, cc);
    // every address below D is produced by some (k, c) (surjectivity)
    for (int a = 0; a < D; a++) begin
      checks++;
      if (!seen[a]) begin failures++; $display("FAIL address %0d never produced", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
