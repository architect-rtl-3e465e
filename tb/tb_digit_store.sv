// tb_digit_store: self-checking test of the CPF-addressed digit RAM.
// Random digit vectors of several approximants are written in order, some
// words are written twice (second run) to check that a fresh word start clears
// stale digits, and every digit is read back on both read ports and compared
// with a shadow copy. Reads beyond the RAM must return zero.
module tb_digit_store;
  import architect_pkg::*;
  localparam int U = 8, D = 64, KW = 10, IW = 16, NK = 8, NP = 40;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [KW-1:0] wk = '0;
  logic [IW-1:0] wp = '0;
  sd_t wd = SD_ZERO;
  logic [1:0][KW-1:0] rk;
  logic [1:0][IW-1:0] rp;
  sd_t [1:0] rd;
  digit_store #(.U(U), .D(D), .KW(KW), .IW(IW), .NR(2)) dut (.clk, .we, .wk, .wp, .wd, .rk, .rp, .rd);

  sd_t shadow [NK][NP];
  int plen [NK];

  function automatic sd_t rnd_sd();
    int r = $urandom_range(2);
    return r == 0 ? SD_ZERO : r == 1 ? SD_POS : SD_NEG;
  endfunction

  task automatic wr(int k, int p, sd_t d);
    @(negedge clk); we = 1; wk = KW'(k); wp = IW'(p); wd = d;
    @(negedge clk); we = 0;
  endtask

  task automatic check_all();
    for (int k = 0; k < NK; k++)
      for (int p = 0; p < NP; p++) begin
        rk[0] = KW'(k); rp[0] = IW'(p);
        rk[1] = KW'(NK - 1 - k); rp[1] = IW'(NP - 1 - p);
        #1;
        checks += 2;
        if (cpf(k, p / U) < D) begin
          if (p < plen[k] && rd[0] != shadow[k][p]) begin
            failures++; $display("FAIL rd0 k=%0d p=%0d", k, p);
          end
        end else if (rd[0] != SD_ZERO) begin failures++; $display("FAIL beyond RAM"); end
        if (cpf(NK - 1 - k, (NP - 1 - p) / U) < D &&
            (NP - 1 - p) < plen[NK - 1 - k] && rd[1] != shadow[NK - 1 - k][NP - 1 - p]) begin
          failures++; $display("FAIL rd1");
        end
      end
  endtask

  initial begin
    fork begin
      for (int run = 0; run < 2; run++) begin
        for (int k = 0; k < NK; k++) begin
          plen[k] = (run == 0) ? NP : $urandom_range(NP - 1, 1);
          for (int p = 0; p < plen[k]; p++) begin
            shadow[k][p] = rnd_sd();
            wr(k, p, shadow[k][p]);
          end
        end
        check_all();
      end
      // digits beyond plen in the last partial word must read zero
      for (int k = 0; k < NK; k++) begin
        if (plen[k] % U != 0 && cpf(k, plen[k] / U) < D) begin
          for (int p = plen[k]; p < (plen[k] / U + 1) * U; p++) begin
            rk[0] = KW'(k); rp[0] = IW'(p); #1;
            checks++; if (rd[0] != SD_ZERO) begin failures++; $display("FAIL stale digit k=%0d p=%0d", k, p); end
          end
        end
      end
    end
    begin #2000000; $display("FAIL watchdog"); failures++; end
    join_any
    disable fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
