// tb_ap_mac: self-checking test of the ARCHITECT online multiplier (with addend).
//
// Two independent products z = x*y + d are computed at once, as approximants 1
// and 2, with their steps interleaved so that each approximant's residual must
// survive in the CPF-addressed RAMs while the other one is processed. Inputs are
// random signed-digit strings of NIN digits (zero beyond), chosen so that
// |x*y + d| < 1/2. After J steps the J-3 output digits are summed and compared with
// the exact value of x*y + d, computed here in wide fixed point: the online result
// must be within 2^-(J-3) of it. Every step must also take floor(j/U) + 1 cycles.
module tb_ap_mac;
  import architect_pkg::*;
  localparam int U = 8, D = 1024, NIN = 40, J = 100, FB = 128, NOUT = J - 3;

  logic clk = 0, rst_n = 0, start = 0;
  logic [9:0]  k;
  logic [15:0] j;
  sd_t x_j, y_j, d_j, z;
  logic busy, ovf, zvalid;
  logic [9:0] zk;
  logic [15:0] zj;
  int checks = 0, failures = 0;

  ap_mac #(.U(U), .D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  sd_t xs [2][J], ys [2][J], ds [2][J], zs [2][J];

  function automatic sd_t rnd_digit();
    int r = $urandom_range(0, 2);
    return r == 0 ? SD_NEG : (r == 1 ? SD_ZERO : SD_POS);
  endfunction

  function automatic logic signed [511:0] value(input sd_t v [J], input int n, input int off);
    logic signed [511:0] acc = 0;
    for (int i = 0; i < n; i++)
      acc += (512'(sd_val(v[i])) <<< (FB - i - 1 - off));
    return acc;
  endfunction

  task automatic do_step(input int a, input int jj);
    int cyc = 0;
    bit fin;
    sd_t zc;
    @(negedge clk);
    start = 1; k = 10'(a + 1); j = 16'(jj);
    x_j = xs[a][jj]; y_j = ys[a][jj]; d_j = ds[a][jj];
    do begin
      #1; cyc++; fin = zvalid; zc = z;
      if (fin) begin
        checks++;
        if (zk != 10'(a + 1) || zj != 16'(jj)) begin failures++; $display("FAIL tag"); end
      end
      @(negedge clk); start = 0;
    end while (!fin && cyc < 100);
    checks++;
    if (cyc != jj / U + 1) begin
      failures++;
      $display("FAIL step k=%0d j=%0d took %0d cycles, expected %0d", a + 1, jj, cyc, jj / U + 1);
    end
    if (jj >= 3) zs[a][jj - 3] = zc;
    else if (sd_val(zc) != 0) begin failures++; $display("FAIL early digit"); end
  endtask

  initial begin
    logic signed [511:0] X, Y, Dv, N, V, err, lim;
    for (int a = 0; a < 2; a++)
      for (int i = 0; i < J; i++) begin
        xs[a][i] = (i == 0 || i >= NIN) ? SD_ZERO : rnd_digit();
        ys[a][i] = (i == 0 || i >= NIN) ? SD_ZERO : rnd_digit();
        ds[a][i] = (i < 2  || i >= NIN) ? SD_ZERO : rnd_digit();
      end
    // a fixed case with large magnitudes as approximant 2: x = y = 0.0111..., d = 0
    for (int i = 0; i < J; i++) begin
      xs[1][i] = (i >= 1 && i < NIN) ? SD_POS : SD_ZERO;
      ys[1][i] = (i >= 1 && i < NIN) ? SD_POS : SD_ZERO;
      ds[1][i] = (i == 2) ? SD_NEG : SD_ZERO;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int jj = 0; jj < J; jj++) begin
      do_step(0, jj);
      do_step(1, jj);
    end
    for (int a = 0; a < 2; a++) begin
      X = value(xs[a], J, 0); Y = value(ys[a], J, 0); Dv = value(ds[a], J, 0);
      N = ((X * Y) >>> FB) + Dv;
      V = value(zs[a], NOUT, 0);
      err = N - V;
      if (err < 0) err = -err;
      lim = 512'(1) <<< (FB - NOUT);
      checks++;
      if (err > lim) begin
        failures++;
        $display("FAIL product %0d: |error| = %0d > %0d", a, err, lim);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
