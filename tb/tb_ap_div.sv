// tb_ap_div: self-checking test of the ARCHITECT online divider (with addend).
//
// Two quotients z = x/y + e are computed at once as approximants 1 and 2, steps
// interleaved. Approximant 1 uses random digit strings (divisor in [1/2, 1),
// |x| < 1/4, |e| < 1/4); approximant 2 is the Newton-step case of the benchmark,
// x = 3/8, y = 0.11 followed by random digits, e = y/2. After J steps the J-4
// output digits are compared with x/y + e computed in wide fixed point; the
// error must not exceed 2^-(J-4). Every step must take 2(floor(j/U) + 1) cycles.
module tb_ap_div;
  import architect_pkg::*;
  localparam int U = 8, D = 1024, NIN = 40, J = 100, FB = 128, NOUT = J - 4;

  logic clk = 0, rst_n = 0, start = 0;
  logic [9:0]  k;
  logic [15:0] j;
  sd_t x_j, y_j, e_j, z;
  logic busy, ovf, zvalid;
  logic [9:0] zk;
  logic [15:0] zj;
  int checks = 0, failures = 0;

  ap_div #(.U(U), .D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  sd_t xs [2][J], ys [2][J], es [2][J], zs [2][J];

  function automatic sd_t rnd_digit();
    int r = $urandom_range(0, 2);
    return r == 0 ? SD_NEG : (r == 1 ? SD_ZERO : SD_POS);
  endfunction

  function automatic logic signed [511:0] value(input sd_t v [J], input int n);
    logic signed [511:0] acc = 0;
    for (int i = 0; i < n; i++)
      acc += (512'(sd_val(v[i])) <<< (FB - i - 1));
    return acc;
  endfunction

  task automatic do_step(input int a, input int jj);
    int cyc = 0;
    bit fin;
    sd_t zc;
    @(negedge clk);
    start = 1; k = 10'(a + 1); j = 16'(jj);
    x_j = xs[a][jj]; y_j = ys[a][jj]; e_j = es[a][jj];
    do begin
      #1; cyc++; fin = zvalid; zc = z;
      if (fin) begin
        checks++;
        if (zk != 10'(a + 1) || zj != 16'(jj)) begin failures++; $display("FAIL tag"); end
      end
      @(negedge clk); start = 0;
    end while (!fin && cyc < 200);
    checks++;
    if (cyc != 2 * (jj / U + 1)) begin
      failures++;
      $display("FAIL step k=%0d j=%0d took %0d cycles, expected %0d", a + 1, jj, cyc, 2 * (jj / U + 1));
    end
    if (jj >= 4) zs[a][jj - 4] = zc;
    else if (sd_val(zc) != 0) begin failures++; $display("FAIL early digit"); end
  endtask

  initial begin
    logic signed [511:0] X, Y, E, N, V, err, lim;
    for (int i = 0; i < J; i++) begin
      xs[0][i] = (i < 2 || i >= NIN) ? SD_ZERO : rnd_digit();
      ys[0][i] = (i < 2) ? SD_POS : (i < 3 || i >= NIN) ? SD_ZERO : rnd_digit();
      es[0][i] = (i < 2 || i >= NIN) ? SD_ZERO : rnd_digit();
      // Newton case: x = 3/8 = 0.011, y = 0.11 + tail, e = y / 2
      xs[1][i] = (i == 1 || i == 2) ? SD_POS : SD_ZERO;
      ys[1][i] = (i < 2) ? SD_POS : (i < 3 || i >= NIN) ? SD_ZERO : rnd_digit();
    end
    for (int i = 0; i < J; i++) es[1][i] = (i == 0) ? SD_ZERO : ys[1][i - 1];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int jj = 0; jj < J; jj++) begin
      do_step(0, jj);
      do_step(1, jj);
    end
    for (int a = 0; a < 2; a++) begin
      X = value(xs[a], J); Y = value(ys[a], J); E = value(es[a], J);
      N = ((X <<< FB) / Y) + E;
      V = value(zs[a], NOUT);
      err = N - V;
      if (err < 0) err = -err;
      lim = 512'(1) <<< (FB - NOUT);
      checks++;
      if (err > lim) begin
        failures++;
        $display("FAIL quotient %0d: |error| = %0d > %0d", a, err, lim);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
