// tb_pseudo_inverse: low-complexity pseudo inverse test. A random complex
// E2 ((L-1) x 2) is served from testbench arrays standing in for BRAMs B and
// G. The result in BRAM F is compared, entry by entry, with
// (E2^H E2)^-1 E2^H computed here in double precision, and E2^+ E2 is
// checked to be the identity. The run length is checked against the
// three-step schedule: (L-1) Gram cycles, the inversion, (L-1) product cycles.
module tb_pseudo_inverse;
  import doppler_pkg::*;

  localparam int N_MAX = 40;
  localparam int L_MAX = N_MAX / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, done;
  logic [5:0] n_cfg;
  logic [4:0] ba, ga, fa;
  cplx_t [K-1:0] bd, gd, fd;
  cplx_t h [K][K];
  int checks = 0, failures = 0;
  real er [L_MAX][K], ei [L_MAX][K];
  cplx_t e2 [L_MAX][K];

  pseudo_inverse #(.N_MAX(N_MAX)) dut (
    .clk, .rst_n, .start, .n_cfg, .done, .b_addr(ba), .b_data(bd), .g_addr(ga), .g_data(gd),
    .f_addr(fa), .f_data(fd), .h_out(h));

  always_comb begin
    for (int c = 0; c < K; c++) begin
      bd[c] = e2[ba][c];
      gd[c] = e2[ga][c];
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real fr(input fx_t v);
    return real'(v) / 65536.0;
  endfunction

  task automatic run(input int n);
    int m, t0, cycles;
    real gr [2][2], gi [2][2], dr, di, dm, ir [2][2], ii [2][2], pr, pi_, xr, xi, err, maxerr;
    real ar, ai, br, bi, cr, ci, d2r, d2i;
    m = n / 2 - 1;
    // columns roughly orthonormal, as the QR core would give
    for (int r = 0; r < m; r++)
      for (int c = 0; c < K; c++) begin
        er[r][c] = (real'($urandom % 2001) / 1000.0 - 1.0) / $sqrt(real'(m));
        ei[r][c] = (real'($urandom % 2001) / 1000.0 - 1.0) / $sqrt(real'(m));
        e2[r][c] = '{re: fx_t'($rtoi(er[r][c] * 65536.0)), im: fx_t'($rtoi(ei[r][c] * 65536.0))};
        er[r][c] = fr(e2[r][c].re);
        ei[r][c] = fr(e2[r][c].im);
      end
    // Gram matrix E2^H E2 and its inverse
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        gr[a][b] = 0.0; gi[a][b] = 0.0;
        for (int r = 0; r < m; r++) begin
          gr[a][b] += er[r][a] * er[r][b] + ei[r][a] * ei[r][b];
          gi[a][b] += er[r][a] * ei[r][b] - ei[r][a] * er[r][b];
        end
      end
    ar = gr[0][0] * gr[1][1] - gi[0][0] * gi[1][1];
    ai = gr[0][0] * gi[1][1] + gi[0][0] * gr[1][1];
    br = gr[0][1] * gr[1][0] - gi[0][1] * gi[1][0];
    bi = gr[0][1] * gi[1][0] + gi[0][1] * gr[1][0];
    dr = ar - br; di = ai - bi; dm = dr * dr + di * di;
    cr = dr / dm; ci = -di / dm;                       // 1/det
    ir[0][0] = cr * gr[1][1] - ci * gi[1][1];  ii[0][0] = cr * gi[1][1] + ci * gr[1][1];
    ir[1][1] = cr * gr[0][0] - ci * gi[0][0];  ii[1][1] = cr * gi[0][0] + ci * gr[0][0];
    ir[0][1] = -(cr * gr[0][1] - ci * gi[0][1]); ii[0][1] = -(cr * gi[0][1] + ci * gr[0][1]);
    ir[1][0] = -(cr * gr[1][0] - ci * gi[1][0]); ii[1][0] = -(cr * gi[1][0] + ci * gr[1][0]);

    @(negedge clk); start = 1'b1; n_cfg = 6'(n);
    @(negedge clk); start = 1'b0;
    t0 = int'($time / 10);
    while (!done) @(negedge clk);
    cycles = int'($time / 10) - t0;
    check(cycles >= 2 * m && cycles <= 2 * m + 110, $sformatf("run length %0d cycles for L-1 = %0d", cycles, m));
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        err = $sqrt((fr(h[a][b].re) - ir[a][b]) ** 2 + (fr(h[a][b].im) - ii[a][b]) ** 2);
        check(err < 2.0e-3 * (1.0 + $sqrt(ir[a][b] ** 2 + ii[a][b] ** 2)), $sformatf("H[%0d][%0d] error %g", a, b, err));
      end
    maxerr = 0.0;
    for (int r = 0; r < m; r++) begin
      fa = 5'(r); #1;
      for (int a = 0; a < 2; a++) begin
        // expected E2^+[a][r] = sum_b Hinv[a][b] conj(E2[r][b])
        pr = 0.0; pi_ = 0.0;
        for (int b = 0; b < 2; b++) begin
          pr += ir[a][b] * er[r][b] + ii[a][b] * ei[r][b];
          pi_ += ii[a][b] * er[r][b] - ir[a][b] * ei[r][b];
        end
        err = $sqrt((fr(fd[a].re) - pr) ** 2 + (fr(fd[a].im) - pi_) ** 2);
        if (err > maxerr) maxerr = err;
        check(err < 2.0e-3, $sformatf("E2+[%0d][%0d] error %g", a, r, err));
      end
    end
    // E2^+ E2 = I
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        xr = 0.0; xi = 0.0;
        for (int r = 0; r < m; r++) begin
          fa = 5'(r); #1;
          xr += fr(fd[a].re) * er[r][b] - fr(fd[a].im) * ei[r][b];
          xi += fr(fd[a].re) * ei[r][b] + fr(fd[a].im) * er[r][b];
        end
        d2r = (a == b) ? 1.0 : 0.0; d2i = 0.0;
        check((xr - d2r) ** 2 + (xi - d2i) ** 2 < 1.0e-4, $sformatf("(E2+ E2)[%0d][%0d] = %f + %fj", a, b, xr, xi));
      end
    $display("L-1 = %0d: %0d cycles, largest E2+ error %g", m, cycles, maxerr);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; n_cfg = 0; fa = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(40);
    run(12);
    run(26);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
