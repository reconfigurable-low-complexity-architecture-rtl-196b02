// tb_eigen_calc: ESPRIT eigenvalue stage test. For each case a 2x2 matrix
// eps = T diag(mu1, mu2) T^-1 with unit-modulus eigenvalues of chosen angles
// is hidden in the data: E2 is random, E1 = E2 eps, and BRAM F holds
// E2^+ = (E2^H E2)^-1 E2^H, all computed here in double precision and
// quantised to Q16.16. The unit must rebuild eps = E2^+ E1, and its two
// angles must match the true ones: output 1 the root (tr - sqrt(disc))/2,
// output 2 the root (tr + sqrt(disc))/2, with the principal square root.
module tb_eigen_calc;
  import doppler_pkg::*;

  localparam int N_MAX = 40;
  localparam int L_MAX = N_MAX / 2;
  localparam real PI = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, done;
  logic [5:0] n_cfg;
  logic [4:0] fa, aa;
  cplx_t [K-1:0] fd, ad;
  cplx_t eps [K][K];
  cplx_t mu [K];
  turn_t ph [K];
  cplx_t fmem [L_MAX][K], amem [L_MAX][K];
  int checks = 0, failures = 0;

  eigen_calc #(.N_MAX(N_MAX)) dut (
    .clk, .rst_n, .start, .n_cfg, .done, .f_addr(fa), .f_data(fd), .a_addr(aa), .a_data(ad),
    .eps_out(eps), .mu, .phase(ph));

  always_comb
    for (int c = 0; c < K; c++) begin
      fd[c] = fmem[fa][c];
      ad[c] = amem[aa][c];
    end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fx_t tofx(input real v);
    return fx_t'($rtoi(v * 65536.0));
  endfunction
  function automatic real fr(input fx_t v);
    return real'(v) / 65536.0;
  endfunction

  // complex helpers on real pairs
  function automatic void cm(input real ar, ai, br, bi, output real cr, ci);
    cr = ar * br - ai * bi; ci = ar * bi + ai * br;
  endfunction

  function automatic int wrapdiff(input int a, input int b);
    int d;
    d = (a - b) % 65536;
    if (d > 32767) d -= 65536;
    if (d < -32768) d += 65536;
    return d;
  endfunction

  task automatic run(input int n, input real t1, input real t2, input int tol);
    int m, t0, exp0, exp1;
    real e2r [L_MAX][2], e2i [L_MAX][2], tr_ [2][2], ti_ [2][2], epr [2][2], epi [2][2];
    real mr [2], mi [2], tmp_r, tmp_i, dr, di, dm, ivr [2][2], ivi [2][2];
    real gr [2][2], gi [2][2], hr [2][2], hi [2][2];
    real qr, qi, trre, trim, detr, deti, dsr, dsi, sr, si, mag, m0r, m0i, m1r, m1i, xr, xi, yr, yi;
    m = n / 2 - 1;
    mr[0] = $cos(2.0 * PI * t1); mi[0] = $sin(2.0 * PI * t1);
    mr[1] = $cos(2.0 * PI * t2); mi[1] = $sin(2.0 * PI * t2);
    // random T and its inverse
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        tr_[a][b] = real'($urandom % 2001) / 1000.0 - 1.0 + ((a == b) ? 1.5 : 0.0);
        ti_[a][b] = real'($urandom % 2001) / 2000.0 - 0.5;
      end
    cm(tr_[0][0], ti_[0][0], tr_[1][1], ti_[1][1], xr, xi);
    cm(tr_[0][1], ti_[0][1], tr_[1][0], ti_[1][0], yr, yi);
    dr = xr - yr; di = xi - yi; dm = dr * dr + di * di;
    tmp_r = dr / dm; tmp_i = -di / dm;
    cm(tmp_r, tmp_i, tr_[1][1], ti_[1][1], ivr[0][0], ivi[0][0]);
    cm(tmp_r, tmp_i, -tr_[0][1], -ti_[0][1], ivr[0][1], ivi[0][1]);
    cm(tmp_r, tmp_i, -tr_[1][0], -ti_[1][0], ivr[1][0], ivi[1][0]);
    cm(tmp_r, tmp_i, tr_[0][0], ti_[0][0], ivr[1][1], ivi[1][1]);
    // eps = T diag(mu) T^-1
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        epr[a][b] = 0.0; epi[a][b] = 0.0;
        for (int k = 0; k < 2; k++) begin
          cm(tr_[a][k], ti_[a][k], mr[k], mi[k], xr, xi);
          cm(xr, xi, ivr[k][b], ivi[k][b], yr, yi);
          epr[a][b] += yr; epi[a][b] += yi;
        end
      end
    // E2 random, E1 = E2 eps
    for (int r = 0; r < m; r++)
      for (int c = 0; c < 2; c++) begin
        e2r[r][c] = (real'($urandom % 2001) / 1000.0 - 1.0) / $sqrt(real'(m));
        e2i[r][c] = (real'($urandom % 2001) / 1000.0 - 1.0) / $sqrt(real'(m));
      end
    for (int r = 0; r < m; r++)
      for (int c = 0; c < 2; c++) begin
        xr = 0.0; xi = 0.0;
        for (int k = 0; k < 2; k++) begin
          cm(e2r[r][k], e2i[r][k], epr[k][c], epi[k][c], yr, yi);
          xr += yr; xi += yi;
        end
        amem[r][c] = '{re: tofx(xr), im: tofx(xi)};
      end
    // E2^+ = (E2^H E2)^-1 E2^H
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        gr[a][b] = 0.0; gi[a][b] = 0.0;
        for (int r = 0; r < m; r++) begin
          cm(e2r[r][a], -e2i[r][a], e2r[r][b], e2i[r][b], xr, xi);
          gr[a][b] += xr; gi[a][b] += xi;
        end
      end
    cm(gr[0][0], gi[0][0], gr[1][1], gi[1][1], xr, xi);
    cm(gr[0][1], gi[0][1], gr[1][0], gi[1][0], yr, yi);
    dr = xr - yr; di = xi - yi; dm = dr * dr + di * di;
    tmp_r = dr / dm; tmp_i = -di / dm;
    cm(tmp_r, tmp_i, gr[1][1], gi[1][1], hr[0][0], hi[0][0]);
    cm(tmp_r, tmp_i, -gr[0][1], -gi[0][1], hr[0][1], hi[0][1]);
    cm(tmp_r, tmp_i, -gr[1][0], -gi[1][0], hr[1][0], hi[1][0]);
    cm(tmp_r, tmp_i, gr[0][0], gi[0][0], hr[1][1], hi[1][1]);
    for (int r = 0; r < m; r++)
      for (int a = 0; a < 2; a++) begin
        xr = 0.0; xi = 0.0;
        for (int b = 0; b < 2; b++) begin
          cm(hr[a][b], hi[a][b], e2r[r][b], -e2i[r][b], yr, yi);
          xr += yr; xi += yi;
        end
        fmem[r][a] = '{re: tofx(xr), im: tofx(xi)};
      end
    // expected branch order from eps: principal root of the discriminant
    trre = epr[0][0] + epr[1][1]; trim = epi[0][0] + epi[1][1];
    cm(epr[0][0], epi[0][0], epr[1][1], epi[1][1], xr, xi);
    cm(epr[0][1], epi[0][1], epr[1][0], epi[1][0], yr, yi);
    detr = xr - yr; deti = xi - yi;
    cm(trre, trim, trre, trim, xr, xi);
    dsr = xr - 4.0 * detr; dsi = xi - 4.0 * deti;
    mag = $sqrt(dsr * dsr + dsi * dsi);
    sr = $sqrt((mag + dsr) / 2.0);
    si = (dsi < 0.0 ? -1.0 : 1.0) * $sqrt((mag - dsr) / 2.0);
    m0r = (trre - sr) / 2.0; m0i = (trim - si) / 2.0;
    m1r = (trre + sr) / 2.0; m1i = (trim + si) / 2.0;
    exp0 = $rtoi($atan2(m0i, m0r) / (2.0 * PI) * 65536.0 + (m0i >= 0.0 ? 0.5 : -0.5));
    exp1 = $rtoi($atan2(m1i, m1r) / (2.0 * PI) * 65536.0 + (m1i >= 0.0 ? 0.5 : -0.5));

    @(negedge clk); start = 1'b1; n_cfg = 6'(n);
    @(negedge clk); start = 1'b0;
    t0 = int'($time / 10);
    while (!done) @(negedge clk);
    $display("L-1=%0d angles %0.4f %0.4f turns: expected %0d %0d, got %0d %0d, %0d cycles",
             m, t1, t2, exp0, exp1, ph[0], ph[1], int'($time / 10) - t0);
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++)
        check((fr(eps[a][b].re) - epr[a][b]) ** 2 + (fr(eps[a][b].im) - epi[a][b]) ** 2 < 1.0e-6,
              $sformatf("eps[%0d][%0d]", a, b));
    // On the branch cut of the square root (discriminant close to the
    // negative real axis) rounding may pick either root first.
    if (dsi * dsi < 1.0e-6 * mag * mag && dsr < 0.0 &&
        wrapdiff(int'(ph[0]), exp1) <= tol && wrapdiff(int'(ph[0]), exp1) >= -tol) begin
      tmp_r = m0r; m0r = m1r; m1r = tmp_r;
      tmp_i = m0i; m0i = m1i; m1i = tmp_i;
      dm = exp0; exp0 = exp1; exp1 = $rtoi(dm);
    end
    check((fr(mu[0].re) - m0r) ** 2 + (fr(mu[0].im) - m0i) ** 2 < 1.0e-5, "mu1");
    check((fr(mu[1].re) - m1r) ** 2 + (fr(mu[1].im) - m1i) ** 2 < 1.0e-5, "mu2");
    check(wrapdiff(int'(ph[0]), exp0) <= tol && wrapdiff(int'(ph[0]), exp0) >= -tol, "angle 1 (minus root)");
    check(wrapdiff(int'(ph[1]), exp1) <= tol && wrapdiff(int'(ph[1]), exp1) >= -tol, "angle 2 (plus root)");
    check(int'($time / 10) - t0 < m + 200, "latency below L + 200 cycles");
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; n_cfg = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(40, 0.08, 0.0848, 12);
    run(40, -0.31, 0.22, 4);
    run(12, 0.45, -0.45, 4);
    run(26, -0.12, -0.02, 4);
    for (int k = 0; k < 6; k++)
      run(10 + 2 * ($urandom % 15), real'($urandom % 800) / 1000.0 - 0.4, real'($urandom % 800) / 1000.0 - 0.4, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
