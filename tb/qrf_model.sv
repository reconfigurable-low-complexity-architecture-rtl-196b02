// qrf_model: behavioural model of the QR factorisation core (simulation only,
// not synthesizable: it uses real arithmetic).
//
// Collects an L x L complex matrix A in column-major order (Q16.16) until
// a_last and returns an orthonormal Q, L x L column-major, in Q16.16, one
// element per cycle while q_ready is high. The core stands for the EVD
// stage built from a QR-factorisation library: its first columns must be
// the eigenvectors of A with the largest eigenvalues. The model starts
// from the QR factorisation of A itself (modified Gram-Schmidt in double
// precision) and, when EIG_ITER > 0, refines the leading NV columns by
// repeated QR factorisation of A times those columns (orthogonal
// iteration), which converges to the dominant eigenvectors in order of
// decreasing eigenvalue. The remaining columns are completed from the
// columns of A by Gram-Schmidt. With EIG_ITER = 0 it returns the Q of a
// single QR factorisation; on noise-free data with K sources both agree
// in the span of the first K columns, but with noise only the refined
// version is the signal subspace. A column whose residual norm vanishes
// is returned as zeros. When RANDOM_STALL is set, a_ready drops on pseudo-random cycles to
// exercise the back-pressure of the covariance stream; `stalls` counts the
// cycles in which A was offered but refused. Outputs change only through
// non-blocking assignments on the rising clock edge.
module qrf_model
  import doppler_pkg::*;
#(
  parameter int L_MAX        = 100,
  parameter int LATENCY      = 8,
  parameter bit RANDOM_STALL = 1'b1,
  parameter int EIG_ITER     = 60,
  parameter int NV           = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  a_valid,
  output logic  a_ready,
  input  cplx_t a_data,
  input  logic  a_last,
  output logic  q_valid,
  input  logic  q_ready,
  output cplx_t q_data,
  output int    stalls
);
  real are [L_MAX][L_MAX], aim [L_MAX][L_MAX];
  real qre [L_MAX][L_MAX], qim [L_MAX][L_MAX];
  real wre [L_MAX][L_MAX], wim [L_MAX][L_MAX];
  real raw_re [L_MAX*L_MAX], raw_im [L_MAX*L_MAX];
  int  cnt, lsz, ocnt;
  bit  sending, stall;

  function automatic real fx2r(input fx_t v);
    return real'(v) / 65536.0;
  endfunction

  function automatic fx_t r2fx(input real v);
    return fx_t'($rtoi(v * 65536.0));
  endfunction

  // Modified Gram-Schmidt of the first ncols columns of W into Q.
  task automatic gram_schmidt(input int ncols);
    real vr [L_MAX], vi [L_MAX];
    real rr, ri, nrm;
    for (int j = 0; j < ncols; j++) begin
      for (int i = 0; i < lsz; i++) begin
        vr[i] = wre[i][j];
        vi[i] = wim[i][j];
      end
      for (int k = 0; k < j; k++) begin
        rr = 0.0; ri = 0.0;
        for (int i = 0; i < lsz; i++) begin   // r = q_k^H v
          rr += qre[i][k] * vr[i] + qim[i][k] * vi[i];
          ri += qre[i][k] * vi[i] - qim[i][k] * vr[i];
        end
        for (int i = 0; i < lsz; i++) begin
          vr[i] -= rr * qre[i][k] - ri * qim[i][k];
          vi[i] -= rr * qim[i][k] + ri * qre[i][k];
        end
      end
      nrm = 0.0;
      for (int i = 0; i < lsz; i++) nrm += vr[i] * vr[i] + vi[i] * vi[i];
      nrm = $sqrt(nrm);
      for (int i = 0; i < lsz; i++) begin
        qre[i][j] = (nrm > 1.0e-9) ? vr[i] / nrm : 0.0;
        qim[i][j] = (nrm > 1.0e-9) ? vi[i] / nrm : 0.0;
      end
    end
  endtask

  task automatic factorise();
    int nv;
    real sr, si;
    nv = (NV < lsz) ? NV : lsz;
    wre = are; wim = aim;
    gram_schmidt(lsz);
    for (int it = 0; it < EIG_ITER; it++) begin
      for (int j = 0; j < nv; j++)          // W[:, j] = A Q[:, j]
        for (int i = 0; i < lsz; i++) begin
          sr = 0.0; si = 0.0;
          for (int k = 0; k < lsz; k++) begin
            sr += are[i][k] * qre[k][j] - aim[i][k] * qim[k][j];
            si += are[i][k] * qim[k][j] + aim[i][k] * qre[k][j];
          end
          wre[i][j] = sr; wim[i][j] = si;
        end
      gram_schmidt(nv);
    end
    if (EIG_ITER > 0) begin                 // complete the basis from A
      for (int j = 0; j < lsz; j++)
        for (int i = 0; i < lsz; i++) begin
          wre[i][j] = (j < nv) ? qre[i][j] : are[i][j - nv];
          wim[i][j] = (j < nv) ? qim[i][j] : aim[i][j - nv];
        end
      gram_schmidt(lsz);
    end
  endtask

  function automatic cplx_t q_elem(input int n);
    return '{re: r2fx(qre[n % lsz][n / lsz]), im: r2fx(qim[n % lsz][n / lsz])};
  endfunction

  initial begin
    cnt = 0; ocnt = 0; lsz = 1; sending = 0; stall = 0; stalls = 0;
    a_ready = 1'b0; q_valid = 1'b0; q_data = CZERO;
    forever begin
      @(posedge clk);
      if (!rst_n) begin
        cnt = 0; sending = 0;
      end else if (!sending) begin
        if (a_valid && a_ready) begin
          raw_re[cnt] = fx2r(a_data.re);
          raw_im[cnt] = fx2r(a_data.im);
          cnt++;
          if (a_last) begin
            lsz = $rtoi($sqrt(real'(cnt)) + 0.5);
            for (int n = 0; n < cnt; n++) begin
              are[n % lsz][n / lsz] = raw_re[n];
              aim[n % lsz][n / lsz] = raw_im[n];
            end
            factorise();
            cnt = 0;
            a_ready <= 1'b0;
            repeat (LATENCY) @(posedge clk);
            ocnt = 0;
            sending = 1;
          end
        end else if (a_valid && !a_ready) begin
          stalls++;
        end
      end else if (q_valid && q_ready) begin
        if (ocnt == lsz * lsz - 1) sending = 0;
        else ocnt++;
      end
      stall = RANDOM_STALL && ($urandom % 5 == 0);
      a_ready <= rst_n && !sending && !stall;
      q_valid <= sending;
      q_data  <= sending ? q_elem(ocnt) : CZERO;
    end
  end

endmodule
