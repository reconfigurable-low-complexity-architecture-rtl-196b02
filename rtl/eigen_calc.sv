// eigen_calc: ESPRIT rotation matrix and its eigenvalues (K = 2).
//
// 1. Matrix product eps = E2^+ E1 (K x K): per cycle one column of E2^+
//    (BRAM F) and one row of E1 (BRAM A) are read and four complex
//    multiply-accumulates update the register file. L-1 cycles.
// 2. Eigenvalues of the 2x2 matrix as roots of det(eps - mu I) = 0:
//      mu = ((e11 + e22) +/- sqrt((e11 + e22)^2 - 4 (e11 e22 - e12 e21))) / 2
//    with complex adders/subtractors (CA/CS), multipliers (CM) and one
//    complex square root (csqrt), following the paper's figure.
// 3. Two CORDIC arctangent units give the angle of each eigenvalue in turns.
//    Output 1 comes from the "minus" root (the CS branch in the paper's
//    figure), output 2 from the "plus" root (CA branch).
//
// Each eigenvalue has the form exp(+j 4 pi v T_PRI / lambda) because the
// rotation is taken from E2 to E1 (E1 = E2 eps), so the angle in turns times
// lambda / (2 T_PRI) is the velocity v. The conversion to m/s is done by the
// caller with the configured scale. The paper writes eps = E1 E2^+ in its
// equation but draws the product of E2^+ (K x (L-1)) with E1 in its figure;
// only the figure's order gives a K x K matrix, and it is the one built.
//
// `start` latches N (L = N/2); `done` pulses when phase[] is valid, about
// L + 150 cycles later.
module eigen_calc
  import doppler_pkg::*;
#(
  parameter int N_MAX = 200,
  localparam int L_MAX = N_MAX / 2,
  localparam int RW = $clog2(L_MAX)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(N_MAX+1)-1:0]  n_cfg,
  output logic                        done,
  // BRAM F (E2^+) and BRAM A (E1) read ports
  output logic [RW-1:0]               f_addr,
  input  cplx_t [K-1:0]               f_data,
  output logic [RW-1:0]               a_addr,
  input  cplx_t [K-1:0]               a_data,
  // results
  output cplx_t                       eps_out [K][K],
  output cplx_t                       mu [K],
  output turn_t                       phase [K]
);
  localparam int CW = $clog2(N_MAX+1);

  typedef enum logic [2:0] {S_IDLE, S_EPS, S_QUAD1, S_QUAD2, S_SQRT, S_MU, S_ATAN} state_e;
  state_e state;

  logic [CW-1:0] l_len;
  logic [RW-1:0] r_q;
  cplxw_t        eps_w [K][K];
  cplx_t         eps [K][K];
  cplx_t         tr, det, disc, sroot;
  logic          sq_start, sq_done;
  logic          at_start;
  logic [K-1:0]  at_done;
  turn_t         at_angle [K];
  logic [K-1:0]  at_seen;

  assign f_addr = r_q;
  assign a_addr = r_q;
  assign eps_out = eps;

  always_comb
    for (int x = 0; x < K; x++)
      for (int y = 0; y < K; y++)
        eps[x][y] = cnarrow(eps_w[x][y]);

  csqrt u_csqrt (.clk, .rst_n, .start(sq_start), .z(disc), .done(sq_done), .root(sroot));

  for (genvar k = 0; k < K; k++) begin : g_atan
    cordic_atan #(.ITER(18)) u_atan (
      .clk, .rst_n, .start(at_start), .x(mu[k].re), .y(mu[k].im),
      .done(at_done[k]), .angle(at_angle[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      l_len    <= '0;
      r_q      <= '0;
      done     <= 1'b0;
      sq_start <= 1'b0;
      at_start <= 1'b0;
      at_seen  <= '0;
      tr <= CZERO; det <= CZERO; disc <= CZERO;
      for (int x = 0; x < K; x++) begin
        mu[x]    <= CZERO;
        phase[x] <= '0;
        for (int y = 0; y < K; y++) eps_w[x][y] <= '0;
      end
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      at_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          l_len <= n_cfg >> 1;
          r_q   <= '0;
          for (int x = 0; x < K; x++)
            for (int y = 0; y < K; y++) eps_w[x][y] <= '0;
          state <= S_EPS;
        end
        S_EPS: begin
          // eps[x][y] += E2^+[x][r] * E1[r][y]
          for (int x = 0; x < K; x++)
            for (int y = 0; y < K; y++)
              eps_w[x][y] <= caddw(eps_w[x][y], cmul_w(f_data[x], a_data[y]));
          if (CW'(r_q) == l_len - CW'(2)) begin
            r_q   <= '0;
            state <= S_QUAD1;
          end else begin
            r_q <= r_q + 1'b1;
          end
        end
        S_QUAD1: begin
          tr    <= cadd(eps[0][0], eps[1][1]);
          det   <= csub(cmul(eps[0][0], eps[1][1]), cmul(eps[0][1], eps[1][0]));
          state <= S_QUAD2;
        end
        S_QUAD2: begin
          // tr^2 - 4 det
          disc     <= csub(cmul(tr, tr), '{re: det.re <<< 2, im: det.im <<< 2});
          sq_start <= 1'b1;
          state    <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          mu[0] <= chalf(csub(tr, sroot));
          mu[1] <= chalf(cadd(tr, sroot));
          state <= S_MU;
        end
        S_MU: begin
          at_start <= 1'b1;
          at_seen  <= '0;
          state    <= S_ATAN;
        end
        S_ATAN: begin
          for (int k = 0; k < K; k++)
            if (at_done[k]) begin
              phase[k]   <= at_angle[k];
              at_seen[k] <= 1'b1;
            end
          if (&(at_seen | at_done)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
