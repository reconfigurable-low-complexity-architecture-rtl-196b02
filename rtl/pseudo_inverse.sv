// pseudo_inverse: low-complexity pseudo inverse of E2, the paper's proposal.
//
//   E2^+ = (E2^H E2)^-1 E2^H        (E2 is (L-1) x K, K = 2)
//
// Three steps, as in the paper's figure for the custom pseudo inverse:
//  1. Gram product: one row of E2 (BRAM B) and of its copy (BRAM G) is read
//     per cycle and four complex multiply-accumulates build the K x K matrix
//     E2^H E2 in a register file (full-precision accumulation). L-1 cycles.
//  2. 2x2 inverse by determinant and adjoint (inv2x2), result kept in a
//     2x2 register bank, the paper's "BRAM H". About 100 cycles.
//  3. Second product (E2^H E2)^-1 E2^H: one row of E2 per cycle, both
//     output rows formed in parallel and written to BRAM F, which holds
//     E2^+ (K x (L-1)) as L-1 words of K entries. L-1 cycles.
// `start` latches N (L = N/2); `done` pulses when BRAM F is complete.
//
// The paper's figure feeds the second product from BRAM A labelled E1^H,
// while its equation for the pseudo inverse uses E2^H; this design follows
// the equation and reads E2 from BRAM G.
module pseudo_inverse
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
  // BRAM B and G read ports (E2)
  output logic [RW-1:0]               b_addr,
  input  cplx_t [K-1:0]               b_data,
  output logic [RW-1:0]               g_addr,
  input  cplx_t [K-1:0]               g_data,
  // BRAM F read port (E2^+, one column of K entries per address)
  input  logic [RW-1:0]               f_addr,
  output cplx_t [K-1:0]               f_data,
  // Gram matrix inverse, visible for test
  output cplx_t                       h_out [K][K]
);
  localparam int CW = $clog2(N_MAX+1);

  typedef enum logic [2:0] {S_IDLE, S_GRAM, S_INV, S_WAIT, S_PROD} state_e;
  state_e state;

  logic [CW-1:0]  l_len;
  logic [RW-1:0]  r_q;
  cplxw_t         gram [K][K];
  cplx_t          bram_h [K][K];
  cplx_t [K-1:0]  bram_f [L_MAX-1];
  logic           inv_start, inv_done;
  cplx_t          inv_q [2][2];
  logic           last_row;

  assign last_row = (CW'(r_q) == l_len - CW'(2));
  assign b_addr   = r_q;
  assign g_addr   = r_q;
  assign f_data   = bram_f[f_addr];
  assign h_out    = bram_h;

  inv2x2 u_inv (
    .clk, .rst_n, .start(inv_start),
    .a(cnarrow(gram[0][0])), .b(cnarrow(gram[0][1])),
    .c(cnarrow(gram[1][0])), .d(cnarrow(gram[1][1])),
    .done(inv_done), .inv(inv_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      l_len     <= '0;
      r_q       <= '0;
      done      <= 1'b0;
      inv_start <= 1'b0;
      for (int x = 0; x < K; x++)
        for (int y = 0; y < K; y++) begin
          gram[x][y]   <= '0;
          bram_h[x][y] <= CZERO;
        end
    end else begin
      done      <= 1'b0;
      inv_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          l_len <= n_cfg >> 1;
          r_q   <= '0;
          for (int x = 0; x < K; x++)
            for (int y = 0; y < K; y++)
              gram[x][y] <= '0;
          state <= S_GRAM;
        end
        S_GRAM: begin
          // (E2^H E2)[x][y] += conj(E2[r][x]) * E2[r][y]
          for (int x = 0; x < K; x++)
            for (int y = 0; y < K; y++)
              gram[x][y] <= caddw(gram[x][y], cmul_w(cconj(g_data[x]), b_data[y]));
          if (last_row) begin
            r_q   <= '0;
            state <= S_INV;
          end else begin
            r_q <= r_q + 1'b1;
          end
        end
        S_INV: begin
          inv_start <= 1'b1;
          state     <= S_WAIT;
        end
        S_WAIT: if (inv_done) begin
          for (int x = 0; x < K; x++)
            for (int y = 0; y < K; y++)
              bram_h[x][y] <= inv_q[x][y];
          state <= S_PROD;
        end
        S_PROD: begin
          if (last_row) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            r_q <= r_q + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // BRAM F write: E2^+[x][r] = sum_y H[x][y] * conj(E2[r][y])
  always_ff @(posedge clk) begin
    if (state == S_PROD)
      for (int x = 0; x < K; x++)
        bram_f[r_q][x] <= cnarrow(caddw(cmul_w(bram_h[x][0], cconj(g_data[0])),
                                        cmul_w(bram_h[x][1], cconj(g_data[1]))));
  end

endmodule
