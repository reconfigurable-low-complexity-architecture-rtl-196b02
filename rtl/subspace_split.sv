// subspace_split: signal subspace selection and sub-matrix split.
//
// Takes the orthogonal factor Q (L x L, column-major, Q16.16) from the QR
// factorisation core. Only the first K = 2 columns, the eigenvectors of the
// K largest eigenvalues, form the signal subspace E (L x K); the remaining
// columns are accepted and dropped (selection). E is then split into
//   E1 = E[0 : L-2, :]  -> BRAM A
//   E2 = E[1 : L-1, :]  -> BRAM B, and a copy in BRAM G,
// as in the paper, which keeps the copy G so that E2^H and E2 can be read in
// the same cycle by the Gram-matrix multiplier.
//
// Interface: `start` latches N (L = N/2) and clears the element counters;
// s_valid/s_ready carry Q (s_ready is always high while armed). `done` pulses
// for one cycle after the last element of Q arrives. Each BRAM word holds one
// row with both K columns side by side (the BRAM partitioning the paper
// mentions), so a reader gets a whole row per address, asynchronously.
module subspace_split
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
  // Q stream from the QR core
  input  logic                        s_valid,
  output logic                        s_ready,
  input  cplx_t                       s_data,
  output logic                        done,
  // BRAM read ports (row address, K columns per word)
  input  logic [RW-1:0]               a_addr,
  output cplx_t [K-1:0]               a_data,
  input  logic [RW-1:0]               b_addr,
  output cplx_t [K-1:0]               b_data,
  input  logic [RW-1:0]               g_addr,
  output cplx_t [K-1:0]               g_data
);
  localparam int CW = $clog2(N_MAX+1);

  cplx_t [K-1:0] bram_a [L_MAX-1];
  cplx_t [K-1:0] bram_b [L_MAX-1];
  cplx_t [K-1:0] bram_g [L_MAX-1];

  logic          armed;
  logic [CW-1:0] l_len;
  logic [RW-1:0] r_q;       // row of the incoming element
  logic [CW-1:0] c_q;       // column of the incoming element
  logic          take, keep, last;

  assign s_ready = armed;
  assign take    = s_valid && armed;
  assign keep    = (c_q < CW'(K));
  assign last    = (CW'(r_q) == l_len - 1'b1) && (c_q == l_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0;
      l_len <= '0;
      r_q   <= '0;
      c_q   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        armed <= 1'b1;
        l_len <= n_cfg >> 1;
        r_q   <= '0;
        c_q   <= '0;
      end else if (take) begin
        if (last) begin
          armed <= 1'b0;
          done  <= 1'b1;
        end
        if (CW'(r_q) == l_len - 1'b1) begin
          r_q <= '0;
          c_q <= c_q + 1'b1;
        end else begin
          r_q <= r_q + 1'b1;
        end
      end
    end
  end

  // BRAM writes: E1 rows 0..L-2, E2 rows 1..L-1 (stored at row-1).
  always_ff @(posedge clk) begin
    if (take && keep) begin
      if (CW'(r_q) != l_len - 1'b1)
        bram_a[r_q][c_q[0]] <= s_data;
      if (r_q != '0) begin
        bram_b[r_q - 1'b1][c_q[0]] <= s_data;
        bram_g[r_q - 1'b1][c_q[0]] <= s_data;
      end
    end
  end

  assign a_data = bram_a[a_addr];
  assign b_data = bram_b[b_addr];
  assign g_data = bram_g[g_addr];

endmodule
