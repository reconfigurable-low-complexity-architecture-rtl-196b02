// ss_acg: spatial smoothing (SS) and autocovariance generation (ACG).
//
// The slow-time vector y of N samples is cut into overlapping windows
// s_l = y[l : l+L-1] of length L = N/2, and the averaged covariance
//     A[i][j] = sum_{l=0}^{N-L-1} y[i+l] * conj(y[j+l])      (L x L)
// is produced, which is the paper's sum of s_l s_l^H. With L = N/2 the
// paper's two descriptions of the window index (l in [0, L-1] and the sum
// bound N-L-1) agree, which is why this design fixes L = N/2; the paper does
// not give L.
//
// Operation: a pulse on `start` latches N (n_cfg). The unit then walks the
// matrix column by column (j outer, i inner). For each element it reads
// PAR consecutive samples from each of the two read ports of the slow-time
// buffer, y[i+l .. i+l+PAR-1] and y[j+l .. j+l+PAR-1], and adds PAR complex
// products y[i+l+k] conj(y[j+l+k]) per cycle at full precision (Q32.32);
// lanes with l+k >= N-L are masked. Each finished element is offered,
// rounded down to Q16.16, on a valid/ready stream in column-major order,
// the order the QR factorisation core takes it; m_last marks A[L-1][L-1].
// One element costs ceil((N-L)/PAR) accumulate cycles plus one output
// cycle, so a whole matrix takes L*L*(ceil((N-L)/PAR)+1) cycles when the
// stream is never stalled (1,010,000 cycles at N = 200 with PAR = 1,
// 260,000 with PAR = 4). The paper parallelises the window products
// s_l s_l^H over partitioned BRAM without giving the degree; computing PAR
// windows per cycle is that parallelism, and the default of 4 is this
// design's choice.
module ss_acg
  import doppler_pkg::*;
#(
  parameter int N_MAX = 200,
  parameter int PAR   = 4     // window products s_l s_l^H summed per cycle
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(N_MAX+1)-1:0]  n_cfg,
  output logic                        busy,
  // slow-time buffer read ports
  output logic [$clog2(N_MAX)-1:0]    rd_addr_a,
  input  cplx_t                       rd_data_a [PAR],
  output logic [$clog2(N_MAX)-1:0]    rd_addr_b,
  input  cplx_t                       rd_data_b [PAR],
  // covariance stream, column-major
  output logic                        m_valid,
  input  logic                        m_ready,
  output cplx_t                       m_data,
  output logic                        m_last
);
  localparam int CW = $clog2(N_MAX+1);
  localparam int AW = $clog2(N_MAX);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_OUT} state_e;
  state_e state;

  logic [CW-1:0] n_q, l_len, n_win;   // N, L = N/2, windows N-L
  logic [CW-1:0] i_q, j_q, l_q;
  cplxw_t        acc, lane_sum;

  assign l_len     = n_q >> 1;
  assign n_win     = n_q - l_len;
  assign rd_addr_a = AW'(i_q + l_q);
  assign rd_addr_b = AW'(j_q + l_q);
  assign busy      = (state != S_IDLE);

  // PAR complex MACs: windows l_q .. l_q+PAR-1, those past N-L masked out
  always_comb begin
    lane_sum = '0;
    for (int k = 0; k < PAR; k++)
      if (int'(l_q) + k < int'(n_win))
        lane_sum = caddw(lane_sum, cmul_w(rd_data_a[k], cconj(rd_data_b[k])));
  end

  assign m_valid   = (state == S_OUT);
  assign m_data    = cnarrow(acc);
  assign m_last    = (i_q == l_len - 1'b1) && (j_q == l_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      n_q   <= '0;
      i_q   <= '0;
      j_q   <= '0;
      l_q   <= '0;
      acc   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          n_q   <= n_cfg;
          i_q   <= '0;
          j_q   <= '0;
          l_q   <= '0;
          acc   <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          acc <= caddw(acc, lane_sum);
          if (int'(l_q) + PAR >= int'(n_win)) begin
            l_q   <= '0;
            state <= S_OUT;
          end else begin
            l_q <= l_q + CW'(PAR);
          end
        end
        S_OUT: if (m_ready) begin
          acc <= '0;
          if (m_last) begin
            state <= S_IDLE;
          end else begin
            state <= S_MAC;
            if (i_q == l_len - 1'b1) begin
              i_q <= '0;
              j_q <= j_q + 1'b1;
            end else begin
              i_q <= i_q + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
