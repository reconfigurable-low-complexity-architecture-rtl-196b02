// fft_peak: coarse Doppler estimation around the FFT core.
//
// Coarse mode computes a zero-padded P-point FFT of the slow-time vector and
// takes the bin of largest magnitude as the Doppler estimate. The FFT itself
// is a separate core with a run-time size setting; this unit does the rest:
//  1. Feeds the core: P samples on a valid/ready stream, y[0..N-1] from the
//     slow-time buffer followed by P-N zeros, `m_last` on the last one.
//     P = 2^p_log2 is latched at `start` and also presented to the core on
//     `fft_nfft` (the size field of the core's configuration channel).
//  2. Peak search: takes the P output bins (natural order) and keeps the
//     index of the largest |X|^2 (full-precision, first one wins on a tie).
//  3. Converts the peak bin k to an angle per PRI in turns. A target with
//     velocity v makes y[n] rotate by -2 v T_PRI / lambda turns per sample,
//     so its peak lies at k = -2 v T_PRI P / lambda (mod P) and the angle
//     reported is -k / P turns, the same sign convention as the ESPRIT path.
// The precision of the estimate is lambda / (2 P T_PRI): 1024, 4096 and
// 16384 points give the 4.2, 1 and 0.3 m/s steps the paper evaluates at
// its PRI. `done` pulses when `phase` is valid. Cycle count: P beats out,
// the core's latency, P beats in, one more cycle.
module fft_peak
  import doppler_pkg::*;
#(
  parameter int N_MAX      = 200,
  parameter int P_MAX_LOG2 = 14     // 16384-point FFT
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(N_MAX+1)-1:0]   n_cfg,
  input  logic [4:0]                   p_log2,
  output logic                         done,
  // slow-time buffer read port
  output logic [$clog2(N_MAX)-1:0]     rd_addr,
  input  cplx_t                        rd_data,
  // stream to the FFT core
  output logic [4:0]                   fft_nfft,
  output logic                         m_valid,
  input  logic                         m_ready,
  output cplx_t                        m_data,
  output logic                         m_last,
  // stream from the FFT core
  input  logic                         s_valid,
  input  cplx_t                        s_data,
  // result
  output logic [P_MAX_LOG2-1:0]        peak_bin,
  output turn_t                        phase
);
  localparam int CW = $clog2(N_MAX+1);
  localparam int PW = P_MAX_LOG2 + 1;

  typedef enum logic [1:0] {S_IDLE, S_FEED, S_SEARCH, S_DONE} state_e;
  state_e state;

  logic [CW-1:0]  n_q;
  logic [4:0]     p_q;
  logic [PW-1:0]  cnt, p_len;
  logic [63:0]    mag2, best;
  logic [P_MAX_LOG2-1:0] best_bin;
  logic           in_data;

  assign p_len    = PW'(1) << p_q;
  assign fft_nfft = p_q;
  assign in_data  = (cnt < PW'(n_q));
  assign rd_addr  = in_data ? $clog2(N_MAX)'(cnt) : '0;
  assign m_valid  = (state == S_FEED);
  assign m_data   = in_data ? rd_data : CZERO;
  assign m_last   = (cnt == p_len - 1'b1);
  assign mag2     = 64'(fxw_t'(s_data.re) * fxw_t'(s_data.re)) +
                    64'(fxw_t'(s_data.im) * fxw_t'(s_data.im));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      n_q      <= '0;
      p_q      <= 5'(P_MAX_LOG2);
      cnt      <= '0;
      best     <= '0;
      best_bin <= '0;
      peak_bin <= '0;
      phase    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_q   <= n_cfg;
          p_q   <= (p_log2 > 5'(P_MAX_LOG2)) ? 5'(P_MAX_LOG2) : p_log2;
          cnt   <= '0;
          state <= S_FEED;
        end
        S_FEED: if (m_ready) begin
          if (m_last) begin
            cnt   <= '0;
            best  <= '0;
            state <= S_SEARCH;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SEARCH: if (s_valid) begin
          if (cnt == '0 || mag2 > best) begin
            best     <= mag2;
            best_bin <= P_MAX_LOG2'(cnt);
          end
          if (cnt == p_len - 1'b1) state <= S_DONE;
          else cnt <= cnt + 1'b1;
        end
        S_DONE: begin
          peak_bin <= best_bin;
          // -k/P turns in a 16-bit turn word: shift k up to 16 bits
          phase    <= turn_t'(-(32'(best_bin) << (16 - p_q)));
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
