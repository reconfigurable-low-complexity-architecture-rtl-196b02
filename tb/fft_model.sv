// fft_model: behavioural model of the run-time sized FFT core (simulation
// only, not synthesizable: it uses real arithmetic).
//
// Collects P = 2^nfft complex Q16.16 inputs (the last one flagged by
// in_last), evaluates X[k] = sum_n x[n] exp(-j 2 pi k n / P) directly in
// double precision (zero inputs skipped) and returns the P bins in natural
// order, one per cycle on out_valid, unscaled, in Q16.16. Outputs change
// only through non-blocking assignments on the rising clock edge.
module fft_model
  import doppler_pkg::*;
#(
  parameter int P_MAX_LOG2 = 14,
  parameter int LATENCY    = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [4:0] nfft,
  input  logic       in_valid,
  output logic       in_ready,
  input  cplx_t      in_data,
  input  logic       in_last,
  output logic       out_valid,
  output cplx_t      out_data,
  output int         frames
);
  localparam int PM = 1 << P_MAX_LOG2;
  real xr [PM], xi [PM], yr [PM], yi [PM];
  int  cnt, p;

  task automatic dft();
    real ph;
    for (int k = 0; k < p; k++) begin
      yr[k] = 0.0; yi[k] = 0.0;
    end
    for (int n = 0; n < p; n++) begin
      if (xr[n] != 0.0 || xi[n] != 0.0)
        for (int k = 0; k < p; k++) begin
          ph = -2.0 * 3.14159265358979323846 * real'((k * n) % p) / real'(p);
          yr[k] += xr[n] * $cos(ph) - xi[n] * $sin(ph);
          yi[k] += xr[n] * $sin(ph) + xi[n] * $cos(ph);
        end
    end
  endtask

  initial begin
    cnt = 0; frames = 0;
    in_ready = 1'b0; out_valid = 1'b0; out_data = CZERO;
    forever begin
      @(posedge clk);
      if (rst_n && in_valid && in_ready) begin
        xr[cnt] = real'(in_data.re) / 65536.0;
        xi[cnt] = real'(in_data.im) / 65536.0;
        cnt++;
        if (in_last) begin
          p = cnt;
          if (p != (1 << nfft)) $display("fft_model: %0d inputs for a %0d-point FFT", p, 1 << nfft);
          dft();
          cnt = 0;
          in_ready <= 1'b0;
          repeat (LATENCY) @(posedge clk);
          for (int k = 0; k < p; k++) begin
            out_valid <= 1'b1;
            out_data  <= '{re: fx_t'($rtoi(yr[k] * 65536.0)), im: fx_t'($rtoi(yi[k] * 65536.0))};
            @(posedge clk);
          end
          out_valid <= 1'b0;
          frames++;
        end
      end
      in_ready <= rst_n;
    end
  end

endmodule
