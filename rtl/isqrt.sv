// isqrt: sequential integer square root, one result bit per cycle.
//
// root = floor(sqrt(rad)) for an unsigned W-bit radicand, by the
// digit-by-digit (non-restoring, bitwise) method: W/2 iterations, each
// trying the next result bit. A pulse on `start` loads rad; `done` pulses
// W/2+1 cycles later and root holds until the next start. Fixed-point use:
// a Q32.32 radicand gives a Q16.16 root.
module isqrt #(
  parameter int W = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [W-1:0]       rad,
  output logic               done,
  output logic [W/2-1:0]     root
);
  localparam int RW = W / 2;

  logic [W-1:0]        x_q;      // remaining radicand
  logic [W-1:0]        res_q;    // partial result, scaled
  logic [W-1:0]        bit_q;    // current trial bit (power of four)
  logic                busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q   <= '0;
      res_q <= '0;
      bit_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      root  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        x_q   <= rad;
        res_q <= '0;
        bit_q <= W'(1) << (W - 2);
        busy  <= 1'b1;
      end else if (busy) begin
        if (bit_q != '0) begin
          if (x_q >= res_q + bit_q) begin
            x_q   <= x_q - (res_q + bit_q);
            res_q <= (res_q >> 1) + bit_q;
          end else begin
            res_q <= res_q >> 1;
          end
          bit_q <= bit_q >> 2;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= RW'(res_q);
        end
      end
    end
  end
endmodule
