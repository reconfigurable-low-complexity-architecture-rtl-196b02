// csqrt: principal square root of a complex Q16.16 number.
//
//   r = |z| = sqrt(x^2 + y^2)
//   sqrt(z) = sqrt((r + x)/2) + i * sign(y) * sqrt((r - x)/2)
//
// The three real roots are taken one after another on a single sequential
// integer square-root unit (isqrt), about 100 cycles in all. `start` loads
// z, `done` pulses when `root` is valid. The paper shows a square-root box
// in its eigenvalue datapath without its insides; this closed form is this
// design's choice.
module csqrt
  import doppler_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  cplx_t  z,
  output logic   done,
  output cplx_t  root
);
  typedef enum logic [2:0] {S_IDLE, S_MAG, S_RE, S_IM, S_FIN} state_e;
  state_e state;

  cplx_t         z_q;
  logic          sq_start, sq_done;
  logic [63:0]   sq_rad;
  logic [31:0]   sq_root;
  logic signed [63:0] r_minus;
  fx_t           r_q;

  // ((r - x) / 2) in Q16.16, moved to Q32.32 for the root: shift by 15
  assign r_minus = (fxw_t'(r_q) - fxw_t'(z_q.re)) <<< 15;

  isqrt #(.W(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .rad(sq_rad), .done(sq_done), .root(sq_root));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      z_q      <= CZERO;
      r_q      <= '0;
      root     <= CZERO;
      sq_start <= 1'b0;
      sq_rad   <= '0;
      done     <= 1'b0;
    end else begin
      sq_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          z_q   <= z;
          state <= S_MAG;
          sq_start <= 1'b1;
          sq_rad   <= fxw_t'(z.re) * fxw_t'(z.re) + fxw_t'(z.im) * fxw_t'(z.im);
        end
        S_MAG: if (sq_done) begin
          r_q      <= fx_t'(sq_root);
          state    <= S_RE;
          sq_start <= 1'b1;
          sq_rad   <= (fxw_t'(fx_t'(sq_root)) + fxw_t'(z_q.re)) <<< 15;
        end
        S_RE: if (sq_done) begin
          root.re  <= fx_t'(sq_root);
          state    <= S_IM;
          sq_start <= 1'b1;
          sq_rad   <= r_minus;
        end
        S_IM: if (sq_done) begin
          root.im  <= z_q.im[31] ? -fx_t'(sq_root) : fx_t'(sq_root);
          state    <= S_FIN;
        end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
