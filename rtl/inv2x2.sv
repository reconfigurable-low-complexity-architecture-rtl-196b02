// inv2x2: inverse of a complex 2x2 matrix by determinant and adjoint.
//
//   X = [a b; c d],   X^-1 = 1/(ad - bc) * [d -b; -c a]
//
// Datapath as drawn in the paper: two complex multipliers form ad and bc, a
// complex subtractor forms the determinant, a reciprocal unit forms 1/det,
// and complex multipliers scale the adjoint, which comes straight from the
// input registers. The reciprocal is computed as conj(det) / |det|^2 with two
// sequential dividers (real and imaginary part in parallel), so one inversion
// takes about 100 cycles; `done` pulses when inv is valid. The four scaling
// products are formed in parallel in the last cycle (the figure shows one
// CM box; the degree of sharing is this design's choice). A singular input
// saturates the result. Two assertions check that the dividers run in
// lockstep and have finished before the adjoint is scaled; their reset
// gating (`disable iff`) makes a lint tool report rst_n as used both as an
// asynchronous reset and synchronously, which concerns the assertions only.
module inv2x2
  import doppler_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  cplx_t  a, b, c, d,
  output logic   done,
  output cplx_t  inv [2][2]
);
  cplx_t  det_q, ad, bc;
  logic signed [63:0] mag2;           // |det|^2 in Q32.32
  logic signed [95:0] num_re, num_im;
  logic   div_start, div_done_re, div_done_im, div_busy_re, div_busy_im;
  fx_t    rcp_re, rcp_im;
  cplx_t  rcp;
  cplx_t  a_q, b_q, c_q, d_q;

  typedef enum logic [1:0] {S_IDLE, S_DET, S_DIV, S_SCALE} state_e;
  state_e state;

  assign ad    = cmul(a_q, d_q);
  assign bc    = cmul(b_q, c_q);
  assign mag2  = fxw_t'(det_q.re) * fxw_t'(det_q.re) + fxw_t'(det_q.im) * fxw_t'(det_q.im);
  // conj(det) * 2^32 / |det|^2 gives 1/det in Q16.16
  assign num_re = 96'(signed'(det_q.re)) <<< 32;
  assign num_im = -(96'(signed'(det_q.im)) <<< 32);
  assign rcp    = '{re: rcp_re, im: rcp_im};

  fx_div #(.NUM_W(96), .DEN_W(64), .QW(32)) u_div_re (
    .clk, .rst_n, .start(div_start), .num(num_re), .den(mag2),
    .busy(div_busy_re), .done(div_done_re), .quo(rcp_re));
  fx_div #(.NUM_W(96), .DEN_W(64), .QW(32)) u_div_im (
    .clk, .rst_n, .start(div_start), .num(num_im), .den(mag2),
    .busy(div_busy_im), .done(div_done_im), .quo(rcp_im));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      div_start <= 1'b0;
      det_q     <= CZERO;
      a_q <= CZERO; b_q <= CZERO; c_q <= CZERO; d_q <= CZERO;
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < 2; k++)
          inv[r][k] <= CZERO;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          a_q <= a; b_q <= b; c_q <= c; d_q <= d;
          state <= S_DET;
        end
        S_DET: begin
          det_q     <= csub(ad, bc);
          state     <= S_DIV;
          div_start <= 1'b1;
        end
        S_DIV: begin
          if (div_done_re && div_done_im) state <= S_SCALE;
        end
        S_SCALE: begin
          inv[0][0] <= cmul(rcp, d_q);
          inv[0][1] <= cmul(rcp, '{re: -b_q.re, im: -b_q.im});
          inv[1][0] <= cmul(rcp, '{re: -c_q.re, im: -c_q.im});
          inv[1][1] <= cmul(rcp, a_q);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  // The two dividers share start and divisor, so they must run in lockstep,
  // and the scaling state may only be reached once both have finished.
  a_div_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      div_busy_re == div_busy_im);
  a_scale_after_div: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_SCALE |-> !div_busy_re && !div_busy_im);

endmodule
