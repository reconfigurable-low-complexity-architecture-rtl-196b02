// cordic_atan: four-quadrant arctangent by CORDIC vectoring.
//
// Returns the angle of (x, y) in turns (signed 16 bits, 2^16 = 2*pi). The
// vector is first turned by +/-90 degrees into the right half plane, then
// ITER micro-rotations drive y to zero while the rotation angles
// atan(2^-i), stored in units of 2^-32 turn, are accumulated. One iteration
// per cycle: `done` pulses ITER+2 cycles after `start`. This is the tan^-1
// box of the paper's eigenvalue datapath; CORDIC is this design's choice.
module cordic_atan
  import doppler_pkg::*;
#(
  parameter int ITER = 18
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fx_t   x,
  input  fx_t   y,
  output logic  done,
  output turn_t angle
);
  localparam int XW = 36;
  // atan(2^-i) / (2*pi) * 2^32
  localparam logic signed [31:0] ATAN_TAB [20] = '{
    32'sd536870912, 32'sd316933406, 32'sd167458907, 32'sd85004756,
    32'sd42667331,  32'sd21354465,  32'sd10679838,  32'sd5340245,
    32'sd2670163,   32'sd1335087,   32'sd667544,    32'sd333772,
    32'sd166886,    32'sd83443,     32'sd41722,     32'sd20861,
    32'sd10430,     32'sd5215,      32'sd2608,      32'sd1304};

  logic signed [XW-1:0] xq, yq;
  logic signed [31:0]   zq;
  logic [4:0]           it;
  logic                 busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xq <= '0; yq <= '0; zq <= '0; it <= '0;
      busy <= 1'b0; done <= 1'b0; angle <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        it   <= '0;
        if (x[31]) begin
          if (!y[31]) begin      // second quadrant: rotate by -90 deg
            xq <= XW'(y);  yq <= -XW'(x); zq <= 32'sd1073741824;
          end else begin         // third quadrant: rotate by +90 deg
            xq <= -XW'(y); yq <= XW'(x);  zq <= -32'sd1073741824;
          end
        end else begin
          xq <= XW'(x); yq <= XW'(y); zq <= '0;
        end
      end else if (busy) begin
        if (it != 5'(ITER)) begin
          if (yq > 0) begin
            xq <= xq + (yq >>> it);
            yq <= yq - (xq >>> it);
            zq <= zq + ATAN_TAB[it];
          end else begin
            xq <= xq - (yq >>> it);
            yq <= yq + (xq >>> it);
            zq <= zq - ATAN_TAB[it];
          end
          it <= it + 1'b1;
        end else begin
          busy  <= 1'b0;
          done  <= 1'b1;
          angle <= turn_t'((zq + 32'sd32768) >>> 16);
        end
      end
    end
  end
endmodule
