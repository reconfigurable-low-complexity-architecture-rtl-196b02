// fx_div: sequential signed divider, one quotient bit per cycle.
//
// Computes quo = num / den for signed integers (restoring division on the
// magnitudes, sign applied at the end). The quotient is saturated to QW
// bits. A pulse on `start` loads the operands; `done` pulses NUM_W+1 cycles
// later with quo valid until the next start. A zero divisor returns the
// saturated value with the sign of num. Fixed-point scaling is the caller's:
// shift the dividend left by the fraction bits wanted in the quotient.
module fx_div #(
  parameter int NUM_W = 96,
  parameter int DEN_W = 64,
  parameter int QW    = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [NUM_W-1:0]  num,
  input  logic signed [DEN_W-1:0]  den,
  output logic                     busy,
  output logic                     done,
  output logic signed [QW-1:0]     quo
);
  localparam int CNT_W = $clog2(NUM_W + 1);
  localparam logic [QW-1:0] QMAX = {1'b0, {(QW-1){1'b1}}};

  logic [NUM_W-1:0] n_mag, qbits;
  logic [DEN_W-1:0] d_mag;
  logic [DEN_W-1:0] rem;
  logic [DEN_W:0]   trial;
  logic [CNT_W-1:0] cnt;
  logic             neg;
  logic [NUM_W-1:0] q_abs;

  assign trial = {rem[DEN_W-1:0], n_mag[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      n_mag <= '0;
      d_mag <= '0;
      rem   <= '0;
      qbits <= '0;
      cnt   <= '0;
      neg   <= 1'b0;
      quo   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        n_mag <= num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
        d_mag <= den[DEN_W-1] ? DEN_W'(-den) : DEN_W'(den);
        neg   <= num[NUM_W-1] ^ den[DEN_W-1];
        rem   <= '0;
        qbits <= '0;
        cnt   <= CNT_W'(NUM_W);
      end else if (busy) begin
        if (cnt != 0) begin
          n_mag <= n_mag << 1;
          if (trial >= {1'b0, d_mag}) begin
            rem   <= DEN_W'(trial - {1'b0, d_mag});
            qbits <= {qbits[NUM_W-2:0], 1'b1};
          end else begin
            rem   <= DEN_W'(trial);
            qbits <= {qbits[NUM_W-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (d_mag == '0 || q_abs > NUM_W'(QMAX))
            quo <= neg ? -signed'(QMAX) : signed'(QMAX);
          else
            quo <= neg ? -signed'(QW'(q_abs)) : signed'(QW'(q_abs));
        end
      end
    end
  end

  assign q_abs = qbits;

endmodule
