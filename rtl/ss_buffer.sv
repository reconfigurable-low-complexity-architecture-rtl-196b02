// ss_buffer: slow-time input buffer.
//
// Holds the slow-time vector y[0..N-1] of one detected range-azimuth cell,
// as delivered by the DMA on an AXI-Stream (one Q1.15 I/Q sample per beat).
// `clear` empties the buffer and sets the expected length n_cfg. The buffer
// accepts beats (s_tready high) until n_cfg samples are stored, then raises
// `full` and stops accepting. TLAST is not needed: the count decides.
//
// Two independent asynchronous read ports serve the processing engines: the
// covariance generator reads y[i+l] and y[j+l] in the same cycle, the FFT
// path reads one sample per cycle. Each port returns RD_PAR consecutive
// samples, y[addr .. addr+RD_PAR-1], in lanes 0..RD_PAR-1 (lanes past the
// end of the array read as zero), which is what a memory partitioned
// cyclically into RD_PAR banks delivers; the covariance generator uses the
// lanes to compute several window products per cycle. The paper says the
// smoothing step uses BRAM partitioning to parallelise the covariance
// products; the two ports, the lane count and the combinational
// (distributed-RAM style) reads are this design's choices.
module ss_buffer
  import doppler_pkg::*;
#(
  parameter int N_MAX  = 200,         // largest number of slow-time packets
  parameter int RD_PAR = 1            // consecutive samples per read port
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic [$clog2(N_MAX+1)-1:0]   n_cfg,
  // AXI-Stream slave
  input  logic                         s_tvalid,
  output logic                         s_tready,
  input  logic [31:0]                  s_tdata,
  output logic                         full,
  output logic [$clog2(N_MAX+1)-1:0]   count,
  // read ports
  input  logic [$clog2(N_MAX)-1:0]     rd_addr_a,
  output cplx_t                        rd_data_a [RD_PAR],
  input  logic [$clog2(N_MAX)-1:0]     rd_addr_b,
  output cplx_t                        rd_data_b [RD_PAR]
);
  localparam int CW = $clog2(N_MAX+1);

  cplx_t          mem [N_MAX];
  logic [CW-1:0]  n_q;

  assign full     = (count == n_q);
  assign s_tready = !full && !clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      n_q   <= '0;
    end else if (clear) begin
      count <= '0;
      n_q   <= n_cfg;
    end else if (s_tvalid && s_tready) begin
      count <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (s_tvalid && s_tready)
      mem[count[$clog2(N_MAX)-1:0]] <= from_iq16(s_tdata);
  end

  // lane k returns y[addr + k]; addresses past the array read as zero
  always_comb begin
    for (int k = 0; k < RD_PAR; k++) begin
      rd_data_a[k] = (int'(rd_addr_a) + k < N_MAX) ? mem[int'(rd_addr_a) + k] : CZERO;
      rd_data_b[k] = (int'(rd_addr_b) + k < N_MAX) ? mem[int'(rd_addr_b) + k] : CZERO;
    end
  end

endmodule
