// doppler_accel: reconfigurable Doppler velocity estimator (top level).
//
// For one detected range-azimuth cell, the slow-time vector y (N complex
// samples, one per radar packet) arrives on an AXI-Stream from the DMA. The
// accelerator estimates the Doppler velocity with one of two algorithms,
// chosen by the processor over AXI-Lite before each frame:
//  - coarse (FFT): zero-padded P-point FFT and peak search; one velocity.
//  - fine (ESPRIT, K = 2): averaged covariance of overlapping windows
//    (ss_acg, ACG_PAR window products per cycle from a banked buffer),
//    QR factorisation, signal subspace and shifted sub-matrices
//    (subspace_split), low-complexity pseudo inverse (pseudo_inverse),
//    2x2 rotation matrix and its eigenvalues (eigen_calc); two velocities
//    that can be much closer than the FFT resolution.
// The results, Q16.16 m/s, leave on an output AXI-Stream (ESPRIT: two
// words, FFT: one word, TLAST on the last) and are readable in registers.
//
// The QR factorisation and the FFT are vendor cores in the reference
// system; here they are external, on plain streams:
//   qrf_a_*  A (L x L, column-major) to the QR core, qrf_q_* Q back (L x L,
//            column-major, its first K columns the eigenvectors of A with
//            the largest eigenvalues: the eigen-decomposition step, which
//            the reference system builds on a QR library and which must
//            deliver true eigenvectors, not the Q of a single QR, for the
//            estimate to hold up in noise);
//   fft_in_* zero-padded input to the FFT core, fft_out_* its P bins in
//            natural order, fft_nfft its size.
// In the reference system the two algorithms are swapped by partial
// reconfiguration of the FPGA, with ESPRIT bitstreams for 50, 100 and 200
// packets. This RTL instead holds both engines side by side behind a mode
// register, and one ESPRIT engine sized for N_MAX packets takes any even
// N up to N_MAX at run time. Settings are sampled once per frame, in the
// cycle the first sample of the frame is offered while the accelerator is
// idle; the input is refused (s_axis_tready low) in that cycle and while a
// frame is being processed, until its result has been sent.
//
// Lint notes: the internal results h_mat (BRAM H), eps_mat (the rotation
// matrix), mu (the eigenvalues), fft_bin (the peak index), buf_count and
// acg_busy are kept as named observation points for simulation and
// debugging; the result path only needs the angles, so synthesis drops
// them. rst_n is both the asynchronous reset of the flops and, through
// `disable iff`, a sampled input of the output-hold assertion, which a
// lint tool reports as a net used both ways; the assertion is not logic.
module doppler_accel
  import doppler_pkg::*;
#(
  parameter int N_MAX      = 200,   // most slow-time packets (paper: 50, 100, 200)
  parameter int P_MAX_LOG2 = 14,    // largest FFT, 16384 points
  parameter int ACG_PAR    = 4,     // covariance window products per cycle
  localparam int NW        = $clog2(N_MAX+1)
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite configuration slave
  input  logic [4:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [4:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // slow-time samples in (Q1.15 I/Q: imag [31:16], real [15:0])
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [31:0] s_axis_tdata,
  // velocity estimates out (Q16.16 m/s)
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tlast,
  // QR factorisation core
  output logic        qrf_a_valid,
  input  logic        qrf_a_ready,
  output cplx_t       qrf_a_data,
  output logic        qrf_a_last,
  input  logic        qrf_q_valid,
  output logic        qrf_q_ready,
  input  cplx_t       qrf_q_data,
  // FFT core
  output logic [4:0]  fft_nfft,
  output logic        fft_in_valid,
  input  logic        fft_in_ready,
  output cplx_t       fft_in_data,
  output logic        fft_in_last,
  input  logic        fft_out_valid,
  input  cplx_t       fft_out_data,
  // one-cycle pulse per finished frame
  output logic        frame_done
);
  localparam int AW = $clog2(N_MAX);
  localparam int RW = $clog2(N_MAX / 2);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_QR, S_PINV, S_EIG, S_FFT, S_OUT
  } state_e;
  state_e state;

  // configuration
  arch_e         cfg_arch, arch_q;
  logic [NW-1:0] cfg_n, n_q;
  logic [4:0]    cfg_p;
  fx_t           cfg_vscale, vscale_q;

  // results
  turn_t         phase_q [K];
  fx_t           vel_q [K];
  logic          result_valid;
  logic [15:0]   frames;
  logic          out_idx;

  // slow-time buffer
  logic          buf_clear, buf_full;
  logic [NW-1:0] buf_count;
  logic [AW-1:0] buf_addr_a, buf_addr_b, acg_addr_a, acg_addr_b, fft_addr;
  cplx_t         buf_data_a [ACG_PAR], buf_data_b [ACG_PAR];

  // ESPRIT engine
  logic          esp_start, acg_busy, split_done, pinv_start, pinv_done, eig_start, eig_done;
  logic [RW-1:0] a_addr, b_addr, g_addr, f_addr;
  cplx_t [K-1:0] a_data, b_data, g_data, f_data;
  cplx_t         h_mat [K][K];
  cplx_t         eps_mat [K][K];
  cplx_t         mu [K];
  turn_t         eig_phase [K];

  // FFT engine
  logic          fft_start, fft_done;
  logic [P_MAX_LOG2-1:0] fft_bin;
  turn_t         fft_phase;

  cfg_regs #(.N_MAX(N_MAX), .P_MAX_LOG2(P_MAX_LOG2)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .arch(cfg_arch), .n_pkts(cfg_n), .p_log2(cfg_p), .vscale(cfg_vscale),
    .busy(state != S_IDLE), .result_valid, .frames, .vel(vel_q), .phase(phase_q));

  ss_buffer #(.N_MAX(N_MAX), .RD_PAR(ACG_PAR)) u_buf (
    .clk, .rst_n, .clear(buf_clear), .n_cfg(cfg_n),
    .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready), .s_tdata(s_axis_tdata),
    .full(buf_full), .count(buf_count),
    .rd_addr_a(buf_addr_a), .rd_data_a(buf_data_a),
    .rd_addr_b(buf_addr_b), .rd_data_b(buf_data_b));

  assign buf_addr_a = (arch_q == ARCH_ESPRIT) ? acg_addr_a : fft_addr;
  assign buf_addr_b = acg_addr_b;

  ss_acg #(.N_MAX(N_MAX), .PAR(ACG_PAR)) u_acg (
    .clk, .rst_n, .start(esp_start), .n_cfg(n_q), .busy(acg_busy),
    .rd_addr_a(acg_addr_a), .rd_data_a(buf_data_a),
    .rd_addr_b(acg_addr_b), .rd_data_b(buf_data_b),
    .m_valid(qrf_a_valid), .m_ready(qrf_a_ready), .m_data(qrf_a_data), .m_last(qrf_a_last));

  subspace_split #(.N_MAX(N_MAX)) u_split (
    .clk, .rst_n, .start(esp_start), .n_cfg(n_q),
    .s_valid(qrf_q_valid), .s_ready(qrf_q_ready), .s_data(qrf_q_data), .done(split_done),
    .a_addr, .a_data, .b_addr, .b_data, .g_addr, .g_data);

  pseudo_inverse #(.N_MAX(N_MAX)) u_pinv (
    .clk, .rst_n, .start(pinv_start), .n_cfg(n_q), .done(pinv_done),
    .b_addr, .b_data, .g_addr, .g_data, .f_addr, .f_data, .h_out(h_mat));

  eigen_calc #(.N_MAX(N_MAX)) u_eig (
    .clk, .rst_n, .start(eig_start), .n_cfg(n_q), .done(eig_done),
    .f_addr, .f_data, .a_addr, .a_data,
    .eps_out(eps_mat), .mu, .phase(eig_phase));

  fft_peak #(.N_MAX(N_MAX), .P_MAX_LOG2(P_MAX_LOG2)) u_fft (
    .clk, .rst_n, .start(fft_start), .n_cfg(n_q), .p_log2(cfg_p), .done(fft_done),
    .rd_addr(fft_addr), .rd_data(buf_data_a[0]),
    .fft_nfft, .m_valid(fft_in_valid), .m_ready(fft_in_ready), .m_data(fft_in_data),
    .m_last(fft_in_last), .s_valid(fft_out_valid), .s_data(fft_out_data),
    .peak_bin(fft_bin), .phase(fft_phase));

  // frame sequencer
  assign buf_clear     = (state == S_IDLE);
  assign m_axis_tvalid = (state == S_OUT);
  assign m_axis_tdata  = vel_q[out_idx];
  assign m_axis_tlast  = (arch_q == ARCH_FFT) || out_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      arch_q       <= ARCH_FFT;
      n_q          <= '0;
      vscale_q     <= '0;
      esp_start    <= 1'b0;
      pinv_start   <= 1'b0;
      eig_start    <= 1'b0;
      fft_start    <= 1'b0;
      result_valid <= 1'b0;
      frames       <= '0;
      out_idx      <= 1'b0;
      frame_done   <= 1'b0;
      for (int k = 0; k < K; k++) begin
        phase_q[k] <= '0;
        vel_q[k]   <= '0;
      end
    end else begin
      esp_start  <= 1'b0;
      pinv_start <= 1'b0;
      eig_start  <= 1'b0;
      fft_start  <= 1'b0;
      frame_done <= 1'b0;
      unique case (state)
        S_IDLE: if (s_axis_tvalid) begin
          // settings are taken when the first sample of a frame is offered
          arch_q   <= cfg_arch;
          n_q      <= cfg_n;
          vscale_q <= cfg_vscale;
          state    <= S_LOAD;
        end
        S_LOAD: if (buf_full) begin
          if (arch_q == ARCH_ESPRIT) begin
            esp_start <= 1'b1;
            state     <= S_QR;
          end else begin
            fft_start <= 1'b1;
            state     <= S_FFT;
          end
        end
        S_QR: if (split_done) begin
          pinv_start <= 1'b1;
          state      <= S_PINV;
        end
        S_PINV: if (pinv_done) begin
          eig_start <= 1'b1;
          state     <= S_EIG;
        end
        S_EIG: if (eig_done) begin
          for (int k = 0; k < K; k++) begin
            phase_q[k] <= eig_phase[k];
            vel_q[k]   <= turns_to_vel(eig_phase[k], vscale_q);
          end
          out_idx <= 1'b0;
          state   <= S_OUT;
        end
        S_FFT: if (fft_done) begin
          phase_q[0] <= fft_phase;
          vel_q[0]   <= turns_to_vel(fft_phase, vscale_q);
          phase_q[1] <= '0;
          vel_q[1]   <= '0;
          out_idx    <= 1'b0;
          state      <= S_OUT;
        end
        S_OUT: if (m_axis_tready) begin
          if (m_axis_tlast) begin
            result_valid <= 1'b1;
            frames       <= frames + 1'b1;
            frame_done   <= 1'b1;
            state        <= S_IDLE;
          end else begin
            out_idx <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Stream rules: an offered output word holds until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));

endmodule
