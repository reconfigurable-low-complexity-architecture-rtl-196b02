// tb_doppler_accel: end-to-end test of the Doppler accelerator at its
// default size (200 packets, 16384-point FFT).
//
// A sequence of frames reconfigures the accelerator between frames over
// AXI-Lite, as the processor would: algorithm (FFT / ESPRIT), number of
// packets, FFT size and PRI (velocity scale). Each frame is a synthetic
// slow-time vector y[n] = sum_z a_z exp(-j 4 pi v_z n T_PRI / lambda) with
// small random noise, quantised to Q1.15. The QR and FFT cores are the
// behavioural models. Each estimate is compared with the true velocities:
// FFT within half its precision lambda / (2 P T_PRI) (plus a small margin),
// ESPRIT within 0.25 m/s per target. Register readback, output TLAST and
// the number of frames are checked too.
// Mechanisms counted, each must occur: algorithm switches in both
// directions, packet-count and FFT-size changes, PRI changes, output
// back-pressure, input gaps, covariance-stream back-pressure from the QR
// core.
module tb_doppler_accel;
  import doppler_pkg::*;

  localparam int  ACG_PAR = 4;             // the top's default covariance parallelism
  localparam real LAMBDA = 0.005;           // 60 GHz band
  localparam real PI     = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // AXI-Lite
  logic [4:0]  awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  // streams
  logic        s_tvalid, s_tready;
  logic [31:0] s_tdata;
  logic        m_tvalid, m_tready, m_tlast;
  logic [31:0] m_tdata;
  logic        qa_valid, qa_ready, qa_last, qq_valid, qq_ready;
  cplx_t       qa_data, qq_data;
  logic [4:0]  nfft;
  logic        fi_valid, fi_ready, fi_last, fo_valid;
  cplx_t       fi_data, fo_data;
  logic        frame_done;
  int          qr_stalls, fft_frames;

  doppler_accel dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata), .m_axis_tlast(m_tlast),
    .qrf_a_valid(qa_valid), .qrf_a_ready(qa_ready), .qrf_a_data(qa_data), .qrf_a_last(qa_last),
    .qrf_q_valid(qq_valid), .qrf_q_ready(qq_ready), .qrf_q_data(qq_data),
    .fft_nfft(nfft), .fft_in_valid(fi_valid), .fft_in_ready(fi_ready), .fft_in_data(fi_data),
    .fft_in_last(fi_last), .fft_out_valid(fo_valid), .fft_out_data(fo_data),
    .frame_done);

  qrf_model #(.L_MAX(100)) u_qrf (
    .clk, .rst_n, .a_valid(qa_valid), .a_ready(qa_ready), .a_data(qa_data), .a_last(qa_last),
    .q_valid(qq_valid), .q_ready(qq_ready), .q_data(qq_data), .stalls(qr_stalls));

  fft_model #(.P_MAX_LOG2(14)) u_fft (
    .clk, .rst_n, .nfft, .in_valid(fi_valid), .in_ready(fi_ready), .in_data(fi_data),
    .in_last(fi_last), .out_valid(fo_valid), .out_data(fo_data), .frames(fft_frames));

  // ---------------------------------------------------------------- checks
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- AXI-Lite
  task automatic axil_write(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hf; awvalid = 1'b1; wvalid = 1'b1; bready = 1'b1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic axil_read(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 1'b0;
  endtask

  // ---------------------------------------------------------------- mechanisms
  int n_to_esprit = 0, n_to_fft = 0, n_pkt_change = 0, n_fft_size_change = 0;
  int n_pri_change = 0, n_out_stall = 0, n_in_gap = 0;
  int cur_arch = 0, cur_n = 200, cur_p = 14;
  real cur_vs = 1250.0;

  always @(posedge clk) begin
    if (m_tvalid && !m_tready) n_out_stall++;
  end

  task automatic configure(input int arch, input int n, input int plog2, input real tpri);
    real vs;
    vs = LAMBDA / (2.0 * tpri);
    if (arch != cur_arch) begin
      if (arch == 1) n_to_esprit++; else n_to_fft++;
    end
    if (n != cur_n) n_pkt_change++;
    if (plog2 != cur_p) n_fft_size_change++;
    if (vs != cur_vs) n_pri_change++;
    cur_arch = arch; cur_n = n; cur_p = plog2; cur_vs = vs;
    axil_write(5'h00, 32'(arch));
    axil_write(5'h04, 32'(n));
    axil_write(5'h08, 32'(plog2));
    axil_write(5'h0C, 32'($rtoi(vs * 65536.0)));
  endtask

  // slow-time samples of nt targets
  task automatic send_frame(input int n, input real tpri, input int nt, input real v [2],
                            input real amp [2], input real noise);
    real re, im, ph;
    for (int k = 0; k < n; k++) begin
      re = 0.0; im = 0.0;
      for (int z = 0; z < nt; z++) begin
        ph = -4.0 * PI / LAMBDA * v[z] * real'(k) * tpri + 0.7 * real'(z);
        re += amp[z] * $cos(ph);
        im += amp[z] * $sin(ph);
      end
      re += noise * (real'($urandom % 2001) / 1000.0 - 1.0);
      im += noise * (real'($urandom % 2001) / 1000.0 - 1.0);
      @(negedge clk);
      if ($urandom % 7 == 0) begin      // gap in the input stream
        s_tvalid = 1'b0;
        n_in_gap++;
        @(negedge clk);
      end
      s_tdata  = {16'($rtoi(im * 32768.0)), 16'($rtoi(re * 32768.0))};
      s_tvalid = 1'b1;
      do @(posedge clk); while (!s_tready);
    end
    @(negedge clk);
    s_tvalid = 1'b0;
  endtask

  // collect the words of one result
  task automatic get_result(input int nwords, output real vel [2]);
    int got;
    got = 0;
    vel[0] = 0.0; vel[1] = 0.0;
    while (got < nwords) begin
      @(negedge clk);
      m_tready = ($urandom % 3 != 0);
      @(posedge clk);
      if (m_tvalid && m_tready) begin
        vel[got] = real'(signed'(m_tdata)) / 65536.0;
        check(m_tlast == (got == nwords - 1), "TLAST on the last result word only");
        got++;
      end
    end
    @(negedge clk);
    m_tready = 1'b0;
  endtask

  task automatic fft_frame(input int n, input int plog2, input real tpri, input real v);
    real vv [2], aa [2], est [2], tol, prec, vs, exp_v;
    logic [31:0] r;
    int t0;
    configure(0, n, plog2, tpri);
    vv = '{v, 0.0}; aa = '{0.8, 0.0};
    t0 = cyc;
    send_frame(n, tpri, 1, vv, aa, 0.002);
    get_result(1, est);
    vs   = LAMBDA / (2.0 * tpri);
    prec = vs / real'(1 << plog2);
    // the FFT grid wraps at +/- vs/2
    exp_v = v - vs * $floor(v / vs + 0.5);
    tol  = prec / 2.0 + 0.02;
    $display("FFT  N=%0d P=%0d PRI=%0.2fus: true %0.3f est %0.3f m/s (precision %0.3f) %0d cycles",
             n, 1 << plog2, tpri * 1e6, exp_v, est[0], prec, cyc - t0);
    check((est[0] - exp_v <= tol) && (exp_v - est[0] <= tol), "FFT velocity within half the precision");
    axil_read(5'h14, r);
    check(r == $rtoi(est[0] * 65536.0) || signed'(r) == signed'($rtoi(est[0] * 65536.0)), "VEL1 register");
  endtask

  task automatic esprit_frame(input int n, input real tpri, input real v0, input real v1);
    real vv [2], aa [2], est [2], lo, hi, tlo, thi;
    int t0, l;
    logic [31:0] r;
    configure(1, n, 14, tpri);
    vv = '{v0, v1}; aa = '{0.45, 0.4};
    t0 = cyc;
    send_frame(n, tpri, 2, vv, aa, 0.0005);
    get_result(2, est);
    lo  = (est[0] < est[1]) ? est[0] : est[1];
    hi  = (est[0] < est[1]) ? est[1] : est[0];
    tlo = (v0 < v1) ? v0 : v1;
    thi = (v0 < v1) ? v1 : v0;
    l   = n / 2;
    $display("ESPRIT N=%0d PRI=%0.2fus: true %0.3f %0.3f est %0.3f %0.3f m/s, %0d cycles (covariance alone %0d)",
             n, tpri * 1e6, tlo, thi, lo, hi, cyc - t0, l * l * ((n - l + ACG_PAR - 1) / ACG_PAR + 1));
    check((lo - tlo < 0.25) && (tlo - lo < 0.25), "ESPRIT lower velocity within 0.25 m/s");
    check((hi - thi < 0.25) && (thi - hi < 0.25), "ESPRIT upper velocity within 0.25 m/s");
    check(cyc - t0 > l * l * ((n - l + ACG_PAR - 1) / ACG_PAR + 1), "ESPRIT frame takes at least the covariance cycles");
    axil_read(5'h18, r);
    check(signed'(r) == signed'($rtoi(est[1] * 65536.0)), "VEL2 register");
  endtask

  // watchdog
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    awaddr = '0; araddr = '0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = '0; wstrb = '0; s_tvalid = 0; s_tdata = '0; m_tready = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // reset values
    axil_read(5'h04, r); check(r == 32'd200, "NPKT reset value N_MAX");
    axil_read(5'h08, r); check(r == 32'd14, "NFFT reset value 14");

    // coarse estimation, 100 packets, PRI 0.58 us, the paper's three FFT sizes
    fft_frame(100, 14, 0.58e-6, 37.3);
    fft_frame(100, 12, 0.58e-6, -52.9);
    fft_frame(100, 10, 0.58e-6, 121.0);
    // fine estimation, two targets 6 m/s apart, PRI 2 us, 200 and 50 packets
    esprit_frame(200, 2.0e-6, 100.0, 106.0);
    esprit_frame(50, 2.0e-6, -30.0, -22.0);
    esprit_frame(100, 2.0e-6, 15.0, 19.0);
    // back to coarse
    fft_frame(100, 14, 2.0e-6, 20.0);

    axil_read(5'h10, r);
    check(r[31:16] == 16'd7 && r[1] == 1'b1, "STATUS: seven frames, result valid");
    check(fft_frames == 4, "FFT core used for the four coarse frames");

    $display("mechanisms: to_esprit=%0d to_fft=%0d packets=%0d fft_size=%0d pri=%0d out_stall=%0d in_gap=%0d qr_stall=%0d",
             n_to_esprit, n_to_fft, n_pkt_change, n_fft_size_change, n_pri_change,
             n_out_stall, n_in_gap, qr_stalls);
    check(n_to_esprit > 0, "switch FFT -> ESPRIT happened");
    check(n_to_fft > 0, "switch ESPRIT -> FFT happened");
    check(n_pkt_change > 0, "packet count change happened");
    check(n_fft_size_change > 0, "FFT size change happened");
    check(n_pri_change > 0, "PRI change happened");
    check(n_out_stall > 0, "output back-pressure happened");
    check(n_in_gap > 0, "input gap happened");
    check(qr_stalls > 0, "QR core back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
