// tb_workloads: the fine-estimation scenarios of the evaluation run
// through the whole accelerator at its default size, with noise.
// Two targets of equal power at a given SNR (per target, per sample) and
// velocity difference are estimated with ESPRIT for 50, 100 and 200 packets
// at a 2 us PRI, and with 200 packets at a 0.58 us PRI; for each case a few
// trials give an RMSE over both targets. Cases with a 200 us or longer
// observation time run at 25 dB; the two cases with a 100 us observation
// time (50 packets at 2 us, 200 packets at 0.58 us, which the evaluation
// shows performing alike and resolving a pair only at high SNR) run at
// 40 dB. Each RMSE limit (0.5 to 2 m/s) is about 1.5 times the worst RMSE
// a double-precision model of the same estimator reached over 60 repeats
// of the same trials, so the check should hold for other random seeds while
// still failing when the pair is not resolved. The
// noise here is white Gaussian on a line-of-sight signal, so the SNR axis
// is not directly that of a fading-channel evaluation. The FFT precisions
// of the coarse mode are run once each for a single target at 100 packets,
// and the finest one also at 10, 20 and 200 packets.
module tb_workloads;
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


  // complex Gaussian noise sample of total power p (Box-Muller)
  task automatic gauss(input real p, output real nr, output real ni);
    real u1, u2, r;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    r  = $sqrt(-p * $ln(u1));
    nr = r * $cos(2.0 * PI * u2);
    ni = r * $sin(2.0 * PI * u2);
  endtask

  task automatic send_noisy(input int n, input real tpri, input real v0, input real v1,
                            input real amp, input real snr_db);
    real re, im, ph, nr, ni, p;
    p = amp * amp / (10.0 ** (snr_db / 10.0));
    for (int k = 0; k < n; k++) begin
      re = 0.0; im = 0.0;
      ph = -4.0 * PI / LAMBDA * v0 * real'(k) * tpri;
      re += amp * $cos(ph); im += amp * $sin(ph);
      ph = -4.0 * PI / LAMBDA * v1 * real'(k) * tpri + 1.3;
      re += amp * $cos(ph); im += amp * $sin(ph);
      gauss(p, nr, ni);
      re += nr; im += ni;
      @(negedge clk);
      s_tdata  = {16'($rtoi(im * 32768.0)), 16'($rtoi(re * 32768.0))};
      s_tvalid = 1'b1;
      do @(posedge clk); while (!s_tready);
    end
    @(negedge clk);
    s_tvalid = 1'b0;
  endtask

  task automatic esprit_case(input int n, input real tpri, input real vdiff, input real snr_db,
                             input int trials, input real limit);
    real est [2], se, lo, hi, v0, v1, rmse;
    se = 0.0;
    configure(1, n, 14, tpri);
    for (int t = 0; t < trials; t++) begin
      v0 = 10.0 + 3.0 * real'(t);
      v1 = v0 + vdiff;
      send_noisy(n, tpri, v0, v1, 0.35, snr_db);
      get_result(2, est);
      lo = (est[0] < est[1]) ? est[0] : est[1];
      hi = (est[0] < est[1]) ? est[1] : est[0];
      se += (lo - v0) ** 2 + (hi - v1) ** 2;
      $display("  trial %0d: true %0.3f %0.3f est %0.3f %0.3f m/s", t, v0, v1, lo, hi);
    end
    rmse = $sqrt(se / real'(2 * trials));
    $display("ESPRIT N=%0d PRI=%0.2fus dv=%0.1f m/s SNR=%0.0f dB: RMSE %0.3f m/s over %0d trials",
             n, tpri * 1e6, vdiff, snr_db, rmse, trials);
    check(rmse < limit, $sformatf("RMSE below %0.2f m/s", limit));
  endtask

  // single target, n packets at a 0.58 us PRI; the tolerance is half the
  // precision plus a noise allowance of 1/20 of the FFT resolution vs/n
  task automatic fft_case(input int n, input int plog2, input real v);
    real est [2], vs, prec, tol;
    configure(0, n, plog2, 0.58e-6);
    send_noisy(n, 0.58e-6, v, v, 0.35, 20.0);
    get_result(1, est);
    vs   = LAMBDA / (2.0 * 0.58e-6);
    prec = vs / real'(1 << plog2);
    tol  = prec / 2.0 + ((vs / real'(20 * n) > 0.2) ? vs / real'(20 * n) : 0.2);
    $display("FFT N=%0d P=%0d precision %0.3f m/s: true %0.3f est %0.3f", n, 1 << plog2, prec, v, est[0]);
    check((est[0] - v) ** 2 < tol ** 2, "FFT estimate within half the precision plus noise");
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    awaddr = '0; araddr = '0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = '0; wstrb = '0; s_tvalid = 0; s_tdata = '0; m_tready = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // coarse: Table I precisions, 100 packets, 0.58 us PRI (same target twice = one target)
    fft_case(100, 14, 23.4);
    fft_case(100, 12, 23.4);
    fft_case(100, 10, 23.4);
    // coarse: 10, 20 and 200 packets at the finest precision
    fft_case(10,  14, 23.4);
    fft_case(20,  14, 23.4);
    fft_case(200, 14, 23.4);
    // fine: two targets 6 m/s apart, 2 us PRI, 200 and 50 packets
    esprit_case(200, 2.0e-6, 6.0, 25.0, 3, 0.5);
    esprit_case(50,  2.0e-6, 6.0, 40.0, 3, 2.0);
    // 200 packets at 0.58 us: same CPI as 50 packets at 2 us
    esprit_case(200, 0.58e-6, 6.0, 40.0, 3, 1.0);
    // velocity differences 2, 4, 8 m/s with 200, 100 and 50 packets
    esprit_case(200, 2.0e-6, 2.0, 25.0, 2, 0.8);
    esprit_case(200, 2.0e-6, 4.0, 25.0, 2, 0.5);
    esprit_case(100, 2.0e-6, 4.0, 25.0, 2, 2.0);
    esprit_case(50,  2.0e-6, 8.0, 40.0, 2, 1.5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
