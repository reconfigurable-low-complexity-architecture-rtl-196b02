// tb_fft_peak: coarse-path test without the FFT core. Checks the stream fed
// to the core (P beats, the N buffer samples then zeros, TLAST on beat P-1,
// size field = log2 P, with random back-pressure), then returns P bins with a
// planted maximum and checks the peak bin and the angle -k/P turns. Several
// sizes and frame lengths; bins arrive with random gaps. Also checks that a
// tie keeps the first bin and that the cycle count of the feed equals P
// when the core is always ready.
module tb_fft_peak;
  import doppler_pkg::*;

  localparam int N_MAX = 32;
  localparam int PL = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, done, mv, mr, ml, sv;
  logic [5:0] n_cfg;
  logic [4:0] p_log2, nfft;
  logic [4:0] ra;
  cplx_t rd, md, sd;
  logic [PL-1:0] bin;
  turn_t ph;
  cplx_t y [N_MAX];
  int checks = 0, failures = 0;

  fft_peak #(.N_MAX(N_MAX), .P_MAX_LOG2(PL)) dut (
    .clk, .rst_n, .start, .n_cfg, .p_log2, .done, .rd_addr(ra), .rd_data(rd),
    .fft_nfft(nfft), .m_valid(mv), .m_ready(mr), .m_data(md), .m_last(ml),
    .s_valid(sv), .s_data(sd), .peak_bin(bin), .phase(ph));

  assign rd = y[ra];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int n, input int pl, input int kpk, input bit stall, input bit tie);
    int p, k, t0, t1, e;
    p = 1 << pl;
    for (int i = 0; i < N_MAX; i++) y[i] = '{re: fx_t'($urandom), im: fx_t'($urandom)};
    @(negedge clk); start = 1'b1; n_cfg = 6'(n); p_log2 = 5'(pl);
    @(negedge clk); start = 1'b0;
    check(nfft == 5'(pl), "size field");
    k = 0; t0 = int'($time / 10); t1 = t0;
    while (k < p) begin
      mr = stall ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      if (mv && mr) begin
        check(md == ((k < n) ? y[k] : CZERO), $sformatf("feed beat %0d", k));
        check(ml == (k == p - 1), "TLAST on beat P-1");
        k++;
        t1 = int'($time / 10);
      end
      @(negedge clk);
    end
    mr = 1'b0;
    if (!stall) check(t1 - t0 + 1 == p, $sformatf("feed takes P cycles (%0d)", t1 - t0 + 1));
    // bins: random small values, a planted maximum at kpk (and at kpk+5 if tie)
    k = 0;
    while (k < p) begin
      sv = ($urandom % 4 != 0);
      if (k == kpk || (tie && k == kpk + 5)) sd = '{re: 32'sd3000000, im: -32'sd4000000};
      else sd = '{re: fx_t'($urandom % 2000000) - 32'sd1000000, im: fx_t'($urandom % 2000000) - 32'sd1000000};
      @(posedge clk);
      if (sv) k++;
      @(negedge clk);
    end
    sv = 1'b0;
    while (!done) @(negedge clk);
    e = (-(kpk << (16 - pl))) & 16'hffff;
    check(bin == PL'(kpk), $sformatf("peak bin %0d, expected %0d", bin, kpk));
    check(ph == turn_t'(e), $sformatf("angle %0d, expected %0d", ph, turn_t'(e)));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; n_cfg = 0; p_log2 = 0; mr = 0; sv = 0; sd = CZERO;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(32, 8, 200, 1'b0, 1'b0);
    run(20, 6, 3, 1'b1, 1'b0);
    run(32, 7, 0, 1'b1, 1'b0);
    run(9, 8, 100, 1'b0, 1'b1);
    run(25, 6, 63, 1'b1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
