// tb_ss_acg: spatial smoothing and covariance test. Random slow-time vectors
// are loaded into the slow-time buffer; the covariance stream must carry
// A[i][j] = sum_{l=0}^{N-L-1} y[i+l] conj(y[j+l]) (L = N/2) in column-major
// order, each element bit-exact against a product-sum computed here from the
// raw samples, TLAST on the last element only. The unit runs with PAR = 3
// window products per cycle, so frame lengths whose N-L is and is not a
// multiple of 3 are both covered. With the sink always ready a run must
// take L*L*(ceil((N-L)/PAR)+1) cycles; another run stalls the sink at random.
module tb_ss_acg;
  import doppler_pkg::*;

  localparam int N_MAX = 24;
  localparam int PAR   = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, tvalid, tready, full, start, busy, mv, mr, ml;
  logic [4:0] n_cfg, count;
  logic [31:0] tdata;
  logic [4:0] ra, rb;
  cplx_t da [PAR], db [PAR], md;
  int checks = 0, failures = 0;
  logic [31:0] y [N_MAX];

  ss_buffer #(.N_MAX(N_MAX), .RD_PAR(PAR)) u_buf (
    .clk, .rst_n, .clear, .n_cfg, .s_tvalid(tvalid), .s_tready(tready), .s_tdata(tdata),
    .full, .count, .rd_addr_a(ra), .rd_data_a(da), .rd_addr_b(rb), .rd_data_b(db));

  ss_acg #(.N_MAX(N_MAX), .PAR(PAR)) dut (
    .clk, .rst_n, .start, .n_cfg, .busy, .rd_addr_a(ra), .rd_data_a(da),
    .rd_addr_b(rb), .rd_data_b(db), .m_valid(mv), .m_ready(mr), .m_data(md), .m_last(ml));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected element from raw Q1.15 samples: products in Q2.30, sum, to Q16.16
  function automatic cplx_t expect_a(input int n, input int i, input int j);
    longint sr, si, ar, ai, br, bi;
    int l_len;
    l_len = n / 2;
    sr = 0; si = 0;
    for (int l = 0; l <= n - l_len - 1; l++) begin
      ar = longint'(signed'(y[i+l][15:0])); ai = longint'(signed'(y[i+l][31:16]));
      br = longint'(signed'(y[j+l][15:0])); bi = longint'(signed'(y[j+l][31:16]));
      sr += ar * br + ai * bi;     // a * conj(b)
      si += ai * br - ar * bi;
    end
    // Q2.30 -> Q16.16: the buffer holds Q16.16 (x2), the products are then
    // Q32.32 (x4 of Q2.30 scaled by 2^2), narrowed by 16 bits
    return '{re: fx_t'((sr * 4) >>> 16), im: fx_t'((si * 4) >>> 16)};
  endfunction

  task automatic run(input int n, input bit stall);
    int got, l_len, t0, t1;
    cplx_t e;
    l_len = n / 2;
    @(negedge clk); clear = 1'b1; n_cfg = 5'(n);
    @(negedge clk); clear = 1'b0;
    for (int k = 0; k < n; k++) begin
      y[k] = $urandom;
      tdata = y[k]; tvalid = 1'b1;
      @(negedge clk);
    end
    tvalid = 1'b0;
    check(full, "buffer full");
    start = 1'b1; @(negedge clk); start = 1'b0;
    t0 = int'($time / 10);
    got = 0;
    while (got < l_len * l_len) begin
      mr = stall ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      if (mv && mr) begin
        e = expect_a(n, got % l_len, got / l_len);
        check(md == e, $sformatf("A[%0d][%0d]", got % l_len, got / l_len));
        check(ml == (got == l_len * l_len - 1), "TLAST position");
        got++;
        t1 = int'($time / 10);
      end
      @(negedge clk);
    end
    @(posedge clk); #1;
    check(!busy, "idle after the last element");
    if (!stall)
      check(t1 - t0 + 1 == l_len * l_len * ((n - l_len + PAR - 1) / PAR + 1),
            $sformatf("cycle count %0d, expected L*L*(ceil((N-L)/PAR)+1) = %0d", t1 - t0 + 1,
                      l_len * l_len * ((n - l_len + PAR - 1) / PAR + 1)));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; tvalid = 0; tdata = 0; n_cfg = 0; start = 0; mr = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(12, 1'b0);
    run(24, 1'b1);
    run(10, 1'b0);
    run(14, 1'b0);
    run(6, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
