// tb_ss_buffer: slow-time buffer test. Loads frames of different lengths
// with random gaps in the input stream, checks that exactly N beats are
// accepted (TREADY falls when the buffer is full), that `count` and `full`
// follow, and that both read ports return every stored sample converted from
// Q1.15 to Q16.16. The ports are three lanes wide: lane m must return the
// sample at address + m, and lanes past the end of the array must read zero.
module tb_ss_buffer;
  import doppler_pkg::*;

  localparam int N_MAX = 16;
  localparam int RD_PAR = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, tvalid, tready, full;
  logic [4:0] n_cfg, count;
  logic [31:0] tdata;
  logic [3:0] ra, rb;
  cplx_t da [RD_PAR], db [RD_PAR];
  int checks = 0, failures = 0;
  logic [31:0] sent [N_MAX];

  ss_buffer #(.N_MAX(N_MAX), .RD_PAR(RD_PAR)) dut (
    .clk, .rst_n, .clear, .n_cfg, .s_tvalid(tvalid), .s_tready(tready), .s_tdata(tdata),
    .full, .count, .rd_addr_a(ra), .rd_data_a(da), .rd_addr_b(rb), .rd_data_b(db));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fx_t q15(input logic [15:0] v);
    return fx_t'(signed'(v)) * 2;
  endfunction

  task automatic frame(input int n);
    int acc;
    @(negedge clk); clear = 1'b1; n_cfg = 5'(n);
    @(negedge clk); clear = 1'b0;
    check(count == 0 && !full, "empty after clear");
    acc = 0;
    // offer more beats than n; only n may be taken
    for (int k = 0; k < n + 3; k++) begin
      tdata  = $urandom;
      tvalid = ($urandom % 4 != 0);
      @(posedge clk);
      if (tvalid && tready) begin
        sent[acc] = tdata;
        acc++;
      end
      @(negedge clk);
      if (!tvalid) k--;
    end
    tvalid = 1'b0;
    check(acc == n, $sformatf("accepted %0d of %0d beats", acc, n));
    check(full && !tready && count == 5'(n), "full, not ready, count = N");
    for (int k = 0; k < n; k++) begin
      ra = 4'(k); rb = 4'(n - 1 - k);
      #1;
      for (int m = 0; m < RD_PAR; m++) begin
        if (k + m < n)
          check(da[m].re == q15(sent[k+m][15:0]) && da[m].im == q15(sent[k+m][31:16]),
                $sformatf("port A lane %0d sample", m));
        else if (k + m >= N_MAX)
          check(da[m] == CZERO, "port A lane past the array reads zero");
        if (n - 1 - k + m < n)
          check(db[m].re == q15(sent[n-1-k+m][15:0]) && db[m].im == q15(sent[n-1-k+m][31:16]),
                $sformatf("port B lane %0d sample", m));
        else if (n - 1 - k + m >= N_MAX)
          check(db[m] == CZERO, "port B lane past the array reads zero");
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; tvalid = 0; tdata = 0; n_cfg = 0; ra = 0; rb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    frame(16);
    frame(7);
    frame(12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
