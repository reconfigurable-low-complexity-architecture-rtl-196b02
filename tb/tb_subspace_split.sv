// tb_subspace_split: streams random L x L matrices Q (column-major, with
// random gaps) and checks that only the first K = 2 columns are kept:
// BRAM A must hold rows 0..L-2 (E1), BRAMs B and G rows 1..L-1 (E2), each
// word carrying both columns of a row; `done` must pulse exactly once, right
// after the last element.
module tb_subspace_split;
  import doppler_pkg::*;

  localparam int N_MAX = 16;
  localparam int L_MAX = N_MAX / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, sv, sr, done;
  logic [4:0] n_cfg;
  cplx_t sd;
  logic [2:0] aa, ba, ga;
  cplx_t [K-1:0] ad, bd, gd;
  int checks = 0, failures = 0, dones = 0;
  cplx_t q [L_MAX][L_MAX];

  subspace_split #(.N_MAX(N_MAX)) dut (
    .clk, .rst_n, .start, .n_cfg, .s_valid(sv), .s_ready(sr), .s_data(sd), .done,
    .a_addr(aa), .a_data(ad), .b_addr(ba), .b_data(bd), .g_addr(ga), .g_data(gd));

  always @(posedge clk) if (done) dones++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int n);
    int l_len, k;
    l_len = n / 2;
    for (int c = 0; c < l_len; c++)
      for (int r = 0; r < l_len; r++)
        q[r][c] = '{re: fx_t'($urandom), im: fx_t'($urandom)};
    dones = 0;
    @(negedge clk); start = 1'b1; n_cfg = 5'(n);
    @(negedge clk); start = 1'b0;
    k = 0;
    while (k < l_len * l_len) begin
      sv = ($urandom % 4 != 0);
      sd = q[k % l_len][k / l_len];
      @(posedge clk);
      if (sv && sr) k++;
      @(negedge clk);
    end
    sv = 1'b0;
    @(negedge clk);
    check(dones == 1, "one done pulse");
    check(!sr, "not ready after the last element");
    for (int r = 0; r < l_len - 1; r++) begin
      aa = 3'(r); ba = 3'(r); ga = 3'(r);
      #1;
      for (int c = 0; c < K; c++) begin
        check(ad[c] == q[r][c], $sformatf("E1[%0d][%0d]", r, c));
        check(bd[c] == q[r+1][c], $sformatf("E2[%0d][%0d]", r, c));
        check(gd[c] == q[r+1][c], $sformatf("G[%0d][%0d]", r, c));
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
    start = 0; sv = 0; sd = CZERO; n_cfg = 0; aa = 0; ba = 0; ga = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(16);
    run(10);
    run(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
