// tb_cfg_regs: AXI-Lite register file test. Checks reset values, write and
// read-back of every configuration register, clamping of the packet count
// and FFT size, byte strobes, the read-only status and result registers,
// and that the outputs to the accelerator follow the writes. Ready/valid
// timing is varied by holding BREADY/RREADY low for random cycles.
module tb_cfg_regs;
  import doppler_pkg::*;

  localparam int N_MAX = 200;
  localparam int PL = 14;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [4:0]  awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  arch_e       arch;
  logic [7:0]  n_pkts;
  logic [4:0]  p_log2;
  fx_t         vscale;
  logic        busy, rv;
  logic [15:0] frames;
  fx_t         vel [K];
  turn_t       phase [K];
  int checks = 0, failures = 0;

  cfg_regs #(.N_MAX(N_MAX), .P_MAX_LOG2(PL)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .arch, .n_pkts, .p_log2, .vscale, .busy, .result_valid(rv), .frames, .vel, .phase);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [4:0] a, input logic [31:0] d, input logic [3:0] s = 4'hf);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = s; awvalid = 1'b1; wvalid = 1'b1; bready = 1'b0;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    repeat ($urandom % 3) @(negedge clk);
    check(bvalid && bresp == 2'b00, "write response OKAY, held");
    bready = 1'b1;
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic rd(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b0;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    repeat ($urandom % 3) @(negedge clk);
    check(rvalid && rresp == 2'b00, "read response OKAY, held");
    d = rdata;
    rready = 1'b1;
    @(negedge clk);
    rready = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0; busy = 0; rv = 0; frames = 0;
    vel[0] = 0; vel[1] = 0; phase[0] = 0; phase[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // reset values
    rd(5'h00, r); check(r == 0 && arch == ARCH_FFT, "CTRL reset: FFT");
    rd(5'h04, r); check(r == 200 && n_pkts == 200, "NPKT reset: 200");
    rd(5'h08, r); check(r == 14 && p_log2 == 14, "NFFT reset: 14");
    rd(5'h0C, r); check(r == 32'd81920000 && vscale == 32'sd81920000, "VSCALE reset: 1250 m/s");
    // writes
    wr(5'h00, 32'd1);    rd(5'h00, r); check(r == 1 && arch == ARCH_ESPRIT, "CTRL: ESPRIT");
    wr(5'h04, 32'd50);   rd(5'h04, r); check(r == 50 && n_pkts == 50, "NPKT 50");
    wr(5'h04, 32'd100);  rd(5'h04, r); check(r == 100 && n_pkts == 100, "NPKT 100");
    wr(5'h04, 32'd900);  rd(5'h04, r); check(r == 200, "NPKT clamped to N_MAX");
    wr(5'h04, 32'd2);    rd(5'h04, r); check(r == 6, "NPKT clamped to 6");
    wr(5'h08, 32'd10);   rd(5'h08, r); check(r == 10 && p_log2 == 10, "NFFT 10");
    wr(5'h08, 32'd20);   rd(5'h08, r); check(r == 14, "NFFT clamped to 14");
    wr(5'h08, 32'd3);    rd(5'h08, r); check(r == 6, "NFFT clamped to 6");
    wr(5'h0C, 32'h0123_4567); rd(5'h0C, r); check(r == 32'h0123_4567 && vscale == 32'h0123_4567, "VSCALE");
    wr(5'h0C, 32'hAABB_CCDD, 4'b0101); rd(5'h0C, r); check(r == 32'h01BB_45DD, "VSCALE byte strobes");
    wr(5'h00, 32'd0);    check(arch == ARCH_FFT, "CTRL back to FFT");
    // read-only registers
    busy = 1; rv = 1; frames = 16'd513;
    vel[0] = 32'sh0012_3456; vel[1] = -32'sh0000_8000; phase[0] = 16'sh1234; phase[1] = -16'sh0100;
    rd(5'h10, r); check(r == {16'd513, 14'd0, 1'b1, 1'b1}, "STATUS");
    rd(5'h14, r); check(r == 32'h0012_3456, "VEL1");
    rd(5'h18, r); check(r == 32'hFFFF_8000, "VEL2");
    rd(5'h1C, r); check(r == 32'hFF00_1234, "PHASE");
    wr(5'h14, 32'd7); rd(5'h14, r); check(r == 32'h0012_3456, "VEL1 is read-only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
