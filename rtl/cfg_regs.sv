// cfg_regs: AXI-Lite register file through which the processor reconfigures
// the Doppler accelerator at run time and reads its results.
//
// The processor chooses the algorithm (coarse FFT or fine ESPRIT), the
// number of slow-time packets, the FFT size (precision) and the PRI; in
// hardware the PRI enters only as the velocity scale lambda / (2 T_PRI)
// that turns an angle per PRI into m/s. Register map (32-bit, byte
// addresses):
//   0x00 CTRL    RW  [0] algorithm: 0 = FFT, 1 = ESPRIT
//   0x04 NPKT    RW  number of slow-time packets N (clamped to 6..N_MAX)
//   0x08 NFFT    RW  log2 of the FFT size P (clamped to 6..P_MAX_LOG2)
//   0x0C VSCALE  RW  lambda / (2 T_PRI), Q16.16 m/s
//   0x10 STATUS  RO  [0] busy, [1] result valid, [31:16] frames completed
//   0x14 VEL1    RO  velocity estimate 1, Q16.16 m/s
//   0x18 VEL2    RO  velocity estimate 2, Q16.16 m/s (ESPRIT only)
//   0x1C PHASE   RO  [15:0] angle 1, [31:16] angle 2, in turns (2^16 = 2 pi)
// Reset values: FFT, N = N_MAX, P = 2^P_MAX_LOG2, VSCALE = 1250 m/s (a 5 mm
// wavelength at a 2 us PRI). The map, the clamping and the reset values are
// this design's choices; the paper only says configuration arrives over
// AXI-Lite. The slave accepts one write when address and data are both
// valid and answers OKAY to every access; a new setting takes effect at the
// next frame, never inside one.
// Address bits 1:0 are ignored (word access only). rst_n also disables the
// handshake assertions (`disable iff`), which a lint tool reports as a net
// used both as an asynchronous reset and synchronously; that use is in the
// assertions only.
module cfg_regs
  import doppler_pkg::*;
#(
  parameter int N_MAX      = 200,
  parameter int P_MAX_LOG2 = 14
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // AXI-Lite slave
  input  logic [4:0]                  s_axil_awaddr,
  input  logic                        s_axil_awvalid,
  output logic                        s_axil_awready,
  input  logic [31:0]                 s_axil_wdata,
  input  logic [3:0]                  s_axil_wstrb,
  input  logic                        s_axil_wvalid,
  output logic                        s_axil_wready,
  output logic [1:0]                  s_axil_bresp,
  output logic                        s_axil_bvalid,
  input  logic                        s_axil_bready,
  input  logic [4:0]                  s_axil_araddr,
  input  logic                        s_axil_arvalid,
  output logic                        s_axil_arready,
  output logic [31:0]                 s_axil_rdata,
  output logic [1:0]                  s_axil_rresp,
  output logic                        s_axil_rvalid,
  input  logic                        s_axil_rready,
  // configuration out
  output arch_e                       arch,
  output logic [$clog2(N_MAX+1)-1:0]  n_pkts,
  output logic [4:0]                  p_log2,
  output fx_t                         vscale,
  // status in
  input  logic                        busy,
  input  logic                        result_valid,
  input  logic [15:0]                 frames,
  input  fx_t                         vel [K],
  input  turn_t                       phase [K]
);
  localparam int CW = $clog2(N_MAX+1);
  localparam fx_t VSCALE_RST = 32'sd81920000;   // 1250.0 in Q16.16

  logic        wr_en, rd_en;
  logic [31:0] wval;

  assign wr_en          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_en;
  assign s_axil_wready  = wr_en;
  assign s_axil_bresp   = 2'b00;
  assign rd_en          = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_en;
  assign s_axil_rresp   = 2'b00;

  // byte-strobe merge with the current value of the addressed register
  always_comb begin
    logic [31:0] cur;
    unique case (s_axil_awaddr[4:2])
      3'd0:    cur = {31'd0, arch};
      3'd1:    cur = 32'(n_pkts);
      3'd2:    cur = 32'(p_log2);
      3'd3:    cur = vscale;
      default: cur = '0;
    endcase
    for (int b = 0; b < 4; b++)
      wval[b*8 +: 8] = s_axil_wstrb[b] ? s_axil_wdata[b*8 +: 8] : cur[b*8 +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arch          <= ARCH_FFT;
      n_pkts        <= CW'(N_MAX);
      p_log2        <= 5'(P_MAX_LOG2);
      vscale        <= VSCALE_RST;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (s_axil_bvalid && s_axil_bready)
        s_axil_bvalid <= 1'b0;
      if (wr_en) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr[4:2])
          3'd0: arch <= arch_e'(wval[0]);
          3'd1: n_pkts <= (wval > 32'(N_MAX)) ? CW'(N_MAX) :
                          (wval < 32'd6)      ? CW'(6)     : CW'(wval);
          3'd2: p_log2 <= (wval > 32'(P_MAX_LOG2)) ? 5'(P_MAX_LOG2) :
                          (wval < 32'd6)           ? 5'd6           : 5'(wval);
          3'd3: vscale <= fx_t'(wval);
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready)
        s_axil_rvalid <= 1'b0;
      if (rd_en) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr[4:2])
          3'd0: s_axil_rdata <= {31'd0, arch};
          3'd1: s_axil_rdata <= 32'(n_pkts);
          3'd2: s_axil_rdata <= 32'(p_log2);
          3'd3: s_axil_rdata <= vscale;
          3'd4: s_axil_rdata <= {frames, 14'd0, result_valid, busy};
          3'd5: s_axil_rdata <= vel[0];
          3'd6: s_axil_rdata <= vel[1];
          3'd7: s_axil_rdata <= {phase[1], phase[0]};
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

  // AXI-Lite response rules: a response, once offered, holds until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
