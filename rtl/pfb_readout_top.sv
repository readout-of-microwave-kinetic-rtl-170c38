// pfb_readout_top: embedded critically sampled polyphase filter bank with
// its built-in tone generator and AXI4-Lite control, the coarse
// channelization stage of an MKID readout.
//
// Samples enter the filter bank (pfb_cs) either from the on-chip NCO, whose
// tuning word software writes over AXI4-Lite, or from the external sample
// port (adc_valid/adc_data), chosen by the CTRL source-select bit. The bank
// turns each block of N = 1024 real samples into 1024 complex bins, output
// one per clock in natural order with start/end-of-window flags; bin k holds
// the signal near k*Fs/N. A tone at ftw = k*2^22 therefore shows as a peak
// in bin k and its mirror bin N-k.
//
// Timing: one sample per clock at most. With the NCO selected, a sample is
// taken every clock while CTRL.NCO enable is set; with the external port
// selected, on every adc_valid. The first window leaves about 2N clocks after
// the first sample of its frame (see pfb_cs). Reset is synchronous, active
// low. The source select and register map are this implementation's own;
// the NCO-plus-PFB arrangement under AXI control follows the published test
// system.
module pfb_readout_top
  import pfb_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite control port
  input  logic [3:0]            s_axi_awaddr,
  input  logic                  s_axi_awvalid,
  output logic                  s_axi_awready,
  input  logic [31:0]           s_axi_wdata,
  input  logic [3:0]            s_axi_wstrb,
  input  logic                  s_axi_wvalid,
  output logic                  s_axi_wready,
  output logic [1:0]            s_axi_bresp,
  output logic                  s_axi_bvalid,
  input  logic                  s_axi_bready,
  input  logic [3:0]            s_axi_araddr,
  input  logic                  s_axi_arvalid,
  output logic                  s_axi_arready,
  output logic [31:0]           s_axi_rdata,
  output logic [1:0]            s_axi_rresp,
  output logic                  s_axi_rvalid,
  input  logic                  s_axi_rready,
  // external sample input (ADC)
  input  logic                  adc_valid,
  input  logic signed [X_W-1:0] adc_data,
  // channelized output
  output logic                  bin_valid,
  output logic [$clog2(N_FFT)-1:0] bin_index,
  output logic [2*FFT_DW-1:0]   bin_data,      // {imag, real}
  output logic                  start_window,
  output logic                  end_window,
  // oscillator monitor
  output logic signed [X_W-1:0] nco_out
);

  logic        nco_en, src_sel, nco_sync;
  logic [31:0] ftw;
  logic [31:0] frame_count;

  axi_lite_regs u_regs (
    .clk           (clk),
    .rst_n         (rst_n),
    .s_axi_awaddr  (s_axi_awaddr),
    .s_axi_awvalid (s_axi_awvalid),
    .s_axi_awready (s_axi_awready),
    .s_axi_wdata   (s_axi_wdata),
    .s_axi_wstrb   (s_axi_wstrb),
    .s_axi_wvalid  (s_axi_wvalid),
    .s_axi_wready  (s_axi_wready),
    .s_axi_bresp   (s_axi_bresp),
    .s_axi_bvalid  (s_axi_bvalid),
    .s_axi_bready  (s_axi_bready),
    .s_axi_araddr  (s_axi_araddr),
    .s_axi_arvalid (s_axi_arvalid),
    .s_axi_arready (s_axi_arready),
    .s_axi_rdata   (s_axi_rdata),
    .s_axi_rresp   (s_axi_rresp),
    .s_axi_rvalid  (s_axi_rvalid),
    .s_axi_rready  (s_axi_rready),
    .ctrl_nco_en   (nco_en),
    .ctrl_src_sel  (src_sel),
    .ctrl_nco_sync (nco_sync),
    .ftw           (ftw),
    .frame_count   (frame_count)
  );

  logic                  nco_valid;
  logic signed [X_W-1:0] nco_sin;

  nco u_nco (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (nco_en),
    .sync_rst  (nco_sync),
    .ftw       (ftw),
    .out_valid (nco_valid),
    .out_sin   (nco_sin)
  );

  logic                  s_valid;
  logic signed [X_W-1:0] s_data;
  always_comb begin
    if (src_sel) begin
      s_valid = adc_valid;
      s_data  = adc_data;
    end else begin
      s_valid = nco_valid;
      s_data  = nco_sin;
    end
  end

  logic signed [FFT_DW-1:0] re_unused, im_unused;

  pfb_cs u_pfb (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (s_valid),
    .in_x         (s_data),
    .out_valid    (bin_valid),
    .out_bin      (bin_index),
    .out_re       (re_unused),
    .out_im       (im_unused),
    .out_data     (bin_data),
    .start_window (start_window),
    .end_window   (end_window),
    .frame_count  (frame_count)
  );

  assign nco_out = nco_sin;

endmodule
