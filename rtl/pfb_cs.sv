// pfb_cs: critically sampled polyphase filter bank (coarse channelizer).
//
// A real input stream is split into N channels of width Fs/N. The stream
// passes the time-shared 4-tap polyphase subfilter (pfb_subfilter, with its
// coefficient ROM), whose output for phase p is branch p of the filter bank;
// because the bank is critically sampled (decimation M = N) every group of N
// consecutive subfilter outputs is one FFT input frame. A streaming N-point
// FFT (fft_r2sdf) transforms each frame and fft_reorder emits the N bins in
// natural order, bin k centred on k*Fs/N. One output bin is produced per
// input sample, so the bank keeps up with a sample every clock.
//
// Interface: in_valid/in_x carry the samples (real, imaginary FFT input is
// zero). The outputs carry one bin per clock during a window, flagged by
// start_window (bin 0) and end_window (bin N-1); out_data packs the bin as
// {imaginary, real}, 64 bits by default. Timing: with a continuous input,
// bin 0 of the window computed from input frame f leaves 2N + log2(N) + 3
// clocks after the first sample of frame f entered (3 clocks filter,
// N-1+log2(N) FFT, N+1 to fill the reorder bank and read bin 0); 2077 clocks
// for N = 1024.
//
// The filter/FFT split and the 1024 x 4 polyphase organisation follow the
// published design; word lengths, the FFT architecture and the output
// reordering are this implementation's choices.
module pfb_cs
  import pfb_pkg::*;
#(
  parameter int unsigned N     = N_FFT,
  parameter int unsigned NTAPS = TAPS,
  parameter int unsigned XW    = X_W,
  parameter int unsigned CW    = COEF_W,
  parameter int unsigned YW    = Y_W,
  parameter int unsigned DW    = FFT_DW,
  parameter int unsigned TWW   = TW_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [XW-1:0]   in_x,
  output logic                   out_valid,
  output logic [$clog2(N)-1:0]   out_bin,
  output logic signed [DW-1:0]   out_re,
  output logic signed [DW-1:0]   out_im,
  output logic [2*DW-1:0]        out_data,
  output logic                   start_window,
  output logic                   end_window,
  output logic [31:0]            frame_count
);

  localparam int unsigned AW = $clog2(N);

  logic                 y_valid;
  logic signed [YW-1:0] y;
  logic [AW-1:0]        y_phase;

  pfb_subfilter #(.M(N), .NTAPS(NTAPS), .XW(XW), .CW(CW), .YW(YW)) u_filter (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_x      (in_x),
    .out_valid (y_valid),
    .out_y     (y),
    .out_phase (y_phase)
  );

  logic                 f_valid;
  logic signed [DW-1:0] f_re, f_im;
  logic [AW-1:0]        f_bin;

  fft_r2sdf #(.N(N), .DW(DW), .TWW(TWW)) u_fft (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (y_valid),
    .in_re     (DW'(y)),
    .in_im     ('0),
    .out_valid (f_valid),
    .out_re    (f_re),
    .out_im    (f_im),
    .out_bin   (f_bin)
  );

  fft_reorder #(.N(N), .DW(DW)) u_reorder (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (f_valid),
    .in_bin       (f_bin),
    .in_re        (f_re),
    .in_im        (f_im),
    .out_valid    (out_valid),
    .out_bin      (out_bin),
    .out_re       (out_re),
    .out_im       (out_im),
    .start_window (start_window),
    .end_window   (end_window),
    .frame_count  (frame_count)
  );

  assign out_data = {out_im, out_re};

  // The FFT frames are aligned to reset; the filter's phase counter must
  // agree with that alignment: phase 0 is the first sample of a frame.
  logic [AW-1:0] fft_in_pos;
  always_ff @(posedge clk) begin
    if (!rst_n)       fft_in_pos <= '0;
    else if (y_valid) fft_in_pos <= fft_in_pos + 1'b1;
  end
  a_frame_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    y_valid |-> y_phase == fft_in_pos);

endmodule
