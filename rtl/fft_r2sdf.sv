// fft_r2sdf: streaming N-point complex FFT, radix-2 single-path delay
// feedback (R2SDF), decimation in frequency.
//
// log2(N) fft_sdf_stage instances are chained; stage s has a delay line of
// N/2^(s+1) samples, so the whole pipeline holds N-1 samples and accepts one
// new sample every clock indefinitely ("full-rate throughput"). The input
// is in natural order, frame-aligned to the first valid sample after reset;
// the output comes out in bit-reversed order, and out_bin gives the bin
// index k (X[k] = sum_n x[n] exp(-i 2 pi n k / N)) of each output sample.
//
// Timing: each stage lags the stream by its delay-line length plus one
// register, so with a continuous input the first output sample of a frame
// leaves N-1+log2(N) clocks after the first sample of that frame entered
// (1033 clocks for N = 1024); out_valid is a delayed copy of in_valid. The
// pipeline only advances on valid input, so the last frame is pushed out by
// the samples of the next one. No scaling is applied: with an 18-bit input the 32-bit
// datapath cannot overflow (growth of at most 2^10). The FFT architecture is
// this implementation's choice.
module fft_r2sdf
  import pfb_pkg::*;
#(
  parameter int unsigned N   = N_FFT,
  parameter int unsigned DW  = FFT_DW,
  parameter int unsigned TWW = TW_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [DW-1:0]   in_re,
  input  logic signed [DW-1:0]   in_im,
  output logic                   out_valid,
  output logic signed [DW-1:0]   out_re,
  output logic signed [DW-1:0]   out_im,
  output logic [$clog2(N)-1:0]   out_bin
);

  localparam int unsigned S = $clog2(N);

  logic                 v  [S+1];
  logic signed [DW-1:0] re [S+1];
  logic signed [DW-1:0] im [S+1];

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.N(N), .STAGE(s), .DW(DW), .TWW(TWW)) u_stage (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (v[s]),
      .in_re     (re[s]),
      .in_im     (im[s]),
      .out_valid (v[s+1]),
      .out_re    (re[s+1]),
      .out_im    (im[s+1])
    );
  end

  // Output position counter; the bin at position n is bitrev(n).
  logic [S-1:0] pos;
  always_ff @(posedge clk) begin
    if (!rst_n)    pos <= '0;
    else if (v[S]) pos <= pos + 1'b1;
  end

  always_comb begin
    for (int b = 0; b < S; b++) out_bin[b] = pos[S-1-b];
  end

  assign out_valid = v[S];
  assign out_re    = re[S];
  assign out_im    = im[S];

endmodule
