// fft_sdf_stage: one radix-2 decimation-in-frequency stage of the streaming
// single-path delay-feedback (SDF) FFT.
//
// Stage STAGE of an N-point FFT works on blocks of 2L samples, L = N/2^(STAGE+1).
// During the first L samples of a block the inputs a_j are parked in an
// L-deep delay line, while the differences left there by the previous block
// are sent out multiplied by the twiddle W_2L^j = exp(-i*2*pi*j/(2L)). During
// the second L samples each input b_j meets its partner a_j: a_j + b_j goes
// out at once and a_j - b_j goes into the delay line for the next block.
// The stage therefore delays the stream by L samples and emits, per block,
// the L sums followed by the L twiddled differences.
//
// Timing: one sample per clock at most, advancing only on in_valid; outputs
// are registered. The first L outputs after reset (old delay-line contents)
// are suppressed with out_valid low. Twiddles have TWW bits with 1.0 =
// 2^(TWW-2); products are rounded to nearest and kept at DW bits without
// scaling. The SDF architecture is this implementation's choice; the source
// design only asks for a full-rate N-point FFT.
module fft_sdf_stage
  import pfb_pkg::*;
#(
  parameter int unsigned N     = N_FFT,
  parameter int unsigned STAGE = 0,
  parameter int unsigned DW    = FFT_DW,
  parameter int unsigned TWW   = TW_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);

  localparam int unsigned L   = N >> (STAGE + 1);
  localparam int unsigned CW  = $clog2(2 * L);          // block counter width
  localparam int unsigned AW  = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned SH  = TWW - 2;
  localparam int unsigned PW  = DW + TWW + 1;

  typedef logic signed [TWW-1:0] tw_t [L];

  function automatic tw_t make_cos();
    tw_t t;
    for (int unsigned j = 0; j < L; j++)
      t[j] = TWW'(round_clip($cos(PI * real'(j) / real'(L)) * real'(longint'(1) <<< SH), TWW));
    return t;
  endfunction
  function automatic tw_t make_sin();
    tw_t t;
    for (int unsigned j = 0; j < L; j++)
      t[j] = TWW'(round_clip($sin(PI * real'(j) / real'(L)) * real'(longint'(1) <<< SH), TWW));
    return t;
  endfunction
  localparam tw_t COS_T = make_cos();
  localparam tw_t SIN_T = make_sin();

  logic [CW-1:0]          cnt;
  logic                   second_half;
  logic [AW-1:0]          addr;
  logic                   primed;
  logic signed [DW-1:0]   mem_re [L];
  logic signed [DW-1:0]   mem_im [L];
  logic signed [DW-1:0]   old_re, old_im;
  logic signed [TWW-1:0]  c, s;
  logic signed [PW-1:0]   t_re, t_im;

  assign second_half = cnt >= CW'(L);
  assign addr        = AW'(second_half ? cnt - CW'(L) : cnt);
  assign old_re      = mem_re[addr];
  assign old_im      = mem_im[addr];
  assign c           = COS_T[addr];
  assign s           = SIN_T[addr];

  // (old_re + i old_im) * (c - i s), rounded to nearest
  always_comb begin
    t_re = PW'(old_re) * PW'(c) + PW'(old_im) * PW'(s) + (PW'(1) <<< (SH - 1));
    t_im = PW'(old_im) * PW'(c) - PW'(old_re) * PW'(s) + (PW'(1) <<< (SH - 1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (second_half || primed);
      if (in_valid) begin
        cnt <= (cnt == CW'(2 * L - 1)) ? '0 : cnt + 1'b1;
        if (cnt == CW'(2 * L - 1)) primed <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!second_half) begin
        mem_re[addr] <= in_re;
        mem_im[addr] <= in_im;
        out_re       <= DW'(t_re >>> SH);
        out_im       <= DW'(t_im >>> SH);
      end else begin
        mem_re[addr] <= old_re - in_re;
        mem_im[addr] <= old_im - in_im;
        out_re       <= old_re + in_re;
        out_im       <= old_im + in_im;
      end
    end
  end

endmodule
