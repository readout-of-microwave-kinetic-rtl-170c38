// nco: numerically controlled oscillator used as the built-in test source of
// the filter bank.
//
// A PW-bit phase accumulator advances by the frequency tuning word `ftw`
// every enabled clock, so the tone frequency is F = ftw / 2^PW * Fs. The top
// LUT_AW bits of the phase address a full-period sine table of 2^LUT_AW
// entries with amplitude AMP (computed at elaboration). With the defaults
// (32-bit phase, 1024-entry table) a tone on FFT bin k of a 1024-point FFT
// is exact: ftw = k * 2^22, e.g. 17 kHz at Fs = 512 kHz is bin 34 and
// 36 MHz at Fs = 128 MHz is bin 288.
//
// Interface and timing: while `en` is high, one sample per clock leaves on
// out_sin with out_valid, one clock after the phase it belongs to. `ftw`
// may change at any time and takes effect on the next step; `sync_rst`
// returns the phase to zero. The output width follows the 16-bit oscillator
// output of the published test system; the accumulator width, the table
// size and the amplitude are this implementation's choices.
module nco
  import pfb_pkg::*;
#(
  parameter int unsigned PW     = 32,
  parameter int unsigned LUT_AW = 10,
  parameter int unsigned OW     = X_W,
  parameter int unsigned AMP    = 16384
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  sync_rst,
  input  logic [PW-1:0]         ftw,
  output logic                  out_valid,
  output logic signed [OW-1:0]  out_sin
);

  localparam int unsigned LN = 1 << LUT_AW;
  typedef logic signed [OW-1:0] lut_t [LN];

  function automatic lut_t make_lut();
    lut_t t;
    for (int unsigned i = 0; i < LN; i++)
      t[i] = OW'(round_clip(real'(AMP) * $sin(2.0 * PI * real'(i) / real'(LN)), OW));
    return t;
  endfunction
  localparam lut_t SIN_LUT = make_lut();

  logic [PW-1:0] phase;

  always_ff @(posedge clk) begin
    if (!rst_n || sync_rst) phase <= '0;
    else if (en)            phase <= phase + ftw;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= en && !sync_rst;
    if (en) out_sin <= SIN_LUT[phase[PW-1 -: LUT_AW]];
  end

endmodule
