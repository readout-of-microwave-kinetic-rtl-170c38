// pfb_coef_rom: polyphase coefficient ROM of the PFB.
//
// The NTAPS*N coefficients of the prototype low-pass filter are stored as an
// N x NTAPS polyphase matrix: row p is one branch, column t one tap, entry
// h[t*N + p]. Each column is its own ROM bank, so one read returns a whole
// row, the four coefficients the time-shared subfilter needs for the phase
// it is processing. The read is synchronous: `coef` holds the row addressed
// by `phase` one clock after `en` was high.
//
// The row/column organisation and the 1024x4 size follow the design; the
// window, the Q1.15 format and the computation of the table at elaboration
// (pfb_pkg::proto_coef) are this implementation's choices.
module pfb_coef_rom
  import pfb_pkg::*;
#(
  parameter int unsigned N      = N_FFT,
  parameter int unsigned NTAPS  = TAPS,
  parameter int unsigned CW     = COEF_W
) (
  input  logic                         clk,
  input  logic                         en,
  input  logic [$clog2(N)-1:0]         phase,
  output logic signed [CW-1:0]         coef [NTAPS]
);

  typedef logic signed [CW-1:0] bank_t [N];

  function automatic bank_t make_bank(int unsigned t);
    bank_t b;
    for (int unsigned p = 0; p < N; p++)
      b[p] = CW'(round_clip(proto_coef(t * N + p, N, NTAPS) * real'((longint'(1) <<< (CW - 1)) - 1), CW));
    return b;
  endfunction

  for (genvar t = 0; t < NTAPS; t++) begin : g_bank
    localparam bank_t BANK = make_bank(t);
    always_ff @(posedge clk)
      if (en) coef[t] <= BANK[phase];
  end

endmodule
