// pfb_subfilter: the single time-shared polyphase subfilter of the critically
// sampled PFB.
//
// Instead of N separate branch filters, one NTAPS-tap filter is reused for all
// N phases. Sample x[n] sits at position q = n mod M of its frame and is
// filtered by branch r = M-1-q. Every clock the coefficient ROM supplies row
// r, x[n] is multiplied by all NTAPS coefficients at once, and the products
// are combined in transposed form with M-sample delays between the adders:
//
//   x[n] -*h[3M+r]-> z^-M -(+)-> z^-M -(+)-> z^-M -(+)-> y[n]
//                          *h[2M+r]   *h[M+r]      *h[r]
//
// so that y[n] = sum_t h[t*M + r] * x[n - t*M]. Reading the rows in the
// opposite order to the samples is what makes this the polyphase form of
// the prototype filter: the sample at lag t*M + r before the end of the
// frame is weighted by h[t*M + r], so every frame of y is the prototype
// filter's convolution sampled once per frame. (With rows read in sample
// order the lags and coefficient indices run in opposite directions inside a
// frame and the channels' stopband is lost for tones between bin centres.)
// Each z^-M is a RAM of M partial sums addressed by the phase, which is what
// makes the time sharing work: the partial sum of phase p waits exactly one
// frame for the next sample of the same phase. With M = N (critically
// sampled) the frame position q is also the FFT input index, output as
// out_phase.
//
// Timing: one sample per clock at most; out_valid follows in_valid three
// clocks later (ROM read, multiply, add). Delay lines are not cleared by
// reset; instead every delay line's output counts as zero during the first
// frame after reset. Because each partial sum already contains the (zeroed)
// older ones, that one mask is enough for the filter to start from an
// all-zero history. Word lengths and rounding (round half up, saturate to
// YW bits after removing the Q1.15 scale) are choices of this implementation;
// the structure follows the published subfilter diagram.
module pfb_subfilter
  import pfb_pkg::*;
#(
  parameter int unsigned M      = N_FFT,
  parameter int unsigned NTAPS  = TAPS,
  parameter int unsigned XW     = X_W,
  parameter int unsigned CW     = COEF_W,
  parameter int unsigned YW     = Y_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [XW-1:0]      in_x,
  output logic                      out_valid,
  output logic signed [YW-1:0]      out_y,
  output logic [$clog2(M)-1:0]      out_phase
);

  localparam int unsigned PW   = $clog2(M);
  localparam int unsigned PRW  = XW + CW;               // product width
  localparam int unsigned ACCW = PRW + $clog2(NTAPS);   // partial-sum width
  localparam int unsigned SH   = CW - 1;                // remove Q1.15 scale

  typedef logic signed [ACCW-1:0] acc_t;

  // ---- stage 0: phase counter and ROM read ------------------------------
  logic [PW-1:0]          phase0;
  logic                   primed;   // a whole frame has been written
  logic                   v1, v2;
  logic [PW-1:0]          p1, p2;
  logic signed [XW-1:0]   x1;
  logic                   primed1;
  logic signed [CW-1:0]   coef [NTAPS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase0 <= '0;
      primed <= 1'b0;
    end else if (in_valid) begin
      phase0 <= (phase0 == PW'(M - 1)) ? '0 : phase0 + 1'b1;
      if (phase0 == PW'(M - 1)) primed <= 1'b1;
    end
  end

  pfb_coef_rom #(.N(M), .NTAPS(NTAPS), .CW(CW)) u_rom (
    .clk   (clk),
    .en    (in_valid),
    .phase (PW'(M - 1) - phase0),
    .coef  (coef)
  );

  // ---- stage 1: multiply, read delay lines --------------------------------
  logic signed [PRW-1:0] prod2 [NTAPS];
  acc_t                  dly_rd [NTAPS];   // index 1..NTAPS-1 used
  acc_t                  dly_mem [NTAPS][M];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      x1 <= in_x;
      p1 <= phase0;
      primed1 <= primed;
    end
    if (v1) begin
      p2 <= p1;
      for (int t = 0; t < NTAPS; t++)
        prod2[t] <= PRW'(x1) * PRW'(coef[t]);
    end
  end

  // Delay line t (1..NTAPS-1) holds the partial sum that leaves adder t and
  // waits M samples. It is read one stage ahead, addressed by the same
  // phase, so a read never collides with the write of the same address
  // (for M >= 2).
  for (genvar t = 1; t < NTAPS; t++) begin : g_dly
    always_ff @(posedge clk)
      if (v1) dly_rd[t] <= primed1 ? dly_mem[t][p1] : '0;
  end
  assign dly_rd[0] = '0;

  // ---- stage 2: adders, delay-line writes, output -----------------------
  // psum[t] leaves the adder fed by tap column t: column NTAPS-1 has no
  // adder (its product goes straight into the first delay line).
  acc_t psum [NTAPS];
  always_comb begin
    psum[NTAPS-1] = ACCW'(prod2[NTAPS-1]);
    for (int t = NTAPS - 2; t >= 0; t--)
      psum[t] = dly_rd[t+1] + ACCW'(prod2[t]);
  end

  for (genvar t = 1; t < NTAPS; t++) begin : g_wr
    always_ff @(posedge clk)
      if (v2) dly_mem[t][p2] <= psum[t];
  end

  // Round to nearest and saturate.
  localparam acc_t RND = acc_t'(1) <<< (SH - 1);
  acc_t rounded;
  localparam acc_t YMAX = acc_t'((longint'(1) <<< (YW - 1)) - 1);
  localparam acc_t YMIN = acc_t'(-(longint'(1) <<< (YW - 1)));
  always_comb rounded = (psum[0] + RND) >>> SH;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v2;
    if (v2) begin
      out_phase <= p2;
      if (rounded > YMAX)      out_y <= YMAX[YW-1:0];
      else if (rounded < YMIN) out_y <= YMIN[YW-1:0];
      else                     out_y <= rounded[YW-1:0];
    end
  end

endmodule
