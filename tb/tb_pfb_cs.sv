// tb_pfb_cs: end-to-end check of the critically sampled filter bank at a
// reduced size (N = 64 channels, 4 taps). Six frames of real input (two
// tones plus random noise, with random gaps in in_valid after the second
// frame) are streamed in; every output window is compared with a
// double-precision model written here: the prototype filter applied branch
// by branch, y_p[m] = sum_t h[t*N+N-1-p] x[(m-t)*N+p] (zero history), then an
// N-point DFT of each frame. Tolerance is 1e-3 of the window's largest bin
// plus 40 LSB (coefficient and rounding quantization). The latency from the
// first sample to the first bin (2N + log2(N) + 3 clocks, with the first two frames gap-free) and the
// start/end-of-window flags are checked as well.
module tb_pfb_cs;
  localparam int N = 64, S = 6, NT = 4, FR = 6;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [15:0] in_x = '0;
  logic out_valid;
  logic [S-1:0] out_bin;
  logic signed [31:0] out_re, out_im;
  logic [63:0] out_data;
  logic start_window, end_window;
  logic [31:0] frame_count;
  int checks = 0, failures = 0;

  int x [FR*N];
  real h [NT*N];
  real Xr [FR][N];
  real Xi [FR][N];
  real peak [FR];
  int n_out = 0, windows = 0;
  longint cyc = 0, first_in = -1, first_out = -1;
  real max_rel = 0.0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  pfb_cs #(.N(N), .NTAPS(NT)) dut (.*);

  always @(posedge clk) begin
    if (in_valid && first_in < 0) first_in = cyc;
    if (out_valid && rst_n) begin
      int f, k;
      real e, er, ei, tol;
      if (first_out < 0) first_out = cyc;
      f = n_out / N;
      k = n_out % N;
      checks += 4;
      if (int'(out_bin) != k) failures++;
      if (start_window != (k == 0)) failures++;
      if (end_window != (k == N - 1)) failures++;
      if (out_data != {out_im, out_re}) failures++;
      if (k == N - 1) windows++;
      if (f < FR) begin
        er = real'(out_re) - Xr[f][k];
        ei = real'(out_im) - Xi[f][k];
        e = (er < 0 ? -er : er) + (ei < 0 ? -ei : ei);
        tol = 1.0e-3 * peak[f] + 40.0;
        if (e / peak[f] > max_rel) max_rel = e / peak[f];
        checks++;
        if (e > tol) begin
          failures++;
          if (failures < 10) $display("window %0d bin %0d got (%0d,%0d) want (%f,%f)", f, k, out_re, out_im, Xr[f][k], Xi[f][k]);
        end
      end
      n_out++;
    end
  end

  initial begin
    real L;
    L = real'(NT * N);
    for (int i = 0; i < NT * N; i++) begin
      real xx, s;
      xx = (real'(i) - (L - 1.0) / 2.0) / real'(N);
      s = (xx == 0.0) ? 1.0 : $sin(PI * xx) / (PI * xx);
      h[i] = s * (0.54 - 0.46 * $cos(2.0 * PI * real'(i) / (L - 1.0)));
    end
    for (int n = 0; n < FR * N; n++)
      x[n] = int'(9000.0 * $sin(2.0 * PI * 5.0 * real'(n) / real'(N))
                + 6000.0 * $cos(2.0 * PI * 20.37 * real'(n) / real'(N)))
           + int'($urandom_range(0, 4000)) - 2000;
    for (int f = 0; f < FR; f++) begin
      real y [N];
      for (int p = 0; p < N; p++) begin
        y[p] = 0.0;
        for (int t = 0; t < NT; t++)
          if (f - t >= 0) y[p] += h[t*N+(N-1-p)] * real'(x[(f-t)*N+p]);
      end
      peak[f] = 1.0;
      for (int k = 0; k < N; k++) begin
        real ar, ai, m;
        ar = 0.0; ai = 0.0;
        for (int n = 0; n < N; n++) begin
          ar += y[n] * $cos(2.0 * PI * real'((n * k) % N) / real'(N));
          ai -= y[n] * $sin(2.0 * PI * real'((n * k) % N) / real'(N));
        end
        Xr[f][k] = ar; Xi[f][k] = ai;
        m = (ar < 0 ? -ar : ar) + (ai < 0 ? -ai : ai);
        if (m > peak[f]) peak[f] = m;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < FR * N; n++) begin
      in_valid = 1'b1;
      in_x = 16'(x[n]);
      @(negedge clk);
      in_valid = 1'b0;
      if (n >= 2 * N && $urandom_range(0, 5) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    // flush the last frame out of the FFT with zeros (not checked)
    for (int n = 0; n < 2 * N; n++) begin
      in_valid = 1'b1; in_x = '0;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (2 * N) @(negedge clk);
    checks += 3;
    if (windows < FR) failures++;
    if (frame_count != 32'(windows)) failures++;
    if (first_out - first_in != longint'(2 * N + S + 3)) begin
      failures++;
      $display("latency %0d", first_out - first_in);
    end
    $display("windows=%0d max_rel_err=%f latency=%0d", windows, max_rel, first_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
