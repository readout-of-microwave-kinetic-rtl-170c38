// tb_fft_r2sdf: full-size (1024-point) check of the streaming FFT. Four
// frames of random 18-bit complex samples are streamed in (the first without
// gaps, later ones with random gaps in in_valid), followed by a frame that
// pushes the last one out. Each output bin is compared with a double-precision
// DFT computed here, within 1e-4 of the frame's largest bin plus 16 LSB
// (the rounding of 18-bit twiddles), and out_bin must be the bit-reversed
// output position. The latency of the first bin, N-1+log2(N) clocks after
// the first input, is checked too.
module tb_fft_r2sdf;
  localparam int N = 1024, S = 10, DW = 32;
  localparam int FRAMES = 4;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [DW-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic signed [DW-1:0] out_re, out_im;
  logic [S-1:0] out_bin;
  int checks = 0, failures = 0;

  int xr [FRAMES+1][N];
  int xi [FRAMES+1][N];
  real Xr [FRAMES][N];
  real Xi [FRAMES][N];
  real peak [FRAMES];
  real cs [N];
  real sn [N];
  longint cyc = 0, first_in = -1, first_out = -1;
  int n_out = 0;
  real max_err = 0.0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fft_r2sdf #(.N(N), .DW(DW), .TWW(18)) dut (.*);

  function automatic int brev(int v);
    int r;
    r = 0;
    for (int b = 0; b < S; b++) if (v[b]) r |= 1 << (S - 1 - b);
    return r;
  endfunction

  always @(posedge clk) begin
    if (in_valid && first_in < 0) first_in = cyc;
    if (out_valid) begin
      int f, k;
      real er, ei, e, tol;
      if (first_out < 0) first_out = cyc;
      f = n_out / N;
      k = brev(n_out % N);
      checks++;
      if (int'(out_bin) != k) failures++;
      if (f < FRAMES) begin
        er = real'(out_re) - Xr[f][k];
        ei = real'(out_im) - Xi[f][k];
        e = (er < 0 ? -er : er) + (ei < 0 ? -ei : ei);
        tol = 1.0e-4 * peak[f] + 16.0;
        if (e > max_err) max_err = e;
        checks++;
        if (e > tol) begin
          failures++;
          if (failures < 10) $display("frame %0d bin %0d got (%0d,%0d) want (%f,%f)", f, k, out_re, out_im, Xr[f][k], Xi[f][k]);
        end
      end
      n_out++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * PI * real'(i) / real'(N));
      sn[i] = $sin(2.0 * PI * real'(i) / real'(N));
    end
    for (int f = 0; f <= FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = $urandom_range(0, 262143) - 131072;
        xi[f][n] = $urandom_range(0, 262143) - 131072;
      end
    // frame 1: a single tone on bin 77, to exercise large coherent growth
    for (int n = 0; n < N; n++) begin
      xr[1][n] = int'(131071.0 * cs[(77 * n) % N]);
      xi[1][n] = int'(131071.0 * sn[(77 * n) % N]);
    end
    for (int f = 0; f < FRAMES; f++) begin
      peak[f] = 0.0;
      for (int k = 0; k < N; k++) begin
        real ar, ai, m;
        ar = 0.0; ai = 0.0;
        for (int n = 0; n < N; n++) begin
          int idx;
          idx = (n * k) % N;
          ar += real'(xr[f][n]) * cs[idx] + real'(xi[f][n]) * sn[idx];
          ai += real'(xi[f][n]) * cs[idx] - real'(xr[f][n]) * sn[idx];
        end
        Xr[f][k] = ar; Xi[f][k] = ai;
        m = (ar < 0 ? -ar : ar) + (ai < 0 ? -ai : ai);
        if (m > peak[f]) peak[f] = m;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f <= FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        in_valid = 1'b1;
        in_re = xr[f][n];
        in_im = xi[f][n];
        @(negedge clk);
        in_valid = 1'b0;
        if (f > 0 && $urandom_range(0, 7) == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
      end
    repeat (40) @(negedge clk);
    checks++;
    if (n_out < FRAMES * N) failures++;
    checks++;
    if (first_out - first_in != longint'(N - 1 + S)) begin
      failures++;
      $display("latency %0d", first_out - first_in);
    end
    $display("outputs=%0d max_err=%f latency=%0d", n_out, max_err, first_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
