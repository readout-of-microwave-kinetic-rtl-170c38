// tb_pfb_coef_rom: checks every coefficient of the full-size 1024 x 4
// polyphase ROM against a Hamming-windowed sinc computed here in floating
// point (within one LSB of Q1.15), checks the window's symmetry
// h[i] = h[L-1-i] on the ROM contents and the one-clock read latency.
module tb_pfb_coef_rom;
  localparam int N = 1024, NT = 4, CW = 16;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0;
  logic en;
  logic [9:0] phase;
  logic signed [CW-1:0] coef [NT];
  int checks = 0, failures = 0;
  int rom [NT*N];

  always #5 clk = ~clk;

  pfb_coef_rom #(.N(N), .NTAPS(NT), .CW(CW)) dut (.clk, .en, .phase, .coef);

  function automatic real ref_h(int i);
    real L, x, s;
    L = real'(NT * N);
    x = (real'(i) - (L - 1.0) / 2.0) / real'(N);
    s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
    return 32767.0 * s * (0.54 - 0.46 * $cos(2.0 * PI * real'(i) / (L - 1.0)));
  endfunction

  initial begin
    en = 1'b0; phase = '0;
    @(negedge clk);
    for (int p = 0; p < N; p++) begin
      en = 1'b1; phase = 10'(p);
      @(negedge clk);             // registered read: data after one edge
      en = 1'b0; phase = 10'(p + 7);  // changing address without en must not matter
      for (int t = 0; t < NT; t++) begin
        real d;
        d = real'(coef[t]) - ref_h(t * N + p);
        rom[t * N + p] = int'(coef[t]);
        checks++;
        if (d > 1.0 || d < -1.0) begin
          failures++;
          if (failures < 10) $display("coef t=%0d p=%0d got %0d want %f", t, p, coef[t], ref_h(t*N+p));
        end
      end
      @(negedge clk);
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (int'(coef[t]) != rom[t * N + p]) failures++;  // held while en low
      end
    end
    for (int i = 0; i < NT * N / 2; i++) begin
      checks++;
      if (rom[i] != rom[NT * N - 1 - i]) failures++;
    end
    // centre taps close to 1.0, ends small
    checks++; if (rom[NT*N/2] < 32700) failures++;
    checks++; if (rom[0] > 100 || rom[0] < -100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
