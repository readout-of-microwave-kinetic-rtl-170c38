// tb_pfb_readout_top: runs the whole embedded filter bank at its full size
// (1024 channels, 4 taps, no parameter overrides), configured only through
// its AXI4-Lite port, through the published test cases:
//   1. NCO tone of bin 34 (17 kHz at Fs = 512 kHz): the window's two largest
//      bins must be 34 and its mirror 990, with the expected magnitude, and
//      every bin 3 or more channels away from them at least 50 dB down;
//   2. the tuning word rewritten while running to bin 288 (36 MHz at
//      Fs = 128 MHz): peaks move to 288 and 736;
//   3. source switched to the external sample port, fed with a tone on bin
//      100 with gaps in adc_valid: peaks at 100 and 924;
//   4. the NCO phase-reset bit is pulsed and the window counter register read
//      back and compared with the windows seen.
// Each mechanism (AXI write, AXI read, retune, source switch, phase reset,
// input gaps, window start/end) is counted and must occur at least once.
module tb_pfb_readout_top;
  localparam int N = 1024;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0]  s_axi_awaddr = '0, s_axi_araddr = '0, s_axi_wstrb = '0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic [31:0] s_axi_wdata = '0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic        adc_valid = 1'b0;
  logic signed [15:0] adc_data = '0;
  logic        bin_valid;
  logic [9:0]  bin_index;
  logic [63:0] bin_data;
  logic        start_window, end_window;
  logic signed [15:0] nco_out;

  int checks = 0, failures = 0;
  int n_axi_wr = 0, n_axi_rd = 0, n_retune = 0, n_src_switch = 0, n_phase_reset = 0;
  int n_adc_gaps = 0, n_starts = 0, n_ends = 0;
  int windows = 0;
  int expect_bin = -1;     // bin the current tone should be in, -1: do not check
  int settle = 0;          // windows to skip after a change
  int checked_windows = 0;
  real mag [N];
  real worst_leak_db = -200.0;

  always #5 clk = ~clk;

  pfb_readout_top dut (.*);

  // ---------------------------------------------------------------- window
  always @(posedge clk) begin
    if (bin_valid && rst_n) begin
      real re, im;
      re = real'($signed(bin_data[31:0]));
      im = real'($signed(bin_data[63:32]));
      mag[bin_index] = $sqrt(re * re + im * im);
      if (start_window) n_starts++;
      checks++;
      if (start_window != (bin_index == 10'd0)) failures++;
      if (end_window) begin
        n_ends++;
        windows++;
        if (settle > 0) settle--;
        else if (expect_bin >= 0) check_window();
      end
    end
  end

  function automatic int cdist(int a, int b);
    int d;
    d = (a > b) ? a - b : b - a;
    return (d > N / 2) ? N - d : d;
  endfunction

  task automatic check_window();
    int k1, k2;
    real m1, m2, lim, want;
    k1 = 0; m1 = -1.0;
    for (int k = 0; k < N; k++) if (mag[k] > m1) begin m1 = mag[k]; k1 = k; end
    k2 = 0; m2 = -1.0;
    for (int k = 0; k < N; k++) if (k != k1 && mag[k] > m2) begin m2 = mag[k]; k2 = k; end
    checked_windows++;
    checks += 3;
    if (!((k1 == expect_bin && k2 == N - expect_bin) || (k2 == expect_bin && k1 == N - expect_bin))) begin
      failures++;
      $display("window %0d: peaks at %0d,%0d, expected %0d,%0d", windows, k1, k2, expect_bin, N - expect_bin);
    end
    // real tone of amplitude A on a bin centre: |X| = A * N / 2 * (branch gain ~ 1)
    want = 16384.0 * real'(N) / 2.0;
    if (m1 < 0.9 * want || m1 > 1.1 * want) begin
      failures++;
      $display("window %0d: peak %f expected about %f", windows, m1, want);
    end
    lim = m1 * 0.00316;   // -50 dB
    begin
      real worst;
      worst = 0.0;
      for (int k = 0; k < N; k++)
        if (cdist(k, expect_bin) >= 3 && cdist(k, N - expect_bin) >= 3 && mag[k] > worst) worst = mag[k];
      if (worst > lim) begin
        failures++;
        $display("window %0d: leakage %f dB", windows, 20.0 * $log10(worst / m1));
      end
      if (worst > 0.0 && 20.0 * $log10(worst / m1) > worst_leak_db) worst_leak_db = 20.0 * $log10(worst / m1);
    end
  endtask

  // ------------------------------------------------------------------- AXI
  task automatic axi_write(logic [3:0] a, logic [31:0] d);
    s_axi_awvalid = 1; s_axi_awaddr = a;
    s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hF;
    @(negedge clk);   // both are accepted on the first edge when idle
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    s_axi_bready = 1;
    @(negedge clk);
    s_axi_bready = 0;
    n_axi_wr++;
  endtask

  task automatic axi_read(logic [3:0] a, output logic [31:0] d);
    s_axi_arvalid = 1; s_axi_araddr = a;
    @(negedge clk);
    s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    s_axi_rready = 1;
    @(negedge clk);
    s_axi_rready = 0;
    n_axi_rd++;
  endtask

  task automatic wait_windows(int n);
    int target;
    target = windows + n;
    while (windows < target) @(negedge clk);
  endtask

  // external sample source: a tone on bin 100, valid 7 clocks out of 8
  logic adc_on = 1'b0;
  int adc_n = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (adc_on && ($urandom % 8) != 0) begin
        adc_valid = 1'b1;
        adc_data  = 16'(int'($floor(16384.0 * $sin(2.0 * PI * 100.0 * real'(adc_n) / real'(N)) + 0.5)));
        adc_n++;
      end else begin
        adc_valid = 1'b0;
        if (adc_on) n_adc_gaps++;
      end
    end
  end

  initial begin
    logic [31:0] d;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    axi_read(4'hC, d);
    checks++; if (d != 32'h5046_4231) failures++;
    // 1. bin 34
    axi_write(4'h4, 32'd34 << 22);
    expect_bin = 34; settle = 4;
    axi_write(4'h0, 32'h1);
    wait_windows(8);
    // 2. retune to bin 288 while running
    axi_write(4'h4, 32'd288 << 22);
    n_retune++;
    expect_bin = 288; settle = 7;
    wait_windows(10);
    // phase reset must not disturb the spectrum magnitudes
    axi_write(4'h0, 32'h5);
    n_phase_reset++;
    settle = 7;
    wait_windows(9);
    // 3. external source with gaps
    adc_on = 1'b1;
    axi_write(4'h0, 32'h2);
    n_src_switch++;
    expect_bin = 100; settle = 7;
    wait_windows(10);
    // 4. window counter
    axi_read(4'h8, d);
    checks++;
    if (d != 32'(windows) && d != 32'(windows + 1)) begin
      failures++;
      $display("frame counter %0d, windows seen %0d", d, windows);
    end
    checks += 8;
    if (n_axi_wr == 0) failures++;
    if (n_axi_rd == 0) failures++;
    if (n_retune == 0) failures++;
    if (n_src_switch == 0) failures++;
    if (n_phase_reset == 0) failures++;
    if (n_adc_gaps == 0) failures++;
    if (n_starts == 0 || n_ends == 0) failures++;
    if (checked_windows < 12) failures++;
    $display("windows=%0d checked=%0d axi_writes=%0d axi_reads=%0d retunes=%0d source_switches=%0d phase_resets=%0d adc_gaps=%0d worst_leakage=%0.1f dB",
             windows, checked_windows, n_axi_wr, n_axi_rd, n_retune, n_src_switch, n_phase_reset, n_adc_gaps, worst_leak_db);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
