// tb_pfb_sweep: channel-response sweep of the full-size filter bank, driven
// like the hardware test setup: the NCO tone is stepped across channel 101
// in eighth-of-a-channel steps (bin 99.5 to 102.5) through the AXI4-Lite
// tuning-word register, and after each step the bank is given time to
// settle before one window is measured. It checks the shape of one channel
// and the crosstalk into distant channels:
//   - channel 101 responds most when the tone sits on its centre, and its
//     response falls to between -4 and -8 dB at half a channel off centre
//     (the prototype filter's cutoff, nominally -6 dB);
//   - a tone on a neighbouring channel's centre reaches channel 101 at least
//     45 dB down;
//   - at every step, every bin 3 or more channels from the tone (and from its
//     mirror) is at least 50 dB below the strongest bin.
module tb_pfb_sweep;
  localparam int N = 1024;
  localparam int STEPS = 25;           // 99.5 .. 102.5 in 1/8 bin

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
  int windows = 0;
  real mag [N];
  real snap [N];
  real resp [STEPS];       // channel 101 response, dB relative to its centre value
  real resp_lin [STEPS];
  real worst_leak = -200.0;

  always #5 clk = ~clk;

  pfb_readout_top dut (.*);

  always @(posedge clk) begin
    if (bin_valid && rst_n) begin
      real re, im;
      re = real'($signed(bin_data[31:0]));
      im = real'($signed(bin_data[63:32]));
      mag[bin_index] = $sqrt(re * re + im * im);
      if (end_window) begin
        for (int k = 0; k < N; k++) snap[k] = mag[k];
        windows++;
      end
    end
  end

  task automatic axi_write(logic [3:0] a, logic [31:0] d);
    s_axi_awvalid = 1; s_axi_awaddr = a;
    s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hF;
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    s_axi_bready = 1;
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic wait_windows(int n);
    int target;
    target = windows + n;
    while (windows < target) @(negedge clk);
  endtask

  function automatic int cdist(real a, int b);
    real d;
    d = a - real'(b);
    if (d < 0) d = -d;
    if (d > real'(N) / 2.0) d = real'(N) - d;
    return int'($floor(d));
  endfunction

  initial begin
    real peak, f, worst;
    int centre_step;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    axi_write(4'h0, 32'h1);
    for (int s = 0; s < STEPS; s++) begin
      f = 99.5 + real'(s) / 8.0;
      axi_write(4'h4, 32'(longint'(f * 4194304.0)));   // f * 2^22
      wait_windows(7);
      peak = 0.0;
      for (int k = 0; k < N; k++) if (snap[k] > peak) peak = snap[k];
      resp_lin[s] = snap[101];
      worst = 0.0;
      for (int k = 0; k < N; k++)
        if (cdist(f, k) >= 3 && cdist(real'(N) - f, k) >= 3 && snap[k] > worst) worst = snap[k];
      checks++;
      if (20.0 * $log10(worst / peak + 1.0e-12) > -50.0) begin
        failures++;
        $display("tone %f: crosstalk %f dB", f, 20.0 * $log10(worst / peak));
      end
      if (20.0 * $log10(worst / peak + 1.0e-12) > worst_leak) worst_leak = 20.0 * $log10(worst / peak + 1.0e-12);
      $display("tone at bin %7.3f: channel 101 magnitude %10.0f, worst crosstalk >=3 channels away %7.2f dB",
               f, snap[101], 20.0 * $log10(worst / peak + 1.0e-12));
    end
    // channel shape: step 12 is bin 101.0, steps 8 and 16 are 100.5 and 101.5
    centre_step = 12;
    for (int s = 0; s < STEPS; s++) resp[s] = 20.0 * $log10(resp_lin[s] / resp_lin[centre_step] + 1.0e-12);
    checks++;
    for (int s = 0; s < STEPS; s++) if (resp_lin[s] > resp_lin[centre_step] + 1.0e-6) begin
      failures++;
      $display("channel 101 larger off centre at step %0d", s);
      break;
    end
    // neighbouring channel centres (tone on bin 100 or 102) at least 45 dB down
    checks += 2;
    if (resp[4] > -45.0) failures++;
    if (resp[20] > -45.0) failures++;
    checks += 2;
    if (resp[8] > -4.0 || resp[8] < -8.0) failures++;
    if (resp[16] > -4.0 || resp[16] < -8.0) failures++;
    // the centre response is the full tone: |X| = A * N / 2
    checks++;
    if (resp_lin[centre_step] < 0.9 * 16384.0 * 512.0 || resp_lin[centre_step] > 1.1 * 16384.0 * 512.0) failures++;
    $display("half-channel response %0.2f / %0.2f dB, neighbour centres %0.1f / %0.1f dB, worst crosstalk %0.1f dB",
             resp[8], resp[16], resp[4], resp[20], worst_leak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (STEPS * 9 * N + 20 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
