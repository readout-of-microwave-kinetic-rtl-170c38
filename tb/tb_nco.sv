// tb_nco: checks the oscillator sample by sample against a sine computed
// here: out[n] = round(16384 sin(2 pi phase_n / 2^32)) taken at the top 10
// phase bits. It runs the two published test tones (bin 34: 17 kHz at
// Fs = 512 kHz; bin 288: 36 MHz at Fs = 128 MHz, tuning word k*2^22),
// changes the tuning word on the fly, pauses with en low (phase must hold),
// and pulses sync_rst (phase back to zero).
module tb_nco;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0, sync_rst = 1'b0;
  logic [31:0] ftw = '0;
  logic out_valid;
  logic signed [15:0] out_sin;
  int checks = 0, failures = 0;
  logic [31:0] ph;         // model phase
  int exp_q [$];
  int pauses = 0, retunes = 0, resyncs = 0;

  always #5 clk = ~clk;

  nco dut (.*);

  function automatic int lut(logic [31:0] p);
    return int'($floor(16384.0 * $sin(2.0 * PI * real'(p[31:22]) / 1024.0) + 0.5));
  endfunction

  // model: same clocking as the DUT, the sample out follows its phase by one clock
  always @(posedge clk) begin
    if (out_valid && rst_n) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out_sin) != e) begin
        failures++;
        if (failures < 10) $display("got %0d want %0d", out_sin, e);
      end
    end
    if (!rst_n || sync_rst) ph = '0;
    else if (en) begin
      exp_q.push_back(lut(ph));
      ph = ph + ftw;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ftw = 32'd34 << 22;              // 17 kHz at 512 kHz
    en = 1'b1;
    repeat (3000) @(negedge clk);
    ftw = 32'd288 << 22; retunes++; // 36 MHz at 128 MHz
    repeat (2000) @(negedge clk);
    en = 1'b0; pauses++;
    repeat (7) @(negedge clk);
    en = 1'b1;
    repeat (100) @(negedge clk);
    ftw = 32'h0123_4567; retunes++;  // off-grid tuning word
    repeat (1000) @(negedge clk);
    sync_rst = 1'b1; resyncs++;
    @(negedge clk);
    sync_rst = 1'b0;
    repeat (500) @(negedge clk);
    en = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    // independent spot check: bin 34 tone has period 1024/gcd(34,1024)=512
    checks++;
    if (lut(32'd34 << 22) != int'($floor(16384.0 * $sin(2.0 * PI * 34.0 / 1024.0) + 0.5))) failures++;
    $display("retunes=%0d pauses=%0d resyncs=%0d", retunes, pauses, resyncs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
