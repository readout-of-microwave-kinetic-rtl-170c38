// tb_pfb_subfilter: drives the time-shared polyphase subfilter (M = 16
// phases, 4 taps) with random samples and random gaps in in_valid, and
// compares every output with a direct-form model written here:
// y[n] = round(sum_t h[t*M+M-1-p] x[n-t*M] / 2^15), p = n mod M, saturated to 18 bits, with
// x = 0 before reset, where h is the Q1.15 Hamming-windowed sinc. Also checks
// the phase index and the three-clock latency, and runs a full-scale
// stretch whose signs follow the coefficients (largest possible outputs).
module tb_pfb_subfilter;
  localparam int M = 16, NT = 4, XW = 16, CW = 16, YW = 18;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [XW-1:0] in_x = '0;
  logic out_valid;
  logic signed [YW-1:0] out_y;
  logic [3:0] out_phase;
  int checks = 0, failures = 0;
  int xs [4096];
  int nx = 0;
  int hq [NT*M];
  longint n_out = 0;
  int lat_in [$];
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  pfb_subfilter #(.M(M), .NTAPS(NT), .XW(XW), .CW(CW), .YW(YW)) dut (.*);

  function automatic int q_h(int i);
    real L, x, s;
    L = real'(NT * M);
    x = (real'(i) - (L - 1.0) / 2.0) / real'(M);
    s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
    return int'($floor(32767.0 * s * (0.54 - 0.46 * $cos(2.0 * PI * real'(i) / (L - 1.0))) + 0.5));
  endfunction

  function automatic int expect_y(longint n);
    longint acc, r;
    int p;
    acc = 0;
    p = int'(n % longint'(M));
    for (int t = 0; t < NT; t++)
      if (n - longint'(t * M) >= 0) acc += longint'(hq[t*M+(M-1-p)]) * longint'(xs[12'(n - longint'(t * M))]);
    r = (acc + 16384) >>> 15;
    if (r > 131071) r = 131071;
    if (r < -131072) r = -131072;
    return int'(r);
  endfunction

  always @(posedge clk) begin
    if (in_valid && rst_n) lat_in.push_back(int'(cyc));
    if (out_valid && rst_n) begin
      int e, c0;
      e  = expect_y(n_out);
      c0 = lat_in.pop_front();
      checks += 3;
      if (int'(out_y) != e) begin
        failures++;
        if (failures < 10) $display("n=%0d y=%0d expected %0d", n_out, out_y, e);
      end
      if (int'(out_phase) != int'(n_out % longint'(M))) failures++;
      if (int'(cyc) - c0 != 3) failures++;
      n_out++;
    end
  end

  task automatic push(int v);
    in_valid = 1'b1;
    in_x     = XW'(v);
    xs[nx] = v;
    nx++;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < NT * M; i++) hq[i] = q_h(i);
    $display("h[0]=%0d h[%0d]=%0d", hq[0], 2*M, hq[2*M]);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // random samples, random gaps
    for (int i = 0; i < 12 * M; i++) begin
      push(int'($signed(16'($urandom))));
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    // full-scale samples whose sign follows the coefficient signs
    for (int i = 0; i < 6 * M; i++) begin
      int p;
      p = nx % M;
      push((hq[(NT-1-((i / M) % NT))*M + (M-1-p)] >= 0) ? 32767 : -32768);
    end
    for (int i = 0; i < 5 * M; i++) push((hq[M + (M - 1 - (nx % M))] >= 0) ? 32767 : -32768);
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != longint'(nx)) failures++;
    $display("outputs=%0d pushed=%0d", n_out, nx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
