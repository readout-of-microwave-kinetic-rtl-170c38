// tb_fft_reorder: feeds a 16-bin reorder buffer with five frames in
// bit-reversed order (with random gaps), each sample tagged with its frame
// and bin, and checks that every window comes out in natural order on
// consecutive clocks, with start_window on bin 0, end_window on bin 15,
// the frame counter stepping once per window, and bin 0 leaving two clocks
// after the last sample of its frame was written.
module tb_fft_reorder;
  localparam int N = 16, AW = 4, DW = 32, FR = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [AW-1:0] in_bin = '0;
  logic signed [DW-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic [AW-1:0] out_bin;
  logic signed [DW-1:0] out_re, out_im;
  logic start_window, end_window;
  logic [31:0] frame_count;
  int checks = 0, failures = 0;
  int n_out = 0, starts = 0, ends = 0;
  longint cyc = 0, last_wr [FR];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fft_reorder #(.N(N), .DW(DW)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      int f, k;
      f = n_out / N;
      k = n_out % N;
      checks += 5;
      if (int'(out_bin) != k) failures++;
      if (out_re != 1000 * f + k) failures++;
      if (out_im != -(1000 * f + k)) failures++;
      if (start_window != (k == 0)) failures++;
      if (end_window != (k == N - 1)) failures++;
      if (k == 0) begin
        checks += 2;
        if (cyc - last_wr[f] != 2) failures++;
        if (frame_count != 32'(f)) failures++;
      end
      starts += int'(start_window);
      ends += int'(end_window);
      n_out++;
    end else begin
      checks++;
      if (start_window || end_window) failures++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f < FR; f++)
      for (int n = 0; n < N; n++) begin
        int k;
        k = 0;
        for (int b = 0; b < AW; b++) if (n[b]) k |= 1 << (AW - 1 - b);
        in_valid = 1'b1;
        in_bin = AW'(k);
        in_re = 1000 * f + k;
        in_im = -(1000 * f + k);
        @(negedge clk);
        last_wr[f] = cyc;
        in_valid = 1'b0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    repeat (3 * N) @(negedge clk);
    checks += 3;
    if (n_out != FR * N) failures++;
    if (starts != FR || ends != FR) failures++;
    if (frame_count != 32'(FR)) failures++;
    $display("windows=%0d bins=%0d", starts, n_out);
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
