// fft_reorder: turns the bit-reversed FFT output stream into frames in
// natural bin order ("windows" of N bins) and marks their first and last bin.
//
// Two banks of N complex words are used as a ping-pong buffer. Incoming
// samples are written into the current write bank at the address given by
// their bin index; after N writes the bank is handed to the reader and
// writing continues in the other bank. The reader then sends out the bank's
// bins 0..N-1 on consecutive clocks, with start_window on bin 0 and
// end_window on bin N-1, and the frame counter advances. Since a bank takes
// at least N clocks to fill and exactly N clocks to read, the reader is
// always done before the next bank is full.
//
// Timing: bin 0 of a window leaves two clocks after the last sample of that
// frame was written; the window then runs for N clocks whatever the input
// does. The window flag names follow the published simulation trace; the
// buffer itself is this implementation's choice.
module fft_reorder
  import pfb_pkg::*;
#(
  parameter int unsigned N  = N_FFT,
  parameter int unsigned DW = FFT_DW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [$clog2(N)-1:0]   in_bin,
  input  logic signed [DW-1:0]   in_re,
  input  logic signed [DW-1:0]   in_im,
  output logic                   out_valid,
  output logic [$clog2(N)-1:0]   out_bin,
  output logic signed [DW-1:0]   out_re,
  output logic signed [DW-1:0]   out_im,
  output logic                   start_window,
  output logic                   end_window,
  output logic [31:0]            frame_count
);

  localparam int unsigned AW = $clog2(N);

  logic signed [DW-1:0] mem_re [2][N];
  logic signed [DW-1:0] mem_im [2][N];

  logic          wr_bank;
  logic [AW-1:0] wr_cnt;
  logic          rd_active;
  logic          rd_bank;
  logic [AW-1:0] rd_cnt;
  logic          handoff;

  assign handoff = in_valid && (wr_cnt == AW'(N - 1));

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem_re[wr_bank][in_bin] <= in_re;
      mem_im[wr_bank][in_bin] <= in_im;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_bank   <= 1'b0;
      wr_cnt    <= '0;
      rd_active <= 1'b0;
      rd_bank   <= 1'b0;
      rd_cnt    <= '0;
    end else begin
      if (in_valid) begin
        wr_cnt <= wr_cnt + 1'b1;
        if (handoff) wr_bank <= ~wr_bank;
      end
      if (handoff) begin
        rd_active <= 1'b1;
        rd_bank   <= wr_bank;
        rd_cnt    <= '0;
      end else if (rd_active) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (rd_cnt == AW'(N - 1)) rd_active <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      start_window <= 1'b0;
      end_window   <= 1'b0;
      frame_count  <= '0;
    end else begin
      out_valid    <= rd_active;
      start_window <= rd_active && rd_cnt == '0;
      end_window   <= rd_active && rd_cnt == AW'(N - 1);
      if (rd_active && rd_cnt == AW'(N - 1)) frame_count <= frame_count + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_active) begin
      out_bin <= rd_cnt;
      out_re  <= mem_re[rd_bank][rd_cnt];
      out_im  <= mem_im[rd_bank][rd_cnt];
    end
  end

  // A new bank must never arrive while the previous one is still being read.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    handoff |-> (!rd_active || rd_cnt == AW'(N - 1)));

endmodule
