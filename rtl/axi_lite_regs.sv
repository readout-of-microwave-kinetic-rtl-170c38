// axi_lite_regs: AXI4-Lite control registers of the embedded filter-bank
// test system, through which software sets the oscillator's frequency
// tuning word while the system runs.
//
// Register map (32-bit registers, byte addresses):
//   0x0 CTRL   rw  bit 0: NCO enable, bit 1: source select (0 = NCO,
//                  1 = external samples), bit 2: NCO phase reset (self-clearing)
//   0x4 FTW    rw  NCO frequency tuning word, F = FTW / 2^32 * Fs
//   0x8 FRAMES ro  number of output windows completed
//   0xC ID     ro  constant 0x5046_4231 ("PFB1")
// Write strobes are honoured per byte. Unused bits read as zero.
//
// Handshake: AW and W are accepted independently (each ready while its
// holding register is empty); once both are held the write is performed and
// B is raised with OKAY. AR is accepted when no read response is pending;
// R follows one clock later. All responses are OKAY. Reset values: CTRL = 0
// (NCO stopped, NCO selected), FTW = 0. The use of AXI for tuning-word
// control follows the published system; the register map and the AXI4-Lite
// flavour are this implementation's choices.
//
// Only address bits [3:2] select a register: accesses are whole 32-bit
// words, so bits [1:0] of awaddr/araddr are deliberately ignored (the
// lint tool reports them as unused).
module axi_lite_regs #(
  parameter logic [31:0] ID_VALUE = 32'h5046_4231
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [3:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [3:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // register outputs / status inputs
  output logic        ctrl_nco_en,
  output logic        ctrl_src_sel,
  output logic        ctrl_nco_sync,
  output logic [31:0] ftw,
  input  logic [31:0] frame_count
);

  typedef enum logic [1:0] {
    REG_CTRL   = 2'd0,
    REG_FTW    = 2'd1,
    REG_FRAMES = 2'd2,
    REG_ID     = 2'd3
  } reg_e;

  logic        aw_held, w_held;
  logic [3:0]  aw_addr;
  logic [31:0] w_data;
  logic [3:0]  w_strb;
  logic [31:0] ctrl_q;

  assign s_axi_awready = !aw_held;
  assign s_axi_wready  = !w_held;
  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] data, logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++)
      r[8*b +: 8] = strb[b] ? data[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  logic do_write;
  assign do_write = aw_held && w_held && !s_axi_bvalid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_held      <= 1'b0;
      w_held       <= 1'b0;
      s_axi_bvalid <= 1'b0;
      ctrl_q       <= '0;
      ftw          <= '0;
    end else begin
      ctrl_q[2] <= 1'b0;                     // phase reset pulses for one clock
      if (s_axi_awvalid && s_axi_awready) begin
        aw_held <= 1'b1;
        aw_addr <= s_axi_awaddr;
      end
      if (s_axi_wvalid && s_axi_wready) begin
        w_held <= 1'b1;
        w_data <= s_axi_wdata;
        w_strb <= s_axi_wstrb;
      end
      if (do_write) begin
        aw_held      <= 1'b0;
        w_held       <= 1'b0;
        s_axi_bvalid <= 1'b1;
        unique case (reg_e'(aw_addr[3:2]))
          REG_CTRL: ctrl_q <= merge(ctrl_q, w_data, w_strb) & 32'h7;
          REG_FTW:  ftw    <= merge(ftw, w_data, w_strb);
          default:  ;                          // read-only registers
        endcase
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (s_axi_arvalid && s_axi_arready) begin
      s_axi_rvalid <= 1'b1;
      unique case (reg_e'(s_axi_araddr[3:2]))
        REG_CTRL:   s_axi_rdata <= {30'd0, ctrl_q[1:0]};
        REG_FTW:    s_axi_rdata <= ftw;
        REG_FRAMES: s_axi_rdata <= frame_count;
        REG_ID:     s_axi_rdata <= ID_VALUE;
      endcase
    end else if (s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  assign ctrl_nco_en   = ctrl_q[0];
  assign ctrl_src_sel  = ctrl_q[1];
  assign ctrl_nco_sync = ctrl_q[2];

  // AXI rule: a response, once raised, stays until it is taken.
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
