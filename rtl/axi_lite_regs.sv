// axi_lite_regs: AXI4-Lite control and status registers.
//
// The processor configures the instrument through these 32-bit registers
// (byte addresses; see ect_pkg):
//   0x00 CTRL        bit0 run, bit1 clear counters and flags (self-clearing)
//   0x04 STATUS      bit0 over-range flag, bit1 excitation saturated,
//                    bits 31:16 DMA FIFO level in words (RO)
//   0x08 GAIN        front-end gain code [GAIN_W-1:0]
//   0x0C OVR_THRESH  over-range magnitude threshold [ADC_W-2:0]
//   0x10 FRAME_COUNT frames delivered to the DMA (RO)
//   0x14 DROP_COUNT  frames dropped by the encoder (RO)
//   0x18 OVR_COUNT   over-range samples (RO)
//   0x20+8k FREQ[k]  phase increment of tone k per sample
//   0x24+8k AMP[k]   amplitude of tone k [AMP_W-1:0]
// Reset values: run off, gain 0, threshold just under full scale, tone 0
// at 20 kHz with amplitude 1/2, other tones off.
//
// Timing: a write is accepted when address and data are both valid
// (awready = wready, one write in flight) and answered with OKAY one clock
// later; a read returns one clock after arvalid. Unmapped addresses read 0
// and ignore writes. Byte strobes are ignored (s_axi_wstrb is unused):
// every register is written whole, as 32-bit processor stores do.
//
// The block diagram links fabric and processor through an AXI interface;
// the register map is this design's own.
//
// Lint note: rst_n is both the asynchronous reset and the 'disable iff'
// condition of the handshake assertions below; the assertions are not
// logic, so the mixed use is intended.
module axi_lite_regs
  import ect_pkg::*;
#(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output ect_cfg_t          cfg_o,
  input  ect_status_t       status_i
);
  logic wr_fire;
  logic [7:0] waddr, raddr;

  always_comb begin
    s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
    s_axi_wready  = s_axi_awready;
    wr_fire       = s_axi_awready;
    s_axi_arready = !s_axi_rvalid;
    s_axi_bresp   = 2'b00;
    s_axi_rresp   = 2'b00;
    waddr         = 8'(s_axi_awaddr);
    raddr         = 8'(s_axi_araddr);
  end

  function automatic logic [31:0] read_reg(logic [7:0] a, ect_cfg_t c, ect_status_t s);
    logic [31:0] r;
    r = '0;
    unique case (a)
      REG_CTRL:        r = {31'b0, c.run};
      REG_STATUS:      r = {s.fifo_level, 14'b0, s.exc_sat, s.ovr_flag};
      REG_GAIN:        r = 32'(c.gain);
      REG_OVR_THRESH:  r = 32'(c.ovr_thresh);
      REG_FRAME_COUNT: r = s.frame_count;
      REG_DROP_COUNT:  r = 32'(s.drop_count);
      REG_OVR_COUNT:   r = 32'(s.ovr_count);
      default: begin
        for (int k = 0; k < NUM_TONES; k++) begin
          if (a == REG_TONE_BASE + 8'(8*k))     r = c.freq[k];
          if (a == REG_TONE_BASE + 8'(8*k + 4)) r = 32'(c.amp[k]);
        end
      end
    endcase
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o.run        <= 1'b0;
      cfg_o.clear      <= 1'b0;
      cfg_o.gain       <= '0;
      cfg_o.ovr_thresh <= '1;
      cfg_o.freq       <= '0;
      cfg_o.amp        <= '0;
      cfg_o.freq[0]    <= FREQ_20KHZ;
      cfg_o.amp[0]     <= AMP_W'(1 << (AMP_W - 1));
      s_axi_bvalid     <= 1'b0;
      s_axi_rvalid     <= 1'b0;
      s_axi_rdata      <= '0;
    end else begin
      cfg_o.clear <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        case (waddr)
          REG_CTRL: begin
            cfg_o.run   <= s_axi_wdata[0];
            cfg_o.clear <= s_axi_wdata[1];
          end
          REG_GAIN:       cfg_o.gain       <= s_axi_wdata[GAIN_W-1:0];
          REG_OVR_THRESH: cfg_o.ovr_thresh <= s_axi_wdata[ADC_W-2:0];
          default: begin
            for (int k = 0; k < NUM_TONES; k++) begin
              if (waddr == REG_TONE_BASE + 8'(8*k))     cfg_o.freq[k] <= s_axi_wdata;
              if (waddr == REG_TONE_BASE + 8'(8*k + 4)) cfg_o.amp[k]  <= s_axi_wdata[AMP_W-1:0];
            end
          end
        endcase
      end
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (s_axi_arvalid && s_axi_arready) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= read_reg(raddr, cfg_o, status_i);
      end
    end
  end

  // AXI4-Lite: a response, once offered, is held until accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
endmodule
