// ect_top: fabric logic of a multi-frequency eddy-current instrument.
//
// Signal chain, one sample every CLK_DIV clocks:
//   dds (one phase accumulator per tone) -> excitation_mixer (weighted sum)
//   -> offset_binary_converter -> dac_data                (to the coil driver)
//   adc_data -> offset_binary_converter -> iq_demodulator  (from the pick-up coil)
//   -> data_encoder (frames) -> dma_unit (AXI4-Stream to the processor's DMA)
// The gain_controller drives gain_code to the front-end gain stage and
// watches the received samples for over-range; axi_lite_regs holds the
// configuration (run, tone frequencies and amplitudes, gain, threshold)
// and exposes status and counters.
//
// Timing: adc_clk_en pulses for one clock every CLK_DIV clocks; the
// converters are expected to present a new ADC code and take the DAC code
// on that pulse. The ADC code sampled at one pulse is multiplied with the
// references the DDS produces at the same pulse; the DAC receives that
// excitation one sample later, so the probe and converters add a constant
// phase that software calibrates out. One frame of FRAME_WORDS words
// leaves on m_axis every DECIM samples (2,500 frames/s at the defaults).
//
// The 14-bit converters, the 20 kHz default excitation, multi-frequency
// excitation with simultaneous demodulation and the 2,500 Sa/s output rate
// follow the published instrument. The clock (100 MHz), sample rate
// (1 MSa/s), tone count, filter, frame format and register map are this
// design's choices. The processor, converters, amplifiers and coils are
// outside this module.
//
// Lint note: rst_n is used both as the asynchronous reset and in the
// 'disable iff' of the stream assertions in dma_unit; the assertions are
// not logic, so the mixed use is intended.
module ect_top #(
  parameter int unsigned CLK_DIV    = ect_pkg::CLK_DIV,
  parameter int unsigned DECIM      = ect_pkg::DECIM,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  // converters
  output logic               adc_clk_en,
  input  logic [ect_pkg::ADC_W-1:0]   adc_data,
  output logic [ect_pkg::DAC_W-1:0]   dac_data,
  output logic [ect_pkg::GAIN_W-1:0]  gain_code,
  // AXI4-Lite control from the processor
  input  logic [7:0]         s_axi_awaddr,
  input  logic               s_axi_awvalid,
  output logic               s_axi_awready,
  input  logic [31:0]        s_axi_wdata,
  input  logic [3:0]         s_axi_wstrb,
  input  logic               s_axi_wvalid,
  output logic               s_axi_wready,
  output logic [1:0]         s_axi_bresp,
  output logic               s_axi_bvalid,
  input  logic               s_axi_bready,
  input  logic [7:0]         s_axi_araddr,
  input  logic               s_axi_arvalid,
  output logic               s_axi_arready,
  output logic [31:0]        s_axi_rdata,
  output logic [1:0]         s_axi_rresp,
  output logic               s_axi_rvalid,
  input  logic               s_axi_rready,
  // AXI4-Stream data to the processor's DMA controller
  output logic [31:0]        m_axis_tdata,
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready,
  output logic               m_axis_tlast
);
  import ect_pkg::*;

  localparam int unsigned DIV_W = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  ect_cfg_t    cfg;
  ect_status_t status;

  // ---- sample strobe ----
  logic [DIV_W-1:0] div_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt    <= '0;
      adc_clk_en <= 1'b0;
    end else begin
      adc_clk_en <= div_cnt == DIV_W'(CLK_DIV - 1);
      div_cnt    <= (div_cnt == DIV_W'(CLK_DIV - 1)) ? '0 : div_cnt + 1'b1;
    end
  end

  // ---- control registers ----
  axi_lite_regs u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .cfg_o(cfg), .status_i(status)
  );

  // ---- synthesiser and excitation ----
  logic [NUM_TONES-1:0][SIN_W-1:0] sin_ref, cos_ref;
  logic                            ref_valid;
  logic signed [DAC_W-1:0]         exc;
  logic                            exc_sat_now, exc_sat;

  dds u_dds (
    .clk, .rst_n, .sample_en(adc_clk_en), .run(cfg.run),
    .freq_word(cfg.freq), .sin_o(sin_ref), .cos_o(cos_ref), .ref_valid
  );

  excitation_mixer u_mix (
    .sin_i(sin_ref), .amp(cfg.amp), .exc_o(exc), .sat_o(exc_sat_now)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       exc_sat <= 1'b0;
    else if (cfg.clear)               exc_sat <= 1'b0;
    else if (ref_valid && exc_sat_now) exc_sat <= 1'b1;
  end

  // ---- converter coding ----
  logic signed [ADC_W-1:0] rx;
  offset_binary_converter #(.W(ADC_W)) u_obc (
    .clk, .rst_n, .sample_en(adc_clk_en),
    .adc_ob(adc_data), .adc_s(rx), .dac_s(exc), .dac_ob(dac_data)
  );

  // ---- gain control ----
  logic        ovr_flag;
  logic [15:0] ovr_count;
  gain_controller u_gain (
    .clk, .rst_n, .sample_en(ref_valid), .clear(cfg.clear),
    .gain_set(cfg.gain), .gain_o(gain_code), .x(rx),
    .ovr_thresh(cfg.ovr_thresh), .ovr_flag, .ovr_count
  );

  // ---- demodulation ----
  logic [NUM_TONES-1:0][OUT_W-1:0] i_res, q_res;
  logic                            iq_valid;
  iq_demodulator #(.DECIM(DECIM)) u_demod (
    .clk, .rst_n, .run(cfg.run), .in_en(ref_valid), .x(rx),
    .sin_i(sin_ref), .cos_i(cos_ref), .i_o(i_res), .q_o(q_res), .iq_valid
  );

  // ---- framing and transfer ----
  logic [31:0] enc_data;
  logic        enc_valid, enc_ready, enc_last;
  logic [15:0] drop_count;
  data_encoder u_enc (
    .clk, .rst_n, .clear(cfg.clear), .iq_valid, .i_i(i_res), .q_i(q_res),
    .gain(gain_code), .ovr_flag,
    .m_data(enc_data), .m_valid(enc_valid), .m_ready(enc_ready), .m_last(enc_last),
    .drop_count
  );

  logic [31:0]                   pkt_count;
  logic [$clog2(FIFO_DEPTH):0]   fifo_level;
  dma_unit #(.DEPTH(FIFO_DEPTH)) u_dma (
    .clk, .rst_n, .clear(cfg.clear),
    .s_data(enc_data), .s_valid(enc_valid), .s_ready(enc_ready), .s_last(enc_last),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .pkt_count, .level(fifo_level)
  );

  always_comb begin
    status.ovr_flag    = ovr_flag;
    status.exc_sat     = exc_sat;
    status.frame_count = pkt_count;
    status.drop_count  = drop_count;
    status.ovr_count   = ovr_count;
    status.fifo_level  = 16'(fifo_level);
  end
endmodule
