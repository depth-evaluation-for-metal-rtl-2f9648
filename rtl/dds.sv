// dds: multi-tone direct digital synthesiser.
//
// Each of NUM_TONES channels has a PHASE_W-bit phase accumulator that adds
// its frequency word once per sample strobe. The top LUT_AW bits of the
// phase address a sine table; the cosine is read from the same table a
// quarter turn ahead. The table is computed at elaboration from
// round((2^(SIN_W-1)-1) * sin(2*pi*n/2^LUT_AW)). Output frequency is
// freq_word * FS / 2^PHASE_W.
//
// Timing: sin_o/cos_o are registered and change one clock after a
// sample_en pulse, with ref_valid high in that cycle. While run is low all
// phases are held at zero, so every tone starts at phase 0 together.
//
// The published instrument only names its synthesiser
// ("multi-frequency excitation"); the accumulator-plus-table structure,
// widths and tone count are this design's choices.
module dds #(
  parameter int unsigned NUM_TONES = ect_pkg::NUM_TONES,
  parameter int unsigned PHASE_W   = ect_pkg::PHASE_W,
  parameter int unsigned LUT_AW    = ect_pkg::LUT_AW,
  parameter int unsigned SIN_W     = ect_pkg::SIN_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   sample_en,
  input  logic                                   run,
  input  logic [NUM_TONES-1:0][PHASE_W-1:0]      freq_word,
  output logic [NUM_TONES-1:0][SIN_W-1:0]        sin_o,
  output logic [NUM_TONES-1:0][SIN_W-1:0]        cos_o,
  output logic                                   ref_valid
);
  localparam int unsigned LUT_N = 1 << LUT_AW;

  function automatic logic [SIN_W-1:0] sin_entry(int unsigned n);
    real a;
    a = (2.0 ** (SIN_W - 1) - 1.0) * $sin(2.0 * 3.14159265358979323846 * real'(n) / real'(LUT_N));
    return SIN_W'($rtoi(a < 0.0 ? a - 0.5 : a + 0.5));
  endfunction

  logic [SIN_W-1:0] lut [LUT_N];
  initial begin
    for (int unsigned n = 0; n < LUT_N; n++) lut[n] = sin_entry(n);
  end

  logic [NUM_TONES-1:0][PHASE_W-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      sin_o     <= '0;
      cos_o     <= '0;
      ref_valid <= 1'b0;
    end else begin
      ref_valid <= sample_en;
      if (!run) begin
        phase <= '0;
        sin_o <= '0;
        cos_o <= '0;
      end else if (sample_en) begin
        for (int k = 0; k < NUM_TONES; k++) begin
          logic [LUT_AW-1:0] a;
          a        = phase[k][PHASE_W-1 -: LUT_AW];
          sin_o[k] <= lut[a];
          cos_o[k] <= lut[a + LUT_AW'(LUT_N / 4)];
          phase[k] <= phase[k] + freq_word[k];
        end
      end
    end
  end
endmodule
