// offset_binary_converter: code conversion between the converters and the
// signed datapath.
//
// The ADC and DAC use offset-binary codes (0 = negative full scale,
// 2^(W-1) = zero, 2^W-1 = positive full scale); the datapath uses two's
// complement. The two differ only in the most significant bit, so each
// direction inverts it. Both directions are registered on the sample
// strobe: adc_s holds the sample taken at the last sample_en, dac_ob holds
// the excitation code presented at the last sample_en (one clock later).
//
// The converter's existence follows the instrument's block diagram; that
// both directions are offset binary and are registered is this design's
// choice.
module offset_binary_converter #(
  parameter int unsigned W = ect_pkg::ADC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sample_en,
  input  logic [W-1:0]        adc_ob,
  output logic signed [W-1:0] adc_s,
  input  logic signed [W-1:0] dac_s,
  output logic [W-1:0]        dac_ob
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_s  <= '0;
      dac_ob <= W'(1) << (W - 1);            // mid-scale: zero output
    end else if (sample_en) begin
      adc_s  <= {~adc_ob[W-1], adc_ob[W-2:0]};
      dac_ob <= {~dac_s[W-1], dac_s[W-2:0]};
    end
  end
endmodule
