// excitation_mixer: combines the DDS tones into one DAC sample.
//
// Each tone's sine (signed SIN_W bits) is multiplied by its unsigned
// amplitude (AMP_W-bit fraction of full scale, 2^AMP_W-1 ~ 1.0), the
// products are summed and the sum is scaled to the DAC_W-bit signed range.
// A sum beyond full scale is clipped and flagged on sat_o.
//
// Timing: purely combinational; the caller registers the result.
//
// The instrument produces a multi-frequency excitation; how the tones are
// combined is this design's choice (weighted sum with saturation).
module excitation_mixer #(
  parameter int unsigned NUM_TONES = ect_pkg::NUM_TONES,
  parameter int unsigned SIN_W     = ect_pkg::SIN_W,
  parameter int unsigned AMP_W     = ect_pkg::AMP_W,
  parameter int unsigned DAC_W     = ect_pkg::DAC_W
) (
  input  logic [NUM_TONES-1:0][SIN_W-1:0] sin_i,
  input  logic [NUM_TONES-1:0][AMP_W-1:0] amp,
  output logic signed [DAC_W-1:0]         exc_o,
  output logic                            sat_o
);
  localparam int unsigned PROD_W = SIN_W + AMP_W + 1;
  localparam int unsigned SUM_W  = PROD_W + $clog2(NUM_TONES + 1);
  localparam int unsigned SHIFT  = SIN_W + AMP_W - DAC_W;   // full-scale sin * full amp -> DAC full scale

  logic signed [SUM_W-1:0] sum, scaled;
  localparam logic signed [SUM_W-1:0] MAXV = SUM_W'((1 << (DAC_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] MINV = -SUM_W'(1 << (DAC_W - 1));

  always_comb begin
    sum = '0;
    for (int k = 0; k < NUM_TONES; k++)
      sum += SUM_W'($signed(sin_i[k]) * $signed({1'b0, amp[k]}));
    scaled = sum >>> SHIFT;
    sat_o  = 1'b0;
    if (scaled > MAXV) begin
      exc_o = MAXV[DAC_W-1:0];
      sat_o = 1'b1;
    end else if (scaled < MINV) begin
      exc_o = MINV[DAC_W-1:0];
      sat_o = 1'b1;
    end else begin
      exc_o = scaled[DAC_W-1:0];
    end
  end
endmodule
