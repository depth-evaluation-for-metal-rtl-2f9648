// gain_controller: front-end gain code and over-range monitor.
//
// Software writes a gain code; the controller applies it to the front-end
// gain stage only on a sample boundary (sample_en), so the gain never
// changes in the middle of a conversion. It also compares the magnitude of
// every received sample with ovr_thresh: a sample at or above it raises
// the sticky ovr_flag and increments the saturating ovr_count. Software
// reads both to decide whether to lower the gain, and clears them with
// clear.
//
// Timing: gain_o and the monitor outputs update one clock after the
// sample_en that carried the sample.
//
// The instrument has a gain controller in the FPGA and a gain-control
// stage on the front-end board; what the controller does is not
// documented, so this behaviour is this design's choice.
module gain_controller #(
  parameter int unsigned GAIN_W = ect_pkg::GAIN_W,
  parameter int unsigned X_W    = ect_pkg::ADC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sample_en,
  input  logic                clear,
  input  logic [GAIN_W-1:0]   gain_set,
  output logic [GAIN_W-1:0]   gain_o,
  input  logic signed [X_W-1:0] x,
  input  logic [X_W-2:0]      ovr_thresh,
  output logic                ovr_flag,
  output logic [15:0]         ovr_count
);
  logic [X_W-1:0] mag;
  logic           over;

  always_comb begin
    mag  = x[X_W-1] ? X_W'(-x) : X_W'(x);  // -2^(X_W-1) gives 2^(X_W-1)
    over = mag >= {1'b0, ovr_thresh};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gain_o    <= '0;
      ovr_flag  <= 1'b0;
      ovr_count <= '0;
    end else begin
      if (sample_en) gain_o <= gain_set;
      if (clear) begin
        ovr_flag  <= 1'b0;
        ovr_count <= '0;
      end else if (sample_en && over) begin
        ovr_flag <= 1'b1;
        if (ovr_count != '1) ovr_count <= ovr_count + 1'b1;
      end
    end
  end
endmodule
