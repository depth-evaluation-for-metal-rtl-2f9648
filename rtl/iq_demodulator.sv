// iq_demodulator: simultaneous I/Q demodulation of every excitation tone.
//
// For each received sample x and each tone k the module forms x*sin_k and
// x*cos_k, using the synthesiser's own references, and integrates the
// products over DECIM consecutive samples (integrate-and-dump, a boxcar
// low-pass). After the DECIM-th sample the sums, shifted right by
// ACC_W-OUT_W bits, are published on i_o/q_o with a one-cycle iq_valid,
// and the integrators restart. With the default 1 MSa/s input and
// DECIM = 400 this yields 2,500 I/Q samples per second per tone; 400
// samples span exactly 8 periods of a 20 kHz tone, so the boxcar also
// rejects the 40 kHz mixing product.
//
// I is taken against the sine (in phase with the excitation), Q against
// the cosine. For x = A*sin(wt+phi): I ~ DECIM*A*S*cos(phi)/2 and
// Q ~ DECIM*A*S*sin(phi)/2 before the shift, S being the reference full
// scale.
//
// Timing: in_en qualifies x and the references; iq_valid pulses one clock
// after the in_en of the last sample of a window. run low empties the
// integrators and restarts the window.
//
// The instrument demodulates each frequency simultaneously at 2,500 Sa/s;
// the boxcar filter, widths and sign convention are this design's choices.
module iq_demodulator #(
  parameter int unsigned NUM_TONES = ect_pkg::NUM_TONES,
  parameter int unsigned X_W       = ect_pkg::ADC_W,
  parameter int unsigned SIN_W     = ect_pkg::SIN_W,
  parameter int unsigned DECIM     = ect_pkg::DECIM,
  parameter int unsigned ACC_W     = ect_pkg::ACC_W,
  parameter int unsigned OUT_W     = ect_pkg::OUT_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  run,
  input  logic                                  in_en,
  input  logic signed [X_W-1:0]                 x,
  input  logic [NUM_TONES-1:0][SIN_W-1:0]       sin_i,
  input  logic [NUM_TONES-1:0][SIN_W-1:0]       cos_i,
  output logic [NUM_TONES-1:0][OUT_W-1:0]       i_o,
  output logic [NUM_TONES-1:0][OUT_W-1:0]       q_o,
  output logic                                  iq_valid
);
  localparam int unsigned CNT_W = $clog2(DECIM);
  localparam int unsigned SHIFT = ACC_W - OUT_W;

  logic [CNT_W-1:0]                     cnt;
  logic signed [ACC_W-1:0]              acc_i [NUM_TONES];
  logic signed [ACC_W-1:0]              acc_q [NUM_TONES];
  logic signed [ACC_W-1:0]              nxt_i [NUM_TONES];
  logic signed [ACC_W-1:0]              nxt_q [NUM_TONES];

  always_comb begin
    for (int k = 0; k < NUM_TONES; k++) begin
      nxt_i[k] = acc_i[k] + ACC_W'(x * $signed(sin_i[k]));
      nxt_q[k] = acc_q[k] + ACC_W'(x * $signed(cos_i[k]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      iq_valid <= 1'b0;
      i_o      <= '0;
      q_o      <= '0;
      for (int k = 0; k < NUM_TONES; k++) begin
        acc_i[k] <= '0;
        acc_q[k] <= '0;
      end
    end else begin
      iq_valid <= 1'b0;
      if (!run) begin
        cnt <= '0;
        for (int k = 0; k < NUM_TONES; k++) begin
          acc_i[k] <= '0;
          acc_q[k] <= '0;
        end
      end else if (in_en) begin
        if (cnt == CNT_W'(DECIM - 1)) begin
          cnt      <= '0;
          iq_valid <= 1'b1;
          for (int k = 0; k < NUM_TONES; k++) begin
            i_o[k]   <= OUT_W'(nxt_i[k] >>> SHIFT);
            q_o[k]   <= OUT_W'(nxt_q[k] >>> SHIFT);
            acc_i[k] <= '0;
            acc_q[k] <= '0;
          end
        end else begin
          cnt <= cnt + 1'b1;
          for (int k = 0; k < NUM_TONES; k++) begin
            acc_i[k] <= nxt_i[k];
            acc_q[k] <= nxt_q[k];
          end
        end
      end
    end
  end
endmodule
