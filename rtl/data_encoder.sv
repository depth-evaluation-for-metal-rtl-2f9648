// data_encoder: turns each set of I/Q results into a frame of words.
//
// Frame (FRAME_WORDS = 1 + 2*NUM_TONES 32-bit words):
//   word 0     header {FRAME_SYNC[7:0], gain[7:0], ovr_flag, seq[14:0]}
//   word 1+2k  I of tone k (signed)
//   word 2+2k  Q of tone k (signed)
// m_last marks the final word. The results are latched when iq_valid
// pulses and sent with a valid/ready handshake. If a new result set
// arrives while the previous frame is still being sent (the output is
// stalled), the new set is dropped whole, drop_count is incremented and
// the sequence number still advances, so the receiver sees the gap.
//
// Timing: the header is offered the cycle after iq_valid; with m_ready
// held high a frame takes FRAME_WORDS cycles.
//
// The instrument has a data encoder between demodulator and DMA; the frame
// format and drop policy are this design's choices.
module data_encoder #(
  parameter int unsigned NUM_TONES = ect_pkg::NUM_TONES,
  parameter int unsigned OUT_W     = ect_pkg::OUT_W,
  parameter int unsigned GAIN_W    = ect_pkg::GAIN_W
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clear,
  input  logic                             iq_valid,
  input  logic [NUM_TONES-1:0][OUT_W-1:0]  i_i,
  input  logic [NUM_TONES-1:0][OUT_W-1:0]  q_i,
  input  logic [GAIN_W-1:0]                gain,
  input  logic                             ovr_flag,
  output logic [31:0]                      m_data,
  output logic                             m_valid,
  input  logic                             m_ready,
  output logic                             m_last,
  output logic [15:0]                      drop_count
);
  localparam int unsigned FW    = 1 + 2 * NUM_TONES;
  localparam int unsigned IDX_W = $clog2(FW);

  logic [FW-1:0][31:0] frame;
  logic [IDX_W-1:0]    idx;
  logic [14:0]         seq;
  logic                busy;

  always_comb begin
    m_valid = busy;
    m_data  = frame[idx];
    m_last  = busy && (idx == IDX_W'(FW - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame      <= '0;
      idx        <= '0;
      seq        <= '0;
      busy       <= 1'b0;
      drop_count <= '0;
    end else begin
      if (busy && m_ready) begin
        if (idx == IDX_W'(FW - 1)) begin
          busy <= 1'b0;
          idx  <= '0;
        end else begin
          idx <= idx + 1'b1;
        end
      end
      if (iq_valid) begin
        seq <= seq + 1'b1;
        if (busy && !(m_ready && idx == IDX_W'(FW - 1))) begin
          if (drop_count != '1) drop_count <= drop_count + 1'b1;
        end else begin
          busy     <= 1'b1;
          idx      <= '0;
          frame[0] <= {ect_pkg::FRAME_SYNC, 8'(gain), ovr_flag, seq};
          for (int k = 0; k < NUM_TONES; k++) begin
            frame[1 + 2*k] <= 32'(i_i[k]);
            frame[2 + 2*k] <= 32'(q_i[k]);
          end
        end
      end
      if (clear) drop_count <= '0;
    end
  end
endmodule
