// tb_data_encoder: sends result sets with random gaps and a randomly
// stalling consumer; every received frame must carry the sync byte, gain,
// flag and the sequence number of its result set, followed by I/Q of each
// tone and last on the final word. Result sets arriving during a frame
// must be dropped and counted, and the sequence number must show the gap.
module tb_data_encoder;
  localparam int NT = 2, FW = 1 + 2 * NT;
  logic clk = 0, rst_n = 0, clear = 0, iq_valid = 0;
  logic [NT-1:0][31:0] i_i, q_i;
  logic [7:0] gain;
  logic ovr_flag;
  logic [31:0] m_data;
  logic m_valid, m_ready, m_last;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;

  data_encoder #(.NUM_TONES(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected frames
  logic [31:0] exp_q [$];
  int sent = 0, dropped = 0, got_words = 0, frames_rx = 0;
  bit busy_model = 0;

  // consumer with random stalls
  always @(negedge clk) m_ready = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    logic [31:0] e;
    e = exp_q.pop_front();
    check(m_data == e, $sformatf("word %0d got %h exp %h", got_words, m_data, e));
    check(m_last == (exp_q.size() % FW == 0), "last flag");
    got_words++;
    if (m_last) begin frames_rx++; busy_model = 0; end
  end

  initial begin
    logic [14:0] seq;
    m_ready = 1; gain = 8'h3C; ovr_flag = 0; i_i = '0; q_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    seq = 0;
    for (int n = 0; n < 400; n++) begin
      int gap;
      gap = (n % 5 == 0) ? 2 : 14 + int'($urandom_range(0, 10));
      repeat (gap) @(negedge clk);
      #1;
      for (int k = 0; k < NT; k++) begin i_i[k] = $urandom; q_i[k] = $urandom; end
      ovr_flag = 1'($urandom_range(0, 1));
      gain = 8'($urandom);
      // the frame is accepted if the encoder is idle at this edge (or finishing)
      if (!busy_model || (m_ready && m_last)) begin
        busy_model = 1;
        exp_q.push_back({8'hEC, gain, ovr_flag, seq});
        for (int k = 0; k < NT; k++) begin exp_q.push_back(i_i[k]); exp_q.push_back(q_i[k]); end
        sent++;
      end else dropped++;
      iq_valid = 1;
      @(negedge clk); iq_valid = 0;
      seq++;
    end
    repeat (50) @(negedge clk);
    check(exp_q.size() == 0, "all words delivered");
    check(frames_rx == sent, "frame count");
    check(int'(drop_count) == dropped, $sformatf("drop count %0d exp %0d", drop_count, dropped));
    check(dropped > 0, "drops exercised");
    clear = 1; @(negedge clk); clear = 0;
    check(drop_count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
