// tb_ect_top: end-to-end test of the instrument fabric at its default
// parameters (100 clocks per sample, 400 samples per I/Q result).
//
// A probe/front-end model closes the loop: each sample it decodes the DAC
// code, delays it by two samples, scales it by (gain_code+1)/4, adds a
// small offset, clips it to 14 bits and returns it as an offset-binary ADC
// code. Independently of the design, the testbench integrates every ADC
// sample the design takes against ideal sine/cosine of each tone's phase
// (double precision) and compares each received frame's I/Q with those
// sums. It also checks the frame header, the frame period
// (DECIM*CLK_DIV clocks), and the status registers.
//
// Mechanisms exercised and counted (each must occur at least once):
//   three tones demodulated at once, a gain change reaching the front
//   end, over-range detection, DMA back-pressure filling the FIFO and
//   frames being dropped, excitation saturation, and counter clear.
module tb_ect_top;
  import ect_pkg::*;
  localparam int CLKS_PER_FRAME = CLK_DIV * DECIM;

  logic clk = 0, rst_n = 0;
  logic adc_clk_en;
  logic [13:0] adc_data, dac_data;
  logic [7:0] gain_code;
  logic [7:0] s_axi_awaddr, s_axi_araddr;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;

  ect_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- probe / front-end model ----------------
  int dac_hist [3];
  always @(posedge clk) begin
    if (!rst_n) begin
      adc_data <= 14'h2000;
      dac_hist <= '{0, 0, 0};
    end else if (adc_clk_en) begin
      int r;
      dac_hist[2] = dac_hist[1];
      dac_hist[1] = dac_hist[0];
      dac_hist[0] = int'(dac_data) - 8192;
      r = (dac_hist[2] * (int'(gain_code) + 1)) / 4 + 7;
      if (r > 8191) r = 8191;
      if (r < -8192) r = -8192;
      adc_data <= 14'(r + 8192);
    end
  end

  // ---------------- independent I/Q reference ----------------
  localparam real TWO_PI = 6.283185307179586;
  localparam real SCALE  = 32767.0 / 256.0;
  logic [31:0] freq_tb [NUM_TONES];
  time   run_t = '1;
  bit    running = 0;
  longint m = 0;
  real   acc_i [NUM_TONES], acc_q [NUM_TONES];
  real   exp_i [int][NUM_TONES], exp_q [int][NUM_TONES];
  int    max_abs_x = 0, win_max [int];
  int    windows = 0;

  always @(posedge clk) begin
    if (running && $time > run_t && adc_clk_en) begin
      int x, ax;
      x = int'(adc_data) - 8192;
      ax = x < 0 ? -x : x;
      if (ax > max_abs_x) max_abs_x = ax;
      for (int k = 0; k < NUM_TONES; k++) begin
        real ph;
        // ideal phase: m * freq / 2^32 turns, kept exact modulo 2^32
        ph = TWO_PI * real'(32'(m * longint'(freq_tb[k]))) / 4294967296.0;
        acc_i[k] += real'(x) * $sin(ph);
        acc_q[k] += real'(x) * $cos(ph);
      end
      if (m % longint'(DECIM) == longint'(DECIM) - 1) begin
        for (int k = 0; k < NUM_TONES; k++) begin
          exp_i[windows][k] = acc_i[k] * SCALE;
          exp_q[windows][k] = acc_q[k] * SCALE;
          acc_i[k] = 0.0; acc_q[k] = 0.0;
        end
        win_max[windows] = max_abs_x;
        max_abs_x = 0;
        windows++;
      end
      m++;
    end
  end

  // ---------------- stream monitor ----------------
  logic [31:0] fw [$];
  int frames = 0, last_seq = -1, seq_gaps = 0, tone_checks = 0, ovr_frames = 0;
  int gain_frames_hi = 0;
  longint last_frame_t = -1;
  int period_checked = 0;
  bit check_period = 0;

  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    fw.push_back(m_axis_tdata);
    check(m_axis_tlast == (fw.size() == FRAME_WORDS), "tlast position");
    if (m_axis_tlast) begin
      int seq;
      seq = int'(fw[0][14:0]);
      check(fw[0][31:24] == FRAME_SYNC, "sync byte");
      if (last_seq >= 0) begin
        check(seq > last_seq, "sequence increases");
        if (seq != last_seq + 1) seq_gaps += seq - last_seq - 1;
      end
      last_seq = seq;
      if (fw[0][15]) ovr_frames++;
      if (fw[0][23:16] >= 8'd12) gain_frames_hi++;
      if (exp_i.exists(seq)) begin
        for (int k = 0; k < NUM_TONES; k++) begin
          real ei, eq, gi, gq, tol;
          gi = real'($signed(fw[1 + 2*k]));
          gq = real'($signed(fw[2 + 2*k]));
          ei = exp_i[seq][k]; eq = exp_q[seq][k];
          // 10-bit phase table: error below 1 % of the largest possible response
          tol = 0.01 * real'(DECIM) * real'(win_max[seq]) * SCALE + 16.0;
          check((gi - ei) < tol && (ei - gi) < tol && (gq - eq) < tol && (eq - gq) < tol,
                $sformatf("frame %0d tone %0d I=%0d/%0.0f Q=%0d/%0.0f", seq, k, $signed(fw[1+2*k]), ei, $signed(fw[2+2*k]), eq));
          tone_checks++;
        end
      end else check(0, $sformatf("frame %0d has no reference window", seq));
      if (check_period && last_frame_t >= 0) begin
        check(($time - last_frame_t) == CLKS_PER_FRAME * 10, $sformatf("frame period %0d", ($time - last_frame_t) / 10));
        period_checked++;
      end
      last_frame_t = $time;
      frames++;
      fw.delete();
    end
  end

  // ---------------- AXI4-Lite driver ----------------
  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_wdata = d; s_axi_awvalid = 1; s_axi_wvalid = 1; s_axi_wstrb = '1;
    do @(posedge clk); while (!s_axi_awready);
    if (a == REG_CTRL && d[0] && !running) begin run_t = $time; running = 1; end
    for (int k = 0; k < NUM_TONES; k++) if (a == REG_TONE_BASE + 8'(8*k)) freq_tb[k] = d;
    @(negedge clk); s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    @(negedge clk); s_axi_bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk); s_axi_arvalid = 0; s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_rvalid);
    d = s_axi_rdata;
    @(negedge clk); s_axi_rready = 0;
  endtask

  task automatic wait_frames(int n);
    int f0;
    f0 = frames;
    while (frames < f0 + n) @(posedge clk);
  endtask

  // ---------------- scenario ----------------
  int n_multitone = 0, n_gain_change = 0, n_ovr = 0, n_full = 0, n_drop = 0, n_sat = 0, n_clear = 0;

  always @(posedge clk) if (rst_n && dut.u_dma.s_ready == 1'b0) n_full++;

  initial begin
    logic [31:0] d;
    int drops;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    m_axis_tready = 1;
    freq_tb[0] = FREQ_20KHZ;
    for (int k = 1; k < NUM_TONES; k++) freq_tb[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. three tones, unity front-end gain
    axi_write(REG_TONE_BASE + 8'd4,  32'h4000);               // tone 0: 20 kHz, 1/4
    axi_write(REG_TONE_BASE + 8'd8,  32'd214748365);          // tone 1: 50 kHz
    axi_write(REG_TONE_BASE + 8'd12, 32'h2000);
    axi_write(REG_TONE_BASE + 8'd16, 32'd128849019);          // tone 2: 30 kHz
    axi_write(REG_TONE_BASE + 8'd20, 32'h1000);
    axi_write(REG_GAIN, 32'd3);
    axi_write(REG_OVR_THRESH, 32'd8000);
    axi_write(REG_CTRL, 32'h1);
    check_period = 1;
    wait_frames(4);
    n_multitone = tone_checks;
    axi_read(REG_STATUS, d);       check(d[1:0] == 0, "no over-range at unity gain");
    axi_read(REG_FRAME_COUNT, d);  check(d == 4, $sformatf("FRAME_COUNT %0d", d));

    // 2. raise the gain: the front end clips, over-range is flagged
    axi_write(REG_GAIN, 32'd15);
    repeat (CLK_DIV + 2) @(posedge clk);
    check(gain_code == 8'd15, "gain code reaches front end");
    if (gain_code == 8'd15) n_gain_change++;
    wait_frames(3);
    axi_read(REG_STATUS, d);       check(d[0], "over-range flag");
    axi_read(REG_OVR_COUNT, d);    check(d > 0, "over-range count");
    if (ovr_frames > 0 && d > 0) n_ovr++;
    axi_write(REG_GAIN, 32'd3);

    // 3. DMA back-pressure: the FIFO fills and whole frames are dropped
    check_period = 0;
    @(negedge clk); m_axis_tready = 0;
    repeat (CLKS_PER_FRAME * 60) @(posedge clk);
    axi_read(REG_STATUS, d);       check(int'(d[31:16]) == 512, $sformatf("FIFO level %0d when full", d[31:16]));
    axi_read(REG_DROP_COUNT, d);   drops = int'(d);
    check(drops > 0, "frames dropped while stalled");
    @(negedge clk); m_axis_tready = 1;
    wait_frames(60);
    check(seq_gaps == drops, $sformatf("sequence gaps %0d = drops %0d", seq_gaps, drops));
    if (drops > 0) n_drop++;

    // 4. over-driven excitation saturates the DAC sum
    axi_write(REG_TONE_BASE + 8'd4,  32'hF000);
    axi_write(REG_TONE_BASE + 8'd12, 32'hF000);
    wait_frames(2);
    axi_read(REG_STATUS, d);       check(d[1], "excitation saturation flag");
    if (d[1]) n_sat++;
    axi_write(REG_TONE_BASE + 8'd4,  32'h4000);
    axi_write(REG_TONE_BASE + 8'd12, 32'h2000);

    // 5. clear counters and flags
    axi_write(REG_CTRL, 32'h3);
    axi_read(REG_STATUS, d);       check(d[1:0] == 0, "status cleared");
    axi_read(REG_DROP_COUNT, d);   check(d == 0, "drop count cleared");
    axi_read(REG_OVR_COUNT, d);    check(d == 0, "over-range count cleared");
    if (d == 0) n_clear++;
    check_period = 1; last_frame_t = -1;
    wait_frames(3);

    $display("mechanisms: multitone=%0d gain_change=%0d overrange=%0d fifo_full_cycles=%0d drop=%0d saturation=%0d clear=%0d periods=%0d frames=%0d",
             n_multitone, n_gain_change, n_ovr, n_full, n_drop, n_sat, n_clear, period_checked, frames);
    check(n_multitone >= 3 * 3, "multi-tone demodulation exercised");
    check(n_gain_change > 0, "gain change exercised");
    check(n_ovr > 0, "over-range exercised");
    check(n_full > 0, "FIFO full exercised");
    check(n_drop > 0, "frame drop exercised");
    check(n_sat > 0, "excitation saturation exercised");
    check(n_clear > 0, "clear exercised");
    check(period_checked >= 5, "frame period checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
