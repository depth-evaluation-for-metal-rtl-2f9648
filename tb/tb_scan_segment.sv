// tb_scan_segment: one complete scan segment of the defect-depth dataset
// acquisition setting: a single 20 kHz excitation (the register reset
// values), I/Q output at 2,500 samples/s, 0.5 s of signal, that is 1,250
// I/Q points, all at the default parameters.
//
// The probe model imitates a probe passing over a slot: the received
// signal is a*e[n-2] + b*(e[n-1]-e[n-3]) plus +-2 LSB of noise, where e is
// the excitation leaving the DAC; the in-phase gain a and the quadrature
// term b follow a Gaussian bump centred at 0.25 s (width 40 ms), so both
// magnitude and phase of the response change as the "defect" passes.
// Every I/Q point is compared with the testbench's own double-precision
// integration of the ADC samples against ideal sine/cosine; the testbench
// also checks that exactly 1,250 points arrive in 0.5 s, one every 400
// samples, and that the bump is resolved (response at 0.25 s differs from
// the baseline by more than 10 %).
module tb_scan_segment;
  import ect_pkg::*;
  localparam int POINTS         = 1250;
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
    repeat (CLKS_PER_FRAME * (POINTS + 20)) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- probe model ----------------
  int  e [4];
  longint n_adc = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      adc_data <= 14'h2000;
      e <= '{0, 0, 0, 0};
    end else if (adc_clk_en) begin
      real t, g, a, b, r;
      int  ri;
      for (int i = 3; i > 0; i--) e[i] = e[i-1];
      e[0] = int'(dac_data) - 8192;
      t = real'(n_adc) / real'(FS_HZ);
      g = $exp(-((t - 0.25) * (t - 0.25)) / (2.0 * 0.04 * 0.04));
      a = 0.6 - 0.25 * g;
      b = 0.5 + 2.0 * g;
      r = a * real'(e[2]) + b * real'(e[1] - e[3]) + real'(int'($urandom_range(0, 4)) - 2);
      ri = $rtoi(r < 0.0 ? r - 0.5 : r + 0.5);
      if (ri > 8191) ri = 8191;
      if (ri < -8192) ri = -8192;
      adc_data <= 14'(ri + 8192);
      n_adc++;
    end
  end

  // ---------------- independent I/Q reference ----------------
  localparam real TWO_PI = 6.283185307179586;
  localparam real SCALE  = 32767.0 / 256.0;
  time    run_t = '1;
  bit     running = 0;
  longint m = 0;
  real    acc_i = 0.0, acc_q = 0.0;
  real    exp_i [POINTS + 20], exp_q [POINTS + 20];
  int     win_max [POINTS + 20];
  int     windows = 0, max_abs_x = 0;

  always @(posedge clk) begin
    if (running && $time > run_t && adc_clk_en) begin
      int x, ax;
      real ph;
      x = int'(adc_data) - 8192;
      ax = x < 0 ? -x : x;
      if (ax > max_abs_x) max_abs_x = ax;
      ph = TWO_PI * real'(32'(m * longint'(FREQ_20KHZ))) / 4294967296.0;
      acc_i += real'(x) * $sin(ph);
      acc_q += real'(x) * $cos(ph);
      if (m % longint'(DECIM) == longint'(DECIM) - 1) begin
        if (windows < POINTS + 20) begin
          exp_i[windows] = acc_i * SCALE;
          exp_q[windows] = acc_q * SCALE;
          win_max[windows] = max_abs_x;
        end
        acc_i = 0.0; acc_q = 0.0; max_abs_x = 0;
        windows++;
      end
      m++;
    end
  end

  // ---------------- stream capture ----------------
  logic [31:0] fw [$];
  int points = 0;
  real mag [POINTS];
  longint first_t = -1, last_t = -1;
  int period_errors = 0;

  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    fw.push_back(m_axis_tdata);
    if (m_axis_tlast) begin
      int seq;
      real gi, gq, tol;
      seq = int'(fw[0][14:0]);
      check(fw.size() == FRAME_WORDS && fw[0][31:24] == FRAME_SYNC, "frame shape");
      check(seq == points, $sformatf("sequence %0d at point %0d", seq, points));
      gi = real'($signed(fw[1])); gq = real'($signed(fw[2]));
      if (seq < POINTS + 20) begin
        tol = 0.01 * real'(DECIM) * real'(win_max[seq]) * SCALE + 16.0;
        check((gi - exp_i[seq]) < tol && (exp_i[seq] - gi) < tol &&
              (gq - exp_q[seq]) < tol && (exp_q[seq] - gq) < tol,
              $sformatf("point %0d I=%0.0f/%0.0f Q=%0.0f/%0.0f", seq, gi, exp_i[seq], gq, exp_q[seq]));
      end
      // the other tones have frequency word 0: sine reference 0, so I is 0
      // (their Q is the DC level of the input)
      for (int k = 1; k < NUM_TONES; k++)
        check(fw[1 + 2*k] == 32'd0, "idle tone I is zero");
      if (points < POINTS) mag[points] = $sqrt(gi * gi + gq * gq);
      if (last_t >= 0 && ($time - last_t) != CLKS_PER_FRAME * 10) period_errors++;
      if (first_t < 0) first_t = $time;
      last_t = $time;
      points++;
      fw.delete();
    end
  end

  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_wdata = d; s_axi_awvalid = 1; s_axi_wvalid = 1; s_axi_wstrb = '1;
    do @(posedge clk); while (!s_axi_awready);
    if (a == REG_CTRL && d[0]) begin run_t = $time; running = 1; end
    @(negedge clk); s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    @(negedge clk); s_axi_bready = 0;
  endtask

  initial begin
    real base, peak;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    m_axis_tready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(REG_GAIN, 32'd3);
    axi_write(REG_CTRL, 32'h1);   // tone 0 at its reset setting: 20 kHz, half scale
    while (points < POINTS) @(posedge clk);
    check(period_errors == 0, $sformatf("%0d irregular output intervals", period_errors));
    // 1,250 points span 1,249 output intervals of 0.4 ms
    check((last_t - first_t) == (longint'(POINTS) - 1) * longint'(CLKS_PER_FRAME) * 10, "segment duration");
    base = mag[50];
    peak = mag[POINTS / 2];
    $display("baseline |IQ| = %0.0f, at 0.25 s |IQ| = %0.0f", base, peak);
    check(peak > 1.1 * base || peak < 0.9 * base, "defect bump resolved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
