// tb_iq_demodulator: feeds a two-tone signal with ideal sine/cosine
// references and checks (a) every I/Q output equals the exact integer
// integrate-and-dump sum over DECIM samples, shifted right by 8, computed
// in the testbench; (b) the output cadence is one result per DECIM input
// samples; (c) for a pure tone of amplitude A and phase phi, I and Q match
// DECIM*A*32767*cos/sin(phi)/2/256 within 1 %.
module tb_iq_demodulator;
  localparam int NT = 2, DECIM = 200;
  logic clk = 0, rst_n = 0, run = 0, in_en = 0;
  logic signed [13:0] x;
  logic [NT-1:0][15:0] sin_i, cos_i;
  logic [NT-1:0][31:0] i_o, q_o;
  logic iq_valid;
  int checks = 0, failures = 0;

  iq_demodulator #(.NUM_TONES(NT), .DECIM(DECIM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  localparam real PI = 3.14159265358979;
  real f [NT] = '{0.02, 0.05};          // cycles per sample (20 kHz, 50 kHz at 1 MSa/s)
  real amp [NT], phi [NT];
  longint si [NT], sq [NT];

  initial begin
    int n, outs, since;
    x = '0; sin_i = '0; cos_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); run = 1;
    n = 0; outs = 0;
    for (int w = 0; w < 12; w++) begin
      // new signal each window
      for (int k = 0; k < NT; k++) begin
        amp[k] = (w < 4 && k == 1) ? 0.0 : real'($urandom_range(500, 3500));
        phi[k] = 2.0 * PI * real'($urandom_range(0, 359)) / 360.0;
        si[k] = 0; sq[k] = 0;
      end
      since = 0;
      for (int m = 0; m < DECIM; m++) begin
        real xs;
        xs = 0.0;
        for (int k = 0; k < NT; k++) xs += amp[k] * $sin(2.0 * PI * f[k] * n + phi[k]);
        @(negedge clk);
        x = 14'($rtoi($floor(xs + 0.5)));
        for (int k = 0; k < NT; k++) begin
          sin_i[k] = 16'($rtoi($floor(32767.0 * $sin(2.0 * PI * f[k] * n) + 0.5)));
          cos_i[k] = 16'($rtoi($floor(32767.0 * $cos(2.0 * PI * f[k] * n) + 0.5)));
          si[k] += longint'(x) * longint'($signed(sin_i[k]));
          sq[k] += longint'(x) * longint'($signed(cos_i[k]));
        end
        in_en = 1;
        @(negedge clk);
        in_en = 0;
        // a gap cycle between samples
        check(iq_valid == (m == DECIM - 1), $sformatf("iq_valid cadence w%0d m%0d", w, m));
        n++;
      end
      outs++;
      for (int k = 0; k < NT; k++) begin
        real ei, eq, scale;
        check($signed(i_o[k]) == 32'(si[k] >>> 8), $sformatf("I exact t%0d w%0d %0d vs %0d", k, w, $signed(i_o[k]), si[k] >>> 8));
        check($signed(q_o[k]) == 32'(sq[k] >>> 8), $sformatf("Q exact t%0d w%0d", k, w));
        scale = real'(DECIM) * 32767.0 / 2.0 / 256.0;
        ei = scale * amp[k] * $cos(phi[k]);
        eq = scale * amp[k] * $sin(phi[k]);
        check(rabs(real'($signed(i_o[k])) - ei) <= 0.01 * scale * 3500.0 &&
              rabs(real'($signed(q_o[k])) - eq) <= 0.01 * scale * 3500.0,
              $sformatf("IQ analytic t%0d w%0d I=%0d ei=%f", k, w, $signed(i_o[k]), ei));
      end
    end
    check(outs == 12, "output count");
    // run low restarts the window
    run = 0; @(negedge clk); run = 1;
    for (int m = 0; m < DECIM - 1; m++) begin
      @(negedge clk); in_en = 1; @(negedge clk); in_en = 0;
      check(!iq_valid, "no early output after restart");
    end
    @(negedge clk); in_en = 1; @(negedge clk); in_en = 0;
    check(iq_valid, "output after DECIM samples after restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
