// tb_excitation_mixer: random tone samples and amplitudes; the expected
// DAC sample is floor(sum(sin_k*amp_k) / 2^(SIN_W+AMP_W-DAC_W)) clipped to
// the signed DAC range, computed with 64-bit integers.
module tb_excitation_mixer;
  localparam int NT = 4;
  logic [NT-1:0][15:0] sin_i, amp;
  logic signed [13:0] exc_o;
  logic sat_o;
  int checks = 0, failures = 0, nsat = 0;

  excitation_mixer #(.NUM_TONES(NT)) dut (.*);

  initial begin
    for (int n = 0; n < 5000; n++) begin
      longint sum, e;
      bit es;
      sum = 0;
      for (int k = 0; k < NT; k++) begin
        sin_i[k] = 16'($urandom);
        amp[k]   = (n % 3 == 0) ? 16'($urandom) : 16'($urandom_range(0, 16383));
        sum += longint'($signed(sin_i[k])) * longint'(amp[k]);
      end
      e = sum >>> 18;
      es = 0;
      if (e > 8191)  begin e = 8191;  es = 1; end
      if (e < -8192) begin e = -8192; es = 1; end
      #1;
      checks++;
      if (longint'(exc_o) != e || sat_o != es) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d exc=%0d exp=%0d sat=%0b", n, exc_o, e, sat_o);
      end
      nsat += int'(es);
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
