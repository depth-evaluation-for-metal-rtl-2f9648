// tb_dds: two tones at random frequency words. The testbench keeps its own
// phase accumulators and expects sin/cos = round(32767*sin/cos(2*pi*p/1024))
// of the top 10 phase bits, within 1 LSB. Also checks that run low forces
// zero phase and zero outputs and that ref_valid follows the strobe.
module tb_dds;
  localparam int NT = 2;
  logic clk = 0, rst_n = 0, sample_en = 0, run = 0;
  logic [NT-1:0][31:0] freq_word;
  logic [NT-1:0][15:0] sin_o, cos_o;
  logic ref_valid;
  int checks = 0, failures = 0;

  dds #(.NUM_TONES(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_val(logic [31:0] ph, bit is_cos);
    real a;
    a = 2.0 * 3.14159265358979 * real'(ph[31:22]) / 1024.0;
    return $rtoi($floor(32767.0 * (is_cos ? $cos(a) : $sin(a)) + 0.5));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [NT-1:0][31:0] ph;
    freq_word[0] = 32'd85899346;      // 20 kHz at 1 MSa/s
    freq_word[1] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); run = 1;
    ph = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk); sample_en = 1;
      @(negedge clk); sample_en = 0;
      check(ref_valid, "ref_valid");
      for (int k = 0; k < NT; k++) begin
        int es, ec;
        es = expect_val(ph[k], 0); ec = expect_val(ph[k], 1);
        check(int'($signed(sin_o[k])) - es <= 1 && es - int'($signed(sin_o[k])) <= 1,
              $sformatf("sin t%0d n%0d got %0d exp %0d", k, n, $signed(sin_o[k]), es));
        check(int'($signed(cos_o[k])) - ec <= 1 && ec - int'($signed(cos_o[k])) <= 1,
              $sformatf("cos t%0d n%0d got %0d exp %0d", k, n, $signed(cos_o[k]), ec));
        ph[k] += freq_word[k];
      end
      @(negedge clk);
      check(!ref_valid, "ref_valid one cycle");
      if (n == 1500) freq_word[1] = $urandom;
    end
    // stop: phases return to zero
    run = 0;
    @(negedge clk); sample_en = 1;
    @(negedge clk); sample_en = 0;
    check(sin_o == '0 && cos_o == '0, "run low clears outputs");
    run = 1;
    @(negedge clk); sample_en = 1;
    @(negedge clk); sample_en = 0;
    check($signed(sin_o[0]) == 0 && $signed(cos_o[0]) == 32767, "restart at phase 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
