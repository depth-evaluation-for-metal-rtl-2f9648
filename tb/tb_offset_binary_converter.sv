// tb_offset_binary_converter: checks both code conversions against
// arithmetic (signed = code - 2^(W-1), code = signed + 2^(W-1)), that the
// outputs only change on the sample strobe, and the mid-scale reset value.
module tb_offset_binary_converter;
  localparam int W = 14;
  logic clk = 0, rst_n = 0, sample_en = 0;
  logic [W-1:0] adc_ob, dac_ob;
  logic signed [W-1:0] adc_s, dac_s;
  int checks = 0, failures = 0;

  offset_binary_converter #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    adc_ob = '0; dac_s = '0;
    repeat (2) @(posedge clk);
    check(dac_ob == 14'h2000, "reset mid-scale");
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int a, d;
      a = (n < 4) ? (n == 0 ? 0 : n == 1 ? 16383 : n == 2 ? 8192 : 8191) : int'($urandom_range(0, 16383));
      d = int'($urandom_range(0, 16383)) - 8192;
      @(negedge clk);
      adc_ob = W'(a); dac_s = W'(d); sample_en = 1;
      @(negedge clk);
      sample_en = 0;
      check(int'(adc_s) == a - 8192, $sformatf("adc %0d -> %0d", a, adc_s));
      check(int'(dac_ob) == d + 8192, $sformatf("dac %0d -> %0d", d, dac_ob));
      // without a strobe the outputs hold
      adc_ob = ~adc_ob; dac_s = ~dac_s;
      @(negedge clk);
      check(int'(adc_s) == a - 8192 && int'(dac_ob) == d + 8192, "hold without strobe");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
