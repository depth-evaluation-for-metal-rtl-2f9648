// tb_gain_controller: checks that the gain code reaches the front end only
// on a sample strobe, that samples whose magnitude reaches the threshold
// (and only those) set the sticky flag and count, and that clear resets
// both.
module tb_gain_controller;
  logic clk = 0, rst_n = 0, sample_en = 0, clear = 0;
  logic [7:0] gain_set, gain_o;
  logic signed [13:0] x;
  logic [12:0] ovr_thresh;
  logic ovr_flag;
  logic [15:0] ovr_count;
  int checks = 0, failures = 0;

  gain_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int cnt;
    bit flag;
    gain_set = 8'd5; x = '0; ovr_thresh = 13'd6000;
    repeat (2) @(posedge clk);
    check(gain_o == 0 && !ovr_flag && ovr_count == 0, "reset");
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(gain_o == 0, "gain waits for strobe");
    cnt = 0; flag = 0;
    for (int n = 0; n < 3000; n++) begin
      int v, mag;
      v = int'($urandom_range(0, 16383)) - 8192;
      if (n % 7 == 0) v = (n % 2 != 0) ? 6000 : -6000;     // exactly at threshold
      if (n % 11 == 0) v = (n % 2 != 0) ? 5999 : -5999;    // just below
      mag = v < 0 ? -v : v;
      @(negedge clk);
      x = 14'(v); gain_set = 8'($urandom); sample_en = 1;
      @(negedge clk);
      sample_en = 0;
      check(gain_o == gain_set, "gain applied on strobe");
      if (mag >= 6000) begin cnt++; flag = 1; end
      check(ovr_flag == flag && int'(ovr_count) == cnt, $sformatf("ovr n=%0d v=%0d cnt=%0d exp %0d", n, v, ovr_count, cnt));
      gain_set = ~gain_set;
      @(negedge clk);
      check(gain_o == ~gain_set, "gain holds between strobes");
      if (n == 1500) begin
        clear = 1; @(negedge clk); clear = 0;
        cnt = 0; flag = 0;
        check(!ovr_flag && ovr_count == 0, "clear");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
