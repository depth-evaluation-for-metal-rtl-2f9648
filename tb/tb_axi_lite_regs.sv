// tb_axi_lite_regs: drives AXI4-Lite writes and reads with random ready
// delays; checks reset values, that every writable register reaches the
// configuration outputs and reads back, that status inputs read back, that
// clear is a single-cycle pulse and that unmapped addresses read zero.
module tb_axi_lite_regs;
  import ect_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] s_axi_awaddr, s_axi_araddr;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  ect_cfg_t cfg_o;
  ect_status_t status_i;
  int checks = 0, failures = 0, clear_pulses = 0;

  axi_lite_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n && cfg_o.clear) clear_pulses++;

  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_wdata = d; s_axi_awvalid = 1; s_axi_wvalid = 1; s_axi_wstrb = '1;
    do @(posedge clk); while (!s_axi_awready);
    @(negedge clk); s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    check(s_axi_bresp == 2'b00, "bresp");
    @(negedge clk); s_axi_bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk); s_axi_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_rvalid);
    d = s_axi_rdata;
    @(negedge clk); s_axi_rready = 0;
  endtask

  initial begin
    logic [31:0] d, f [NUM_TONES], a [NUM_TONES];
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    status_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(!cfg_o.run && cfg_o.freq[0] == 32'd85899346 && cfg_o.amp[0] == 16'h8000 &&
          cfg_o.amp[1] == 0 && cfg_o.ovr_thresh == '1, "reset values");
    axi_read(REG_TONE_BASE, d);      check(d == 32'd85899346, "reset FREQ0 read");
    axi_write(REG_CTRL, 32'h1);      check(cfg_o.run, "run set");
    axi_read(REG_CTRL, d);           check(d == 1, "CTRL read");
    axi_write(REG_GAIN, 32'hA5);     check(cfg_o.gain == 8'hA5, "gain");
    axi_read(REG_GAIN, d);           check(d == 32'hA5, "GAIN read");
    axi_write(REG_OVR_THRESH, 32'h1234); check(cfg_o.ovr_thresh == 13'h1234, "thresh");
    axi_read(REG_OVR_THRESH, d);     check(d == 32'h1234, "OVR_THRESH read");
    for (int k = 0; k < NUM_TONES; k++) begin
      f[k] = $urandom; a[k] = $urandom;
      axi_write(REG_TONE_BASE + 8'(8*k), f[k]);
      axi_write(REG_TONE_BASE + 8'(8*k + 4), a[k]);
    end
    for (int k = 0; k < NUM_TONES; k++) begin
      check(cfg_o.freq[k] == f[k] && cfg_o.amp[k] == a[k][15:0], $sformatf("tone %0d cfg", k));
      axi_read(REG_TONE_BASE + 8'(8*k), d);     check(d == f[k], "FREQ read");
      axi_read(REG_TONE_BASE + 8'(8*k + 4), d); check(d == {16'b0, a[k][15:0]}, "AMP read");
    end
    status_i.ovr_flag = 1; status_i.exc_sat = 1;
    status_i.frame_count = 32'hDEADBEEF; status_i.drop_count = 16'h1234; status_i.ovr_count = 16'h5678; status_i.fifo_level = 16'h00AB;
    axi_read(REG_STATUS, d);      check(d == 32'h00AB_0003, "STATUS");
    axi_read(REG_FRAME_COUNT, d); check(d == 32'hDEADBEEF, "FRAME_COUNT");
    axi_read(REG_DROP_COUNT, d);  check(d == 32'h1234, "DROP_COUNT");
    axi_read(REG_OVR_COUNT, d);   check(d == 32'h5678, "OVR_COUNT");
    axi_read(8'hFC, d);           check(d == 0, "unmapped");
    axi_write(8'hFC, 32'hFFFF_FFFF); check(cfg_o.gain == 8'hA5 && cfg_o.run, "unmapped write ignored");
    check(clear_pulses == 0, "no clear yet");
    axi_write(REG_CTRL, 32'h3);
    repeat (3) @(negedge clk);
    check(clear_pulses == 1 && !cfg_o.clear && cfg_o.run, "clear pulse");
    axi_write(REG_CTRL, 32'h0);   check(!cfg_o.run, "run cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
