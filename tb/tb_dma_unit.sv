// tb_dma_unit: random producer and random-stalling AXI4-Stream consumer
// against a queue model: order, data and tlast must be preserved, s_ready
// must fall exactly when DEPTH words are held, and pkt_count must count
// delivered packets.
module tb_dma_unit;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [31:0] s_data, m_axis_tdata, pkt_count;
  logic s_valid, s_ready, s_last, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [4:0] level;
  int checks = 0, failures = 0, full_seen = 0, pkts = 0, words = 0;

  dma_unit #(.DEPTH(DEPTH)) dut (.*);
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

  logic [32:0] model [$];
  int phase = 0;

  always @(negedge clk) if (rst_n) begin
    // phases alternate between a slow and a fast consumer
    s_valid       = ($urandom_range(0, 3) != 0);
    s_data        = $urandom;
    s_last        = ($urandom_range(0, 4) == 0);
    m_axis_tready = (phase % 2 == 0) ? ($urandom_range(0, 7) == 0) : ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    check(s_ready == (model.size() < DEPTH), $sformatf("s_ready at %0d", model.size()));
    check(m_axis_tvalid == (model.size() > 0), "tvalid");
    if (model.size() == DEPTH) full_seen++;
    if (m_axis_tvalid && m_axis_tready) begin
      logic [32:0] e;
      e = model.pop_front();
      check({m_axis_tlast, m_axis_tdata} == e, "data/last order");
      words++;
      if (m_axis_tlast) pkts++;
    end
    if (s_valid && s_ready) model.push_back({s_last, s_data});
  end

  initial begin
    s_valid = 0; m_axis_tready = 0; s_data = 0; s_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (phase = 0; phase < 20; phase++) repeat (500) @(posedge clk);
    @(negedge clk);
    check(int'(pkt_count) == pkts, "packet count");
    check(full_seen > 0, "FIFO full exercised");
    check(words > 1000, "traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
