// dma_unit: frame buffer and AXI4-Stream source for the processor's DMA.
//
// Words from the data encoder (with their last flag) enter a DEPTH-entry
// FIFO and leave as an AXI4-Stream master (tdata/tvalid/tready/tlast), one
// frame per stream packet, towards the DMA controller of the processing
// system, which moves them to memory. The FIFO absorbs the latency of the
// DMA controller; when it is full, s_ready falls and the encoder stalls.
// pkt_count counts delivered packets; level reports the FIFO occupancy.
//
// Timing: a word written in one cycle is visible on the stream the next
// cycle (first-word latency 1). Throughput is one word per clock.
//
// The instrument's block diagram places a DMA unit in the FPGA fabric
// linked over AXI to the processor's DMA controller; the stream interface
// and FIFO depth are this design's choices.
//
// Lint note: rst_n is both the asynchronous reset and the 'disable iff'
// condition of the handshake assertions below; the assertions are not
// logic, so the mixed use is intended.
module dma_unit #(
  parameter int unsigned DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [31:0] s_data,
  input  logic        s_valid,
  output logic        s_ready,
  input  logic        s_last,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  output logic [31:0] pkt_count,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [32:0]   mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;

  always_comb begin
    s_ready       = level != (AW+1)'(DEPTH);
    m_axis_tvalid = level != '0;
    {m_axis_tlast, m_axis_tdata} = mem[rd_ptr];
    push          = s_valid && s_ready;
    pop           = m_axis_tvalid && m_axis_tready;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= {s_last, s_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      level     <= '0;
      pkt_count <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
      if (clear)                    pkt_count <= '0;
      else if (pop && m_axis_tlast) pkt_count <= pkt_count + 1'b1;
    end
  end

  // AXI4-Stream: once offered, a word stays offered and unchanged until taken.
  property p_stream_hold;
    @(posedge clk) disable iff (!rst_n)
      m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable({m_axis_tdata, m_axis_tlast});
  endproperty
  a_stream_hold: assert property (p_stream_hold);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));
endmodule
