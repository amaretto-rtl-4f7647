// amaretto_axis_if: communication interface, the only platform-dependent
// part of the design.  It connects the emulator to the processor's DMA
// through two AXI4-Stream channels, 32-bit TDATA:
//   s_axis_*  instructions in, one instruction per beat (TLAST ignored)
//   m_axis_*  state vector out, two beats per amplitude, TLAST on the
//             final beat of the vector
// Each direction goes through a register slice (amaretto_axis_skid), so
// the DMA side sees registered TVALID/TREADY and full throughput.
// AXI4-Stream follows the published design; the register slices and the
// data width are this design's choices.  All signals are in aclk.
module amaretto_axis_if (
  input  logic        aclk,
  input  logic        aresetn,
  // AXI4-Stream slave: from DMA
  input  logic        s_axis_tvalid,
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  // AXI4-Stream master: to DMA
  output logic        m_axis_tvalid,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready,
  // towards the communication control unit
  output logic        rx_valid,
  output logic [31:0] rx_data,
  input  logic        rx_ready,
  input  logic        tx_valid,
  input  logic [31:0] tx_data,
  input  logic        tx_last,
  output logic        tx_ready
);

  logic rx_last_unused;

  amaretto_axis_skid #(.W(33)) u_rx (
    .clk(aclk), .rst_n(aresetn),
    .s_valid(s_axis_tvalid), .s_data({s_axis_tlast, s_axis_tdata}), .s_ready(s_axis_tready),
    .m_valid(rx_valid), .m_data({rx_last_unused, rx_data}), .m_ready(rx_ready)
  );

  amaretto_axis_skid #(.W(33)) u_tx (
    .clk(aclk), .rst_n(aresetn),
    .s_valid(tx_valid), .s_data({tx_last, tx_data}), .s_ready(tx_ready),
    .m_valid(m_axis_tvalid), .m_data({m_axis_tlast, m_axis_tdata}), .m_ready(m_axis_tready)
  );

  // AXI4-Stream: the slave side must not change a stalled beat either.
  a_s_hold: assert property (@(posedge aclk) disable iff (!aresetn)
                             s_axis_tvalid && !s_axis_tready |=> s_axis_tvalid)
    else $error("s_axis_tvalid dropped before handshake");

endmodule
