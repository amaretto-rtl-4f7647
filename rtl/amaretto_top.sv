// amaretto_top: the quantum-circuit emulator as placed in the FPGA fabric.
//
// A host compiles a quantum circuit into 32-bit instructions and streams
// them in over AXI4-Stream; the emulator keeps the full state vector of up
// to NQ_MAX qubits on chip, applies gate after gate, and on a read
// instruction streams the final amplitudes back.  Two clock domains:
//   aclk  AXI4-Stream interface and communication control unit
//   clk   emulator (QECU, QSS, TU, QAU, QSRF)
//   clk2x twice clk, rising edges aligned with clk's; clocks only the
//         pumped state memory inside the QSRF
// joined by the RX (instructions) and TX (amplitudes) asynchronous FIFOs.
// The two clocks may be unrelated; the resets are asynchronous, active
// low, and should be released together.
module amaretto_top
  import amaretto_pkg::*;
#(
  parameter int unsigned NQ_MAX     = amaretto_pkg::NQ_MAX,
  parameter int unsigned FIFO_DEPTH_LOG2 = 4
) (
  input  logic        aclk,
  input  logic        aresetn,
  input  logic        clk,
  input  logic        clk2x,
  input  logic        rst_n,
  input  logic        s_axis_tvalid,
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  output logic        m_axis_tvalid,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready,
  output logic        emu_idle
);

  // Interface <-> CCU
  logic        if_rx_valid, if_rx_ready, if_tx_valid, if_tx_last, if_tx_ready;
  logic [31:0] if_rx_data, if_tx_data;
  // CCU <-> FIFOs
  logic        rx_push, rx_full, tx_pop, tx_empty;
  logic [31:0] rx_wdata;
  tx_word_t    tx_rword;
  // FIFOs <-> emulator
  logic        instr_empty, instr_pop, tx_push, tx_full;
  instr_t      instr;
  tx_word_t    tx_wdata;

  amaretto_axis_if u_if (
    .aclk, .aresetn,
    .s_axis_tvalid, .s_axis_tdata, .s_axis_tlast, .s_axis_tready,
    .m_axis_tvalid, .m_axis_tdata, .m_axis_tlast, .m_axis_tready,
    .rx_valid(if_rx_valid), .rx_data(if_rx_data), .rx_ready(if_rx_ready),
    .tx_valid(if_tx_valid), .tx_data(if_tx_data), .tx_last(if_tx_last),
    .tx_ready(if_tx_ready)
  );

  amaretto_ccu u_ccu (
    .clk(aclk), .rst_n(aresetn),
    .in_valid(if_rx_valid), .in_data(if_rx_data), .in_ready(if_rx_ready),
    .rx_push, .rx_data(rx_wdata), .rx_full,
    .tx_word(tx_rword), .tx_empty, .tx_pop,
    .out_valid(if_tx_valid), .out_data(if_tx_data), .out_last(if_tx_last),
    .out_ready(if_tx_ready)
  );

  amaretto_async_fifo #(.WIDTH(INSTR_W), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_rx_fifo (
    .wclk(aclk), .wrst_n(aresetn), .push(rx_push), .wdata(rx_wdata), .full(rx_full),
    .rclk(clk), .rrst_n(rst_n), .pop(instr_pop), .rdata(instr), .empty(instr_empty)
  );

  amaretto_async_fifo #(.WIDTH($bits(tx_word_t)), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_tx_fifo (
    .wclk(clk), .wrst_n(rst_n), .push(tx_push), .wdata(tx_wdata), .full(tx_full),
    .rclk(aclk), .rrst_n(aresetn), .pop(tx_pop), .rdata(tx_rword), .empty(tx_empty)
  );

  amaretto_emulator #(.NQ_MAX(NQ_MAX)) u_emu (
    .clk, .clk2x, .rst_n, .instr, .instr_valid(!instr_empty), .instr_pop,
    .tx_data(tx_wdata), .tx_push, .tx_full, .idle(emu_idle)
  );

endmodule
