// amaretto_ccu: communication control unit, in the interface clock domain.
//
// Inbound, each 32-bit word from the interface is one instruction and is
// pushed into the RX FIFO; the interface is held off (in_ready low) while
// the FIFO is full.  Outbound, each TX FIFO entry is one amplitude with an
// end-of-vector flag; it is sent as two 32-bit beats, the real part then
// the imaginary part, each sign-extended from 20 bits, and the second beat
// of the flagged amplitude carries out_last.  The entry is popped when its
// second beat is accepted.
//
// That such a unit coordinates the FIFOs and the interface follows the
// published design; the beat format is this design's choice.  Valid/ready
// handshakes on both sides; out_valid does not depend on out_ready.
module amaretto_ccu
  import amaretto_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // inbound stream from the interface
  input  logic         in_valid,
  input  logic [31:0]  in_data,
  output logic         in_ready,
  // RX FIFO write side
  output logic         rx_push,
  output logic [31:0]  rx_data,
  input  logic         rx_full,
  // TX FIFO read side (first-word fall-through)
  input  tx_word_t     tx_word,
  input  logic         tx_empty,
  output logic         tx_pop,
  // outbound stream to the interface
  output logic         out_valid,
  output logic [31:0]  out_data,
  output logic         out_last,
  input  logic         out_ready
);

  logic second;   // 0: real-part beat, 1: imaginary-part beat

  assign in_ready = !rx_full;
  assign rx_push  = in_valid && !rx_full;
  assign rx_data  = in_data;

  assign out_valid = !tx_empty;
  assign out_data  = second ? 32'(tx_word.amp.im) : 32'(tx_word.amp.re);
  assign out_last  = second && tx_word.last;
  assign tx_pop    = out_valid && out_ready && second;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      second <= 1'b0;
    else if (out_valid && out_ready) second <= !second;
  end

endmodule
