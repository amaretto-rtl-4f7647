// amaretto_async_fifo: asynchronous FIFO between two clock domains, used
// for the instruction (RX) and state-vector (TX) buffers.
//
// Classic dual-clock design: binary read and write pointers one bit wider
// than the address, their Gray-coded copies passed to the other domain
// through two-flop synchronisers, full computed in the write domain and
// empty in the read domain.  Both flags are conservative (they may stay
// set a few cycles after the other side moved) and never wrong.  The read
// side is first-word fall-through: rdata shows the oldest entry whenever
// empty is low, and pop removes it.
//
// Clock-domain crossing through asynchronous FIFOs follows the published
// design; the Gray-pointer structure and DEPTH are this design's choices.
// Pushing while full and popping while empty are ignored (and flagged by
// assertions).
module amaretto_async_fifo #(
  parameter int unsigned WIDTH      = 32,
  parameter int unsigned DEPTH_LOG2 = 4
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);

  localparam int unsigned AW = DEPTH_LOG2;
  typedef logic [AW:0] ptr_t;

  logic [WIDTH-1:0] mem [2**AW];

  ptr_t wbin, wgray, rbin, rgray;
  ptr_t rgray_w1, rgray_w2;   // read pointer in the write domain
  ptr_t wgray_r1, wgray_r2;   // write pointer in the read domain

  function automatic ptr_t bin2gray(input ptr_t b);
    return b ^ (b >> 1);
  endfunction

  // Write domain.
  wire  do_push   = push && !full;
  wire  ptr_t wbin_n  = wbin + ptr_t'(do_push);
  wire  ptr_t wgray_n = bin2gray(wbin_n);

  always_ff @(posedge wclk) begin
    if (do_push) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; full <= 1'b0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= wgray_n;
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      // Full when the pointers differ only in the two top Gray bits.
      full     <= (wgray_n == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
    end
  end

  // Read domain.
  wire  do_pop    = pop && !empty;
  wire  ptr_t rbin_n  = rbin + ptr_t'(do_pop);
  wire  ptr_t rgray_n = bin2gray(rbin_n);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0; empty <= 1'b1;
    end else begin
      rbin     <= rbin_n;
      rgray    <= rgray_n;
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      empty    <= (rgray_n == wgray_r2);
    end
  end

  assign rdata = mem[rbin[AW-1:0]];

  // Protocol rules for the users of the FIFO.
  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) !(push && full))
    else $error("push while full");
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) !(pop && empty))
    else $error("pop while empty");

endmodule
