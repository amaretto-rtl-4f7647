// amaretto_qsrf: Quantum State Register File, the 2**NQ_MAX complex
// amplitudes of the emulated state vector.
//
// Each nominal clock cycle it reads two amplitudes (ports a and b) and
// writes up to two.  As in the published design this is done by
// "pumping": the array has one write port and two read ports, all clocked
// by clk2x at twice the emulator clock, so that one nominal cycle holds two
// write slots.  clk2x must have a rising edge at every rising edge of clk
// (same source, aligned) and one more halfway through the cycle.
//
// A toggle flop on clk, compared with its copy sampled on clk2x, tells the
// two clk2x edges apart: mid is high on the edge halfway through the cycle.
//   * mid edge:     write port a (address and data of the current cycle);
//   * aligned edge: write port b, and read both ports.
// So a read sees write a of the same cycle from the array and write b
// through a bypass (write-first), and if both ports write one address,
// port b wins.  The write-first behaviour is what lets a gate read a couple
// written by the previous gate two cycles earlier, see the emulator.
// Writing port a half a cycle after its inputs were launched is the
// half-cycle path that pumping always brings; the port arrangement and
// phase detector are this design's reading of the published description.
//
// Timing seen from clk: reads are synchronous, data appear one clk cycle
// after the address; writes take effect within the cycle.  The array is
// not reset; an s-type instruction clears the state.
module amaretto_qsrf
  import amaretto_pkg::cplx_t;
#(
  parameter int unsigned NQ_MAX = amaretto_pkg::NQ_MAX
) (
  input  logic              clk,
  input  logic              clk2x,
  input  logic              rst_n,
  input  logic [NQ_MAX-1:0] raddr_a,
  input  logic [NQ_MAX-1:0] raddr_b,
  output cplx_t             rdata_a,
  output cplx_t             rdata_b,
  input  logic              we_a,
  input  logic [NQ_MAX-1:0] waddr_a,
  input  cplx_t             wdata_a,
  input  logic              we_b,
  input  logic [NQ_MAX-1:0] waddr_b,
  input  cplx_t             wdata_b
);

  // Phase detector.
  logic tog, tog2x;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tog <= 1'b0;
    else        tog <= ~tog;
  end
  always_ff @(posedge clk2x or negedge rst_n) begin
    if (!rst_n) tog2x <= 1'b0;
    else        tog2x <= tog;
  end
  wire mid = tog ^ tog2x;

  cplx_t mem [2**NQ_MAX];

  // The single write port: a on the mid edge, b on the aligned edge.
  wire                    wen   = mid ? we_a    : we_b;
  wire [NQ_MAX-1:0]       waddr = mid ? waddr_a : waddr_b;
  cplx_t                  wdata;
  assign wdata = mid ? wdata_a : wdata_b;

  always_ff @(posedge clk2x) begin
    if (wen) mem[waddr] <= wdata;
  end

  // Two read ports on the aligned edge; write b of the same edge bypassed.
  function automatic cplx_t rd(input logic [NQ_MAX-1:0] ra, input cplx_t stored);
    if (we_b && waddr_b == ra) return wdata_b;
    else                       return stored;
  endfunction

  always_ff @(posedge clk2x) begin
    if (!mid) begin
      rdata_a <= rd(raddr_a, mem[raddr_a]);
      rdata_b <= rd(raddr_b, mem[raddr_b]);
    end
  end

endmodule
