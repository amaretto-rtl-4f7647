// amaretto_qss: Quantum State Selector, the butterfly enumerator.
//
// A single-qubit gate on target t mixes amplitude pairs (c_i, c_j) whose
// indices differ only in bit t.  The selector produces one such couple per
// clock cycle: couple k is k with a 0 inserted at bit t, and j is i with
// bit t set.  For a controlled gate (control != target) it inserts a 0 at
// the target and a 1 at the control bit, so only couples whose control
// qubit is 1 are produced, and there are half as many.
//
// For circuits smaller than NQ_MIN qubits the enumeration still covers
// 2**NQ_MIN states, so every gate lasts at least as long as the pipeline
// and consecutive gates never read a couple before it is written back.
// Couples with an index at or above 2**nq are flagged wen=0: they are
// computed but not stored.  A gate therefore lasts 2**(max(nq,NQ_MIN)-1)
// cycles, or half that when controlled.
//
// Interface: 'start' is accepted when 'ready' is high, which is also true
// in the cycle the last couple of the previous gate is issued, so gates
// follow one another without a gap.  CTX_W bits of gate context given with
// 'start' come out with every couple of that gate.  The couple counter is
// pipeline stage 1: the outputs are decoded from it combinationally and
// address the QSRF in the same cycle; the first couple appears the cycle
// after 'start'.
module amaretto_qss

#(
  parameter int unsigned NQ_MAX = amaretto_pkg::NQ_MAX,
  parameter int unsigned NQ_MIN = amaretto_pkg::NQ_MIN,
  parameter int unsigned QW     = $clog2(NQ_MAX),
  parameter int unsigned CTX_W  = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     ready,
  input  logic [$clog2(NQ_MAX+1)-1:0] nq,
  input  logic [QW-1:0]            target,
  input  logic [QW-1:0]            control,
  input  logic [CTX_W-1:0]         ctx_in,
  output logic                     valid,
  output logic [NQ_MAX-1:0]        idx_i,
  output logic [NQ_MAX-1:0]        idx_j,
  output logic                     wen,
  output logic                     last,
  output logic [CTX_W-1:0]         ctx_out
);

  typedef logic [NQ_MAX-1:0] idx_t;

  logic              busy;
  idx_t              k, k_last;
  logic [QW-1:0]     t_q, c_q;
  logic              ctl_q;
  idx_t              valid_mask;   // ones below bit nq
  logic [CTX_W-1:0]  ctx_q;

  // Insert a zero at bit position p.
  function automatic idx_t ins0(input idx_t v, input logic [QW-1:0] p);
    idx_t low;
    low = (idx_t'(1) << p) - idx_t'(1);
    return ((v & ~low) << 1) | (v & low);
  endfunction

  idx_t ci, cj;
  always_comb begin
    logic [QW-1:0] lo, hi;
    lo = (c_q < t_q) ? c_q : t_q;
    hi = (c_q < t_q) ? t_q : c_q;
    if (ctl_q) begin
      ci = ins0(ins0(k, lo), hi) | (idx_t'(1) << c_q);
    end else begin
      ci = ins0(k, t_q);
    end
    cj = ci | (idx_t'(1) << t_q);
  end

  wire issuing_last = busy && (k == k_last);

  assign valid   = busy;
  assign idx_i   = ci;
  assign idx_j   = cj;
  assign wen     = busy && ((ci & ~valid_mask) == '0);
  assign last    = issuing_last;
  assign ctx_out = ctx_q;
  assign ready = !busy || issuing_last;

  // Number of couples minus one for the requested gate.
  function automatic idx_t couples_m1(input logic [$clog2(NQ_MAX+1)-1:0] n,
                                      input logic ctl);
    int unsigned ne;
    ne = (int'(n) > int'(NQ_MIN)) ? int'(n) : NQ_MIN;
    if (ne > NQ_MAX) ne = NQ_MAX;
    return (idx_t'(1) << (ctl ? ne - 2 : ne - 1)) - idx_t'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      k          <= '0;
      k_last     <= '0;
      t_q        <= '0;
      c_q        <= '0;
      ctl_q      <= 1'b0;
      valid_mask <= '0;
      ctx_q      <= '0;
    end else begin
      if (busy) k <= k + idx_t'(1);
      if (issuing_last) busy <= 1'b0;
      if (start && ready) begin
        busy       <= 1'b1;
        k          <= '0;
        k_last     <= couples_m1(nq, control != target);
        t_q        <= target;
        c_q        <= control;
        ctl_q      <= (control != target);
        valid_mask <= (32'(nq) >= NQ_MAX) ? '1 : (idx_t'(1) << nq) - idx_t'(1);
        ctx_q      <= ctx_in;
      end
    end
  end

endmodule
