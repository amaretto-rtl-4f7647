// amaretto_cu: one computing unit of the arithmetic unit, two multipliers
// and one adder:  y = xs * sin + xc * cos, rounded to Q2.18.
//
// Stage 1 registers the two 40-bit products; stage 2 adds them and drops
// 18 fractional bits with round-to-nearest, ties to even, as the published
// design does.  No saturation: for a unitary gate on a normalised state
// the result stays inside [-2, 2).  Latency two cycles, one result per
// cycle; 'en' advances the pipeline (tie high for free running).
module amaretto_cu
  import amaretto_pkg::fix_t, amaretto_pkg::NBITS, amaretto_pkg::FRAC;
(
  input  logic clk,
  input  logic en,
  input  fix_t xs,
  input  fix_t xc,
  input  fix_t sin_v,
  input  fix_t cos_v,
  output fix_t y
);

  logic signed [2*NBITS-1:0] ps, pc;
  logic signed [2*NBITS:0]   sum;
  logic signed [2*NBITS:0]   q;
  logic [FRAC-1:0]           rem;
  logic                      up;

  always_comb begin
    sum = (2*NBITS+1)'(ps) + (2*NBITS+1)'(pc);
    q   = sum >>> FRAC;
    rem = sum[FRAC-1:0];
    up  = rem[FRAC-1] && ((rem[FRAC-2:0] != '0) || q[0]);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      ps <= xs * sin_v;
      pc <= xc * cos_v;
      y  <= fix_t'(q + (2*NBITS+1)'(up));
    end
  end

endmodule
