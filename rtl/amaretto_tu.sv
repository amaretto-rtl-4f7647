// amaretto_tu: Trigonometric Unit, sin and cos of the gate angle.
//
// The 19-bit immediate theta is the angle divided by pi, two's complement
// with 18 fractional bits, so its bits read as unsigned are the angle as a
// fraction of a full turn.  The top two bits give the quadrant, the next
// LUT_BITS index a quarter-wave table of sin and cos, and the remaining
// bits are a small offset d.  Within the quadrant a second-order Taylor
// expansion around the table point refines the result:
//   sin(a+d) = S + C*d - S*d^2/2,   cos(a+d) = C - S*d - C*d^2/2,
// and the quadrant is applied by swapping and negating.  The result is
// rounded to Q2.18 to nearest, ties to even, like the datapath.  With 64 entries
// d < 0.025 rad and the neglected d^3/6 term stays below 2**-18.
// Table points are exact, so theta = 0 gives exactly sin = 0, cos = 1.0
// and theta = 1/4 gives equal sin and cos, which the fixed gates rely on.
//
// Pairing a table with a Taylor series follows the published design; the
// table size, the expansion order and the internal precision (24
// fractional bits) are this design's choices.  The table is computed at
// elaboration.
//
// Timing: fully pipelined, one angle per cycle, results three cycles after
// the angle is presented (in_valid/out_valid track it).  Outputs are Q2.18.
module amaretto_tu
  import amaretto_pkg::fix_t, amaretto_pkg::NBITS, amaretto_pkg::FRAC;
#(
  parameter int unsigned IMM_W    = amaretto_pkg::IMM_W,
  parameter int unsigned LUT_BITS = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IMM_W-1:0] theta,
  output logic             out_valid,
  output fix_t             sin_o,
  output fix_t             cos_o
);

  localparam int unsigned IW    = 24;             // internal fractional bits
  localparam int unsigned LUT_N = 2**LUT_BITS;
  localparam int unsigned RW    = IMM_W - 2;      // bits inside a quadrant
  localparam int unsigned DW    = RW - LUT_BITS;  // offset bits
  // pi/2 * 2**20, scales the offset to radians.
  localparam longint unsigned KPI = 64'd1647099;

  typedef logic [IW:0] lut_t;                 // unsigned, 0 .. 1.0
  typedef lut_t lut_arr_t [LUT_N];

  function automatic lut_arr_t gen_lut(input bit want_cos);
    lut_arr_t t;
    real a;
    for (int i = 0; i < LUT_N; i++) begin
      a = 3.14159265358979323846 / 2.0 * real'(i) / real'(LUT_N);
      t[i] = lut_t'($rtoi((want_cos ? $cos(a) : $sin(a)) * real'(2**IW) + 0.5));
    end
    return t;
  endfunction

  localparam lut_arr_t SIN_LUT = gen_lut(1'b0);
  localparam lut_arr_t COS_LUT = gen_lut(1'b1);

  // Stage A: table read and offset in radians.
  logic [1:0]          qa;
  lut_t                sa, ca;
  logic [IW-1:0]       da;        // d * 2**IW
  logic                va;
  // Stage B: first-order products and d^2/2.
  logic [1:0]          qb;
  lut_t                sb, cb;
  logic signed [IW+2:0] sdb, cdb, d2b;
  logic                vb;

  wire [LUT_BITS-1:0] idx  = theta[RW-1 -: LUT_BITS];
  wire [DW-1:0]       doff = theta[DW-1:0];

  // d * 2**IW = doff * (pi/2) * 2**(IW-RW) = doff * KPI >> (20 - IW + RW)
  localparam int unsigned DSH = 20 - IW + RW;
  wire [63:0] dprod = 64'(doff) * KPI;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va <= 1'b0; vb <= 1'b0; out_valid <= 1'b0;
      qa <= '0; sa <= '0; ca <= '0; da <= '0;
      qb <= '0; sb <= '0; cb <= '0; sdb <= '0; cdb <= '0; d2b <= '0;
      sin_o <= '0; cos_o <= '0;
    end else begin
      // Stage A
      va <= in_valid;
      qa <= theta[IMM_W-1 -: 2];
      sa <= SIN_LUT[idx];
      ca <= COS_LUT[idx];
      da <= IW'(dprod >> DSH);
      // Stage B
      vb  <= va;
      qb  <= qa;
      sb  <= sa;
      cb  <= ca;
      sdb <= (IW+3)'((64'(sa) * 64'(da)) >> IW);
      cdb <= (IW+3)'((64'(ca) * 64'(da)) >> IW);
      d2b <= (IW+3)'((64'(da) * 64'(da)) >> (IW + 1));
      // Stage C
      out_valid <= vb;
      {sin_o, cos_o} <= finish(qb, sb, cb, sdb, cdb, d2b);
    end
  end

  function automatic fix_t rne(input logic signed [IW+3:0] v);
    logic signed [IW+3:0] q;
    logic [IW-FRAC-1:0]   r;
    q = v >>> (IW - FRAC);
    r = v[IW-FRAC-1:0];
    if (r[IW-FRAC-1] && ((r[IW-FRAC-2:0] != '0) || q[0])) q = q + 1'b1;
    return fix_t'(q);
  endfunction

  function automatic logic [2*NBITS-1:0] finish(
      input logic [1:0] q, input lut_t s, input lut_t c,
      input logic signed [IW+2:0] sd, input logic signed [IW+2:0] cd,
      input logic signed [IW+2:0] d2);
    logic signed [IW+3:0] s_full, c_full;
    fix_t s18, c18;
    s_full = $signed({3'b000, s}) + (IW+4)'(cd)
           - (IW+4)'((64'(s) * 64'(d2)) >> IW);
    c_full = $signed({3'b000, c}) - (IW+4)'(sd)
           - (IW+4)'((64'(c) * 64'(d2)) >> IW);
    // Round to 18 fractional bits, nearest even, like the datapath.
    s18 = rne(s_full);
    c18 = rne(c_full);
    unique case (q)
      2'd0:    return {s18, c18};
      2'd1:    return {c18, -s18};
      2'd2:    return {-s18, -c18};
      default: return {-c18, s18};
    endcase
  endfunction

endmodule
