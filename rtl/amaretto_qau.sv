// amaretto_qau: Quantum Arithmetic Unit, pipeline stages 3 and 4 of the
// emulator.
//
// It takes a couple of amplitudes (a = c_i, b = c_j), the gate's sin and
// cos and the DCU selection, and returns the updated couple.  Four
// computing units (amaretto_cu) produce Re c_i, Im c_i, Re c_j and Im c_j,
// each as coefS * sin + coefC * cos where the DCU chooses which signed
// part of a or b, or zero, each coefficient is.  The four-unit, two
// multipliers plus adder structure follows the published datapath.
//
// Timing: operand selection and multiplication in the first cycle,
// addition and rounding in the second; out_valid and the TAG_W bits of
// tag follow the data with the same two-cycle latency.  One couple per
// cycle.
module amaretto_qau
  import amaretto_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cplx_t            amp_i,
  input  cplx_t            amp_j,
  input  fix_t             sin_v,
  input  fix_t             cos_v,
  input  dcu_sel_t         sel,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output cplx_t            res_i,
  output cplx_t            res_j,
  output logic [TAG_W-1:0] tag_out
);

  function automatic fix_t pick(input coef_t c, input cplx_t a, input cplx_t b);
    fix_t v;
    unique case (c.src)
      SRC_AR:  v = a.re;
      SRC_AI:  v = a.im;
      SRC_BR:  v = b.re;
      SRC_BI:  v = b.im;
      default: v = '0;
    endcase
    return c.neg ? -v : v;
  endfunction

  amaretto_cu u_re_i (.clk, .en(1'b1), .xs(pick(sel.re_i.s, amp_i, amp_j)),
                      .xc(pick(sel.re_i.c, amp_i, amp_j)), .sin_v, .cos_v, .y(res_i.re));
  amaretto_cu u_im_i (.clk, .en(1'b1), .xs(pick(sel.im_i.s, amp_i, amp_j)),
                      .xc(pick(sel.im_i.c, amp_i, amp_j)), .sin_v, .cos_v, .y(res_i.im));
  amaretto_cu u_re_j (.clk, .en(1'b1), .xs(pick(sel.re_j.s, amp_i, amp_j)),
                      .xc(pick(sel.re_j.c, amp_i, amp_j)), .sin_v, .cos_v, .y(res_j.re));
  amaretto_cu u_im_j (.clk, .en(1'b1), .xs(pick(sel.im_j.s, amp_i, amp_j)),
                      .xc(pick(sel.im_j.c, amp_i, amp_j)), .sin_v, .cos_v, .y(res_j.im));

  logic             v1;
  logic [TAG_W-1:0] t1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0; t1 <= '0; tag_out <= '0;
    end else begin
      v1 <= in_valid;  out_valid <= v1;
      t1 <= tag_in;    tag_out   <= t1;
    end
  end

endmodule
