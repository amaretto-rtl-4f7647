// tb_amaretto_qau: random couples, angles and coefficient selections
// through the arithmetic unit.  The expected 20-bit results are computed
// here with 64-bit integers and an explicit floor/remainder form of
// round-to-nearest-even; ties are forced often by choosing sin = 0.5.
// Also checks the two-cycle latency and the tag pass-through.
`timescale 1ns/1ps
module tb_amaretto_qau;
  import amaretto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, out_valid;
  cplx_t    amp_i, amp_j, res_i, res_j;
  fix_t     sin_v, cos_v;
  dcu_sel_t sel;
  logic [7:0] tag_in, tag_out;

  amaretto_qau #(.TAG_W(8)) dut (.*);

  typedef struct { cplx_t ri; cplx_t rj; logic [7:0] tag; int cyc; } exp_t;
  exp_t expq[$];
  int checks = 0, failures = 0, cyc = 0, ties = 0;

  function automatic longint pickv(input coef_t c, input cplx_t a, input cplx_t b);
    longint v;
    case (c.src)
      SRC_AR:  v = longint'(a.re);
      SRC_AI:  v = longint'(a.im);
      SRC_BR:  v = longint'(b.re);
      SRC_BI:  v = longint'(b.im);
      default: v = 0;
    endcase
    return c.neg ? -v : v;
  endfunction

  function automatic fix_t rne(input longint v);
    longint q, r;
    q = v >>> FRAC;                 // floor
    r = v - (q << FRAC);            // 0 .. 2**18-1
    if (r == (1 << (FRAC - 1))) ties++;
    if (r > (1 << (FRAC - 1)) || (r == (1 << (FRAC - 1)) && (q & 1) == 1)) q++;
    return fix_t'(q);
  endfunction

  function automatic fix_t model(input cu_sel_t u, input cplx_t a, input cplx_t b,
                                 input fix_t s, input fix_t c);
    return rne(pickv(u.s, a, b) * longint'(s) + pickv(u.c, a, b) * longint'(c));
  endfunction

  function automatic coef_t rcoef();
    coef_t c;
    c.src = src_e'($urandom_range(0, 4));
    c.neg = 1'($urandom);
    return c;
  endfunction

  function automatic fix_t ramp();
    return fix_t'($signed($urandom_range(0, 2 * (1 << 17))) - (1 << 17));   // [-0.5, 0.5]
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      exp_t e;
      checks++;
      e = expq.pop_front();
      if (res_i != e.ri || res_j != e.rj || tag_out != e.tag || cyc - e.cyc != 2) begin
        failures++;
        $display("FAIL got %h %h exp %h %h (latency %0d)", res_i, res_j, e.ri, e.rj, cyc - e.cyc);
      end
    end
  end

  initial begin
    in_valid = 0; amp_i = '0; amp_j = '0; sin_v = '0; cos_v = '0; sel = '0; tag_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      amp_i = '{re: ramp(), im: ramp()};
      amp_j = '{re: ramp(), im: ramp()};
      if ($urandom_range(0, 2) == 0) begin
        sin_v = fix_t'(1 << (FRAC - 1));       // 0.5: many exact ties
        cos_v = fix_t'(0);
      end else begin
        sin_v = fix_t'($signed($urandom_range(0, 2 * (1 << FRAC))) - (1 << FRAC));
        cos_v = fix_t'($signed($urandom_range(0, 2 * (1 << FRAC))) - (1 << FRAC));
      end
      sel.re_i = '{s: rcoef(), c: rcoef()};
      sel.im_i = '{s: rcoef(), c: rcoef()};
      sel.re_j = '{s: rcoef(), c: rcoef()};
      sel.im_j = '{s: rcoef(), c: rcoef()};
      sel.write_i = 1'($urandom);
      tag_in = 8'($urandom);
      if (in_valid) begin
        e.ri  = '{re: model(sel.re_i, amp_i, amp_j, sin_v, cos_v),
                  im: model(sel.im_i, amp_i, amp_j, sin_v, cos_v)};
        e.rj  = '{re: model(sel.re_j, amp_i, amp_j, sin_v, cos_v),
                  im: model(sel.im_j, amp_i, amp_j, sin_v, cos_v)};
        e.tag = tag_in;
        e.cyc = cyc;
        expq.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    checks++;
    if (ties < 100) begin failures++; $display("FAIL only %0d rounding ties exercised", ties); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
