// tb_amaretto_dcu: for every gate opcode, applies the DCU's coefficient
// choices (out = coefS*sin + coefC*cos) to random amplitudes in real
// arithmetic and compares with the gate matrix applied by the reference
// model; checks that only the phase gate suppresses the write of c_i and
// that an unknown opcode selects the identity.
`timescale 1ns/1ps
module tb_amaretto_dcu;
  import amaretto_pkg::*;
  import amaretto_ref_pkg::*;

  logic [OPC_W-1:0] opcode;
  dcu_sel_t         sel;

  amaretto_dcu dut (.*);

  int checks = 0, failures = 0;

  function automatic real pick(input coef_t c, input real ar, input real ai,
                               input real br, input real bi);
    real v;
    case (c.src)
      SRC_AR:  v = ar;
      SRC_AI:  v = ai;
      SRC_BR:  v = br;
      SRC_BI:  v = bi;
      default: v = 0.0;
    endcase
    return c.neg ? -v : v;
  endfunction

  function automatic real cu(input cu_sel_t u, input real s, input real c,
                             input real ar, input real ai, input real br, input real bi);
    return pick(u.s, ar, ai, br, bi) * s + pick(u.c, ar, ai, br, bi) * c;
  endfunction

  function automatic bit close(input real x, input real y);
    return (x - y) < 1e-9 && (y - x) < 1e-9;
  endfunction

  initial begin
    ref_state st = new();
    opcode_e ops[7] = '{OP_X, OP_Y, OP_H, OP_P, OP_RX, OP_RY, OP_RZ};
    foreach (ops[o]) begin
      for (int it = 0; it < 50; it++) begin
        real ar, ai, br, bi, s, c, phi;
        real o_ar, o_ai, o_br, o_bi;
        int imm, sv;
        ar = real'($urandom_range(0, 2000)) / 2000.0 - 0.5;
        ai = real'($urandom_range(0, 2000)) / 2000.0 - 0.5;
        br = real'($urandom_range(0, 2000)) / 2000.0 - 0.5;
        bi = real'($urandom_range(0, 2000)) / 2000.0 - 0.5;
        imm = (ops[o] inside {OP_X, OP_Y, OP_H}) ? fixed_imm(ops[o])
                                                 : int'($urandom_range(0, (1 << IMM_W) - 1));
        sv  = (imm >= (1 << (IMM_W - 1))) ? imm - (1 << IMM_W) : imm;
        phi = PI * real'(sv) / real'(1 << FRAC);
        s = $sin(phi); c = $cos(phi);
        st.init(1);
        st.re[0] = ar; st.im[0] = ai; st.re[1] = br; st.im[1] = bi;
        st.apply(ops[o], 0, 0, imm);
        opcode = ops[o];
        #1;
        o_ar = cu(sel.re_i, s, c, ar, ai, br, bi);
        o_ai = cu(sel.im_i, s, c, ar, ai, br, bi);
        o_br = cu(sel.re_j, s, c, ar, ai, br, bi);
        o_bi = cu(sel.im_j, s, c, ar, ai, br, bi);
        checks += 3;
        if (!close(o_br, st.re[1]) || !close(o_bi, st.im[1])) begin
          failures++; $display("FAIL op %s c_j", ops[o].name());
        end
        if (sel.write_i != (ops[o] != OP_P)) begin
          failures++; $display("FAIL op %s write_i", ops[o].name());
        end
        if (sel.write_i && (!close(o_ar, st.re[0]) || !close(o_ai, st.im[0]))) begin
          failures++; $display("FAIL op %s c_i", ops[o].name());
        end
        if (!sel.write_i && (!close(st.re[0], ar) || !close(st.im[0], ai))) begin
          failures++; $display("FAIL op %s c_i changed", ops[o].name());
        end
      end
    end
    // Unknown opcode: identity.
    opcode = 5'd31;
    #1;
    checks++;
    if (!close(cu(sel.re_i, 0.3, 0.7, 0.1, 0.2, 0.3, 0.4), 0.07) ||
        !close(cu(sel.im_j, 0.3, 0.7, 0.1, 0.2, 0.3, 0.4), 0.28) || !sel.write_i) begin
      failures++; $display("FAIL identity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
