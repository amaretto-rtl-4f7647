// amaretto_ref_pkg: double-precision reference model and instruction
// encoder for the emulator testbenches.
//
// The model keeps a state vector in 'real' arithmetic and applies each
// gate from its 2x2 matrix, written directly from the gate definitions
// (not from the DCU coefficient table), to every index pair differing in
// the target bit and, for a controlled gate, having the control bit set.
// Angles: the immediate is angle/pi with 18 fractional bits; for RX, RY
// and RZ it is the half angle, for P the full phase.
package amaretto_ref_pkg;
  import amaretto_pkg::*;

  localparam real PI = 3.14159265358979323846;

  function automatic logic [31:0] enc(input opcode_e op, input int t, input int c,
                                      input int imm);
    instr_t i;
    i.opcode  = op;
    i.target  = QIDX_W'(t);
    i.control = QIDX_W'(c);
    i.imm     = IMM_W'(imm);
    return i;
  endfunction

  // Angle (radians) to the immediate: round(angle/pi * 2**18).
  function automatic int ang(input real rad);
    return $rtoi(rad / PI * real'(1 << FRAC) + ((rad >= 0.0) ? 0.5 : -0.5));
  endfunction

  function automatic real fix2r(input fix_t v);
    return real'(v) / real'(1 << FRAC);
  endfunction

  class ref_state;
    real re[], im[];
    int  nq;

    function void init(input int n);
      nq = n;
      re = new[1 << n];
      im = new[1 << n];
      foreach (re[k]) begin re[k] = 0.0; im[k] = 0.0; end
      re[0] = 1.0;
    endfunction

    // Apply gate: m = [[m00, m01],[m10, m11]], complex entries.
    function void apply(input opcode_e op, input int t, input int c, input int imm);
      real phi, s, co, r2;
      real m00r, m00i, m01r, m01i, m10r, m10i, m11r, m11i;
      int  sv;
      sv  = imm;
      if (sv >= (1 << (IMM_W - 1))) sv -= (1 << IMM_W);   // sign-extend
      phi = PI * real'(sv) / real'(1 << FRAC);
      s = $sin(phi); co = $cos(phi); r2 = 1.0 / $sqrt(2.0);
      m00r = 0.0; m00i = 0.0; m01r = 0.0; m01i = 0.0;
      m10r = 0.0; m10i = 0.0; m11r = 0.0; m11i = 0.0;
      case (op)
        OP_X:  begin m01r = 1.0; m10r = 1.0; end
        OP_Y:  begin m01i = -1.0; m10i = 1.0; end
        OP_H:  begin m00r = r2; m01r = r2; m10r = r2; m11r = -r2; end
        OP_P:  begin m00r = 1.0; m11r = co; m11i = s; end
        OP_RX: begin m00r = co; m01i = -s; m10i = -s; m11r = co; end
        OP_RY: begin m00r = co; m01r = -s; m10r = s; m11r = co; end
        OP_RZ: begin m00r = co; m00i = -s; m11r = co; m11i = s; end
        default: begin m00r = 1.0; m11r = 1.0; end
      endcase
      for (int x = 0; x < (1 << nq); x++) begin
        if (((x >> t) & 1) == 0 && (c == t || ((x >> c) & 1) == 1)) begin
          int  y;
          real ar, ai, br, bi;
          y  = x | (1 << t);
          ar = re[x]; ai = im[x]; br = re[y]; bi = im[y];
          re[x] = m00r*ar - m00i*ai + m01r*br - m01i*bi;
          im[x] = m00r*ai + m00i*ar + m01r*bi + m01i*br;
          re[y] = m10r*ar - m10i*ai + m11r*br - m11i*bi;
          im[y] = m10r*ai + m10i*ar + m11r*bi + m11i*br;
        end
      end
    endfunction
  endclass

  // The fixed angle the compiler puts in a fixed gate's immediate.
  function automatic int fixed_imm(input opcode_e op);
    case (op)
      OP_H:    return 1 << (FRAC - 2);   // pi/4
      default: return 0;
    endcase
  endfunction

endpackage
