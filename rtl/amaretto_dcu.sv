// amaretto_dcu: Datapath Control Unit, the gate decoder of the arithmetic
// unit.
//
// Every supported gate updates a couple (a = c_i, b = c_j) as
//   Re/Im of c_i, c_j  =  coefS * sin(theta) + coefC * cos(theta)
// where each coefficient is one signed real or imaginary part of a or b,
// or zero.  The DCU maps the opcode to the eight coefficient choices (two
// per computing unit) and to 'write_i', which is low for the phase gate:
// P leaves c_i unchanged, which the form above cannot express once sin and
// cos are both non-zero, so c_i is simply not written back.
//
// The table below was derived for this design from the gate matrices;
// theta is the immediate angle (X, Y: 0; H: pi/4; P: phi; RX, RY, RZ:
// phi/2):
//   X : c_i = b                 c_j = a
//   Y : c_i = -i b              c_j = i a
//   H : c_i = S a + C b         c_j = S a - C b
//   P : c_i = a (not written)   c_j = b (C + iS)
//   RX: c_i = C a - iS b        c_j = -iS a + C b
//   RY: c_i = C a - S b         c_j = S a + C b
//   RZ: c_i = a (C - iS)        c_j = b (C + iS)
// Any other opcode selects the identity.  Purely combinational.
module amaretto_dcu
  import amaretto_pkg::*;
(
  input  logic [OPC_W-1:0] opcode,
  output dcu_sel_t         sel
);

  function automatic coef_t cf(input src_e s, input logic n);
    return '{src: s, neg: n};
  endfunction

  localparam coef_t Z0 = '{src: SRC_ZERO, neg: 1'b0};

  always_comb begin
    // Identity by default.
    sel.re_i    = '{s: Z0, c: cf(SRC_AR, 1'b0)};
    sel.im_i    = '{s: Z0, c: cf(SRC_AI, 1'b0)};
    sel.re_j    = '{s: Z0, c: cf(SRC_BR, 1'b0)};
    sel.im_j    = '{s: Z0, c: cf(SRC_BI, 1'b0)};
    sel.write_i = 1'b1;
    case (opcode)
      OP_X: begin
        sel.re_i = '{s: Z0, c: cf(SRC_BR, 1'b0)};
        sel.im_i = '{s: Z0, c: cf(SRC_BI, 1'b0)};
        sel.re_j = '{s: Z0, c: cf(SRC_AR, 1'b0)};
        sel.im_j = '{s: Z0, c: cf(SRC_AI, 1'b0)};
      end
      OP_Y: begin
        sel.re_i = '{s: Z0, c: cf(SRC_BI, 1'b0)};
        sel.im_i = '{s: Z0, c: cf(SRC_BR, 1'b1)};
        sel.re_j = '{s: Z0, c: cf(SRC_AI, 1'b1)};
        sel.im_j = '{s: Z0, c: cf(SRC_AR, 1'b0)};
      end
      OP_H: begin
        sel.re_i = '{s: cf(SRC_AR, 1'b0), c: cf(SRC_BR, 1'b0)};
        sel.im_i = '{s: cf(SRC_AI, 1'b0), c: cf(SRC_BI, 1'b0)};
        sel.re_j = '{s: cf(SRC_AR, 1'b0), c: cf(SRC_BR, 1'b1)};
        sel.im_j = '{s: cf(SRC_AI, 1'b0), c: cf(SRC_BI, 1'b1)};
      end
      OP_P: begin
        sel.re_j    = '{s: cf(SRC_BI, 1'b1), c: cf(SRC_BR, 1'b0)};
        sel.im_j    = '{s: cf(SRC_BR, 1'b0), c: cf(SRC_BI, 1'b0)};
        sel.write_i = 1'b0;
      end
      OP_RX: begin
        sel.re_i = '{s: cf(SRC_BI, 1'b0), c: cf(SRC_AR, 1'b0)};
        sel.im_i = '{s: cf(SRC_BR, 1'b1), c: cf(SRC_AI, 1'b0)};
        sel.re_j = '{s: cf(SRC_AI, 1'b0), c: cf(SRC_BR, 1'b0)};
        sel.im_j = '{s: cf(SRC_AR, 1'b1), c: cf(SRC_BI, 1'b0)};
      end
      OP_RY: begin
        sel.re_i = '{s: cf(SRC_BR, 1'b1), c: cf(SRC_AR, 1'b0)};
        sel.im_i = '{s: cf(SRC_BI, 1'b1), c: cf(SRC_AI, 1'b0)};
        sel.re_j = '{s: cf(SRC_AR, 1'b0), c: cf(SRC_BR, 1'b0)};
        sel.im_j = '{s: cf(SRC_AI, 1'b0), c: cf(SRC_BI, 1'b0)};
      end
      OP_RZ: begin
        sel.re_i = '{s: cf(SRC_AI, 1'b0), c: cf(SRC_AR, 1'b0)};
        sel.im_i = '{s: cf(SRC_AR, 1'b1), c: cf(SRC_AI, 1'b0)};
        sel.re_j = '{s: cf(SRC_BI, 1'b1), c: cf(SRC_BR, 1'b0)};
        sel.im_j = '{s: cf(SRC_BR, 1'b0), c: cf(SRC_BI, 1'b0)};
      end
      default: ;
    endcase
  end

endmodule
