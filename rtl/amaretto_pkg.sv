// amaretto_pkg: types and constants shared by the quantum-emulator RTL.
//
// Numbers: every real or imaginary part is a 20-bit two's-complement
// fixed-point value with 2 integer bits (sign included) and 18 fractional
// bits (Q2.18), so 1.0 is 2**18 and the range is [-2, 2).  A complex
// amplitude is a {re, im} pair, 40 bits.
//
// Instructions are 32 bits: opcode (5) | target (4) | control (4) |
// immediate (19).  The widths follow the published 16-qubit configuration
// (5-bit opcode, 4-bit qubit indices, a 19-bit angle with 18 fractional
// bits); the field order and opcode values are this design's own choice.
// A g-type instruction whose control equals its target is a single-qubit
// gate; otherwise the gate acts only where the control qubit is 1.
package amaretto_pkg;

  // Published configuration.
  localparam int unsigned NQ_MAX   = 16;  // emulable qubits
  localparam int unsigned NBITS    = 20;  // bits per real or imaginary part
  localparam int unsigned FRAC     = 18;  // fractional bits
  localparam int unsigned OPC_W    = 5;   // ceil(log2(M)) opcode bits
  localparam int unsigned QIDX_W   = 4;   // ceil(log2(N)) qubit-index bits
  localparam int unsigned IMM_W    = NBITS - 1;  // 19-bit angle
  localparam int unsigned INSTR_W  = OPC_W + 2 * QIDX_W + IMM_W;  // 32
  localparam int unsigned NPIPE    = 5;   // pipeline stages
  localparam int unsigned NQ_MIN   = 5;   // ceil(log2(NPIPE) + 2)

  typedef logic signed [NBITS-1:0] fix_t;

  typedef struct packed {
    fix_t re;
    fix_t im;
  } cplx_t;

  // Opcodes.  Fixed gates carry their angle in the immediate, which the
  // compiler fills in: X, Y: 0; H: 1/4 (pi/4); P: phi/pi (Z=1, S=1/2,
  // T=1/4, Sdg=-1/2, Tdg=-1/4); RX, RY, RZ: phi/(2*pi) (the half angle).
  typedef enum logic [OPC_W-1:0] {
    OP_SETQ = 5'd0,   // s-type: immediate = number of qubits
    OP_READ = 5'd1,   // r-type: send the state vector
    OP_X    = 5'd2,
    OP_Y    = 5'd3,
    OP_H    = 5'd4,
    OP_P    = 5'd5,   // phase gate diag(1, e^{i*theta})
    OP_RX   = 5'd6,
    OP_RY   = 5'd7,
    OP_RZ   = 5'd8
  } opcode_e;

  typedef struct packed {
    logic [OPC_W-1:0]  opcode;
    logic [QIDX_W-1:0] target;
    logic [QIDX_W-1:0] control;
    logic [IMM_W-1:0]  imm;
  } instr_t;

  // Operand source of one coefficient (alpha .. iota) of the couple
  // update  out = coefA * sin(theta) + coefB * cos(theta).
  typedef enum logic [2:0] {
    SRC_ZERO = 3'd0,
    SRC_AR   = 3'd1,   // Re(c_i)
    SRC_AI   = 3'd2,   // Im(c_i)
    SRC_BR   = 3'd3,   // Re(c_j)
    SRC_BI   = 3'd4    // Im(c_j)
  } src_e;

  typedef struct packed {
    src_e src;
    logic neg;
  } coef_t;

  // One computing unit computes  s * sin + c * cos.
  typedef struct packed {
    coef_t s;
    coef_t c;
  } cu_sel_t;

  // DCU output: the four computing units (Re c_i, Im c_i, Re c_j, Im c_j)
  // and whether c_i is written back.
  typedef struct packed {
    cu_sel_t re_i;
    cu_sel_t im_i;
    cu_sel_t re_j;
    cu_sel_t im_j;
    logic    write_i;
  } dcu_sel_t;

  // Word placed in the TX FIFO: one amplitude plus an end-of-vector flag.
  typedef struct packed {
    logic  last;
    cplx_t amp;
  } tx_word_t;

endpackage
