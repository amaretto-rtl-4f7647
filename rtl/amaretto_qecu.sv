// amaretto_qecu: Quantum Emulator Control Unit.
//
// Fetches 32-bit instructions from the RX FIFO (first-word fall-through)
// and runs them:
//   s-type (SETQ)  waits for the pipeline to drain, sets the qubit count to
//                  the immediate (clamped to 1..NQ_MAX) and writes the state
//                  |0...0> into the QSRF, two amplitudes per cycle.
//   g-type (gates) decodes the gate and starts the state selector with the
//                  gate's sin/cos; the next instruction is fetched while the
//                  current gate runs, and its angle goes through the
//                  trigonometric unit (TU_LAT cycles) in the meantime, so
//                  consecutive gates follow each other with no idle cycle.
//                  A gate naming a qubit at or above nq is dropped.
//   r-type (READ)  waits for the pipeline to drain and pushes the 2**nq
//                  amplitudes, in index order, into the TX FIFO, the last one
//                  flagged; one amplitude every two cycles, paused while the
//                  FIFO is full.
// Unknown opcodes are dropped.  The three instruction types follow the
// published design; the opcode values, state initialisation on SETQ and the
// read-out order are this design's choices.  After reset nq is 1.
//
// Timing: a gate takes 2**(max(nq,NQ_MIN)-1) cycles in the selector, half
// that if controlled; the pipeline adds NPIPE-1 cycles before the last
// write-back.  SETQ takes ceil(2**nq/2) cycles plus the drain.
module amaretto_qecu
  import amaretto_pkg::*;
#(
  parameter int unsigned NQ_MAX = amaretto_pkg::NQ_MAX,
  parameter int unsigned TU_LAT = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // RX FIFO read side
  input  instr_t               instr,
  input  logic                 instr_valid,
  output logic                 instr_pop,
  // Gate issue: TU angle, DCU opcode, QSS start
  output logic [IMM_W-1:0]     tu_theta,
  output logic [OPC_W-1:0]     gate_opcode,
  output logic [QIDX_W-1:0]    gate_target,
  output logic [QIDX_W-1:0]    gate_control,
  input  logic                 qss_ready,
  output logic                 qss_start,
  output logic [$clog2(NQ_MAX+1)-1:0] nq,
  input  logic                 pipe_busy,
  // QSRF access for initialisation and read-out
  output logic                 init_we,
  output logic [NQ_MAX-1:0]    init_addr,      // even address; +1 is the pair
  output cplx_t                init_data0,
  output logic                 rd_en,
  output logic [NQ_MAX-1:0]    rd_addr,
  input  cplx_t                rd_data,
  // TX FIFO write side
  output logic                 tx_push,
  output tx_word_t             tx_data,
  input  logic                 tx_full,
  output logic                 idle
);

  typedef enum logic [1:0] {ST_RUN, ST_INIT, ST_READ} state_e;
  typedef logic [NQ_MAX-1:0] addr_t;
  localparam fix_t ONE = fix_t'(1 << FRAC);

  state_e                 state;
  instr_t                 pend;
  logic                   pend_v;
  logic [$clog2(TU_LAT+1)-1:0] pend_cnt;
  addr_t                  ptr, last_addr;
  logic                   rd_inflight, rd_last_q;

  wire opcode_e op = opcode_e'(pend.opcode);
  wire is_gate = (op == OP_X) || (op == OP_Y) || (op == OP_H) || (op == OP_P) ||
                 (op == OP_RX) || (op == OP_RY) || (op == OP_RZ);
  wire gate_ok = (32'(pend.target) < 32'(nq)) && (32'(pend.control) < 32'(nq));
  wire tu_done = (32'(pend_cnt) == TU_LAT);

  assign tu_theta     = pend.imm;
  assign gate_opcode  = pend.opcode;
  assign gate_target  = pend.target;
  assign gate_control = pend.control;
  assign qss_start    = (state == ST_RUN) && pend_v && is_gate && gate_ok &&
                        tu_done && qss_ready;
  assign instr_pop    = (state == ST_RUN) && !pend_v && instr_valid;

  assign init_we    = (state == ST_INIT);
  assign init_addr  = ptr;
  assign init_data0 = (ptr == '0) ? '{re: ONE, im: '0} : '{re: '0, im: '0};

  assign rd_en   = (state == ST_READ) && !rd_inflight && !tx_full;
  assign rd_addr = ptr;
  assign tx_push = rd_inflight;
  assign tx_data = '{last: rd_last_q, amp: rd_data};

  assign idle = (state == ST_RUN) && !pend_v && !pipe_busy;

  function automatic logic [$clog2(NQ_MAX+1)-1:0] clamp_nq(input logic [IMM_W-1:0] v);
    if (v == '0) return 1;
    if (32'(v) > NQ_MAX) return ($clog2(NQ_MAX+1))'(NQ_MAX);
    return ($clog2(NQ_MAX+1))'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_RUN;
      pend        <= '0;
      pend_v      <= 1'b0;
      pend_cnt    <= '0;
      nq          <= 1;
      ptr         <= '0;
      last_addr   <= '0;
      rd_inflight <= 1'b0;
      rd_last_q   <= 1'b0;
    end else begin
      unique case (state)
        ST_RUN: begin
          if (instr_pop) begin
            pend     <= instr;
            pend_v   <= 1'b1;
            pend_cnt <= '0;
          end else if (pend_v) begin
            if (!tu_done) pend_cnt <= pend_cnt + 1'b1;
            if (is_gate) begin
              if (!gate_ok || qss_start) pend_v <= 1'b0;
            end else if (op == OP_SETQ) begin
              if (!pipe_busy) begin
                nq        <= clamp_nq(pend.imm);
                last_addr <= addr_t'((64'd1 << clamp_nq(pend.imm)) - 64'd1);
                ptr       <= '0;
                state     <= ST_INIT;
                pend_v    <= 1'b0;
              end
            end else if (op == OP_READ) begin
              if (!pipe_busy) begin
                last_addr <= addr_t'((64'd1 << nq) - 64'd1);
                ptr       <= '0;
                state     <= ST_READ;
                pend_v    <= 1'b0;
              end
            end else begin
              pend_v <= 1'b0;   // unknown opcode
            end
          end
        end
        ST_INIT: begin
          ptr <= ptr + addr_t'(2);
          if ((ptr | addr_t'(1)) == last_addr) state <= ST_RUN;
        end
        ST_READ: begin
          rd_inflight <= rd_en;
          if (rd_en) begin
            rd_last_q <= (ptr == last_addr);
            ptr       <= ptr + addr_t'(1);
          end
          if (rd_inflight && rd_last_q) state <= ST_RUN;
        end
        default: state <= ST_RUN;
      endcase
    end
  end

endmodule
