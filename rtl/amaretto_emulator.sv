// amaretto_emulator: the emulator core, a five-stage pipeline that applies
// one gate to the state vector one amplitude couple per clock cycle.
//
//   stage 1  QSS     produces the couple indices (i, j) and write enables
//   stage 2  QSRF    reads c_i and c_j
//   stage 3  QAU     selects operands (DCU) and multiplies by sin / cos
//   stage 4  QAU     adds and rounds to 20-bit fixed point
//   stage 5  QSRF    writes c_i and c_j back
//
// The QECU fetches instructions, drives the TU with the next gate's angle
// while the current gate runs, and starts the QSS; gate context (DCU
// selection, sin, cos) travels with every couple, so the last couples of
// one gate and the first of the next can share the pipeline.  No stall
// logic exists: every gate spans at least 2**(NQ_MIN-2) couples and the
// QSRF is write-first, so a couple is always written back before the next
// gate reads it.  The QECU also uses the QSRF ports to initialise the
// state (s-type) and to read it out into the TX FIFO (r-type).
//
// Interface: RX FIFO read side (instr, instr_valid, instr_pop) and TX FIFO
// write side (tx_data, tx_push, tx_full), all in the emulator clock clk.
// clk2x, twice clk with aligned rising edges, clocks only the QSRF array
// (pumping, see amaretto_qsrf).
module amaretto_emulator
  import amaretto_pkg::*;
#(
  parameter int unsigned NQ_MAX = amaretto_pkg::NQ_MAX
) (
  input  logic     clk,
  input  logic     clk2x,
  input  logic     rst_n,
  input  instr_t   instr,
  input  logic     instr_valid,
  output logic     instr_pop,
  output tx_word_t tx_data,
  output logic     tx_push,
  input  logic     tx_full,
  output logic     idle
);

  localparam int unsigned QW  = $clog2(NQ_MAX);
  localparam int unsigned NQW = $clog2(NQ_MAX+1);

  typedef struct packed {
    dcu_sel_t sel;
    fix_t     sin_v;
    fix_t     cos_v;
  } ctx_t;

  typedef struct packed {
    logic [NQ_MAX-1:0] idx_i;
    logic [NQ_MAX-1:0] idx_j;
    logic              we_i;
    logic              we_j;
  } wb_t;

  // QECU <-> datapath
  logic [IMM_W-1:0]  tu_theta;
  logic [OPC_W-1:0]  gate_opcode;
  logic [QIDX_W-1:0] gate_target, gate_control;
  logic              qss_ready, qss_start, pipe_busy;
  logic [NQW-1:0]    nq;
  logic              init_we, rd_en;
  logic [NQ_MAX-1:0] init_addr, rd_addr;
  cplx_t             init_data0;
  cplx_t             rdata_a, rdata_b;

  amaretto_qecu #(.NQ_MAX(NQ_MAX)) u_qecu (
    .clk, .rst_n, .instr, .instr_valid, .instr_pop,
    .tu_theta, .gate_opcode, .gate_target, .gate_control,
    .qss_ready, .qss_start, .nq, .pipe_busy,
    .init_we, .init_addr, .init_data0, .rd_en, .rd_addr, .rd_data(rdata_a),
    .tx_push, .tx_data, .tx_full, .idle
  );

  // Gate context: trigonometric values and DCU selection.
  fix_t     tu_sin, tu_cos;
  logic     tu_valid;
  dcu_sel_t dcu_sel;
  ctx_t     ctx_in;

  amaretto_tu u_tu (
    .clk, .rst_n, .in_valid(1'b1), .theta(tu_theta),
    .out_valid(tu_valid), .sin_o(tu_sin), .cos_o(tu_cos)
  );

  // The QECU starts a gate only once the TU pipeline holds its angle.
  a_trig_valid: assert property (@(posedge clk) disable iff (!rst_n) qss_start |-> tu_valid)
    else $error("gate started before sin/cos were valid");

  amaretto_dcu u_dcu (.opcode(gate_opcode), .sel(dcu_sel));

  assign ctx_in = '{sel: dcu_sel, sin_v: tu_sin, cos_v: tu_cos};

  // Stage 1: butterfly selection.
  logic              s1_valid, s1_wen, s1_last;
  logic [NQ_MAX-1:0] s1_i, s1_j;
  ctx_t              s1_ctx;
  logic              qss_busy;

  amaretto_qss #(.NQ_MAX(NQ_MAX), .CTX_W($bits(ctx_t))) u_qss (
    .clk, .rst_n, .start(qss_start), .ready(qss_ready), .nq,
    .target(QW'(gate_target)), .control(QW'(gate_control)), .ctx_in,
    .valid(s1_valid), .idx_i(s1_i), .idx_j(s1_j), .wen(s1_wen),
    .last(s1_last), .ctx_out(s1_ctx)
  );
  assign qss_busy = !qss_ready || qss_start;

  // Stage 2: QSRF read (registered inside the QSRF); align the rest.
  logic s2_valid;
  ctx_t s2_ctx;
  wb_t  s2_wb;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_ctx   <= '0;
      s2_wb    <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_ctx   <= s1_ctx;
      s2_wb    <= '{idx_i: s1_i, idx_j: s1_j,
                    we_i: s1_valid && s1_wen && s1_ctx.sel.write_i,
                    we_j: s1_valid && s1_wen};
    end
  end

  // Stages 3-4: arithmetic.
  logic  s4_valid;
  cplx_t s4_i, s4_j;
  wb_t   s4_wb;
  logic  s3_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s3_valid <= 1'b0;
    else        s3_valid <= s2_valid;
  end

  amaretto_qau #(.TAG_W($bits(wb_t))) u_qau (
    .clk, .rst_n, .in_valid(s2_valid), .amp_i(rdata_a), .amp_j(rdata_b),
    .sin_v(s2_ctx.sin_v), .cos_v(s2_ctx.cos_v), .sel(s2_ctx.sel),
    .tag_in(s2_wb), .out_valid(s4_valid), .res_i(s4_i), .res_j(s4_j),
    .tag_out(s4_wb)
  );

  assign pipe_busy = qss_busy || s1_valid || s2_valid || s3_valid || s4_valid;

  // Stage 5: write-back, or initialisation by the QECU.
  logic              we_a, we_b;
  logic [NQ_MAX-1:0] waddr_a, waddr_b, raddr_a;
  cplx_t             wdata_a, wdata_b;

  always_comb begin
    if (init_we) begin
      we_a    = 1'b1;
      waddr_a = init_addr;
      wdata_a = init_data0;
      we_b    = 1'b1;
      waddr_b = init_addr | NQ_MAX'(1);
      wdata_b = '0;
    end else begin
      we_a    = s4_valid && s4_wb.we_i;
      waddr_a = s4_wb.idx_i;
      wdata_a = s4_i;
      we_b    = s4_valid && s4_wb.we_j;
      waddr_b = s4_wb.idx_j;
      wdata_b = s4_j;
    end
    raddr_a = rd_en ? rd_addr : s1_i;
  end

  amaretto_qsrf #(.NQ_MAX(NQ_MAX)) u_qsrf (
    .clk, .clk2x, .rst_n, .raddr_a, .raddr_b(s1_j), .rdata_a, .rdata_b,
    .we_a, .waddr_a, .wdata_a, .we_b, .waddr_b, .wdata_b
  );

endmodule
