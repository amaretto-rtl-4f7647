// tb_amaretto_qecu: the control unit alone, with the selector, pipeline,
// QSRF and TX FIFO replaced by small models.  Checks: SETQ sets nq (with
// clamping) and writes |0..0> to exactly 2**nq addresses two at a time;
// each valid gate starts the selector once, with its opcode, qubits and
// angle, no earlier than TU_LAT cycles after it was fetched and never
// while the selector is busy; gates on absent qubits and unknown opcodes
// are dropped; READ waits for the pipeline to drain, then pushes the
// amplitudes in order with the last one flagged, never while the TX FIFO
// is full.  NQ_MAX reduced to 6.
`timescale 1ns/1ps
module tb_amaretto_qecu;
  import amaretto_pkg::*;
  import amaretto_ref_pkg::*;
  localparam int unsigned N = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  instr_t            instr;
  logic              instr_valid, instr_pop, qss_ready, qss_start, pipe_busy;
  logic [IMM_W-1:0]  tu_theta;
  logic [OPC_W-1:0]  gate_opcode;
  logic [QIDX_W-1:0] gate_target, gate_control;
  logic [2:0]        nq;
  logic              init_we, rd_en, tx_push, tx_full, idle;
  logic [N-1:0]      init_addr, rd_addr;
  cplx_t             init_data0, rd_data;
  tx_word_t          tx_data;

  amaretto_qecu #(.NQ_MAX(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // Instruction source (changes on the falling edge).
  logic [31:0] q[$];
  logic pop_q = 0;
  assign instr_valid = q.size() != 0;
  assign instr = (q.size() != 0) ? instr_t'(q[0]) : '0;
  always @(posedge clk) pop_q <= instr_pop;
  always @(negedge clk) if (pop_q) void'(q.pop_front());

  // Selector / pipeline model: a started gate keeps the selector busy for
  // a random time, the pipeline for 4 cycles more.
  int qss_left = 0, pipe_left = 0, cyc = 0, fetched_at = -1;
  assign qss_ready = (qss_left <= 1);
  assign pipe_busy = (qss_left > 0) || (pipe_left > 0) || qss_start;
  int started[$];   // encoded instructions seen at qss_start
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (instr_pop) fetched_at = cyc;
    if (qss_start) begin
      check(qss_left <= 1, "start while selector busy");
      check(cyc - fetched_at >= 3, "start before the TU result");
      started.push_back({gate_opcode, gate_target, gate_control, tu_theta});
      qss_left <= $urandom_range(1, 20);
      pipe_left <= 0;
    end else if (qss_left > 0) begin
      qss_left <= qss_left - 1;
      if (qss_left == 1) pipe_left <= 4;
    end else if (pipe_left > 0) pipe_left <= pipe_left - 1;
  end

  // QSRF model for initialisation and read-out.
  cplx_t mem [2**N];
  int init_writes = 0;
  always @(posedge clk) begin
    if (init_we) begin
      mem[init_addr] <= init_data0;
      mem[init_addr | 1] <= '0;
      init_writes++;
      check(init_addr[0] == 1'b0, "odd init address");
    end
    if (rd_en) begin
      rd_data <= mem[rd_addr];
      check(!pipe_busy, "read-out while the pipeline is busy");
    end
  end

  // TX FIFO model: four entries, drained at random.
  tx_word_t txq[$];
  int fill = 0, full_cycles = 0;
  assign tx_full = (fill == 4);
  always @(posedge clk) begin
    if (tx_push) begin
      check(!tx_full, "push while full");
      txq.push_back(tx_data);
    end
    if (tx_full) full_cycles++;
    fill <= fill + int'(tx_push) - int'(fill > 0 && $urandom_range(0, 3) == 0);
  end

  task automatic wait_idle();
    repeat (2) @(posedge clk);
    while (!(idle && q.size() == 0)) @(posedge clk);
  endtask

  task automatic setq(input int n, input int expect_n);
    init_writes = 0;
    q.push_back(enc(OP_SETQ, 0, 0, n));
    wait_idle();
    check(int'(nq) == expect_n, $sformatf("SETQ %0d gave nq=%0d", n, nq));
    check(init_writes == ((1 << expect_n) + 1) / 2, $sformatf("SETQ %0d: %0d init cycles", n, init_writes));
  endtask

  task automatic read_and_check(input int n);
    txq.delete();
    for (int k = 0; k < (1 << n); k++) mem[k] = cplx_t'({$urandom, $urandom});
    q.push_back(enc(OP_READ, 0, 0, 0));
    wait_idle();
    check(txq.size() == (1 << n), $sformatf("read %0d words", txq.size()));
    foreach (txq[k]) begin
      check(txq[k].amp == mem[k] && txq[k].last == (k == (1 << n) - 1),
            $sformatf("read word %0d", k));
    end
  endtask

  initial begin
    int exp_started[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(nq == 1, "nq after reset");
    setq(0, 1);
    setq(40, N);
    setq(3, 3);
    check(mem[0] == '{re: fix_t'(1 << FRAC), im: '0} && mem[1] == '0 && mem[7] == '0,
          "initial state |000>");
    // Gates: valid, one on an absent qubit, one unknown opcode.
    for (int g = 0; g < 200; g++) begin
      opcode_e op;
      int t, c, imm;
      logic [31:0] w;
      op  = opcode_e'($urandom_range(int'(OP_X), int'(OP_RZ)));
      t   = $urandom_range(0, 2);
      c   = $urandom_range(0, 2);
      imm = int'($urandom_range(0, (1 << IMM_W) - 1));
      w   = enc(op, t, c, imm);
      q.push_back(w);
      exp_started.push_back(w);
    end
    q.push_back(enc(OP_H, 5, 5, 0));          // qubit 5 absent with nq = 3
    q.push_back(32'h f800_0000);              // opcode 31: unknown
    q.push_back(enc(OP_X, 0, 2, 0));
    exp_started.push_back(enc(OP_X, 0, 2, 0));
    wait_idle();
    check(started.size() == exp_started.size(),
          $sformatf("%0d gates started, %0d expected", started.size(), exp_started.size()));
    foreach (exp_started[k])
      if (k < started.size()) check(started[k] == exp_started[k], $sformatf("gate %0d fields", k));
    read_and_check(3);
    setq(6, 6);
    read_and_check(6);
    check(full_cycles > 0, "TX FIFO never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
