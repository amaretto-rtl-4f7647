// tb_amaretto_emulator: runs random circuits through the emulator core
// and compares the read-out state with the double-precision reference.
//
// For several qubit counts (below, at and above NQ_MIN) it sends SETQ, a
// random sequence of gates (single-qubit and controlled, fixed and
// rotational), and READ, with random back-pressure on the TX FIFO.  It
// checks every amplitude to 1e-3, the end-of-vector flag, and that a
// pre-loaded gate sequence takes exactly sum(couples) + NPIPE - 1 cycles
// from the first selector start to the last write-back, which shows gates
// follow each other with no bubbles.  NQ_MAX is reduced to 6 for speed.
`timescale 1ns/1ps
module tb_amaretto_emulator;
  import amaretto_pkg::*;
  import amaretto_ref_pkg::*;

  localparam int unsigned NQM = 6;

  logic clk = 1'b0, clk2x = 1'b1, rst_n = 1'b0;
  always #5   clk   = ~clk;
  always #2.5 clk2x = ~clk2x;   // rising edges aligned with clk's

  instr_t   instr;
  logic     instr_valid, instr_pop, tx_push, tx_full, idle;
  tx_word_t tx_data;

  amaretto_emulator #(.NQ_MAX(NQM)) dut (
    .clk, .clk2x, .rst_n, .instr, .instr_valid, .instr_pop,
    .tx_data, .tx_push, .tx_full, .idle
  );

  int checks = 0, failures = 0;
  logic [31:0] q[$];
  tx_word_t    rx[$];
  bit          bp_en = 1'b0;

  assign instr_valid = (q.size() != 0);
  assign instr       = (q.size() != 0) ? instr_t'(q[0]) : '0;

  // The instruction queue changes only on the falling edge, so the DUT
  // always samples a stable head at the rising edge.
  logic pop_q = 1'b0;
  always @(posedge clk) begin
    pop_q <= instr_pop;
    if (tx_push) rx.push_back(tx_data);
    tx_full <= bp_en ? ($urandom_range(0, 3) == 0) : 1'b0;
  end
  always @(negedge clk) if (pop_q) void'(q.pop_front());

  // Timing of a gate burst.
  longint cyc = 0, first_start = -1, last_wb = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_qecu.qss_start && first_start < 0) first_start = cyc;
    if (dut.s4_valid) last_wb = cyc;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_circuit(input int n, input int ngates, input bit backpressure);
    ref_state st = new();
    longint expect_cycles = 0;
    int ne;
    st.init(n);
    ne = (n > int'(NQ_MIN)) ? n : int'(NQ_MIN);
    q.push_back(enc(OP_SETQ, 0, 0, n));
    wait (q.size() == 0);
    repeat (2) @(posedge clk);
    wait (idle);
    @(posedge clk);
    first_start = -1;
    // Pre-load the whole gate sequence.
    for (int g = 0; g < ngates; g++) begin
      opcode_e op;
      int t, c, imm;
      op = opcode_e'($urandom_range(int'(OP_X), int'(OP_RZ)));
      t  = $urandom_range(0, n - 1);
      c  = (n > 1 && $urandom_range(0, 2) == 0) ? $urandom_range(0, n - 1) : t;
      imm = (op inside {OP_X, OP_Y, OP_H}) ? fixed_imm(op)
                                           : int'($urandom_range(0, (1 << IMM_W) - 1));
      if (op == OP_P && $urandom_range(0, 1) == 1) imm = 1 << (FRAC - 2);  // T gate
      q.push_back(enc(op, t, c, imm));
      st.apply(op, t, c, imm);
      expect_cycles += (c == t) ? (1 << (ne - 1)) : (1 << (ne - 2));
    end
    wait (q.size() == 0);
    @(posedge clk);
    wait (idle);
    @(posedge clk);
    check(last_wb - first_start + 1 == expect_cycles + NPIPE - 1,
          $sformatf("n=%0d gate cycles %0d, expected %0d", n,
                    last_wb - first_start + 1, expect_cycles + NPIPE - 1));
    bp_en = backpressure;
    rx.delete();
    q.push_back(enc(OP_READ, 0, 0, 0));
    wait (rx.size() == (1 << n));
    repeat (20) @(posedge clk);
    bp_en = 1'b0;
    check(rx.size() == (1 << n), $sformatf("n=%0d read %0d amplitudes", n, rx.size()));
    for (int k = 0; k < (1 << n); k++) begin
      real er, ei;
      er = fix2r(rx[k].amp.re) - st.re[k];
      ei = fix2r(rx[k].amp.im) - st.im[k];
      check(er < 1e-3 && er > -1e-3 && ei < 1e-3 && ei > -1e-3,
            $sformatf("n=%0d amp %0d = (%f,%f), expected (%f,%f)", n, k,
                      fix2r(rx[k].amp.re), fix2r(rx[k].amp.im), st.re[k], st.im[k]));
      check(rx[k].last == (k == (1 << n) - 1), $sformatf("n=%0d last flag at %0d", n, k));
    end
  endtask

  initial begin
    tx_full = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_circuit(1, 6, 1'b0);
    run_circuit(2, 12, 1'b1);
    run_circuit(3, 16, 1'b0);
    run_circuit(5, 16, 1'b1);
    run_circuit(6, 20, 1'b1);
    run_circuit(4, 30, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
