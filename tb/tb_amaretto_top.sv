// tb_amaretto_top: end-to-end test of the whole emulator through its
// AXI4-Stream ports, with the interface clock (8 ns) unrelated to the
// emulator clock (10 ns).  Random circuits for several qubit counts are
// streamed in as instructions; the state vector streamed back (two beats
// per amplitude, TLAST at the end) is compared with the double-precision
// reference to 1e-3 per component.
//
// It also counts how often each mechanism of the design occurs and fails
// if one never does: state initialisation (SETQ), read-out (READ),
// single-qubit and controlled gates, padding couples of small circuits
// computed but not stored, back-to-back gate issue with no idle cycle,
// phase gates that skip the write of c_i, instructions dropped (unknown
// opcode or absent qubit), back-pressure on the TX FIFO, on the RX FIFO and
// on the output stream.  NQ_MAX is reduced to 6 to keep it short.
`timescale 1ns/1ps
module tb_amaretto_top;
  import amaretto_pkg::*;
  import amaretto_ref_pkg::*;
  localparam int unsigned NQM = 6;

  logic clk = 0, clk2x = 1, aclk = 0, rst_n = 0, aresetn = 0;
  always #5   clk   = ~clk;
  always #2.5 clk2x = ~clk2x;   // rising edges aligned with clk's
  always #4 aclk = ~aclk;

  logic        s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready, emu_idle;
  logic [31:0] s_axis_tdata, m_axis_tdata;

  amaretto_top #(.NQ_MAX(NQM)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // ---------------- stream source ----------------
  logic [31:0] src[$];
  bit s_hs = 1, slow_sink = 0;
  always @(posedge aclk) s_hs = !s_axis_tvalid || s_axis_tready;
  always @(negedge aclk) begin
    if (s_hs) begin
      s_axis_tvalid <= aresetn && (src.size() != 0);
      s_axis_tdata  <= (src.size() != 0) ? src[0] : '0;
      s_axis_tlast  <= (src.size() == 1);
      if (aresetn && src.size() != 0) void'(src.pop_front());
    end
    m_axis_tready <= slow_sink ? ($urandom_range(0, 4) == 0) : ($urandom_range(0, 3) != 0);
  end

  // ---------------- stream sink ----------------
  logic [31:0] beats[$];
  int vectors_done = 0;
  always @(posedge aclk) if (aresetn && m_axis_tvalid && m_axis_tready) begin
    beats.push_back(m_axis_tdata);
    if (m_axis_tlast) vectors_done++;
    check(!m_axis_tlast || (beats.size() % 2 == 0), "TLAST on a real-part beat");
  end

  // ---------------- mechanism counters ----------------
  int n_setq = 0, n_read = 0, n_single = 0, n_ctrl = 0, n_pad = 0, n_b2b = 0;
  int n_skip_i = 0, n_drop = 0, n_txfull = 0, n_rxfull = 0, n_mstall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_emu.u_qecu.state == 2'd0 && dut.u_emu.u_qecu.pend_v) begin
      if (dut.u_emu.u_qecu.op == OP_SETQ && !dut.u_emu.pipe_busy) n_setq++;
      if (dut.u_emu.u_qecu.op == OP_READ && !dut.u_emu.pipe_busy) n_read++;
      if ((dut.u_emu.u_qecu.is_gate && !dut.u_emu.u_qecu.gate_ok) ||
          !(dut.u_emu.u_qecu.is_gate || dut.u_emu.u_qecu.op inside {OP_SETQ, OP_READ})) n_drop++;
    end
    if (dut.u_emu.qss_start) begin
      if (dut.u_emu.gate_target == dut.u_emu.gate_control) n_single++; else n_ctrl++;
      if (dut.u_emu.s1_valid) n_b2b++;     // previous gate still issuing
    end
    if (dut.u_emu.s1_valid && !dut.u_emu.s1_wen) n_pad++;
    if (dut.u_emu.s4_valid && dut.u_emu.s4_wb.we_j && !dut.u_emu.s4_wb.we_i) n_skip_i++;
    if (dut.u_emu.u_qecu.state == 2'd2 && dut.tx_full) n_txfull++;
  end
  always @(posedge aclk) if (aresetn) begin
    if (dut.rx_full) n_rxfull++;
    if (m_axis_tvalid && !m_axis_tready) n_mstall++;
  end

  // ---------------- one circuit ----------------
  task automatic run_circuit(input int n, input int ngates, input bit extras);
    ref_state st = new();
    int base;
    st.init(n);
    src.push_back(enc(OP_SETQ, 0, 0, n));
    for (int g = 0; g < ngates; g++) begin
      opcode_e op;
      int t, c, imm;
      op = opcode_e'($urandom_range(int'(OP_X), int'(OP_RZ)));
      t  = $urandom_range(0, n - 1);
      c  = (n > 1 && $urandom_range(0, 2) == 0) ? $urandom_range(0, n - 1) : t;
      imm = (op inside {OP_X, OP_Y, OP_H}) ? fixed_imm(op)
                                           : int'($urandom_range(0, (1 << IMM_W) - 1));
      src.push_back(enc(op, t, c, imm));
      st.apply(op, t, c, imm);
      if (extras && g == ngates / 2) begin
        src.push_back(32'hF800_0000);                  // unknown opcode
        src.push_back(enc(OP_H, NQM + 1, NQM + 1, 0)); // absent qubit
      end
    end
    src.push_back(enc(OP_READ, 0, 0, 0));
    base = beats.size();
    wait (beats.size() == base + 2 * (1 << n));
    for (int k = 0; k < (1 << n); k++) begin
      real er, ei;
      er = fix2r(fix_t'(beats[base + 2*k]))     - st.re[k];
      ei = fix2r(fix_t'(beats[base + 2*k + 1])) - st.im[k];
      check(er < 1e-3 && er > -1e-3 && ei < 1e-3 && ei > -1e-3,
            $sformatf("n=%0d amplitude %0d", n, k));
      check(beats[base + 2*k] == 32'(fix_t'(beats[base + 2*k])), "sign extension");
    end
  endtask

  initial begin
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tlast = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; aresetn = 1;
    run_circuit(2, 10, 1'b1);
    run_circuit(6, 40, 1'b0);     // long gate list fills the RX FIFO
    slow_sink = 1;
    run_circuit(5, 12, 1'b0);     // slow DMA: TX FIFO fills
    slow_sink = 0;
    run_circuit(3, 20, 1'b1);
    run_circuit(1, 8, 1'b0);
    repeat (20) @(posedge aclk);
    check(vectors_done == 5, $sformatf("%0d TLASTs", vectors_done));
    $display("mechanisms: setq=%0d read=%0d single=%0d controlled=%0d padding=%0d back_to_back=%0d",
             n_setq, n_read, n_single, n_ctrl, n_pad, n_b2b);
    $display("            skip_ci=%0d dropped=%0d tx_fifo_full=%0d rx_fifo_full=%0d axis_stall=%0d",
             n_skip_i, n_drop, n_txfull, n_rxfull, n_mstall);
    check(n_setq == 5 && n_read == 5, "SETQ/READ counts");
    check(n_single > 0, "no single-qubit gate");
    check(n_ctrl > 0, "no controlled gate");
    check(n_pad > 0, "no padding couple");
    check(n_b2b > 0, "no back-to-back gate");
    check(n_skip_i > 0, "no phase gate write skip");
    check(n_drop == 4, "dropped instructions");
    check(n_txfull > 0, "TX FIFO never full");
    check(n_rxfull > 0, "RX FIFO never full");
    check(n_mstall > 0, "output stream never stalled");
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
