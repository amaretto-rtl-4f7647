// tb_amaretto_top_sweep: the execution-time sweep.  The default-size top
// (16-qubit state memory) runs a series of random circuits whose size
// Ng * 2**Nq grows from a few tens to about 330,000, the range over which
// the emulator's run time is usually plotted.  Qubit counts go from 1 to 16,
// so both the padded small circuits (fewer than 5 qubits) and the full
// state vector are covered.
//
// Each circuit mixes every gate type, about a third of them controlled,
// with random qubits and angles.  For each one the testbench checks
//   * the gate time, from the first selector start to the last write-back,
//     against 2**(max(Nq,5)-1) * Ng * (2 - alpha) / 2 + (NPIPE - 1) cycles,
//     alpha being the fraction of controlled gates;
//   * every amplitude read back over AXI4-Stream against the
//     double-precision reference, to 2e-3.
// It prints the gate time in ns for a 100 MHz emulator clock next to
// Ng * 2**Nq.  Instructions for a circuit are queued all at once, so the
// RX FIFO fills and gates follow each other back to back.
`timescale 1ns/1ps
module tb_amaretto_top_sweep;
  import amaretto_pkg::*;
  import amaretto_ref_pkg::*;

  logic clk = 0, clk2x = 1, aclk = 0, rst_n = 0, aresetn = 0;
  always #5   clk   = ~clk;
  always #2.5 clk2x = ~clk2x;   // rising edges aligned with clk's
  always #4 aclk = ~aclk;

  logic        s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready, emu_idle;
  logic [31:0] s_axis_tdata, m_axis_tdata;

  amaretto_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // Instruction source and result sink (change on the falling edge).
  logic [31:0] src[$];
  bit s_hs = 1;
  always @(posedge aclk) s_hs = !s_axis_tvalid || s_axis_tready;
  always @(negedge aclk) begin
    if (s_hs) begin
      s_axis_tvalid <= aresetn && (src.size() != 0);
      s_axis_tdata  <= (src.size() != 0) ? src[0] : '0;
      s_axis_tlast  <= (src.size() == 1);
      if (aresetn && src.size() != 0) void'(src.pop_front());
    end
    m_axis_tready <= ($urandom_range(0, 3) != 0);
  end

  logic [31:0] beats[$];
  bit          last_seen = 0;
  always @(posedge aclk) if (aresetn && m_axis_tvalid && m_axis_tready) begin
    beats.push_back(m_axis_tdata);
    if (m_axis_tlast) last_seen = 1;
  end

  // Gate time of the current circuit: first selector start to last write-back.
  longint cyc = 0, t0 = -1, t1 = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_emu.qss_start && t0 < 0) t0 = cyc;
    if (dut.u_emu.s4_valid) t1 = cyc;
  end

  task automatic run_point(input int n, input int ng);
    ref_state st = new();
    int nctl = 0;
    longint expect_cycles;
    int bad = 0;
    st.init(n);
    src.push_back(enc(OP_SETQ, 0, 0, n));
    wait (src.size() == 0);
    wait (!emu_idle);
    wait (emu_idle);
    t0 = -1; t1 = -1;
    beats.delete();
    last_seen = 0;
    for (int g = 0; g < ng; g++) begin
      opcode_e op;
      int t, c, imm;
      op = opcode_e'($urandom_range(int'(OP_X), int'(OP_RZ)));
      t  = $urandom_range(0, n - 1);
      c  = t;
      if (n > 1 && $urandom_range(0, 2) == 0) begin
        c = $urandom_range(0, n - 2);
        if (c >= t) c++;
      end
      if (op == OP_X || op == OP_Y || op == OP_H) imm = fixed_imm(op);
      else imm = int'($urandom_range(0, (1 << IMM_W) - 1));
      src.push_back(enc(op, t, c, imm));
      st.apply(op, t, c, imm);
      if (c != t) nctl++;
    end
    src.push_back(enc(OP_READ, 0, 0, 0));
    wait (last_seen);
    repeat (4) @(posedge aclk);
    expect_cycles = (longint'(1) << ((n > NQ_MIN ? n : NQ_MIN) - 1)) * (2 * ng - nctl) / 2
                    + NPIPE - 1;
    $display("Nq=%0d Ng=%0d controlled=%0d Ng*2^Nq=%0d gate cycles=%0d expected=%0d (%0d ns at 100 MHz)",
             n, ng, nctl, ng * (1 << n), t1 - t0 + 1, expect_cycles, 10 * (t1 - t0 + 1));
    check(t1 - t0 + 1 == expect_cycles, $sformatf("Nq=%0d gate time", n));
    check(beats.size() == 2 * (1 << n), $sformatf("Nq=%0d: %0d beats", n, beats.size()));
    for (int k = 0; k < (1 << n) && 2*k+1 < beats.size(); k++) begin
      real er, ei;
      er = fix2r(fix_t'(beats[2*k]))     - st.re[k];
      ei = fix2r(fix_t'(beats[2*k + 1])) - st.im[k];
      if (!(er < 2e-3 && er > -2e-3 && ei < 2e-3 && ei > -2e-3)) bad++;
    end
    check(bad == 0, $sformatf("Nq=%0d: %0d amplitudes off", n, bad));
  endtask

  initial begin
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tlast = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; aresetn = 1;
    run_point(1, 8);
    run_point(3, 20);
    run_point(5, 40);
    run_point(8, 50);
    run_point(10, 40);
    run_point(12, 36);
    run_point(14, 12);
    run_point(16, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
