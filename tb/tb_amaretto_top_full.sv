// tb_amaretto_top_full: one complete run of the emulator at its default
// size, 16 qubits and a 2**16-entry state vector, through the AXI4-Stream
// ports.  The circuit prepares a 16-qubit GHZ state (H then a chain of 15
// CNOTs), then applies RY, T, RZ, H and a controlled RX on a few qubits so
// that many amplitudes are non-zero and complex; all 65536 amplitudes read
// back are compared with the double-precision reference to 1e-3, and the
// gate time is checked against the published formula
// 2**(Nq-1) * Ng * (2 - alpha) / 2 + (NPIPE - 1) cycles.
`timescale 1ns/1ps
module tb_amaretto_top_full;
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
    m_axis_tready <= ($urandom_range(0, 7) != 0);
  end

  logic [31:0] beats[$];
  bit          last_seen = 0;
  always @(posedge aclk) if (aresetn && m_axis_tvalid && m_axis_tready) begin
    beats.push_back(m_axis_tdata);
    if (m_axis_tlast) last_seen = 1;
  end

  // Gate time: first selector start to last write-back.
  longint cyc = 0, t0 = -1, t1 = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_emu.qss_start && t0 < 0) t0 = cyc;
    if (dut.u_emu.s4_valid) t1 = cyc;
  end

  initial begin
    ref_state st = new();
    localparam int N = 16;
    int ng = 0, nctl = 0;
    longint expect_cycles;
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tlast = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; aresetn = 1;
    st.init(N);
    src.push_back(enc(OP_SETQ, 0, 0, N));
    wait (src.size() == 0);
    wait (!emu_idle);
    wait (emu_idle);
    // GHZ preparation and a few more gates, all queued at once.
    begin
      typedef struct { opcode_e op; int t; int c; int imm; } g_t;
      g_t gl[$];
      gl.push_back('{OP_H, 0, 0, fixed_imm(OP_H)});
      for (int q = 1; q < N; q++) gl.push_back('{OP_X, q, q - 1, 0});
      gl.push_back('{OP_RY, 3, 3, ang(0.35)});
      gl.push_back('{OP_P, 7, 7, 1 << (FRAC - 2)});    // T
      gl.push_back('{OP_RZ, 15, 15, ang(-0.6)});
      gl.push_back('{OP_H, 9, 9, fixed_imm(OP_H)});
      gl.push_back('{OP_RX, 2, 12, ang(1.1)});        // controlled RX
      foreach (gl[k]) begin
        src.push_back(enc(gl[k].op, gl[k].t, gl[k].c, gl[k].imm));
        st.apply(gl[k].op, gl[k].t, gl[k].c, gl[k].imm);
        ng++;
        if (gl[k].t != gl[k].c) nctl++;
      end
    end
    src.push_back(enc(OP_READ, 0, 0, 0));
    wait (last_seen);
    repeat (10) @(posedge aclk);
    expect_cycles = (longint'(1) << (N - 1)) * (2 * ng - nctl) / 2 + NPIPE - 1;
    $display("gates=%0d controlled=%0d cycles=%0d expected=%0d", ng, nctl, t1 - t0 + 1, expect_cycles);
    check(t1 - t0 + 1 == expect_cycles, "gate time");
    check(beats.size() == 2 * (1 << N), $sformatf("%0d beats", beats.size()));
    for (int k = 0; k < (1 << N) && 2*k+1 < beats.size(); k++) begin
      real er, ei;
      er = fix2r(fix_t'(beats[2*k]))     - st.re[k];
      ei = fix2r(fix_t'(beats[2*k + 1])) - st.im[k];
      check(er < 1e-3 && er > -1e-3 && ei < 1e-3 && ei > -1e-3,
            $sformatf("amplitude %0d (%f,%f) vs (%f,%f)", k, fix2r(fix_t'(beats[2*k])),
                      fix2r(fix_t'(beats[2*k+1])), st.re[k], st.im[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
