// tb_amaretto_axis_if: random TVALID/TREADY on both AXI4-Stream channels.
// Checks that every word (with TLAST on the master side) comes out once, in
// order, that the register slices reach one word per cycle when both sides
// are always ready, and that no TVALID/TREADY is combinational (the skid
// path is exercised by stalls).
`timescale 1ns/1ps
module tb_amaretto_axis_if;
  logic aclk = 0, aresetn = 0;
  always #5 aclk = ~aclk;

  logic        s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready;
  logic [31:0] s_axis_tdata, m_axis_tdata;
  logic        rx_valid, rx_ready, tx_valid, tx_last, tx_ready;
  logic [31:0] rx_data, tx_data;

  amaretto_axis_if dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] s_sent[$], r_got[$];
  logic [32:0] t_sent[$], m_got[$];
  int rate = 5;       // out of 10; 10 = always valid/ready
  bit drain = 0;      // consumers always ready
  int full_rate_rx = 0, full_rate_m = 0, stalled = 0;

  // Handshakes seen at the last rising edge decide whether a new word may
  // be offered.
  bit s_hs = 1, t_hs = 1;
  always @(posedge aclk) begin
    s_hs = !s_axis_tvalid || s_axis_tready;
    t_hs = !tx_valid || tx_ready;
  end

  always @(negedge aclk) begin
    if (s_hs) begin
      s_axis_tvalid <= aresetn && ($urandom_range(1, 10) <= rate);
      s_axis_tdata  <= $urandom;
      s_axis_tlast  <= 1'($urandom);
    end
    if (t_hs) begin
      tx_valid <= aresetn && ($urandom_range(1, 10) <= rate);
      tx_data  <= $urandom;
      tx_last  <= 1'($urandom);
    end
    rx_ready      <= ($urandom_range(1, 10) <= rate) || drain;
    m_axis_tready <= ($urandom_range(1, 10) <= rate) || drain;
  end

  always @(posedge aclk) if (aresetn) begin
    cyc <= cyc + 1;
    if (s_axis_tvalid && s_axis_tready) s_sent.push_back(s_axis_tdata);
    if (rx_valid && rx_ready) begin r_got.push_back(rx_data); if (rate == 10) full_rate_rx++; end
    if (tx_valid && tx_ready) t_sent.push_back({tx_last, tx_data});
    if (m_axis_tvalid && m_axis_tready) begin m_got.push_back({m_axis_tlast, m_axis_tdata}); if (rate == 10) full_rate_m++; end
    if (m_axis_tvalid && !m_axis_tready) stalled++;
  end

  initial begin
    s_axis_tvalid = 0; tx_valid = 0; rx_ready = 0; m_axis_tready = 0;
    s_axis_tdata = 0; s_axis_tlast = 0; tx_data = 0; tx_last = 0;
    repeat (2) @(posedge aclk);
    aresetn = 1;
    repeat (3000) @(posedge aclk);
    rate = 10;
    repeat (200) @(posedge aclk);
    rate = 0;
    drain = 1;
    repeat (20) @(posedge aclk);
    checks++;
    if (s_sent.size() != r_got.size() || t_sent.size() != m_got.size()) begin
      failures++; $display("FAIL counts %0d/%0d %0d/%0d", s_sent.size(), r_got.size(), t_sent.size(), m_got.size());
    end
    foreach (r_got[k]) begin checks++; if (r_got[k] != s_sent[k]) begin failures++; $display("FAIL rx %0d", k); end end
    foreach (m_got[k]) begin checks++; if (m_got[k] != t_sent[k]) begin failures++; $display("FAIL tx %0d", k); end end
    checks += 2;
    if (full_rate_rx < 195 || full_rate_m < 195) begin
      failures++; $display("FAIL throughput %0d %0d of 200", full_rate_rx, full_rate_m);
    end
    if (stalled == 0) begin failures++; $display("FAIL never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
