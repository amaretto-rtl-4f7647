// tb_amaretto_ccu: the communication control unit between stream models
// and FIFO models.  Inbound: every accepted word reaches the RX FIFO once,
// and nothing is accepted while the FIFO is full.  Outbound: every TX FIFO
// entry leaves as two beats, real then imaginary part sign-extended to 32
// bits, with out_last only on the second beat of a flagged entry, under
// random out_ready; the entry is popped once.
`timescale 1ns/1ps
module tb_amaretto_ccu;
  import amaretto_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, rx_push, rx_full, tx_empty, tx_pop;
  logic        out_valid, out_last, out_ready;
  logic [31:0] in_data, rx_data, out_data;
  tx_word_t    tx_word;

  amaretto_ccu dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // Inbound.
  logic [31:0] sent[$], rxf[$];
  always @(negedge clk) begin
    if (!in_valid || in_ready) begin   // keep a stalled word stable
      in_valid <= rst_n && ($urandom_range(0, 3) != 0);
      in_data  <= $urandom;
    end
    rx_full <= ($urandom_range(0, 3) == 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) sent.push_back(in_data);
    if (rx_push) begin
      check(!rx_full, "push into a full RX FIFO");
      rxf.push_back(rx_data);
    end
  end

  // Outbound: TX FIFO model (first-word fall-through) and stream sink.
  tx_word_t txq[$];
  logic [31:0] beats[$];
  logic        lasts[$];
  assign tx_empty = (txq.size() == 0);
  assign tx_word  = (txq.size() != 0) ? txq[0] : '0;
  logic pop_q = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    pop_q <= tx_pop;
    if (out_valid && out_ready) begin beats.push_back(out_data); lasts.push_back(out_last); end
  end
  always @(negedge clk) if (pop_q) void'(txq.pop_front());

  initial begin
    tx_word_t ref_words[$];
    in_valid = 0; in_data = 0; rx_full = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      tx_word_t w;
      w.amp.re = fix_t'($urandom);
      w.amp.im = fix_t'($urandom);
      w.last   = (k % 50 == 49);
      ref_words.push_back(w);
      txq.push_back(w);
    end
    wait (txq.size() == 0);
    repeat (10) @(posedge clk);
    check(beats.size() == 600, $sformatf("%0d beats", beats.size()));
    foreach (ref_words[k]) begin
      if (2*k+1 < beats.size()) begin
        check(beats[2*k]   == 32'(ref_words[k].amp.re) && !lasts[2*k], $sformatf("beat re %0d", k));
        check(beats[2*k+1] == 32'(ref_words[k].amp.im) && lasts[2*k+1] == ref_words[k].last,
              $sformatf("beat im %0d", k));
      end
    end
    check(sent.size() > 100 && sent.size() == rxf.size(), "inbound count");
    foreach (sent[k]) if (k < rxf.size()) check(sent[k] == rxf[k], $sformatf("inbound word %0d", k));
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
