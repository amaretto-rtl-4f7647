// tb_amaretto_async_fifo: writer and reader on unrelated clocks (10 ns and
// 7 ns, then swapped rates by bursts), random push and pop.  Checks order
// and content of every word, that full and empty are each reached, that
// full really means DEPTH words are stored, and that nothing is lost.
`timescale 1ns/1ps
module tb_amaretto_async_fifo;
  localparam int W = 32, DL = 4;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #5   wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  logic         push, pop, full, empty;
  logic [W-1:0] wdata, rdata;

  amaretto_async_fifo #(.WIDTH(W), .DEPTH_LOG2(DL)) dut (.*);

  logic [W-1:0] model[$];
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0, empty_seen = 0;
  int wr_rate = 9, rd_rate = 3;
  localparam int NWORDS = 2000;

  // Writer.
  always @(negedge wclk) begin
    push  <= wrst_n && (sent < NWORDS) && !full && ($urandom_range(0, 9) < wr_rate);
    wdata <= $urandom;
  end
  always @(posedge wclk) if (wrst_n) begin
    if (push && !full) begin
      // Accepting a word while DEPTH are stored would overwrite one.
      checks++;
      if (model.size() >= (1 << DL)) begin
        failures++; $display("FAIL accepted word %0d with %0d stored", sent, model.size());
      end
      model.push_back(wdata);
      sent++;
    end
    if (full) full_seen++;
  end

  // Reader.
  always @(negedge rclk) pop <= rrst_n && !empty && ($urandom_range(0, 9) < rd_rate);
  always @(posedge rclk) if (rrst_n) begin
    if (empty) empty_seen++;
    if (pop && !empty) begin
      checks++;
      if (model.size() == 0 || rdata != model[0]) begin
        failures++; $display("FAIL read %h", rdata);
      end
      if (model.size() != 0) void'(model.pop_front());
      got++;
    end
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    #30 wrst_n = 1; rrst_n = 1;
    wait (sent == NWORDS / 2);
    wr_rate = 2; rd_rate = 10;      // now the reader is faster
    wait (got == NWORDS);
    #200;
    checks += 3;
    if (full_seen == 0)  begin failures++; $display("FAIL full never seen"); end
    if (empty_seen == 0) begin failures++; $display("FAIL empty never seen"); end
    if (model.size() != 0 || !empty) begin failures++; $display("FAIL words left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
