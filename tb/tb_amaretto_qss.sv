// tb_amaretto_qss: checks the butterfly enumeration against an independent
// list: every index x below 2**max(nq,NQ_MIN), in increasing order, whose
// target bit is 0 (and control bit 1 for a controlled gate), paired with
// x + 2**target; write enable exactly when x < 2**nq.  Also checks the
// number of cycles per gate, the 'last' flag, the context pass-through,
// and back-to-back gates with no idle cycle.  NQ_MAX reduced to 7.
`timescale 1ns/1ps
module tb_amaretto_qss;
  localparam int unsigned N = 7, NMIN = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, ready, valid, wen, last;
  logic [2:0] target, control;
  logic [3:0] nq;
  logic [7:0] ctx_in, ctx_out;
  logic [N-1:0] idx_i, idx_j;

  amaretto_qss #(.NQ_MAX(N), .NQ_MIN(NMIN), .CTX_W(8)) dut (.*);

  typedef struct { int i; int j; bit w; int ctx; } cpl_t;
  cpl_t expq[$];
  int checks = 0, failures = 0, gates_done = 0;

  task automatic expect_gate(input int n, input int t, input int c, input int ctx);
    int ne;
    ne = (n > NMIN) ? n : NMIN;
    for (int x = 0; x < (1 << ne); x++)
      if (((x >> t) & 1) == 0 && (c == t || ((x >> c) & 1) == 1))
        expq.push_back('{x, x + (1 << t), x < (1 << n), ctx});
  endtask

  // Monitor: compare every valid couple with the expected list.
  int gap = 0;
  always @(posedge clk) if (rst_n) begin
    if (valid) begin
      cpl_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected couple"); end
      else begin
        e = expq.pop_front();
        if (idx_i != N'(e.i) || idx_j != N'(e.j) || wen != e.w || ctx_out != 8'(e.ctx)) begin
          failures++;
          $display("FAIL got (%0d,%0d,%b) exp (%0d,%0d,%b)", idx_i, idx_j, wen, e.i, e.j, e.w);
        end
      end
      if (last) gates_done++;
    end else if (expq.size() != 0 && gates_done > 0) gap++;
  end

  initial begin
    start = 0; target = 0; control = 0; nq = 0; ctx_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // A list of gates issued back to back (start held, accepted on ready).
    for (int g = 0; g < 40; g++) begin
      int n, t, c;
      n = $urandom_range(1, N);
      t = $urandom_range(0, n - 1);
      c = (n > 1 && $urandom_range(0, 1) == 1) ? $urandom_range(0, n - 1) : t;
      @(negedge clk);
      start = 1; nq = 4'(n); target = 3'(t); control = 3'(c); ctx_in = 8'(g);
      expect_gate(n, t, c, g);
      @(posedge clk);
      while (!ready) @(posedge clk);
    end
    @(negedge clk); start = 0;
    wait (expq.size() == 0);
    repeat (3) @(posedge clk);
    checks++;
    if (gates_done != 40) begin failures++; $display("FAIL %0d gates ended", gates_done); end
    checks++;
    if (gap != 0) begin failures++; $display("FAIL %0d idle cycles between gates", gap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
