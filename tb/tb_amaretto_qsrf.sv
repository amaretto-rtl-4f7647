// tb_amaretto_qsrf: random two-port writes and reads against a shadow
// array; checks one-cycle read latency, write-first read-during-write on
// either port, port b winning a same-address double write, and read data
// holding steady across the mid-cycle clk2x edge.  clk2x runs at twice clk
// with aligned rising edges; inputs change 1 ns after the clk edge, as
// they would from flops.  NQ_MAX is reduced to 6 so that collisions are
// frequent.
`timescale 1ns/1ps
module tb_amaretto_qsrf;
  import amaretto_pkg::*;
  localparam int unsigned N = 6;
  logic clk = 1'b0, clk2x = 1'b1, rst_n = 1'b0;
  always #5   clk   = ~clk;
  always #2.5 clk2x = ~clk2x;

  logic [N-1:0] raddr_a, raddr_b, waddr_a, waddr_b;
  cplx_t        rdata_a, rdata_b, wdata_a, wdata_b;
  logic         we_a, we_b;

  amaretto_qsrf #(.NQ_MAX(N)) dut (.*);

  cplx_t shadow [2**N];
  int checks = 0, failures = 0;

  function automatic cplx_t rnd();
    return cplx_t'({$urandom, $urandom});
  endfunction

  initial begin
    cplx_t exp_a, exp_b;
    we_a = 0; we_b = 0;
    raddr_a = '0; raddr_b = '0; waddr_a = '0; waddr_b = '0; wdata_a = '0; wdata_b = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Fill.
    for (int k = 0; k < 2**N; k += 2) begin
      @(posedge clk); #1;
      we_a = 1; waddr_a = N'(k);   wdata_a = rnd(); shadow[k]   = wdata_a;
      we_b = 1; waddr_b = N'(k+1); wdata_b = rnd(); shadow[k+1] = wdata_b;
    end
    for (int it = 0; it < 3000; it++) begin
      @(posedge clk); #1;
      raddr_a = N'($urandom); raddr_b = N'($urandom);
      we_a = $urandom_range(0, 1) == 1; waddr_a = ($urandom_range(0,3) == 0) ? raddr_a : N'($urandom);
      we_b = $urandom_range(0, 1) == 1; waddr_b = ($urandom_range(0,3) == 0) ? raddr_b : N'($urandom);
      if ($urandom_range(0, 7) == 0) waddr_b = waddr_a;
      wdata_a = rnd(); wdata_b = rnd();
      // Expected: write-first, port b wins.
      if (we_a) shadow[waddr_a] = wdata_a;
      if (we_b) shadow[waddr_b] = wdata_b;
      exp_a = shadow[raddr_a];
      exp_b = shadow[raddr_b];
      @(posedge clk); #1;
      checks += 2;
      if (rdata_a !== exp_a) begin failures++; $display("FAIL a @%0d", raddr_a); end
      if (rdata_b !== exp_b) begin failures++; $display("FAIL b @%0d", raddr_b); end
      we_a = 0; we_b = 0;
      #6;   // past the mid-cycle clk2x edge
      checks++;
      if (rdata_a !== exp_a || rdata_b !== exp_b) begin
        failures++; $display("FAIL: read data changed mid-cycle");
      end
    end
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
