// tb_amaretto_tu: compares the trigonometric unit with $sin/$cos of
// pi*theta for random angles (error at most 2 LSB of Q2.18), checks the
// exact values the fixed gates need (theta = 0, 1/4, 1/2, -1) and the
// three-cycle latency.
`timescale 1ns/1ps
module tb_amaretto_tu;
  import amaretto_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid, out_valid;
  logic [IMM_W-1:0] theta;
  fix_t             sin_o, cos_o;

  amaretto_tu dut (.*);

  logic [IMM_W-1:0] expq[$];
  int checks = 0, failures = 0, cyc = 0, first_in = -1, first_out = -1, maxerr = 0;

  function automatic int iabs(input int v); return v < 0 ? -v : v; endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && first_in < 0) first_in = cyc;
    if (out_valid) begin
      logic [IMM_W-1:0] th;
      int sv, es, ec;
      real a;
      if (first_out < 0) first_out = cyc;
      th = expq.pop_front();
      sv = int'($signed(th));
      a  = PI * real'(sv) / real'(1 << FRAC);
      es = $rtoi($floor($sin(a) * real'(1 << FRAC) + 0.5));
      ec = $rtoi($floor($cos(a) * real'(1 << FRAC) + 0.5));
      checks += 2;
      if (iabs(int'(sin_o) - es) > 2) begin failures++; $display("FAIL sin(%0d) %0d vs %0d", sv, sin_o, es); end
      if (iabs(int'(cos_o) - ec) > 2) begin failures++; $display("FAIL cos(%0d) %0d vs %0d", sv, cos_o, ec); end
      if (iabs(int'(sin_o) - es) > maxerr) maxerr = iabs(int'(sin_o) - es);
      if (iabs(int'(cos_o) - ec) > maxerr) maxerr = iabs(int'(cos_o) - ec);
      // Exact values.
      if (sv == 0 || sv == (1 << 16) || sv == (1 << 17) || sv == -(1 << 18)) begin
        checks++;
        if (sin_o != fix_t'(es) || cos_o != fix_t'(ec) ||
            (sv == (1 << 16) && sin_o != cos_o)) begin
          failures++; $display("FAIL exact value at %0d", sv);
        end
      end
    end
  end

  initial begin
    in_valid = 0; theta = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      in_valid = 1;
      case (k)
        0: theta = '0;
        1: theta = IMM_W'(1 << 16);
        2: theta = IMM_W'(1 << 17);
        3: theta = IMM_W'(1 << 18);
        default: theta = IMM_W'($urandom);
      endcase
      expq.push_back(theta);
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (first_out - first_in != 3) begin failures++; $display("FAIL latency %0d", first_out - first_in); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("max error %0d LSB", maxerr);
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
