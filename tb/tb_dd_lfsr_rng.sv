// tb_dd_lfsr_rng: checks the random row source against an independent
// Fibonacci-form description of the same polynomial (x^16+x^14+x^13+x^11+1)
// and checks the full period of 2^16-1 with no zero state.
`timescale 1ns/1ps
module tb_dd_lfsr_rng;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;
  logic [15:0] rnd;
  int checks = 0, failures = 0;

  dd_lfsr_rng #(.SEED(16'h0001)) u_dut (.clk, .rst_n, .rnd);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: a Galois LFSR with mask m is the bit-reverse-time dual of the
  // Fibonacci LFSR; here we simply step the polynomial division directly:
  // multiply-by-x^-1 modulo p(x) over GF(2).
  function automatic logic [15:0] step_ref(input logic [15:0] s);
    logic [16:0] v;
    // s represents a polynomial a(x); compute a(x) * x^-1 mod p(x),
    // where p(x) = x^16 + x^14 + x^13 + x^11 + 1.
    v = {1'b0, s};
    if (v[0]) v = v ^ 17'h1_6801; // add p(x) (bits 16,14,13,11,0) to clear bit 0
    return v[16:1];
  endfunction

  logic [15:0] ref_s;
  int period;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    checks++; if (rnd != 16'h0001) begin failures++; $display("FAIL seed"); end
    ref_s = 16'h0001;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      ref_s = step_ref(ref_s);
      checks++;
      if (rnd != ref_s) begin
        failures++;
        if (failures < 5) $display("FAIL step %0d: %h vs %h", i, rnd, ref_s);
      end
    end
    period = 1000;
    while (rnd != 16'h0001) begin
      @(negedge clk);
      period++;
      if (rnd == 16'h0) begin failures++; $display("FAIL zero state"); break; end
      if (period > 70000) break;
    end
    checks++;
    if (period != 65535) begin failures++; $display("FAIL period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
