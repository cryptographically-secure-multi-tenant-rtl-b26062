// tb_fp12_mul - self-checking test of the F_p12 multiplier.
// Compares products of random elements with the behavioural polynomial
// reference, checks field properties on the hardware alone (1 * a = a,
// a * w = shift of a with the w^12 rule applied, commutativity), and the
// fixed latency of 166 * (W + 12) cycles.
module tb_fp12_mul;
  import kac_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  fp12_t a = '0, b = '0, y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp12_mul dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);

  function automatic fp12_t rand12();
    fp12_t r;
    for (int n = 0; n < 12; n++) r[n] = rand_fp(BN_P);
    return r;
  endfunction

  task automatic mul(fp12_t x, fp12_t z, output fp12_t r);
    int cyc;
    @(negedge clk); a = x; b = z; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    r = y;
    checks++;
    if (cyc != 166 * (FP_W + 12) + 1) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    fp12_t x, z, r1, r2, one, wel, exp;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    one = '0; one[0] = 1;
    wel = '0; wel[1] = 1;
    for (int t = 0; t < 3; t++) begin
      x = rand12(); z = rand12();
      mul(x, z, r1);
      checks++;
      if (r1 != fp12_mul_ref(x, z)) begin failures++; $display("FAIL product %0d", t); end
      mul(z, x, r2);
      checks++;
      if (r1 != r2) begin failures++; $display("FAIL commutativity"); end
    end
    mul(one, x, r1);
    checks++;
    if (r1 != x) begin failures++; $display("FAIL identity"); end
    // x * w: coefficients move up one, x[11] w^12 = x[11] (18 w^6 - 82)
    exp = '0;
    for (int n = 1; n < 12; n++) exp[n] = x[n-1];
    exp[6] = addm(exp[6], mulm(18, x[11], BN_P), BN_P);
    exp[0] = subm(0, mulm(82, x[11], BN_P), BN_P);
    mul(x, wel, r1);
    checks++;
    if (r1 != exp) begin failures++; $display("FAIL multiply by w"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
