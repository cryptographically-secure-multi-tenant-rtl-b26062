// tb_fp_inv - self-checking test of the F_p inverter.
// For random a the product a * inv(a) mod p must be 1 and the result must
// match an independent Fermat exponentiation; inv(0) must be 0. The latency
// is checked against the fixed square-and-multiply count for the default p.
module tb_fp_inv;
  import kac_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  fp_t a = '0, y;
  int checks = 0, failures = 0;
  int exp_cyc;

  always #5 clk = ~clk;

  fp_inv dut (.clk, .rst_n, .start, .a, .busy, .done, .y);

  task automatic run(fp_t ta);
    int cyc = 0;
    @(negedge clk); a = ta; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 3;
    if (ta != 0 && mulm(ta, y, BN_P) != 1) begin failures++; $display("FAIL a*inv(a) != 1 for %h", ta); end
    if (ta != 0 && y != invm(ta, BN_P)) begin failures++; $display("FAIL inv mismatch"); end
    if (ta == 0 && y != 0) begin failures++; $display("FAIL inv(0)"); end
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d exp %0d", cyc, exp_cyc); end
  endtask

  initial begin
    // one squaring per exponent bit plus one multiply per set bit,
    // each product W cycles plus 2 cycles of sequencing
    fp_t e = BN_P - 2;
    int ones = 0;
    for (int i = 0; i < FP_W; i++) ones += int'(e[i]);
    exp_cyc = (FP_W + ones) * (FP_W + 2) + 1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1); run(2); run(BN_P - 1); run(0);
    for (int i = 0; i < 4; i++) run(rand_fp(BN_P));
    $display("inverter latency %0d cycles", exp_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
