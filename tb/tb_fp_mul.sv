// tb_fp_mul - self-checking test of the F_p multiplier.
// Random and edge operands are compared with a wide-integer product reduced
// modulo p; the start-to-done latency is W cycles after the start cycle
// (done seen in cycle W+1 = 257 counting the start cycle).
module tb_fp_mul;
  import kac_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  fp_t a = '0, b = '0, y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp_mul dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);

  task automatic run(fp_t ta, fp_t tb_);
    fp_t exp = mulm(ta, tb_, BN_P);
    int cyc = 0;
    @(negedge clk); a = ta; b = tb_; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (y !== exp) begin failures++; $display("FAIL a=%h b=%h y=%h exp=%h", ta, tb_, y, exp); end
    if (cyc != FP_W + 1) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, 5); run(1, BN_P - 1); run(BN_P - 1, BN_P - 1); run(2, (BN_P + 1) / 2);
    for (int i = 0; i < 100; i++) run(rand_fp(BN_P), rand_fp(BN_P));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
