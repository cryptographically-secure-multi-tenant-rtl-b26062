// tb_fp_addsub - self-checking test of the F_p adder/subtractor.
// Random and edge-case operands (0, p-1, sums just above and below p) are
// compared with wide-integer reference arithmetic; the start-to-done latency
// must be 8 cycles after the start cycle (done seen in the 9th cycle)
// for the 256-bit, 64-bit-digit default.
module tb_fp_addsub;
  import kac_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, sub = 1'b0, busy, done;
  fp_t a = '0, b = '0, y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp_addsub dut (.clk, .rst_n, .start, .sub, .a, .b, .busy, .done, .y);

  task automatic run(fp_t ta, fp_t tb_, logic ts);
    fp_t exp = ts ? subm(ta, tb_, BN_P) : addm(ta, tb_, BN_P);
    int cyc = 0;
    @(negedge clk); a = ta; b = tb_; sub = ts; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (y !== exp) begin failures++; $display("FAIL %s a=%h b=%h y=%h exp=%h", ts ? "sub" : "add", ta, tb_, y, exp); end
    if (cyc != 9) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, 0, 0); run(0, 0, 1);
    run(BN_P - 1, 1, 0); run(BN_P - 1, BN_P - 1, 0); run(0, 1, 1); run(1, BN_P - 1, 1);
    run(BN_P - 2, 1, 0); run(5, 5, 1);
    for (int i = 0; i < 200; i++) run(rand_fp(BN_P), rand_fp(BN_P), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
