// tb_ec_point_unit - self-checking test of the elliptic-curve point unit.
// Points are multiples of the generator (1, 2) of y^2 = x^3 + 3, computed
// with affine reference formulas. Each case runs EC_ADD or EC_DBL on
// (possibly randomly scaled) Jacobian inputs, then EC_AFF on the result, and
// compares the affine output with the reference. It also checks the
// Jacobian result directly (X = x Z^2, Y = y Z^3), the degenerate flag for
// P + P, and the cycle counts of addition and doubling.
module tb_ec_point_unit;
  import kac_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done, degenerate;
  ec_op_e op = EC_ADD;
  fp_t p1x = '0, p1y = '0, p1z = '0, p2x = '0, p2y = '0, p2z = '0;
  fp_t rx, ry, rz;
  int checks = 0, failures = 0;
  int add_cyc = 0, dbl_cyc = 0;

  always #5 clk = ~clk;

  ec_point_unit dut (
    .clk, .rst_n, .start, .op, .p1_x(p1x), .p1_y(p1y), .p1_z(p1z),
    .p2_x(p2x), .p2_y(p2y), .p2_z(p2z), .busy, .done, .degenerate,
    .r_x(rx), .r_y(ry), .r_z(rz));

  task automatic go(ec_op_e o, ec_jac_t a, ec_jac_t b, output int cyc);
    @(negedge clk);
    op = o; p1x = a.x; p1y = a.y; p1z = a.z; p2x = b.x; p2y = b.y; p2z = b.z; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  function automatic ec_jac_t scale(ec_affine_t p, fp_t z);
    ec_jac_t j;
    j.x = mulm(p.x, mulm(z, z, BN_P), BN_P);
    j.y = mulm(p.y, mulm(z, mulm(z, z, BN_P), BN_P), BN_P);
    j.z = z;
    return j;
  endfunction

  task automatic check_aff(ec_affine_t exp, string what);
    ec_jac_t j = '{x: rx, y: ry, z: rz};
    int c;
    // Jacobian result must represent the expected point
    checks++;
    if (rx != mulm(exp.x, mulm(rz, rz, BN_P), BN_P) ||
        ry != mulm(exp.y, mulm(rz, mulm(rz, rz, BN_P), BN_P), BN_P)) begin
      failures++; $display("FAIL %s jacobian", what);
    end
    go(EC_AFF, j, '0, c);
    checks++;
    if (rx != exp.x || ry != exp.y || rz != 1) begin
      failures++; $display("FAIL %s affine got (%h,%h,%h) exp (%h,%h)", what, rx, ry, rz, exp.x, exp.y);
    end
  endtask

  initial begin
    ec_affine_t g = '{x: 1, y: 2};
    ec_affine_t pa, pb;
    int c;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 6; i++) begin
      fp_t k1, k2, z1, z2;
      k1 = fp_t'($urandom_range(2, 60000));
      k2 = k1 + fp_t'($urandom_range(1, 60000));
      z1 = (i < 2) ? fp_t'(1) : rand_fp(BN_P);
      z2 = (i < 3) ? fp_t'(1) : rand_fp(BN_P);
      pa = ec_smul(k1, g, BN_P);
      pb = ec_smul(k2, g, BN_P);
      go(EC_ADD, scale(pa, z1), scale(pb, z2), c);
      add_cyc = c;
      checks++;
      if (degenerate) begin failures++; $display("FAIL spurious degenerate"); end
      check_aff(ec_add(pa, pb, BN_P), "add");
      go(EC_DBL, scale(pa, z1), '0, c);
      dbl_cyc = c;
      check_aff(ec_dbl(pa, BN_P), "dbl");
    end
    // P + P through the addition formulas is flagged
    go(EC_ADD, scale(pa, 1), scale(pa, 2), c);
    checks++;
    if (!degenerate) begin failures++; $display("FAIL degenerate not flagged"); end
    // cycle counts: 16 products and 7 subtractions; 7 products and 12 add/sub
    checks += 2;
    if (add_cyc != 16 * (FP_W + 2) + 7 * 10 + 2) begin failures++; $display("FAIL add cycles %0d", add_cyc); end
    if (dbl_cyc != 7 * (FP_W + 2) + 12 * 10 + 2) begin failures++; $display("FAIL dbl cycles %0d", dbl_cyc); end
    $display("point addition %0d cycles, point doubling %0d cycles", add_cyc, dbl_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
