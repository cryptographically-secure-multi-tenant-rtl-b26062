// tb_kac_decrypt_engine - self-checking test of the KAC key-recovery engine.
// Key material consists of random multiples of the generator (1, 2). The
// pairing and F_p12 cores are the behavioural stand-ins of tb_coproc_model.
// For each recovery the testbench computes independently the affine point
// sk_S + b_i,S, the two expected pairing requests (a_S, c1) and
// (sk_S + b_i,S, -c0), the stand-in product, its SHA-256 and the key
// K = c2 xor digest[255:128], and checks them. It also checks the error
// exits: unprogrammed partition point, partition index out of range, and
// b_i,S = sk_S (exceptional case of the addition formulas).
module tb_kac_decrypt_engine;
  import kac_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done, error;
  logic [1:0] part = '0;
  ec_affine_t c0 = '0, c1 = '0, sk = '0, a_s = '0;
  aes_blk_t c2 = '0;
  ec_affine_t b_pts [NP];
  logic keys_ok = 1'b1;
  logic [NP-1:0] b_ok = '1;
  logic pair_req, pair_done, gtm_req, gtm_done, key_valid;
  ec_affine_t pair_p, pair_q;
  fp12_t pair_res, gtm_a, gtm_b, gtm_res;
  logic [1:0] key_part;
  aes_blk_t key_out, got_key;
  logic [1:0] got_part;
  logic got_err;
  int n_pair, n_gtm;
  ec_affine_t last_p [2], last_q [2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  kac_decrypt_engine #(.N_PART(NP)) dut (
    .clk, .rst_n, .start, .part, .c0, .c1, .c2, .busy, .done, .error,
    .sk, .a_s, .b_pts, .keys_ok, .b_ok,
    .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .gtm_req, .gtm_a, .gtm_b, .gtm_done, .gtm_res,
    .key_valid, .key_part, .key_out);

  tb_coproc_model #(.DELAY(40)) u_cop (
    .clk, .rst_n, .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .gtm_req, .gtm_a, .gtm_b, .gtm_done, .gtm_res, .n_pair, .n_gtm, .last_p, .last_q);

  always @(posedge clk) if (rst_n && key_valid) begin got_key <= key_out; got_part <= key_part; end

  task automatic run(int pi, output logic err);
    @(negedge clk); part = 2'(pi); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    err = error;
    checks++;
    if (err && key_valid) begin failures++; $display("FAIL key with error"); end
  endtask

  function automatic ec_affine_t rpt();
    return ec_smul(fp_t'($urandom_range(2, 1 << 20)), '{x: 1, y: 2}, BN_P);
  endfunction

  initial begin
    logic err;
    repeat (3) @(negedge clk);
    sk = rpt(); a_s = rpt();
    for (int i = 0; i < NP; i++) b_pts[i] = rpt();
    rst_n = 1'b1;
    for (int t = 0; t < 3; t++) begin
      int pi;
      ec_affine_t tpt, nc0;
      fp12_t g;
      aes_blk_t kexp;
      int np0;
      pi = t % NP; np0 = n_pair;
      c0 = rpt(); c1 = rpt(); c2 = {$urandom, $urandom, $urandom, $urandom};
      tpt = ec_add(sk, b_pts[pi], BN_P);
      nc0 = '{x: c0.x, y: subm(0, c0.y, BN_P)};
      g = model_gtm(model_pair(a_s, c1), model_pair(tpt, nc0));
      kexp = c2 ^ sha256_fp12(g)[255:128];
      run(pi, err);
      @(negedge clk);
      checks += 6;
      if (err) begin failures++; $display("FAIL unexpected error"); end
      if (n_pair != np0 + 2) begin failures++; $display("FAIL pairing count"); end
      if (last_p[np0 % 2] != a_s || last_q[np0 % 2] != c1) begin failures++; $display("FAIL pairing 1 operands"); end
      if (last_p[(np0 + 1) % 2] != tpt) begin failures++; $display("FAIL sk+b point"); end
      if (last_q[(np0 + 1) % 2] != nc0) begin failures++; $display("FAIL -c0"); end
      if (got_key != kexp || got_part != 2'(pi)) begin failures++; $display("FAIL key %h exp %h", got_key, kexp); end
    end
    checks++;
    if (n_gtm != 3) begin failures++; $display("FAIL gtm count %0d", n_gtm); end
    // error exits
    b_ok = 3'b101;
    run(1, err); checks++; if (!err) begin failures++; $display("FAIL unprogrammed b accepted"); end
    b_ok = '1;
    run(3, err); checks++; if (!err) begin failures++; $display("FAIL bad partition accepted"); end
    b_pts[2] = sk;
    run(2, err); checks++; if (!err) begin failures++; $display("FAIL degenerate accepted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
