// tb_tenant_scaling - one FPGA node shared by more tenants than the default.
//
// The scheme's selling point is that the on-chip secret does not grow with
// the number of tenants: one aggregate key sk_S serves every partition, and
// each partition adds only its public id and point b_id,S. This test builds
// the top with NP = 8 partitions, gives every partition its own tenant and
// AES-128 key, recovers all eight keys through the single KAC engine (with
// the behavioural pairing stand-in and the on-chip F_p12 multiplier), and
// then streams blocks to all partitions round-robin, so each block must be
// decrypted under its own tenant's key. Counted: key recoveries (must equal
// NP) and decrypted blocks per partition (each must be non-zero).
module tb_tenant_scaling;
  import kac_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 8;
  localparam int PW = $clog2(NP);
  localparam int NB = 3;             // blocks per partition

  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_en = 1'b0, prog_lock = 1'b0, prog_reject;
  logic [$clog2(NP+2)-1:0] prog_target = '0;
  logic [1:0] prog_addr = '0;
  fp_t prog_data = '0;
  logic kac_start = 1'b0, kac_busy, kac_done, kac_error;
  logic [PW-1:0] kac_part = '0;
  ec_affine_t kac_c0 = '0, kac_c1 = '0;
  aes_blk_t kac_c2 = '0;
  logic pair_req, pair_done, m_gtm_done;
  ec_affine_t pair_p, pair_q;
  fp12_t pair_res, m_gtm_res;
  logic bs_valid = 1'b0, bs_ready;
  logic [PW-1:0] bs_part = '0;
  aes_blk_t bs_data = '0;
  logic [NP-1:0] cfg_valid, part_key_ready;
  aes_blk_t cfg_data [NP];
  logic [15:0] part_id [NP];
  int n_pair, n_gtm_model;
  ec_affine_t last_p [2], last_q [2];

  int checks = 0, failures = 0, m_kac_ok = 0;
  int m_blocks [NP];
  aes_blk_t exp_q [NP][$];
  aes_blk_t keys [NP];
  ec_affine_t sk, a_s;
  ec_affine_t b_pts [NP];

  always #5 clk = ~clk;

  fpga_provisioning_top #(.N_PART(NP)) dut (
    .clk, .rst_n, .prog_en, .prog_target, .prog_addr, .prog_data, .prog_lock, .prog_reject,
    .kac_start, .kac_part, .kac_c0, .kac_c1, .kac_c2, .kac_busy, .kac_done, .kac_error,
    .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .bs_valid, .bs_part, .bs_data, .bs_ready, .cfg_valid, .cfg_data,
    .part_id, .part_key_ready);

  tb_coproc_model #(.DELAY(100)) u_cop (
    .clk, .rst_n, .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .gtm_req(1'b0), .gtm_a('0), .gtm_b('0), .gtm_done(m_gtm_done), .gtm_res(m_gtm_res),
    .n_pair, .n_gtm(n_gtm_model), .last_p, .last_q);

  always @(posedge clk) if (rst_n) for (int i = 0; i < NP; i++) if (cfg_valid[i]) begin
    checks++;
    if (exp_q[i].size() == 0) begin failures++; $display("FAIL partition %0d unexpected block", i); end
    else if (cfg_data[i] != exp_q[i].pop_front()) begin failures++; $display("FAIL partition %0d block mismatch", i); end
    else m_blocks[i]++;
  end

  function automatic ec_affine_t rpt();
    return ec_smul(fp_t'($urandom_range(2, 1 << 20)), '{x: 1, y: 2}, BN_P);
  endfunction

  task automatic prog(int tgt, int a, fp_t d);
    @(negedge clk); prog_en = 1'b1; prog_target = ($clog2(NP+2))'(tgt); prog_addr = 2'(a); prog_data = d;
    @(negedge clk); prog_en = 1'b0;
  endtask

  task automatic recover(int pi, aes_blk_t k);
    ec_affine_t tpt, nc0;
    fp12_t g;
    kac_c0 = rpt(); kac_c1 = rpt();
    tpt = ec_add(sk, b_pts[pi], BN_P);
    nc0 = '{x: kac_c0.x, y: subm(0, kac_c0.y, BN_P)};
    g = fp12_mul_ref(model_pair(a_s, kac_c1), model_pair(tpt, nc0));
    kac_c2 = k ^ sha256_fp12(g)[255:128];
    @(negedge clk); kac_part = PW'(pi); kac_start = 1'b1;
    @(negedge clk); kac_start = 1'b0;
    @(posedge clk); while (!kac_done) @(posedge clk);
    checks++;
    if (kac_error) begin failures++; $display("FAIL recovery %0d error", pi); end
    else m_kac_ok++;
    @(negedge clk);
  endtask

  task automatic send_block(int pi);
    aes_blk_t pt;
    pt = {$urandom, $urandom, $urandom, $urandom};
    exp_q[pi].push_back(pt);
    @(negedge clk); bs_part = PW'(pi); bs_data = aes128_enc(keys[pi], pt); bs_valid = 1'b1;
    @(posedge clk); while (!bs_ready) @(posedge clk);
    @(negedge clk); bs_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < NP; i++) m_blocks[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    sk = rpt(); a_s = rpt();
    for (int i = 0; i < NP; i++) b_pts[i] = rpt();
    prog(0, 0, sk.x); prog(0, 1, sk.y); prog(1, 0, a_s.x); prog(1, 1, a_s.y);
    for (int i = 0; i < NP; i++) begin
      prog(2 + i, 0, fp_t'(16'h0200 + i)); prog(2 + i, 1, b_pts[i].x); prog(2 + i, 2, b_pts[i].y);
    end
    @(negedge clk); prog_lock = 1'b1; @(negedge clk); prog_lock = 1'b0;
    for (int i = 0; i < NP; i++) begin
      keys[i] = {$urandom, $urandom, $urandom, $urandom};
      recover(i, keys[i]);
    end
    repeat (15) @(negedge clk);
    checks++;
    if (part_key_ready != '1) begin failures++; $display("FAIL keys installed %b", part_key_ready); end
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < NP; i++) send_block(i);
    repeat (40) @(negedge clk);
    for (int i = 0; i < NP; i++) begin
      checks++;
      if (exp_q[i].size() != 0 || m_blocks[i] != NB) begin
        failures++; $display("FAIL partition %0d decrypted %0d blocks", i, m_blocks[i]);
      end
    end
    $display("tenants=%0d key recoveries=%0d pairing calls=%0d", NP, m_kac_ok, n_pair);
    checks++;
    if (m_kac_ok != NP || n_pair != 2 * NP) begin failures++; $display("FAIL recovery count"); end
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
