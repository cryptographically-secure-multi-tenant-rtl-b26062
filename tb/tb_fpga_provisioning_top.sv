// tb_fpga_provisioning_top - end-to-end test of one FPGA node at its default
// size (three partitions, 256-bit field).
//
// Flow: the vendor programs sk_S, a_S and each partition's id and b_id,S,
// then locks the stores (a later write must be refused). Tenants of
// partitions 0 and 2 pick AES-128 keys K and encrypted bitstreams; the
// testbench forms (c0, c1, c2) such that the key-recovery path, with the
// behavioural pairing stand-in and the on-chip F_p12 multiplier, yields K
// exactly when the engine computes sk_S + b_i,S, -c0, the product and the SHA-256 hash as specified.
// The engine installs K, the partition decrypts its bitstream, and every
// configuration block is compared with the tenant's plaintext. Counted
// mechanisms, each of which must occur: key recoveries, error exits, refused
// store writes, back-pressure stalls on the bitstream port, decrypted blocks
// in two partitions, interleaved streams, key recovery running while another
// partition decrypts, and re-keying of a partition.
module tb_fpga_provisioning_top;
  import kac_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_en = 1'b0, prog_lock = 1'b0, prog_reject;
  logic [2:0] prog_target = '0;
  logic [1:0] prog_addr = '0;
  fp_t prog_data = '0;
  logic kac_start = 1'b0, kac_busy, kac_done, kac_error;
  logic [1:0] kac_part = '0;
  ec_affine_t kac_c0 = '0, kac_c1 = '0;
  aes_blk_t kac_c2 = '0;
  logic pair_req, pair_done, m_gtm_done;
  ec_affine_t pair_p, pair_q;
  fp12_t pair_res, m_gtm_res;
  logic bs_valid = 1'b0, bs_ready;
  logic [1:0] bs_part = '0;
  aes_blk_t bs_data = '0;
  logic [NP-1:0] cfg_valid, part_key_ready;
  aes_blk_t cfg_data [NP];
  logic [15:0] part_id [NP];
  int n_pair, n_gtm_model, n_gtm = 0;
  ec_affine_t last_p [2], last_q [2];

  int checks = 0, failures = 0;
  int m_kac_ok = 0, m_kac_err = 0, m_refused = 0, m_stall = 0, m_interleave = 0,
      m_concurrent = 0, m_rekey = 0;
  int m_blocks [NP];
  aes_blk_t exp_q [NP][$];

  ec_affine_t sk, a_s;
  ec_affine_t b_pts [NP];

  always #5 clk = ~clk;

  fpga_provisioning_top dut (
    .clk, .rst_n, .prog_en, .prog_target, .prog_addr, .prog_data, .prog_lock, .prog_reject,
    .kac_start, .kac_part, .kac_c0, .kac_c1, .kac_c2, .kac_busy, .kac_done, .kac_error,
    .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .bs_valid, .bs_part, .bs_data, .bs_ready, .cfg_valid, .cfg_data,
    .part_id, .part_key_ready);

  // only the pairing side of the stand-in is used; the F_p12 product is
  // computed by the multiplier inside the top
  tb_coproc_model #(.DELAY(100)) u_cop (
    .clk, .rst_n, .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .gtm_req(1'b0), .gtm_a('0), .gtm_b('0), .gtm_done(m_gtm_done), .gtm_res(m_gtm_res),
    .n_pair, .n_gtm(n_gtm_model), .last_p, .last_q);

  always @(posedge clk) if (rst_n && dut.gtm_done) n_gtm++;

  // configuration-side checker
  always @(posedge clk) if (rst_n) for (int i = 0; i < NP; i++) if (cfg_valid[i]) begin
    checks++;
    if (exp_q[i].size() == 0) begin failures++; $display("FAIL partition %0d unexpected block", i); end
    else if (cfg_data[i] != exp_q[i].pop_front()) begin failures++; $display("FAIL partition %0d block mismatch", i); end
    else m_blocks[i]++;
  end

  always @(posedge clk) if (rst_n && bs_valid && !bs_ready) m_stall++;
  always @(posedge clk) if (rst_n && kac_busy && (cfg_valid != '0)) m_concurrent++;

  function automatic ec_affine_t rpt();
    return ec_smul(fp_t'($urandom_range(2, 1 << 20)), '{x: 1, y: 2}, BN_P);
  endfunction

  task automatic prog(int tgt, int a, fp_t d);
    @(negedge clk); prog_en = 1'b1; prog_target = 3'(tgt); prog_addr = 2'(a); prog_data = d;
    @(negedge clk); prog_en = 1'b0;
  endtask

  // tenant side: build C2 = (c0, c1, c2) that carries key k for partition pi
  task automatic kac_request(int pi, aes_blk_t k);
    ec_affine_t tpt, nc0;
    fp12_t g;
    kac_c0 = rpt(); kac_c1 = rpt();
    tpt = ec_add(sk, b_pts[pi], BN_P);
    nc0 = '{x: kac_c0.x, y: subm(0, kac_c0.y, BN_P)};
    g = fp12_mul_ref(model_pair(a_s, kac_c1), model_pair(tpt, nc0));
    kac_c2 = k ^ sha256_fp12(g)[255:128];
    @(negedge clk); kac_part = 2'(pi); kac_start = 1'b1;
    @(negedge clk); kac_start = 1'b0;
  endtask

  // completions are latched so that a wait can start after the done pulse
  logic done_seen = 1'b0, err_seen = 1'b0, done_clr = 1'b0;
  always @(posedge clk)
    if (rst_n && kac_done) begin done_seen <= 1'b1; err_seen <= kac_error; end
    else if (done_clr) done_seen <= 1'b0;

  task automatic kac_wait(logic exp_err);
    while (!done_seen) @(negedge clk);
    checks++;
    if (err_seen != exp_err) begin failures++; $display("FAIL kac error=%0b", err_seen); end
    if (err_seen) m_kac_err++; else m_kac_ok++;
    done_clr = 1'b1; @(negedge clk); done_clr = 1'b0;
  endtask

  task automatic send_block(int pi, aes_blk_t k);
    aes_blk_t pt;
    pt = {$urandom, $urandom, $urandom, $urandom};
    exp_q[pi].push_back(pt);
    @(negedge clk); bs_part = 2'(pi); bs_data = aes128_enc(k, pt); bs_valid = 1'b1;
    @(posedge clk); while (!bs_ready) @(posedge clk);
    @(negedge clk); bs_valid = 1'b0;
  endtask

  initial begin
    aes_blk_t k0, k2, k0b;
    for (int i = 0; i < NP; i++) m_blocks[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---- vendor setup ----
    sk = rpt(); a_s = rpt();
    for (int i = 0; i < NP; i++) b_pts[i] = rpt();
    prog(0, 0, sk.x); prog(0, 1, sk.y); prog(1, 0, a_s.x); prog(1, 1, a_s.y);
    for (int i = 0; i < NP; i++) begin
      prog(2 + i, 0, fp_t'(16'h0100 + i)); prog(2 + i, 1, b_pts[i].x); prog(2 + i, 2, b_pts[i].y);
    end
    @(negedge clk); prog_lock = 1'b1; @(negedge clk); prog_lock = 1'b0;
    prog(0, 0, fp_t'(7));
    checks++;
    if (prog_reject) m_refused++; else begin failures++; $display("FAIL write after lock accepted"); end
    for (int i = 0; i < NP; i++) begin
      checks++;
      if (part_id[i] != 16'(16'h0100 + i)) begin failures++; $display("FAIL id %0d", i); end
    end
    // ---- bad request: partition index out of range ----
    kac_request(0, '0);
    kac_wait(1'b0);
    @(negedge clk); kac_part = 2'd3; kac_start = 1'b1; @(negedge clk); kac_start = 1'b0;
    kac_wait(1'b1);
    // ---- tenant of partition 0 ----
    k0 = {$urandom, $urandom, $urandom, $urandom};
    kac_request(0, k0);
    kac_wait(1'b0);
    checks++;
    if (!part_key_ready[0]) begin @(negedge clk); repeat (12) @(negedge clk); end
    if (!part_key_ready[0]) begin failures++; $display("FAIL key not installed"); end
    // ---- tenant of partition 2 recovers its key while partition 0 streams ----
    k2 = {$urandom, $urandom, $urandom, $urandom};
    kac_request(2, k2);
    while (kac_busy) send_block(0, k0);
    kac_wait(1'b0);
    repeat (12) @(negedge clk);
    // ---- interleaved streams ----
    for (int i = 0; i < 6; i++) begin send_block(0, k0); send_block(2, k2); m_interleave++; end
    // ---- re-key partition 0 ----
    k0b = {$urandom, $urandom, $urandom, $urandom};
    repeat (20) @(negedge clk);
    kac_request(0, k0b);
    kac_wait(1'b0);
    repeat (12) @(negedge clk);
    for (int i = 0; i < 4; i++) send_block(0, k0b);
    m_rekey++;
    repeat (20) @(negedge clk);
    // ---- all blocks out ----
    for (int i = 0; i < NP; i++) begin
      checks++;
      if (exp_q[i].size() != 0) begin failures++; $display("FAIL partition %0d missing blocks", i); end
    end
    checks++;
    if (n_pair != 2 * m_kac_ok || n_gtm != m_kac_ok || n_gtm_model != 0) begin failures++; $display("FAIL coprocessor calls"); end
    $display("mechanisms: key recoveries=%0d error exits=%0d refused writes=%0d stalls=%0d",
             m_kac_ok, m_kac_err, m_refused, m_stall);
    $display("            blocks p0=%0d p2=%0d interleaved=%0d concurrent=%0d rekey=%0d",
             m_blocks[0], m_blocks[2], m_interleave, m_concurrent, m_rekey);
    checks += 8;
    if (m_kac_ok == 0)     begin failures++; $display("FAIL no key recovery"); end
    if (m_kac_err == 0)    begin failures++; $display("FAIL no error exit"); end
    if (m_refused == 0)    begin failures++; $display("FAIL no refused write"); end
    if (m_stall == 0)      begin failures++; $display("FAIL no stall"); end
    if (m_blocks[0] == 0 || m_blocks[2] == 0) begin failures++; $display("FAIL no blocks"); end
    if (m_interleave == 0) begin failures++; $display("FAIL no interleave"); end
    if (m_concurrent == 0) begin failures++; $display("FAIL no concurrency"); end
    if (m_rekey == 0)      begin failures++; $display("FAIL no rekey"); end
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
