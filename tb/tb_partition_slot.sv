// tb_partition_slot - self-checking test of one partition's security logic.
// Programs id and b_id,S, checks that the stored values appear and that a
// second programming is refused, installs a tenant key, decrypts a stream
// of blocks encrypted by the reference cipher (checking order and values),
// then installs a second key and checks that blocks under the new key
// decrypt correctly while the old key no longer applies.
module tb_partition_slot;
  import kac_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_en = 1'b0, prog_lock = 1'b0, prog_reject;
  logic [1:0] prog_addr = '0;
  fp_t prog_data = '0;
  logic [15:0] id;
  ec_affine_t b_pt;
  logic b_ok, key_load = 1'b0, key_ready, bs_valid = 1'b0, bs_ready, cfg_valid;
  aes_blk_t key = '0, bs_data = '0, cfg_data;
  aes_blk_t exp_q [$];
  int checks = 0, failures = 0, n_out = 0;

  always #5 clk = ~clk;

  partition_slot dut (.clk, .rst_n, .prog_en, .prog_addr, .prog_data, .prog_lock, .prog_reject,
                      .id, .b_pt, .b_ok, .key_load, .key, .key_ready, .bs_valid, .bs_data,
                      .bs_ready, .cfg_valid, .cfg_data);

  logic expect_old = 1'b0;
  aes_blk_t old_got = '0;

  always @(posedge clk) if (rst_n && cfg_valid && expect_old) begin
    n_out++; old_got <= cfg_data; expect_old <= 1'b0;
  end else if (rst_n && cfg_valid) begin
    aes_blk_t e;
    checks++; n_out++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (cfg_data != e) begin failures++; $display("FAIL got %h exp %h", cfg_data, e); end
    end
  end

  task automatic prog(int a, fp_t d);
    @(negedge clk); prog_en = 1'b1; prog_addr = 2'(a); prog_data = d;
    @(negedge clk); prog_en = 1'b0;
  endtask

  task automatic install(aes_blk_t k);
    @(negedge clk); key = k; key_load = 1'b1;
    @(negedge clk); key_load = 1'b0;
    while (!key_ready) @(negedge clk);
  endtask

  task automatic send(aes_blk_t k, int n);
    for (int i = 0; i < n; i++) begin
      aes_blk_t pt;
      pt = {$urandom, $urandom, $urandom, $urandom};
      exp_q.push_back(pt);
      @(negedge clk); bs_data = aes128_enc(k, pt); bs_valid = 1'b1;
      @(posedge clk); while (!bs_ready) @(posedge clk);
      @(negedge clk); bs_valid = 1'b0;
    end
    repeat (15) @(negedge clk);
  endtask

  initial begin
    aes_blk_t k1, k2;
    fp_t bx, by;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    bx = rand_fp(BN_P); by = rand_fp(BN_P);
    checks++; if (b_ok) begin failures++; $display("FAIL b_ok before programming"); end
    prog(0, fp_t'(16'h1d3a)); prog(1, bx); prog(2, by);
    checks += 3;
    if (id != 16'h1d3a) begin failures++; $display("FAIL id"); end
    if (b_pt.x != bx || b_pt.y != by) begin failures++; $display("FAIL b point"); end
    if (!b_ok) begin failures++; $display("FAIL b_ok"); end
    prog(1, fp_t'(5));
    checks += 2;
    if (!prog_reject) begin failures++; $display("FAIL reprogram not refused"); end
    if (b_pt.x != bx) begin failures++; $display("FAIL b point overwritten"); end
    k1 = {$urandom, $urandom, $urandom, $urandom};
    k2 = {$urandom, $urandom, $urandom, $urandom};
    install(k1);
    send(k1, 8);
    install(k2);
    send(k2, 5);
    // a block under the old key must not come out as its plaintext
    begin
      aes_blk_t pt;
      pt = {$urandom, $urandom, $urandom, $urandom};
      expect_old = 1'b1;
      @(negedge clk); bs_data = aes128_enc(k1, pt); bs_valid = 1'b1;
      @(posedge clk); while (!bs_ready) @(posedge clk);
      @(negedge clk); bs_valid = 1'b0;
      repeat (15) @(negedge clk);
      checks++;
      if (expect_old || old_got == pt) begin failures++; $display("FAIL old key still decrypts"); end
    end
    checks++;
    if (n_out != 14) begin failures++; $display("FAIL output count %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
