// tb_aes128_dec - self-checking test of the AES-128 decryption engine.
// Checks the FIPS-197 Appendix C.1 vector (key 000102..0f, ciphertext
// 69c4e0d8..c55a -> plaintext 00112233..eeff), then random keys and blocks
// encrypted by the behavioural reference cipher, several blocks per key,
// the 10-cycle block latency, in_ready back-pressure while a block is in
// flight, and the 10-cycle key expansion.
module tb_aes128_dec;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic key_load = 1'b0, key_ready, in_valid = 1'b0, in_ready, out_valid;
  logic [127:0] key = '0, in_block = '0, out_block;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes128_dec dut (.clk, .rst_n, .key_load, .key, .key_ready, .in_valid, .in_block,
                  .in_ready, .out_valid, .out_block);

  task automatic load_key(logic [127:0] k);
    int cyc;
    @(negedge clk); key = k; key_load = 1'b1;
    @(negedge clk); key_load = 1'b0; cyc = 1;
    while (!key_ready) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 11) begin failures++; $display("FAIL key expansion %0d", cyc); end
  endtask

  task automatic dec(logic [127:0] ct, logic [127:0] exp);
    int cyc;
    @(negedge clk); in_block = ct; in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 1'b0; cyc = 1;
    checks++;
    if (in_ready) begin failures++; $display("FAIL in_ready high while busy"); end
    while (!out_valid) begin @(negedge clk); cyc++; end
    checks += 2;
    if (out_block != exp) begin failures++; $display("FAIL got %h exp %h", out_block, exp); end
    if (cyc != 11) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (in_ready) begin failures++; $display("FAIL in_ready without key"); end
    load_key(128'h000102030405060708090a0b0c0d0e0f);
    dec(128'h69c4e0d86a7b0430d8cdb78070b4c55a, 128'h00112233445566778899aabbccddeeff);
    checks++;
    if (aes128_enc(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff)
        != 128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin failures++; $display("FAIL reference"); end
    for (int k = 0; k < 4; k++) begin
      logic [127:0] kk;
      kk = {$urandom, $urandom, $urandom, $urandom};
      load_key(kk);
      for (int i = 0; i < 5; i++) begin
        logic [127:0] pt;
        pt = {$urandom, $urandom, $urandom, $urandom};
        dec(aes128_enc(kk, pt), pt);
      end
    end
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
