// tb_sha256_core - self-checking test of the SHA-256 compression core.
// Checks the FIPS 180 examples "abc" (one block) and the 56-byte
// "abcdbcdecdef..." (two blocks) against their published digests, random
// multi-block messages against the behavioural reference, and the 64-cycle
// block latency.
module tb_sha256_core;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, init = 1'b0, busy, done;
  logic [511:0] block = '0;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sha256_core dut (.clk, .rst_n, .start, .init, .block, .busy, .done, .digest);

  task automatic one_block(logic [511:0] blk, logic first);
    int cyc;
    @(negedge clk); block = blk; init = first; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 65) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  // pad and hash a byte message through the core
  task automatic hash_msg(logic [7:0] msg [], int n, output logic [255:0] dg);
    int total = ((n + 9 + 63) / 64) * 64;
    logic [7:0] m [] = new[total];
    logic [63:0] bl = 64'(n) * 8;
    logic [511:0] blk;
    for (int i = 0; i < total; i++) m[i] = 0;
    for (int i = 0; i < n; i++) m[i] = msg[i];
    m[n] = 8'h80;
    for (int i = 0; i < 8; i++) m[total - 1 - i] = bl[8*i +: 8];
    for (int k = 0; k < total / 64; k++) begin
      for (int i = 0; i < 64; i++) blk[511 - 8*i -: 8] = m[64*k + i];
      one_block(blk, k == 0);
    end
    dg = digest;
  endtask

  task automatic check_str(string s, logic [255:0] exp);
    logic [7:0] m [] = new[s.len()];
    logic [255:0] dg;
    for (int i = 0; i < s.len(); i++) m[i] = s[i];
    hash_msg(m, s.len(), dg);
    checks++;
    if (dg != exp) begin failures++; $display("FAIL \"%s\" got %h", s, dg); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check_str("abc", 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad);
    check_str("abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq",
              256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1);
    for (int t = 0; t < 6; t++) begin
      int n;
      logic [7:0] m [];
      logic [255:0] dg;
      n = $urandom_range(0, 300);
      m = new[n];
      for (int i = 0; i < n; i++) m[i] = 8'($urandom);
      hash_msg(m, n, dg);
      checks++;
      if (dg != sha256(m, n)) begin failures++; $display("FAIL random len %0d", n); end
    end
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
