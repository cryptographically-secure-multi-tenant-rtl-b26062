// tb_key_nvm - self-checking test of the write-once key store.
// Programs every entry once and reads it back, checks that a second write to
// a programmed entry and any write after lock are refused (wr_reject, data
// unchanged), and that unprogrammed entries stay invalid.
module tb_key_nvm;
  localparam int W = 256, N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_en = 1'b0, lock = 1'b0, locked, wr_reject;
  logic [1:0] prog_addr = '0;
  logic [W-1:0] prog_data = '0;
  logic [W-1:0] data [N];
  logic [N-1:0] valid;
  logic [W-1:0] ref_mem [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  key_nvm #(.W(W), .N(N)) dut (.clk, .rst_n, .prog_en, .prog_addr, .prog_data, .lock,
                               .data, .valid, .locked, .wr_reject);

  task automatic wr(int a, logic [W-1:0] d, logic exp_reject);
    @(negedge clk); prog_en = 1'b1; prog_addr = 2'(a); prog_data = d;
    @(negedge clk); prog_en = 1'b0;
    checks++;
    if (wr_reject != exp_reject) begin failures++; $display("FAIL reject=%0b for addr %0d", wr_reject, a); end
  endtask

  task automatic check_all(logic [N-1:0] exp_valid);
    checks++;
    if (valid != exp_valid) begin failures++; $display("FAIL valid %b exp %b", valid, exp_valid); end
    for (int i = 0; i < N; i++) if (exp_valid[i]) begin
      checks++;
      if (data[i] != ref_mem[i]) begin failures++; $display("FAIL data %0d", i); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check_all('0);
    for (int i = 0; i < 3; i++) begin
      ref_mem[i] = {8{$urandom}};
      wr(i, ref_mem[i], 1'b0);
    end
    check_all(4'b0111);
    wr(1, {8{$urandom}}, 1'b1);           // second write refused
    check_all(4'b0111);
    @(negedge clk); lock = 1'b1; @(negedge clk); lock = 1'b0;
    checks++;
    if (!locked) begin failures++; $display("FAIL not locked"); end
    wr(3, {8{$urandom}}, 1'b1);           // write after lock refused
    check_all(4'b0111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
