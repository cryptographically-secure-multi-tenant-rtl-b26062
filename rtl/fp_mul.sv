// fp_mul - modular multiplier over F_p.
//
// Computes y = a * b mod p for a, b < p with the interleaved (MSB-first,
// shift-and-add) method: each cycle the accumulator is doubled and, if the
// current bit of b is set, a is added; after each step at most one
// subtraction of p brings it back below p. One multiplier bit is consumed per
// cycle, so a product takes W cycles. The design description builds
// its multiplier from DSP tiles (11 DSP blocks, 1.465e-3 ms, i.e. 293 cycles
// at 200 MHz); this bit-serial version uses no DSP blocks but has a similar
// cycle count (256 cycles for W = 256). It is this implementation's own choice.
//
// Interface: pulse start with a, b; busy is high while working; done pulses
// for one cycle with y valid, W cycles after the start cycle.
module fp_mul #(
  parameter int unsigned  W = kac_pkg::FP_W,
  parameter logic [W-1:0] P = kac_pkg::BN_P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] y
);
  localparam int unsigned CW = $clog2(W) + 1;

  logic [W-1:0]  ra, rb, acc;
  logic [CW-1:0] cnt;
  logic [W:0]    dbl, dbl_r, sum;
  logic [W-1:0]  dbl_m, acc_n;

  always_comb begin
    dbl   = {acc, 1'b0};
    dbl_r = dbl - {1'b0, P};
    dbl_m = (dbl >= {1'b0, P}) ? dbl_r[W-1:0] : dbl[W-1:0];
    sum   = {1'b0, dbl_m} + (rb[W-1] ? {1'b0, ra} : '0);
    acc_n = (sum >= {1'b0, P}) ? (sum[W-1:0] - P) : sum[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra <= '0; rb <= '0; acc <= '0; y <= '0;
      cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        ra <= a; rb <= b; acc <= '0;
        cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        acc <= acc_n;
        rb  <= rb << 1;
        cnt <= cnt + 1'b1;
        if (cnt == CW'(W-1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          y    <= acc_n;
        end
      end
    end
  end

endmodule
