// fp_addsub - modular adder/subtractor over F_p.
//
// Computes y = (a + b) mod p or y = (a - b) mod p for a, b < p. The operands
// are processed digit-serially with a DIGIT-bit adder: the first W/DIGIT
// cycles form the raw sum or difference, the next W/DIGIT cycles form the
// correction (s - p after an addition, s + p after a subtraction), and the
// carries of the two passes pick the reduced result. With W = 256 and
// DIGIT = 64 this takes 8 cycles, which is the 4e-5 ms at 200 MHz reported
// for the adder of the design; the digit-serial structure itself is a choice
// of this implementation.
//
// Interface: pulse start with a, b, sub; busy is high while working; done
// pulses for one cycle with y valid (y holds until the next start). done
// comes exactly 2*W/DIGIT cycles after the start cycle.
module fp_addsub #(
  parameter int unsigned W     = kac_pkg::FP_W,
  parameter int unsigned DIGIT = 64,
  parameter logic [W-1:0] P    = kac_pkg::BN_P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         sub,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] y
);
  localparam int unsigned ND = W / DIGIT;
  localparam int unsigned CW = $clog2(2*ND) + 1;

  logic [W-1:0] ra, rb, s, d;
  logic         c1, c2, is_sub;
  logic [CW-1:0] cnt;
  logic          phase2;
  logic [DIGIT:0] dsum;
  logic           cin;
  logic [DIGIT-1:0] bop;

  assign phase2 = (cnt >= CW'(ND));

  always_comb begin
    cin = phase2 ? c2 : c1;
    // pass 1: a + b or a + ~b + 1 ; pass 2: s - p (after add) or s + p (after sub)
    if (!phase2) bop = is_sub ? ~rb[DIGIT-1:0] : rb[DIGIT-1:0];
    else         bop = is_sub ? rb[DIGIT-1:0] : ~rb[DIGIT-1:0];
    dsum = {1'b0, ra[DIGIT-1:0]} + {1'b0, bop} + {{DIGIT{1'b0}}, cin};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra <= '0; rb <= '0; s <= '0; d <= '0; y <= '0;
      c1 <= 1'b0; c2 <= 1'b0; is_sub <= 1'b0;
      cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        ra <= a; rb <= b; is_sub <= sub;
        c1 <= sub; c2 <= ~sub;
        cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        ra <= ra >> DIGIT;
        rb <= rb >> DIGIT;
        if (!phase2) begin
          s  <= {dsum[DIGIT-1:0], s[W-1:DIGIT]};
          c1 <= dsum[DIGIT];
        end else begin
          d  <= {dsum[DIGIT-1:0], d[W-1:DIGIT]};
          c2 <= dsum[DIGIT];
        end
        if (cnt == CW'(ND-1)) begin
          // start pass 2 on the finished raw result
          ra <= {dsum[DIGIT-1:0], s[W-1:DIGIT]};
          rb <= P;
        end
        if (cnt == CW'(2*ND-1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (!is_sub) y <= (c1 || dsum[DIGIT]) ? {dsum[DIGIT-1:0], d[W-1:DIGIT]} : s;
          else         y <= (!c1) ? {dsum[DIGIT-1:0], d[W-1:DIGIT]} : s;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
