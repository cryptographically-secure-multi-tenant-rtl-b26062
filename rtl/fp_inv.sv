// fp_inv - modular inverter over F_p.
//
// Computes y = a^(-1) mod p by Fermat's little theorem, y = a^(p-2), with
// left-to-right square-and-multiply on one fp_mul: for each bit of p-2 from
// the top, square the result, then multiply by a if the bit is set. The
// design description only names the inverter and gives its cost (0.375 ms at
// 200 MHz, about 75,000 cycles, on the same multiplier resources); the
// exponentiation method is this implementation's choice. With W = 256 and
// the default BN254 prime this takes 366 products of 258 cycles, 94,428
// cycles in all.
// An input of 0 returns 0.
//
// Interface: pulse start with a; busy is high while working; done pulses for
// one cycle with y valid.
module fp_inv #(
  parameter int unsigned  W = kac_pkg::FP_W,
  parameter logic [W-1:0] P = kac_pkg::BN_P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] y
);
  localparam logic [W-1:0] E = P - W'(2);
  localparam int unsigned  CW = $clog2(W) + 1;

  typedef enum logic [1:0] {S_IDLE, S_SQR, S_MUL, S_WAIT} state_e;
  state_e        state;
  logic          do_mul;   // the pending product is the multiply-by-a step
  logic [W-1:0]  ra, res;
  logic [CW-1:0] bitpos;
  logic          m_start, m_busy, m_done;
  logic [W-1:0]  m_a, m_b, m_y;

  fp_mul #(.W(W), .P(P)) u_mul (
    .clk, .rst_n, .start(m_start), .a(m_a), .b(m_b),
    .busy(m_busy), .done(m_done), .y(m_y)
  );

  always_comb begin
    m_start = (state == S_SQR) || (state == S_MUL);
    m_a     = res;
    m_b     = (state == S_MUL) ? ra : res;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ra <= '0; res <= '0; y <= '0;
      bitpos <= '0; busy <= 1'b0; done <= 1'b0; do_mul <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ra <= a; res <= W'(1); bitpos <= CW'(W-1); busy <= 1'b1;
          state <= S_SQR;
        end
        S_SQR: begin do_mul <= 1'b0; state <= S_WAIT; end
        S_MUL: begin do_mul <= 1'b1; state <= S_WAIT; end
        S_WAIT: if (m_done) begin
          res <= m_y;
          if (!do_mul && E[bitpos[CW-2:0]]) begin
            state <= S_MUL;
          end else if (bitpos == '0) begin
            state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
            y <= (ra == '0) ? '0 : m_y;
          end else begin
            bitpos <= bitpos - 1'b1;
            state  <= S_SQR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
