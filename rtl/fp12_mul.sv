// fp12_mul - multiplier in the degree-12 extension field F_p12.
//
// The key recovery multiplies the two pairing values; this core computes
// that product. An element is twelve F_p coefficients of a polynomial in w,
// F_p12 = F_p[w] / (w^12 - C6*w^6 + C0); the default C6 = 18, C0 = 82 with
// the BN254 prime is the usual single-step representation of that curve's
// F_p12. The design description names the F_p12 multiplication core but not
// the representation, so the representation and the method are this
// implementation's choice.
//
// Method: schoolbook product into 23 accumulators on one fp_mul and one
// fp_addsub (144 products, each followed by an accumulation), then
// reduction from the top: for k = 22 down to 12, c[k-6] += C6*c[k] and
// c[k-12] -= C0*c[k] (22 more products). Every step runs after the previous
// one, in the area-saving serial style of the rest of the engine; a product
// takes 166 * (W + 12) cycles, 44,488 for W = 256.
//
// Interface: start with a, b (coefficient k in bits [256k +: 256]); busy
// while running; done pulses for one cycle with y valid (held until the
// next start).
module fp12_mul #(
  parameter int unsigned  W  = kac_pkg::FP_W,
  parameter logic [W-1:0] P  = kac_pkg::BN_P,
  parameter logic [W-1:0] C6 = W'(18),
  parameter logic [W-1:0] C0 = W'(82)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [11:0][W-1:0]  a,
  input  logic [11:0][W-1:0]  b,
  output logic                busy,
  output logic                done,
  output logic [11:0][W-1:0]  y
);
  typedef enum logic [2:0] {S_IDLE, S_MUL, S_MULW, S_ACC, S_ACCW} state_e;

  state_e         state;
  logic [1:0]     phase;       // 0: products, 1: + C6*c[k], 2: - C0*c[k]
  logic [3:0]     i, j;
  logic [4:0]     k;
  logic [W-1:0]   ra [12];
  logic [W-1:0]   rb [12];
  logic [W-1:0]   c  [23];
  logic [W-1:0]   t;

  logic           m_start, m_busy, m_done, s_start, s_busy, s_done, s_sub;
  logic [W-1:0]   m_a, m_b, m_y, s_a, s_y;
  logic [4:0]     dst;

  always_comb begin
    unique case (phase)
      2'd0:    begin m_a = ra[i];  m_b = rb[j]; dst = 5'(i) + 5'(j); s_sub = 1'b0; end
      2'd1:    begin m_a = c[k];   m_b = C6;    dst = k - 5'd6;      s_sub = 1'b0; end
      default: begin m_a = c[k];   m_b = C0;    dst = k - 5'd12;     s_sub = 1'b1; end
    endcase
    s_a     = c[dst];
    m_start = (state == S_MUL);
    s_start = (state == S_ACC);
  end

  fp_mul #(.W(W), .P(P)) u_mul (
    .clk, .rst_n, .start(m_start), .a(m_a), .b(m_b),
    .busy(m_busy), .done(m_done), .y(m_y)
  );

  fp_addsub #(.W(W), .P(P)) u_add (
    .clk, .rst_n, .start(s_start), .sub(s_sub), .a(s_a), .b(t),
    .busy(s_busy), .done(s_done), .y(s_y)
  );

  for (genvar n = 0; n < 12; n++) begin : g_out
    assign y[n] = c[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= '0; i <= '0; j <= '0; k <= '0; t <= '0;
      busy <= 1'b0; done <= 1'b0;
      for (int n = 0; n < 12; n++) begin ra[n] <= '0; rb[n] <= '0; end
      for (int n = 0; n < 23; n++) c[n] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int n = 0; n < 12; n++) begin ra[n] <= a[n]; rb[n] <= b[n]; end
          for (int n = 0; n < 23; n++) c[n] <= '0;
          phase <= 2'd0; i <= '0; j <= '0; k <= 5'd22;
          busy <= 1'b1; state <= S_MUL;
        end
        S_MUL:  state <= S_MULW;
        S_MULW: if (m_done) begin t <= m_y; state <= S_ACC; end
        S_ACC:  state <= S_ACCW;
        S_ACCW: if (s_done) begin
          c[dst] <= s_y;
          state  <= S_MUL;
          unique case (phase)
            2'd0: begin
              if (j == 4'd11) begin
                j <= '0;
                if (i == 4'd11) phase <= 2'd1;
                else i <= i + 1'b1;
              end else begin
                j <= j + 1'b1;
              end
            end
            2'd1: phase <= 2'd2;
            default: begin
              if (k == 5'd12) begin
                state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
              end else begin
                k <= k - 1'b1; phase <= 2'd1;
              end
            end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
