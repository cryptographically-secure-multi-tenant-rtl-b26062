// ec_point_unit - elliptic-curve point arithmetic on y^2 = x^3 + b over F_p.
//
// Three operations, selected by op at start:
//   EC_ADD  R = P1 + P2   (Jacobian coordinates, 16 products, 7 subtractions)
//   EC_DBL  R = 2 * P1    (Jacobian, a = 0 curve, 7 products, 12 add/sub)
//   EC_AFF  R = affine(P1): x = X/Z^2, y = Y/Z^3, z = 1 (one inversion)
// The unit is a small micro-sequenced datapath: a 16-entry register file of
// F_p words, one fp_mul, one fp_addsub and one fp_inv. A fixed program per
// operation (function uop below) names, step by step, the functional unit,
// the destination and the two source registers; the sequencer issues one step
// at a time and waits for it. Jacobian formulas are the standard
// "add-1998-cmo-2" and "dbl-1998-cmo-2" ones. Point addition and doubling are
// cores of the design description (Table of elliptic-curve operations); the
// coordinate system, formulas and sequencing are this implementation's
// choices. The KAC decryption uses EC_ADD for sk_S + b_i,S and EC_AFF to hand
// an affine point to the pairing.
//
// Special cases are not handled in the datapath: if P1 = +-P2 in EC_ADD the
// result is meaningless and degenerate is raised (H = U2 - U1 = 0); the point
// at infinity has no encoding. Inputs must be reduced (< p).
//
// Interface: pulse start with op, p1, p2; busy while running; done pulses for
// one cycle with r (held until the next start). Latency with W = 256:
// EC_ADD about 16*258 + 7*9 + overhead, EC_DBL about 7*258 + 12*9, EC_AFF
// one inversion plus 4 products.
module ec_point_unit #(
  parameter int unsigned  W = kac_pkg::FP_W,
  parameter logic [W-1:0] P = kac_pkg::BN_P
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  kac_pkg::ec_op_e  op,
  input  logic [W-1:0]     p1_x, p1_y, p1_z,
  input  logic [W-1:0]     p2_x, p2_y, p2_z,
  output logic             busy,
  output logic             done,
  output logic             degenerate,
  output logic [W-1:0]     r_x, r_y, r_z
);
  import kac_pkg::*;

  typedef enum logic [2:0] {U_MUL, U_ADD, U_SUB, U_INV, U_END} unit_e;
  typedef struct packed {
    unit_e      unit;
    logic [3:0] d;
    logic [3:0] a;
    logic [3:0] b;
  } uop_t;

  function automatic uop_t mk(unit_e u, int d, int a, int b);
    mk = '{unit: u, d: 4'(d), a: 4'(a), b: 4'(b)};
  endfunction

  // Register use: R0..R2 = P1 (X,Y,Z) and result, R3..R5 = P2, R6..R14 temps.
  function automatic uop_t uop(ec_op_e o, logic [4:0] pc);
    uop = mk(U_END, 0, 0, 0);
    unique case (o)
      EC_ADD: case (pc)
        5'd0:  uop = mk(U_MUL,  6,  5,  5);  // Z2^2
        5'd1:  uop = mk(U_MUL,  7,  0,  6);  // U1 = X1 Z2^2
        5'd2:  uop = mk(U_MUL,  6,  6,  5);  // Z2^3
        5'd3:  uop = mk(U_MUL,  8,  1,  6);  // S1 = Y1 Z2^3
        5'd4:  uop = mk(U_MUL,  6,  2,  2);  // Z1^2
        5'd5:  uop = mk(U_MUL,  9,  3,  6);  // U2 = X2 Z1^2
        5'd6:  uop = mk(U_MUL,  6,  6,  2);  // Z1^3
        5'd7:  uop = mk(U_MUL, 10,  4,  6);  // S2 = Y2 Z1^3
        5'd8:  uop = mk(U_SUB,  9,  9,  7);  // H = U2 - U1
        5'd9:  uop = mk(U_SUB, 10, 10,  8);  // r = S2 - S1
        5'd10: uop = mk(U_MUL, 11,  9,  9);  // H^2
        5'd11: uop = mk(U_MUL, 12, 11,  9);  // H^3
        5'd12: uop = mk(U_MUL, 11,  7, 11);  // U1 H^2
        5'd13: uop = mk(U_MUL,  6,  2,  5);  // Z1 Z2
        5'd14: uop = mk(U_MUL,  2,  6,  9);  // Z3 = Z1 Z2 H
        5'd15: uop = mk(U_MUL,  0, 10, 10);  // r^2
        5'd16: uop = mk(U_SUB,  0,  0, 12);  // r^2 - H^3
        5'd17: uop = mk(U_SUB,  0,  0, 11);
        5'd18: uop = mk(U_SUB,  0,  0, 11);  // X3
        5'd19: uop = mk(U_SUB, 13, 11,  0);  // U1 H^2 - X3
        5'd20: uop = mk(U_MUL, 13, 10, 13);  // r (U1 H^2 - X3)
        5'd21: uop = mk(U_MUL, 14,  8, 12);  // S1 H^3
        5'd22: uop = mk(U_SUB,  1, 13, 14);  // Y3
        default: uop = mk(U_END, 0, 0, 0);
      endcase
      EC_DBL: case (pc)
        5'd0:  uop = mk(U_MUL,  6,  1,  1);  // Y^2
        5'd1:  uop = mk(U_MUL,  7,  0,  6);  // X Y^2
        5'd2:  uop = mk(U_ADD,  7,  7,  7);
        5'd3:  uop = mk(U_ADD,  7,  7,  7);  // S = 4 X Y^2
        5'd4:  uop = mk(U_MUL,  8,  0,  0);  // X^2
        5'd5:  uop = mk(U_ADD,  9,  8,  8);
        5'd6:  uop = mk(U_ADD,  8,  9,  8);  // M = 3 X^2
        5'd7:  uop = mk(U_MUL,  9,  6,  6);  // Y^4
        5'd8:  uop = mk(U_ADD,  9,  9,  9);
        5'd9:  uop = mk(U_ADD,  9,  9,  9);
        5'd10: uop = mk(U_ADD,  9,  9,  9);  // 8 Y^4
        5'd11: uop = mk(U_MUL, 10,  1,  2);  // Y Z
        5'd12: uop = mk(U_ADD,  2, 10, 10);  // Z3 = 2 Y Z
        5'd13: uop = mk(U_MUL,  0,  8,  8);  // M^2
        5'd14: uop = mk(U_SUB,  0,  0,  7);
        5'd15: uop = mk(U_SUB,  0,  0,  7);  // X3 = M^2 - 2S
        5'd16: uop = mk(U_SUB, 11,  7,  0);  // S - X3
        5'd17: uop = mk(U_MUL, 11,  8, 11);  // M (S - X3)
        5'd18: uop = mk(U_SUB,  1, 11,  9);  // Y3
        default: uop = mk(U_END, 0, 0, 0);
      endcase
      EC_AFF: case (pc)
        5'd0:  uop = mk(U_INV,  6,  2,  2);  // Z^-1
        5'd1:  uop = mk(U_MUL,  7,  6,  6);  // Z^-2
        5'd2:  uop = mk(U_MUL,  0,  0,  7);  // x
        5'd3:  uop = mk(U_MUL,  7,  7,  6);  // Z^-3
        5'd4:  uop = mk(U_MUL,  1,  1,  7);  // y
        5'd5:  uop = mk(U_MUL,  2,  6,  2);  // z = Z^-1 Z = 1
        default: uop = mk(U_END, 0, 0, 0);
      endcase
      default: uop = mk(U_END, 0, 0, 0);
    endcase
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;
  state_e      state;
  ec_op_e      cur_op;
  logic [4:0]  pc;
  logic [W-1:0] rf [16];
  uop_t        u;

  logic         m_start, m_busy, m_done;
  logic         s_start, s_busy, s_done;
  logic         i_start, i_busy, i_done;
  logic [W-1:0] m_y, s_y, i_y, opa, opb;

  assign u   = uop(cur_op, pc);
  assign opa = rf[u.a];
  assign opb = rf[u.b];

  assign m_start = (state == S_ISSUE) && (u.unit == U_MUL);
  assign s_start = (state == S_ISSUE) && (u.unit == U_ADD || u.unit == U_SUB);
  assign i_start = (state == S_ISSUE) && (u.unit == U_INV);

  fp_mul #(.W(W), .P(P)) u_mul (
    .clk, .rst_n, .start(m_start), .a(opa), .b(opb),
    .busy(m_busy), .done(m_done), .y(m_y)
  );

  fp_addsub #(.W(W), .P(P)) u_add (
    .clk, .rst_n, .start(s_start), .sub(u.unit == U_SUB), .a(opa), .b(opb),
    .busy(s_busy), .done(s_done), .y(s_y)
  );

  fp_inv #(.W(W), .P(P)) u_inv (
    .clk, .rst_n, .start(i_start), .a(opa),
    .busy(i_busy), .done(i_done), .y(i_y)
  );

  assign r_x = rf[0];
  assign r_y = rf[1];
  assign r_z = rf[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur_op <= EC_ADD; pc <= '0;
      busy <= 1'b0; done <= 1'b0; degenerate <= 1'b0;
      for (int i = 0; i < 16; i++) rf[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rf[0] <= p1_x; rf[1] <= p1_y; rf[2] <= p1_z;
          rf[3] <= p2_x; rf[4] <= p2_y; rf[5] <= p2_z;
          cur_op <= op; pc <= '0; busy <= 1'b1; degenerate <= 1'b0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (u.unit == U_END) begin
            state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
          end else begin
            state <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (m_done || s_done || i_done) begin
            rf[u.d] <= m_done ? m_y : (s_done ? s_y : i_y);
            // H = 0 in point addition means P1 = +-P2: formulas do not apply
            if (cur_op == EC_ADD && pc == 5'd8 && s_y == '0) degenerate <= 1'b1;
            pc    <= pc + 1'b1;
            state <= S_ISSUE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
