// kac_decrypt_engine - on-chip recovery of a tenant's AES-128 key with the
// key-aggregate cryptosystem (KAC).
//
// A tenant's key K arrives encrypted for the identity of its partition i as
// C2 = (c0, c1, c2): c0 and c1 are curve points, c2 = K xor H(.). With the
// aggregate key sk_S, the public point a_S and the partition's point b_i,S
// the engine computes
//     K = c2 xor H( e(a_S, c1) * e(sk_S + b_i,S, c0)^-1 )
// in this order:
//   1. T = sk_S + b_i,S       point addition on the ec_point_unit (Jacobian)
//   2. T -> affine            inversion and products on the same unit
//   3. g1 = e(a_S, c1)        request to the pairing core
//   4. g2 = e(T, -c0)         request to the pairing core; negating c0
//                             (y -> p - y) gives e(T, c0)^-1 by bilinearity,
//                             so no F_p12 inversion is needed
//   5. g  = g1 * g2           request to the F_p12 multiplication core
//   6. h  = SHA-256(g)        seven 512-bit blocks on the sha256_core
//   7. K  = c2 xor h[255:128] delivered to partition i on key_valid
// The steps run one after another on shared cores, as the design
// description does ("multiple operations using the same FPGA module are
// performed serially"). The Tate pairing is not part of this RTL and the
// F_p12 multiplier (fp12_mul) sits beside the engine in the top; both are
// reached through request/done ports. The
// negation of c0, the serialisation of g for hashing (twelve 256-bit
// coefficients, coefficient 11 first, big-endian, standard SHA-256 padding)
// and the truncation of the digest to its upper 128 bits are choices of
// this implementation.
//
// Interface: start with part, c0, c1, c2 begins a recovery (ignored while
// busy); done pulses at the end, together with key_valid, key_part and
// key_out, or with error if the partition index is out of range, a key
// store entry is not programmed, or sk_S + b_i,S hits the exceptional case
// of the addition formulas. Coprocessor ports: *_req is held high until the
// matching *_done pulse, the operands are stable meanwhile.
module kac_decrypt_engine #(
  parameter int unsigned  N_PART = 3,
  parameter int unsigned  W      = kac_pkg::FP_W,
  parameter logic [W-1:0] P      = kac_pkg::BN_P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // request from the host side (through the DMA path)
  input  logic                      start,
  input  logic [$clog2(N_PART)-1:0] part,
  input  kac_pkg::ec_affine_t       c0,
  input  kac_pkg::ec_affine_t       c1,
  input  kac_pkg::aes_blk_t         c2,
  output logic                      busy,
  output logic                      done,
  output logic                      error,
  // key material from the key stores
  input  kac_pkg::ec_affine_t       sk,
  input  kac_pkg::ec_affine_t       a_s,
  input  kac_pkg::ec_affine_t       b_pts [N_PART],
  input  logic                      keys_ok,
  input  logic [N_PART-1:0]         b_ok,
  // pairing core
  output logic                      pair_req,
  output kac_pkg::ec_affine_t       pair_p,
  output kac_pkg::ec_affine_t       pair_q,
  input  logic                      pair_done,
  input  kac_pkg::fp12_t            pair_res,
  // F_p12 multiplication core
  output logic                      gtm_req,
  output kac_pkg::fp12_t            gtm_a,
  output kac_pkg::fp12_t            gtm_b,
  input  logic                      gtm_done,
  input  kac_pkg::fp12_t            gtm_res,
  // recovered key to the partitions
  output logic                      key_valid,
  output logic [$clog2(N_PART)-1:0] key_part,
  output kac_pkg::aes_blk_t         key_out
);
  import kac_pkg::*;

  localparam int unsigned GT_BITS  = FP12_N * FP_W;                 // 3072
  localparam int unsigned MSG_BITS = ((GT_BITS + 65 + 511) / 512) * 512;
  localparam int unsigned NBLK     = MSG_BITS / 512;                // 7

  typedef enum logic [3:0] {
    S_IDLE, S_CHECK, S_ADD, S_ADD_W, S_AFF, S_AFF_W,
    S_PAIR1, S_PAIR2, S_GTM, S_HASH, S_HASH_W, S_OUT
  } state_e;

  state_e state;
  logic [$clog2(N_PART)-1:0] r_part;
  ec_affine_t r_c0, r_c1, t_aff;
  aes_blk_t   r_c2;
  fp12_t      g1, g2, g;
  logic [$clog2(NBLK+1)-1:0] blk;

  // elliptic-curve unit
  logic    ec_start, ec_busy, ec_done, ec_degen;
  ec_op_e  ec_op;
  fp_t     ec_p1x, ec_p1y, ec_p1z, ec_rx, ec_ry, ec_rz;
  ec_affine_t b_sel;

  assign b_sel = b_pts[r_part];

  always_comb begin
    ec_start = (state == S_ADD) || (state == S_AFF);
    ec_op    = (state == S_AFF) ? EC_AFF : EC_ADD;
    if (state == S_AFF) begin
      ec_p1x = ec_rx; ec_p1y = ec_ry; ec_p1z = ec_rz;
    end else begin
      ec_p1x = sk.x; ec_p1y = sk.y; ec_p1z = fp_t'(1);
    end
  end

  ec_point_unit #(.W(W), .P(P)) u_ec (
    .clk, .rst_n, .start(ec_start), .op(ec_op),
    .p1_x(ec_p1x), .p1_y(ec_p1y), .p1_z(ec_p1z),
    .p2_x(b_sel.x), .p2_y(b_sel.y), .p2_z(fp_t'(1)),
    .busy(ec_busy), .done(ec_done), .degenerate(ec_degen),
    .r_x(ec_rx), .r_y(ec_ry), .r_z(ec_rz)
  );

  // hash of g with SHA-256 padding
  logic [MSG_BITS-1:0] msg;
  logic         h_start, h_busy, h_done;
  logic [255:0] h_digest;
  assign msg = {g, 1'b1, {(MSG_BITS - GT_BITS - 65){1'b0}}, 64'(GT_BITS)};
  assign h_start = (state == S_HASH);

  sha256_core u_sha (
    .clk, .rst_n, .start(h_start), .init(blk == '0),
    .block(msg[MSG_BITS - 1 - 512*blk -: 512]),
    .busy(h_busy), .done(h_done), .digest(h_digest)
  );

  // coprocessor requests
  assign pair_req = (state == S_PAIR1) || (state == S_PAIR2);
  assign pair_p   = (state == S_PAIR2) ? t_aff : a_s;
  assign pair_q   = (state == S_PAIR2) ? '{x: r_c0.x, y: (r_c0.y == '0) ? '0 : (P - r_c0.y)} : r_c1;
  assign gtm_req  = (state == S_GTM);
  assign gtm_a    = g1;
  assign gtm_b    = g2;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r_part <= '0; r_c0 <= '0; r_c1 <= '0; r_c2 <= '0;
      t_aff <= '0; g1 <= '0; g2 <= '0; g <= '0; blk <= '0;
      done <= 1'b0; error <= 1'b0; key_valid <= 1'b0; key_part <= '0; key_out <= '0;
    end else begin
      done <= 1'b0; error <= 1'b0; key_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          r_part <= part; r_c0 <= c0; r_c1 <= c1; r_c2 <= c2;
          state <= S_CHECK;
        end
        S_CHECK: begin
          if ((int'(r_part) >= N_PART) || !keys_ok || !b_ok[r_part]) begin
            done <= 1'b1; error <= 1'b1; state <= S_IDLE;
          end else begin
            state <= S_ADD;
          end
        end
        S_ADD:   state <= S_ADD_W;
        S_ADD_W: if (ec_done) begin
          if (ec_degen) begin
            done <= 1'b1; error <= 1'b1; state <= S_IDLE;
          end else begin
            state <= S_AFF;
          end
        end
        S_AFF:   state <= S_AFF_W;
        S_AFF_W: if (ec_done) begin
          t_aff <= '{x: ec_rx, y: ec_ry};
          state <= S_PAIR1;
        end
        S_PAIR1: if (pair_done) begin g1 <= pair_res; state <= S_PAIR2; end
        S_PAIR2: if (pair_done) begin g2 <= pair_res; state <= S_GTM; end
        S_GTM:   if (gtm_done) begin g <= gtm_res; blk <= '0; state <= S_HASH; end
        S_HASH:  state <= S_HASH_W;
        S_HASH_W: if (h_done) begin
          if (int'(blk) == NBLK - 1) state <= S_OUT;
          else begin blk <= blk + 1'b1; state <= S_HASH; end
        end
        S_OUT: begin
          key_out   <= r_c2 ^ h_digest[255:128];
          key_part  <= r_part;
          key_valid <= 1'b1;
          done      <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // operands must stay stable while a coprocessor request is pending
  a_pair_stable: assert property (@(posedge clk) disable iff (!rst_n)
    pair_req && !pair_done |=> $stable(pair_p) && $stable(pair_q));
  a_gtm_stable: assert property (@(posedge clk) disable iff (!rst_n)
    gtm_req && !gtm_done |=> $stable(gtm_a) && $stable(gtm_b));

endmodule
