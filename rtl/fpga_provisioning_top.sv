// fpga_provisioning_top - on-chip security logic of one multi-tenant FPGA.
//
// The FPGA is split into N_PART partitions, each rented to a tenant as a
// virtual FPGA. A tenant encrypts its bitstream under an AES-128 key K of
// its own choice and encrypts K under the key-aggregate cryptosystem (KAC)
// for the identity of its partition. On chip there is exactly one secret:
// the aggregate key sk_S, a single curve point that serves every partition,
// held in the tamper-proof store. This top holds
//   - the sk_S store and the a_S store (write-once key_nvm instances),
//   - one shared KAC decryption engine, which recovers K from (c0, c1, c2),
//   - N_PART partition slots, each with its id, its point b_id,S and its
//     own AES-128 decryption engine, which receives K directly from the KAC
//     engine and decrypts the partition's bitstream blocks.
// This is the arrangement of the design description (one KAC engine per
// FPGA, one AES-128 engine per partition, one aggregate key per FPGA). The
// F_p12 multiplier that combines the two pairing values is the fp12_mul
// core inside this top. The Tate pairing core is not part of this RTL and
// is reached through the pair_* ports; the DMA controller that
// feeds requests and bitstream blocks, and the configuration port that
// consumes decrypted blocks, are outside as well. The default of three
// partitions follows the partitions A, B, C of the scheme's illustration.
//
// Interface:
//   prog_*   vendor programming of the stores at manufacture. prog_target
//            0 = sk_S (addr 0: x, 1: y), 1 = a_S (same layout), 2 + i =
//            partition i (addr 0: id, 1: b.x, 2: b.y). prog_lock seals all.
//   kac_*    key-recovery request for partition kac_part; kac_done pulses
//            when K is installed in that partition (or with kac_error).
//   bs_*     encrypted bitstream blocks for partition bs_part, valid/ready.
//   cfg_*    decrypted blocks per partition, one-cycle valid pulses.
module fpga_provisioning_top #(
  parameter int unsigned N_PART = 3,
  parameter int unsigned ID_W   = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // store programming
  input  logic                          prog_en,
  input  logic [$clog2(N_PART+2)-1:0]   prog_target,
  input  logic [1:0]                    prog_addr,
  input  kac_pkg::fp_t                  prog_data,
  input  logic                          prog_lock,
  output logic                          prog_reject,
  // key recovery requests
  input  logic                          kac_start,
  input  logic [$clog2(N_PART)-1:0]     kac_part,
  input  kac_pkg::ec_affine_t           kac_c0,
  input  kac_pkg::ec_affine_t           kac_c1,
  input  kac_pkg::aes_blk_t             kac_c2,
  output logic                          kac_busy,
  output logic                          kac_done,
  output logic                          kac_error,
  // pairing core (external)
  output logic                          pair_req,
  output kac_pkg::ec_affine_t           pair_p,
  output kac_pkg::ec_affine_t           pair_q,
  input  logic                          pair_done,
  input  kac_pkg::fp12_t                pair_res,
  // encrypted bitstream in (from the DMA controller)
  input  logic                          bs_valid,
  input  logic [$clog2(N_PART)-1:0]     bs_part,
  input  kac_pkg::aes_blk_t             bs_data,
  output logic                          bs_ready,
  // decrypted bitstream out (to the configuration interface)
  output logic [N_PART-1:0]             cfg_valid,
  output kac_pkg::aes_blk_t             cfg_data [N_PART],
  // status
  output logic [ID_W-1:0]               part_id [N_PART],
  output logic [N_PART-1:0]             part_key_ready
);
  import kac_pkg::*;

  // ---------------- FPGA-wide key stores ----------------
  fp_t        sk_data [2], as_data [2];
  logic [1:0] sk_valid, as_valid;
  logic       sk_rej, as_rej, sk_locked, as_locked;
  logic [N_PART-1:0] part_rej;

  key_nvm #(.W(FP_W), .N(2)) u_sk_store (
    .clk, .rst_n, .prog_en(prog_en && prog_target == '0), .prog_addr(prog_addr[0]),
    .prog_data, .lock(prog_lock), .data(sk_data), .valid(sk_valid),
    .locked(sk_locked), .wr_reject(sk_rej)
  );

  key_nvm #(.W(FP_W), .N(2)) u_as_store (
    .clk, .rst_n, .prog_en(prog_en && prog_target == 1), .prog_addr(prog_addr[0]),
    .prog_data, .lock(prog_lock), .data(as_data), .valid(as_valid),
    .locked(as_locked), .wr_reject(as_rej)
  );

  assign prog_reject = sk_rej || as_rej || (|part_rej);

  // ---------------- shared KAC decryption engine ----------------
  ec_affine_t b_pts [N_PART];
  logic [N_PART-1:0] b_ok;
  logic key_valid;
  logic [$clog2(N_PART)-1:0] key_part;
  aes_blk_t key_out;

  // F_p12 product of the two pairing values. The engine holds gtm_req until
  // gtm_done, so the core is started only on the first cycle of a request.
  logic  gtm_req, gtm_busy, gtm_done;
  fp12_t gtm_a, gtm_b, gtm_res;

  fp12_mul u_gtm (
    .clk, .rst_n, .start(gtm_req && !gtm_busy && !gtm_done),
    .a(gtm_a), .b(gtm_b), .busy(gtm_busy), .done(gtm_done), .y(gtm_res)
  );

  kac_decrypt_engine #(.N_PART(N_PART)) u_kac (
    .clk, .rst_n,
    .start(kac_start), .part(kac_part), .c0(kac_c0), .c1(kac_c1), .c2(kac_c2),
    .busy(kac_busy), .done(kac_done), .error(kac_error),
    .sk('{x: sk_data[0], y: sk_data[1]}), .a_s('{x: as_data[0], y: as_data[1]}),
    .b_pts, .keys_ok((&sk_valid) && (&as_valid)), .b_ok,
    .pair_req, .pair_p, .pair_q, .pair_done, .pair_res,
    .gtm_req, .gtm_a, .gtm_b, .gtm_done, .gtm_res,
    .key_valid, .key_part, .key_out
  );

  // ---------------- partitions ----------------
  logic [N_PART-1:0] slot_bs_ready;

  for (genvar i = 0; i < N_PART; i++) begin : g_part
    partition_slot #(.ID_W(ID_W)) u_slot (
      .clk, .rst_n,
      .prog_en(prog_en && int'(prog_target) == i + 2), .prog_addr, .prog_data,
      .prog_lock, .prog_reject(part_rej[i]),
      .id(part_id[i]), .b_pt(b_pts[i]), .b_ok(b_ok[i]),
      .key_load(key_valid && int'(key_part) == i), .key(key_out),
      .key_ready(part_key_ready[i]),
      .bs_valid(bs_valid && int'(bs_part) == i), .bs_data,
      .bs_ready(slot_bs_ready[i]),
      .cfg_valid(cfg_valid[i]), .cfg_data(cfg_data[i])
    );
  end

  assign bs_ready = (int'(bs_part) < N_PART) ? slot_bs_ready[bs_part] : 1'b0;

endmodule
