// partition_slot - security logic of one FPGA partition (one virtual FPGA).
//
// Every partition carries its own identity id, its own public point b_id,S
// (both in ordinary write-once non-volatile storage) and its own AES-128
// decryption engine. When the shared KAC engine has recovered the tenant's
// key K for this partition, K is loaded straight into the AES engine, never
// leaving the chip; the encrypted bitstream blocks that arrive for the
// partition are then decrypted and passed on, in order, to the partition's
// configuration interface. This follows the design description: one AES-128
// decryption engine per partition, id and b_id,S stored with the partition.
// The 16-bit identity width, the three-entry store layout (0: id, 1: b.x,
// 2: b.y) and the streaming interface are this implementation's choices.
//
// Interface: prog_* writes the partition's store (write-once, lock seals
// it). key_load with key installs a new tenant key (10 cycles of key
// expansion). bs_valid/bs_ready accept one 128-bit encrypted block at a
// time; cfg_valid pulses with each decrypted block 10 cycles later.
module partition_slot #(
  parameter int unsigned ID_W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // store programming (vendor, at manufacture)
  input  logic                prog_en,
  input  logic [1:0]          prog_addr,
  input  kac_pkg::fp_t        prog_data,
  input  logic                prog_lock,
  output logic                prog_reject,
  // stored values
  output logic [ID_W-1:0]     id,
  output kac_pkg::ec_affine_t b_pt,
  output logic                b_ok,
  // tenant key from the KAC engine
  input  logic                key_load,
  input  kac_pkg::aes_blk_t   key,
  output logic                key_ready,
  // encrypted bitstream in, decrypted bitstream out
  input  logic                bs_valid,
  input  kac_pkg::aes_blk_t   bs_data,
  output logic                bs_ready,
  output logic                cfg_valid,
  output kac_pkg::aes_blk_t   cfg_data
);
  import kac_pkg::*;

  fp_t        nvm_data [3];
  logic [2:0] nvm_valid;
  logic       nvm_locked;

  key_nvm #(.W(FP_W), .N(3)) u_nvm (
    .clk, .rst_n, .prog_en, .prog_addr, .prog_data, .lock(prog_lock),
    .data(nvm_data), .valid(nvm_valid), .locked(nvm_locked), .wr_reject(prog_reject)
  );

  assign id   = nvm_data[0][ID_W-1:0];
  assign b_pt = '{x: nvm_data[1], y: nvm_data[2]};
  assign b_ok = &nvm_valid;

  aes128_dec u_aes (
    .clk, .rst_n, .key_load, .key, .key_ready,
    .in_valid(bs_valid), .in_block(bs_data), .in_ready(bs_ready),
    .out_valid(cfg_valid), .out_block(cfg_data)
  );

endmodule
