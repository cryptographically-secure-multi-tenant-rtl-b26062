// tb_coproc_model - behavioural stand-in for the Tate pairing core and the
// F_p12 multiplication core that the key-recovery engine calls.
//
// It answers each request after a fixed number of cycles with the stand-in
// functions model_pair and model_gtm of tb_ref_pkg (not a real pairing), and
// counts requests. It checks the request protocol: a request stays high
// until its done pulse.
module tb_coproc_model #(
  parameter int unsigned DELAY = 40
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pair_req,
  input  kac_pkg::ec_affine_t pair_p,
  input  kac_pkg::ec_affine_t pair_q,
  output logic                pair_done,
  output kac_pkg::fp12_t      pair_res,
  input  logic                gtm_req,
  input  kac_pkg::fp12_t      gtm_a,
  input  kac_pkg::fp12_t      gtm_b,
  output logic                gtm_done,
  output kac_pkg::fp12_t      gtm_res,
  output int                  n_pair,
  output int                  n_gtm,
  output kac_pkg::ec_affine_t last_p [2],
  output kac_pkg::ec_affine_t last_q [2]
);
  import tb_ref_pkg::*;
  int pc = 0, gc = 0;

  initial begin n_pair = 0; n_gtm = 0; pair_done = 0; gtm_done = 0; pair_res = '0; gtm_res = '0; end

  always @(posedge clk) begin
    pair_done <= 1'b0;
    gtm_done  <= 1'b0;
    if (rst_n && pair_req && !pair_done) begin
      pc <= pc + 1;
      if (pc == DELAY) begin
        pair_res <= model_pair(pair_p, pair_q);
        pair_done <= 1'b1;
        last_p[n_pair % 2] <= pair_p;
        last_q[n_pair % 2] <= pair_q;
        n_pair <= n_pair + 1;
        pc <= 0;
      end
    end
    if (rst_n && gtm_req && !gtm_done) begin
      gc <= gc + 1;
      if (gc == DELAY) begin
        gtm_res <= model_gtm(gtm_a, gtm_b);
        gtm_done <= 1'b1;
        n_gtm <= n_gtm + 1;
        gc <= 0;
      end
    end
  end
endmodule
