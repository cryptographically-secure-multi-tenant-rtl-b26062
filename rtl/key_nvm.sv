// key_nvm - write-once key storage with a programming lock.
//
// Holds the long-term key material of the provisioning scheme: the aggregate
// key sk_S (tamper-proof store), the public point a_S, and per partition its
// identity and its point b_id,S. Every entry is one-time programmable, like
// an eFUSE row: the first write to an entry sets its valid flag and later
// writes to it are refused, and asserting lock refuses all further writes.
// Contents are visible only on the internal data outputs; there is no
// external read port. The design description asks for sk_S in a
// tamper-proof non-volatile memory (battery-backed RAM or eFUSE on the
// target FPGA) and for a_S and b_id,S in ordinary non-volatile memory; the
// storage cells are process-specific, so here they are flip-flops, and the
// write-once and lock rules are this implementation's choice of access
// policy.
//
// Interface: prog_en with prog_addr and prog_data writes an entry in the
// next cycle if it is not yet valid and the store is not locked; otherwise
// wr_reject pulses. lock is sticky until reset. data and valid are
// registered outputs.
module key_nvm #(
  parameter int unsigned W = kac_pkg::FP_W,
  parameter int unsigned N = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 prog_en,
  input  logic [$clog2(N)-1:0] prog_addr,
  input  logic [W-1:0]         prog_data,
  input  logic                 lock,
  output logic [W-1:0]         data [N],
  output logic [N-1:0]         valid,
  output logic                 locked,
  output logic                 wr_reject
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) data[i] <= '0;
      valid <= '0; locked <= 1'b0; wr_reject <= 1'b0;
    end else begin
      wr_reject <= 1'b0;
      if (lock) locked <= 1'b1;
      if (prog_en) begin
        if (locked || lock || valid[prog_addr] || (int'(prog_addr) >= N)) begin
          wr_reject <= 1'b1;
        end else begin
          data[prog_addr]  <= prog_data;
          valid[prog_addr] <= 1'b1;
        end
      end
    end
  end

endmodule
