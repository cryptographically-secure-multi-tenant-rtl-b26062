// aes128_dec - AES-128 block decryption engine (FIPS-197 inverse cipher).
//
// One such engine sits in every FPGA partition and decrypts the tenant's
// encrypted bitstream with the tenant's AES-128 key K, which the KAC
// decryption engine recovers on chip. Loading a key runs the forward key
// expansion, one round key per cycle, into an 11-entry round-key memory
// (10 cycles); the key then stays until the next load, so any number of
// blocks can be decrypted under it. A block is decrypted iteratively, one
// round per cycle: the initial AddRoundKey happens when the block is
// accepted, then nine rounds of InvShiftRows, InvSubBytes, AddRoundKey and
// InvMixColumns and a final round without InvMixColumns. The S-boxes are
// computed from their definition (inverse in GF(2^8) followed by the affine
// map), not read from a table. The design description gives only the
// function and cost of this engine (1484 LUTs, 8e-5 ms); the iterative
// structure is this implementation's choice. Blocks are decrypted one by one
// (electronic-codebook use of the cipher): the design description does not
// name a block-cipher mode.
//
// Interface: key_load (one cycle) with key starts the expansion and drops
// key_ready until it is done. A block is accepted when in_valid && in_ready;
// in_ready is high only when a key is ready and no block is in flight.
// out_valid pulses 10 cycles after the accepting cycle with out_block.
// Bytes are big-endian: byte 0 of a block or key is in bits 127:120.
module aes128_dec (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         key_load,
  input  logic [127:0] key,
  output logic         key_ready,
  input  logic         in_valid,
  input  logic [127:0] in_block,
  output logic         in_ready,
  output logic         out_valid,
  output logic [127:0] out_block
);
  // ---------------- GF(2^8) helpers ----------------
  function automatic logic [7:0] xt(logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h1b : 8'h00);
  endfunction
  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] r, t;
    r = '0; t = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r = r ^ t;
      t = xt(t);
    end
    return r;
  endfunction
  // x^254 = x^-1 (0 maps to 0)
  function automatic logic [7:0] ginv(logic [7:0] x);
    logic [7:0] x2, x4, x8, x16, x32, x64, x128;
    x2 = gmul(x, x); x4 = gmul(x2, x2); x8 = gmul(x4, x4); x16 = gmul(x8, x8);
    x32 = gmul(x16, x16); x64 = gmul(x32, x32); x128 = gmul(x64, x64);
    return gmul(gmul(gmul(x128, x64), gmul(x32, x16)), gmul(gmul(x8, x4), x2));
  endfunction
  function automatic logic [7:0] sbox(logic [7:0] x);
    logic [7:0] v, s;
    v = ginv(x);
    for (int i = 0; i < 8; i++)
      s[i] = v[i] ^ v[(i+4)%8] ^ v[(i+5)%8] ^ v[(i+6)%8] ^ v[(i+7)%8] ^ 1'((8'h63 >> i) & 8'h01);
    return s;
  endfunction
  function automatic logic [7:0] inv_sbox(logic [7:0] x);
    logic [7:0] v;
    // inverse affine map: v_i = x_(i+2) ^ x_(i+5) ^ x_(i+7) ^ 0x05_i
    for (int i = 0; i < 8; i++)
      v[i] = x[(i+2)%8] ^ x[(i+5)%8] ^ x[(i+7)%8] ^ 1'((8'h05 >> i) & 8'h01);
    return ginv(v);
  endfunction

  function automatic logic [127:0] next_rk(logic [127:0] rk, logic [7:0] rc);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = rk;
    t  = {sbox(w3[23:16]) ^ rc, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t; w1 = w1 ^ w0; w2 = w2 ^ w1; w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // one inverse round on a state; mix selects InvMixColumns
  function automatic logic [127:0] inv_round(logic [127:0] s, logic [127:0] rk, logic mix);
    logic [7:0] b [16], t [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) b[i] = s[127 - 8*i -: 8];
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        t[r + 4*c] = inv_sbox(b[r + 4*((c - r + 4) % 4)]) ^ rk[127 - 8*(r + 4*c) -: 8];
    for (int c = 0; c < 4; c++) begin
      if (mix) begin
        b[4*c]   = gmul(t[4*c], 8'h0e) ^ gmul(t[4*c+1], 8'h0b) ^ gmul(t[4*c+2], 8'h0d) ^ gmul(t[4*c+3], 8'h09);
        b[4*c+1] = gmul(t[4*c], 8'h09) ^ gmul(t[4*c+1], 8'h0e) ^ gmul(t[4*c+2], 8'h0b) ^ gmul(t[4*c+3], 8'h0d);
        b[4*c+2] = gmul(t[4*c], 8'h0d) ^ gmul(t[4*c+1], 8'h09) ^ gmul(t[4*c+2], 8'h0e) ^ gmul(t[4*c+3], 8'h0b);
        b[4*c+3] = gmul(t[4*c], 8'h0b) ^ gmul(t[4*c+1], 8'h0d) ^ gmul(t[4*c+2], 8'h09) ^ gmul(t[4*c+3], 8'h0e);
      end else begin
        for (int r = 0; r < 4; r++) b[4*c + r] = t[4*c + r];
      end
    end
    for (int i = 0; i < 16; i++) o[127 - 8*i -: 8] = b[i];
    return o;
  endfunction

  logic [127:0] rk_mem [11];
  logic [127:0] rk_last, state;
  logic [7:0]   rcon;
  logic [3:0]   kcnt, rnd;
  logic         expanding, running;

  assign in_ready = key_ready && !running && !expanding;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 11; i++) rk_mem[i] <= '0;
      rk_last <= '0; state <= '0; rcon <= 8'h01; kcnt <= '0; rnd <= '0;
      expanding <= 1'b0; running <= 1'b0; key_ready <= 1'b0;
      out_valid <= 1'b0; out_block <= '0;
    end else begin
      out_valid <= 1'b0;
      if (key_load && !running) begin
        rk_mem[0] <= key; rk_last <= key; rcon <= 8'h01; kcnt <= 4'd1;
        expanding <= 1'b1; key_ready <= 1'b0;
      end else if (expanding) begin
        rk_mem[kcnt] <= next_rk(rk_last, rcon);
        rk_last <= next_rk(rk_last, rcon);
        rcon <= xt(rcon);
        kcnt <= kcnt + 1'b1;
        if (kcnt == 4'd10) begin expanding <= 1'b0; key_ready <= 1'b1; end
      end
      if (in_valid && in_ready) begin
        state <= in_block ^ rk_mem[10];
        rnd <= 4'd9; running <= 1'b1;
      end else if (running) begin
        state <= inv_round(state, rk_mem[rnd], rnd != 4'd0);
        if (rnd == 4'd0) begin
          running <= 1'b0; out_valid <= 1'b1;
          out_block <= inv_round(state, rk_mem[rnd], 1'b0);
        end
        rnd <= rnd - 1'b1;
      end
    end
  end

endmodule
