// aes128_enc: iterative AES-128 encryption (FIPS-197), one round per clock.
//
// Serves as the AES unit of both engines: it produces the counter-mode
// one-time pads in the memory controller and the nonce pads that hide
// counter blocks on the memory bus in the NVDIMM. The round key is expanded
// on the fly alongside the state, so no key schedule is stored. S-boxes are
// computed as GF(2^8) inversion followed by the affine map, which keeps the
// source free of tables.
//
// Interface: pulse start with key/pt while busy is low. done pulses for one
// cycle with ct valid 11 cycles after start (1 load + 10 rounds). A start
// while busy is ignored. The cipher choice and this round-per-cycle timing
// are this design's; the architecture only names an "AES unit".
module aes128_enc (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] pt,
  output logic         busy,
  output logic         done,
  output logic [127:0] ct
);

  function automatic logic [7:0] xt(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p = '0;
    logic [7:0] aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = xt(aa);
    end
    return p;
  endfunction

  // a^254 = a^-1 in GF(2^8) (0 maps to 0)
  function automatic logic [7:0] ginv(logic [7:0] a);
    logic [7:0] r = 8'h01;
    logic [7:0] x = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gmul(r, x);   // 254 = 0b11111110
      x = gmul(x, x);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox(logic [7:0] a);
    logic [7:0] b = ginv(a);
    logic [7:0] s;
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  // byte n of a 128-bit word, n = 0 is the most significant (FIPS order)
  function automatic logic [7:0] byt(logic [127:0] w, int n);
    return w[127 - 8*n -: 8];
  endfunction

  function automatic logic [127:0] round_f(logic [127:0] s, logic [127:0] rk, logic last);
    logic [7:0] b [16];
    logic [7:0] t [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) b[i] = sbox(byt(s, i));
    // ShiftRows: column c, row r takes from column (c + r) % 4
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) t[4*c + r] = b[4*((c + r) % 4) + r];
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      {a0, a1, a2, a3} = {t[4*c], t[4*c+1], t[4*c+2], t[4*c+3]};
      if (!last) begin
        t[4*c]   = xt(a0) ^ (xt(a1) ^ a1) ^ a2 ^ a3;
        t[4*c+1] = a0 ^ xt(a1) ^ (xt(a2) ^ a2) ^ a3;
        t[4*c+2] = a0 ^ a1 ^ xt(a2) ^ (xt(a3) ^ a3);
        t[4*c+3] = (xt(a0) ^ a0) ^ a1 ^ a2 ^ xt(a3);
      end
    end
    for (int i = 0; i < 16; i++) o[127 - 8*i -: 8] = t[i];
    return o ^ rk;
  endfunction

  function automatic logic [127:0] next_key(logic [127:0] k, logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, g;
    {w0, w1, w2, w3} = k;
    g = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ g; w1 = w1 ^ w0; w2 = w2 ^ w1; w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  logic [127:0] state_q, rkey_q;
  logic [7:0]   rcon_q;
  logic [3:0]   round_q;

  logic [127:0] rk_next;
  assign rk_next = next_key(rkey_q, rcon_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      rkey_q  <= '0;
      rcon_q  <= 8'h01;
      round_q <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state_q <= pt ^ key;
          rkey_q  <= key;
          rcon_q  <= 8'h01;
          round_q <= 4'd1;
          busy    <= 1'b1;
        end
      end else begin
        state_q <= round_f(state_q, rk_next, round_q == 4'd10);
        rkey_q  <= rk_next;
        rcon_q  <= xt(rcon_q);
        round_q <= round_q + 4'd1;
        if (round_q == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign ct = state_q;

endmodule
