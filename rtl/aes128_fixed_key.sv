// aes128_fixed_key: AES-128 encryption under a key fixed at build time.
//
// This is the fixed-key block cipher pi() of the garbling hash used by the
// garbled ALU (JustGarble-style garbling, which the paper names but does not
// detail). It is iterative: one AES round per clock, with the round key
// expanded on the fly next to the state, so no key schedule memory is kept.
// The S-box is computed as the GF(2^8) inverse followed by the affine map,
// so the design carries no lookup table.
//
// Interface: pulse start with the plaintext on din while busy is low. busy
// rises on the next edge; ten clock edges after the edge that sampled
// start, done pulses for one cycle with the ciphertext on dout (dout then
// holds until the next start). A start while busy is ignored.
// The choice of AES-128 and the default key (the FIPS-197 example key) are
// this design's assumptions; the paper only says "fixed-key block cipher".
module aes128_fixed_key #(
  parameter logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] din,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);

  function automatic logic [7:0] xtime(input logic [7:0] v);
    return {v[6:0], 1'b0} ^ (v[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] p0, input logic [7:0] q0);
    logic [7:0] acc, p;
    acc = '0;
    p   = p0;
    for (int i = 0; i < 8; i++) begin
      if (q0[i]) acc ^= p;
      p = xtime(p);
    end
    return acc;
  endfunction

  // S-box: multiplicative inverse (x^254) then the FIPS-197 affine transform.
  function automatic logic [7:0] sbox(input logic [7:0] x);
    logic [7:0] inv, sq, s;
    inv = 8'h01;
    sq  = x;
    for (int i = 1; i < 8; i++) begin
      sq  = gmul(sq, sq);          // x^(2^i)
      inv = gmul(inv, sq);         // product of x^2 .. x^128 = x^254
    end
    for (int i = 0; i < 8; i++)
      s[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  // Byte i of a 128-bit block, i = 0 being the most significant byte.
  function automatic logic [7:0] byte_of(input logic [127:0] v, input int i);
    return v[127-8*i -: 8];
  endfunction

  function automatic logic [127:0] next_key(input logic [127:0] k, input logic [7:0] rc);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sbox(w3[23:16]) ^ rc, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // SubBytes, ShiftRows and (unless last) MixColumns.
  function automatic logic [127:0] round_fn(input logic [127:0] s, input logic last);
    logic [7:0] sb [16];
    logic [7:0] sh [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) sb[i] = sbox(byte_of(s, i));
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sh[r + 4*c] = sb[r + 4*((c + r) % 4)];
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = sh[4*c]; a1 = sh[4*c+1]; a2 = sh[4*c+2]; a3 = sh[4*c+3];
      if (!last) begin
        sh[4*c]   = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
        sh[4*c+1] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
        sh[4*c+2] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
        sh[4*c+3] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
      end
    end
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = sh[i];
    return o;
  endfunction

  logic [127:0] state_q, rk_q, rk_n;
  logic [7:0]   rcon_q;
  logic [3:0]   round_q;

  assign rk_n = next_key(rk_q, rcon_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      rk_q    <= '0;
      rcon_q  <= 8'h01;
      round_q <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state_q <= din ^ KEY;
          rk_q    <= KEY;
          rcon_q  <= 8'h01;
          round_q <= 4'd1;
          busy    <= 1'b1;
        end
      end else begin
        state_q <= round_fn(state_q, round_q == 4'd10) ^ rk_n;
        rk_q    <= rk_n;
        rcon_q  <= xtime(rcon_q);
        round_q <= round_q + 4'd1;
        if (round_q == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign dout = state_q;

endmodule
