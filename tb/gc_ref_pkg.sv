// gc_ref_pkg: reference models for the testbenches.
//
// A software AES-128 (table S-box built with the classic p/q generator
// loop, full key schedule, state as a 4x4 byte matrix), the garbling hash
// H(A,B,T) = AES(K) xor K with K = 2A xor 4B xor T, and a garbler that
// builds row-reduced point-and-permute tables for any two-input gate
// under free-XOR. These are written independently of the RTL and are
// themselves checked against the FIPS-197 example vector.
package gc_ref_pkg;

  logic [7:0] SBOX [256];
  bit         sbox_ready = 1'b0;

  function automatic logic [7:0] rotl8(input logic [7:0] v, input int n);
    return (v << n) | (v >> (8 - n));
  endfunction

  function automatic void init_sbox();
    logic [7:0] p, q, x;
    p = 8'h01; q = 8'h01;
    do begin
      p = p ^ (p << 1) ^ ((p & 8'h80) != 0 ? 8'h1b : 8'h00);
      q = q ^ (q << 1);
      q = q ^ (q << 2);
      q = q ^ (q << 4);
      if (q[7]) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      SBOX[p] = x ^ 8'h63;
    end while (p != 8'h01);
    SBOX[0] = 8'h63;
    sbox_ready = 1'b1;
  endfunction

  function automatic logic [7:0] mul2(input logic [7:0] v);
    return (v << 1) ^ (v[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [127:0] ref_aes(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] s [4][4];
    logic [7:0] t [4][4];
    logic [7:0] w [44][4];
    logic [7:0] rc, tmp;
    if (!sbox_ready) init_sbox();
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) w[i][j] = key[127 - 8*(4*i+j) -: 8];
    rc = 8'h01;
    for (int i = 4; i < 44; i++) begin
      logic [7:0] v [4];
      for (int j = 0; j < 4; j++) v[j] = w[i-1][j];
      if (i % 4 == 0) begin
        tmp = v[0]; v[0] = v[1]; v[1] = v[2]; v[2] = v[3]; v[3] = tmp;
        for (int j = 0; j < 4; j++) v[j] = SBOX[v[j]];
        v[0] = v[0] ^ rc;
        rc = mul2(rc);
      end
      for (int j = 0; j < 4; j++) w[i][j] = w[i-4][j] ^ v[j];
    end
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) s[r][c] = pt[127 - 8*(4*c+r) -: 8] ^ w[c][r];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) t[r][c] = SBOX[s[r][(c + r) % 4]];
      for (int c = 0; c < 4; c++) begin
        if (rnd != 10) begin
          s[0][c] = mul2(t[0][c]) ^ mul2(t[1][c]) ^ t[1][c] ^ t[2][c] ^ t[3][c];
          s[1][c] = t[0][c] ^ mul2(t[1][c]) ^ mul2(t[2][c]) ^ t[2][c] ^ t[3][c];
          s[2][c] = t[0][c] ^ t[1][c] ^ mul2(t[2][c]) ^ mul2(t[3][c]) ^ t[3][c];
          s[3][c] = mul2(t[0][c]) ^ t[0][c] ^ t[1][c] ^ t[2][c] ^ mul2(t[3][c]);
        end else begin
          for (int r = 0; r < 4; r++) s[r][c] = t[r][c];
        end
        for (int r = 0; r < 4; r++) s[r][c] = s[r][c] ^ w[4*rnd + c][r];
      end
    end
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) ref_aes[127 - 8*(4*c+r) -: 8] = s[r][c];
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  function automatic logic [127:0] ref_hash(input logic [127:0] key, input logic [127:0] a,
                                            input logic [127:0] b, input logic [31:0] tw);
    logic [127:0] k;
    k = (a << 1) ^ (b << 2) ^ {96'd0, tw};
    return ref_aes(key, k) ^ k;
  endfunction

  // Garble a two-input gate with truth table tt (tt[{va,vb}] = output) under
  // free-XOR offset delta (lsb 1). a0/b0 are the 0-labels of the inputs.
  // Returns the output 0-label c0 and the three rows (row r for permute
  // bits {sa,sb} = r+1).
  function automatic void garble_gate(input logic [127:0] key, input logic [127:0] delta,
                                      input logic [127:0] a0, input logic [127:0] b0,
                                      input logic [3:0] tt, input logic [31:0] tw,
                                      output logic [127:0] c0,
                                      output logic [2:0][127:0] rows);
    logic [127:0] h [4];
    logic va, vb, v;
    for (int s = 0; s < 4; s++) begin
      va = s[1] ^ a0[0];
      vb = s[0] ^ b0[0];
      h[s] = ref_hash(key, a0 ^ (va ? delta : '0), b0 ^ (vb ? delta : '0), tw);
    end
    va = a0[0]; vb = b0[0];          // values seen at permute bits (0,0)
    v  = tt[{va, vb}];
    c0 = h[0] ^ (v ? delta : '0);
    for (int s = 1; s < 4; s++) begin
      va = s[1] ^ a0[0];
      vb = s[0] ^ b0[0];
      v  = tt[{va, vb}];
      rows[s-1] = h[s] ^ c0 ^ (v ? delta : '0);
    end
  endfunction

endpackage
