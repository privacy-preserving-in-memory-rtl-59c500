// tb_util_pkg: reference models and micro-code helpers shared by the testbenches.
//
// The AES reference is written from the AES definition (S-box = GF(2^8) inverse
// followed by the affine map, MixColumns with xtime), independently of the RTL's
// table-based datapath. The micro-instruction constructors build the 128-bit words
// the core controller executes.
package tb_util_pkg;
  import ppimce_pkg::*;

  // ------------------------------------------------------------ GF(2^8) and AES
  function automatic logic [7:0] xtime(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = xtime(a);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(logic [7:0] x);
    logic [7:0] inv = '0, s;
    if (x != 0)
      for (int y = 1; y < 256; y++) if (gmul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = inv;
    for (int i = 0; i < 8; i++)
      s[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8] ^ (8'h63 >> i);
    return s;
  endfunction

  // AES state as 128 bits: byte k of the FIPS-197 byte string is bits [8k+7:8k],
  // so column c = bits [32c+31:32c] and row r of it = byte 4c+r.
  function automatic logic [127:0] from_bytes(logic [127:0] be);  // big-endian literal
    logic [127:0] s;
    for (int k = 0; k < 16; k++) s[8*k +: 8] = be[127-8*k -: 8];
    return s;
  endfunction

  typedef logic [7:0] sbox_t [256];

  function automatic logic [127:0] aes_round(logic [127:0] s, logic [127:0] rk,
                                             logic last, sbox_t sb);
    logic [127:0] t, m;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) t[32*c + 8*r +: 8] = sb[s[32*((c+r)%4) + 8*r +: 8]];
    m = t;
    if (!last)
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++)
          m[32*c + 8*r +: 8] = xtime(t[32*c + 8*r +: 8])
                             ^ xtime(t[32*c + 8*((r+1)%4) +: 8]) ^ t[32*c + 8*((r+1)%4) +: 8]
                             ^ t[32*c + 8*((r+2)%4) +: 8] ^ t[32*c + 8*((r+3)%4) +: 8];
    return m ^ rk;
  endfunction

  typedef logic [127:0] rkeys_t [11];

  function automatic rkeys_t key_expand(logic [127:0] key, sbox_t sb);
    rkeys_t     rk;
    logic [31:0] w [44];
    logic [7:0]  rcon = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[32*i +: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] t = w[i-1];
      if (i % 4 == 0) begin
        t = {t[7:0], t[31:8]};  // RotWord (byte 0 is the low byte)
        for (int b = 0; b < 4; b++) t[8*b +: 8] = sb[t[8*b +: 8]];
        t[7:0] ^= rcon;
        rcon = xtime(rcon);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) rk[r] = {w[4*r+3], w[4*r+2], w[4*r+1], w[4*r]};
    return rk;
  endfunction

  function automatic logic [127:0] aes_encrypt(logic [127:0] pt, rkeys_t rk, sbox_t sb);
    logic [127:0] s = pt ^ rk[0];
    for (int r = 1; r <= 10; r++) s = aes_round(s, rk[r], r == 10, sb);
    return s;
  endfunction

  // ------------------------------------------------------------ micro-instructions
  function automatic cem_ctl_t cem(cem_fn_e fn, logic [7:0] ra, logic [7:0] rb,
                                   logic [7:0] rd, wsrc_e ws);
    cem_ctl_t c;
    c.en = 1'b1; c.fn = fn; c.ra = ra; c.rb = rb; c.rd = rd; c.wsrc = ws;
    return c;
  endfunction

  // same CEM operation on all four arrays (one 128-bit line)
  function automatic uinst_t u_cem(cem_fn_e fn, logic [7:0] ra, logic [7:0] rb,
                                   logic [7:0] rd, wsrc_e ws);
    uinst_t u = '0;
    for (int i = 0; i < N_ARR; i++) u.cem[i] = cem(fn, ra, rb, rd, ws);
    return u;
  endfunction

  function automatic uinst_t u_sh(logic [1:0] cls, logic [2:0] arg);
    uinst_t u = '0;
    u.shft.en = 1'b1; u.shft.cls = cls; u.shft.arg = arg;
    return u;
  endfunction

  function automatic uinst_t u_lut(logic mode);
    uinst_t u = '0;
    u.lut.en = 1'b1; u.lut.mode = mode;
    return u;
  endfunction

  // C-Inst builders
  function automatic cinst_t ci(cinst_op_e op, logic [15:0] s0, logic [15:0] s1,
                                logic [15:0] d);
    cinst_t c;
    c.op = op; c.imm = '0; c.src0 = s0; c.src1 = s1; c.dst = d;
    return c;
  endfunction

  function automatic cinst_t ci_uim(int addr, int chunk, logic [31:0] data);
    return ci(OP_UIM_WR, data[15:0], data[31:16], 16'((addr << 2) | chunk));
  endfunction

  function automatic cinst_t ci_dec(cinst_op_e op, int start, int len);
    return ci(OP_UIM_WR, 16'(start), 16'(len), 16'h8000 | 16'(op));
  endfunction

  function automatic cinst_t ci_lut(int tbl, int idx, logic [7:0] data);
    cinst_t c = ci(OP_LUT_WR, 16'(idx), 16'(tbl), 16'h0);
    c.imm = {4'h0, data};
    return c;
  endfunction

  // AES-128 micro-code: encrypts row src0 with round keys held in rows
  // key_base .. key_base+10, result in row dst; row tmp is scratch.
  // 41 micro-instructions (4 per round after the first key addition).
  typedef uinst_t ucode_t [$];

  function automatic ucode_t aes_ucode(logic [7:0] key_base, logic [7:0] tmp);
    ucode_t q;
    q.push_back(u_cem(CEM_XOR, ROW_SRC0, key_base, 8'h00, WS_NONE)); // AddRoundKey 0
    for (int r = 1; r <= 10; r++) begin
      q.push_back(u_sh(SH_MISC, SH_SROWS));                            // ShiftRows
      q.push_back(u_lut(r == 10));                                     // SubBytes(+MixColumns)
      q.push_back(u_cem(CEM_READ, 8'h00, 8'h00, tmp, WS_LUT));         // write back
      q.push_back(u_cem(CEM_XOR, tmp, key_base + 8'(r),
                        (r == 10) ? ROW_DST : 8'h00,
                        (r == 10) ? WS_CEM : WS_NONE));                // AddRoundKey r
    end
    return q;
  endfunction

endpackage
