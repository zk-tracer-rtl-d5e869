// tb_ref_pkg: reference arithmetic and helpers shared by the testbenches.
// Field operations are computed directly with 64-bit integers (% p), never
// through the design's reduction circuits. Also holds RV32I instruction
// encoders used to build test programs.
package tb_ref_pkg;
  localparam longint unsigned RP = 64'd2013265921;   // 2^31 - 2^27 + 1

  function automatic longint unsigned r_add(longint unsigned a, longint unsigned b);
    return (a + b) % RP;
  endfunction
  function automatic longint unsigned r_mul(longint unsigned a, longint unsigned b);
    return (a * b) % RP;
  endfunction
  function automatic longint unsigned r_pow(longint unsigned a, longint unsigned e);
    longint unsigned r, b;
    r = 1; b = a % RP;
    while (e != 0) begin
      if (e[0]) r = r_mul(r, b);
      b = r_mul(b, b);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic longint unsigned r_inv(longint unsigned a);
    return r_pow(a, RP - 2);
  endfunction
  // 2^-32 mod p
  function automatic longint unsigned r_rinv();
    return r_inv(64'd4294967296 % RP);
  endfunction
  function automatic logic [30:0] rnd_fe();
    return 31'({$urandom} % 32'(RP));
  endfunction

  // ---- RV32I encoders ----
  function automatic logic [31:0] e_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] e_i(int imm, logic [4:0] rs1, logic [2:0] f3,
                                      logic [4:0] rd, logic [6:0] op);
    logic [11:0] i;
    i = 12'(imm);
    return {i, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] e_s(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], rs2, rs1, f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] e_b(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [12:0] i;
    i = 13'(imm);
    return {i[12], i[10:5], rs2, rs1, f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] e_j(int imm, logic [4:0] rd);
    logic [20:0] i;
    i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] ADDI(logic [4:0] rd, logic [4:0] rs1, int imm);
    return e_i(imm, rs1, 3'd0, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] ADD(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return e_r(7'd0, rs2, rs1, 3'd0, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] SUB(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return e_r(7'h20, rs2, rs1, 3'd0, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] XORR(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return e_r(7'd0, rs2, rs1, 3'd4, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] SLLI(logic [4:0] rd, logic [4:0] rs1, int sh);
    return e_i(sh, rs1, 3'd1, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] LUI(logic [4:0] rd, int imm20);
    return {20'(imm20), rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] LW(logic [4:0] rd, logic [4:0] rs1, int imm);
    return e_i(imm, rs1, 3'd2, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] LBU(logic [4:0] rd, logic [4:0] rs1, int imm);
    return e_i(imm, rs1, 3'd4, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] SW(logic [4:0] rs2, logic [4:0] rs1, int imm);
    return e_s(imm, rs2, rs1, 3'd2);
  endfunction
  function automatic logic [31:0] SB(logic [4:0] rs2, logic [4:0] rs1, int imm);
    return e_s(imm, rs2, rs1, 3'd0);
  endfunction
  function automatic logic [31:0] BLT(logic [4:0] rs1, logic [4:0] rs2, int off);
    return e_b(off, rs2, rs1, 3'd4);
  endfunction
  function automatic logic [31:0] BNE(logic [4:0] rs1, logic [4:0] rs2, int off);
    return e_b(off, rs2, rs1, 3'd1);
  endfunction
  function automatic logic [31:0] JAL(logic [4:0] rd, int off);
    return e_j(off, rd);
  endfunction
  function automatic logic [31:0] JALR(logic [4:0] rd, logic [4:0] rs1, int imm);
    return e_i(imm, rs1, 3'd0, rd, 7'b1100111);
  endfunction
  localparam logic [31:0] TRACE_ON  = 32'h0000_000B;   // custom-0, funct3 0
  localparam logic [31:0] TRACE_OFF = 32'h0000_100B;   // custom-0, funct3 1
  localparam logic [31:0] EBREAK    = 32'h0010_0073;
  // M extension: funct3 0 MUL, 1 MULH, 2 MULHSU, 3 MULHU, 4 DIV, 5 DIVU, 6 REM, 7 REMU
  function automatic logic [31:0] MOP(logic [2:0] f3, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return e_r(7'b0000001, rs2, rs1, f3, rd, 7'b0110011);
  endfunction
  // reference result of an M instruction
  function automatic logic [31:0] r_mop(logic [2:0] f3, logic [31:0] a, logic [31:0] b);
    longint signed sa, sb;
    longint unsigned ua, ub;
    sa = longint'($signed(a)); sb = longint'($signed(b));
    ua = 64'(a); ub = 64'(b);
    case (f3)
      3'd0: return 32'(ua * ub);
      3'd1: return 32'((sa * sb) >>> 32);
      3'd2: return 32'((sa * longint'(ub)) >>> 32);
      3'd3: return 32'((ua * ub) >> 32);
      3'd4: return (b == 0) ? 32'hFFFF_FFFF : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? a : 32'(sa / sb);
      3'd5: return (b == 0) ? 32'hFFFF_FFFF : 32'(ua / ub);
      3'd6: return (b == 0) ? a : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? 32'd0 : 32'(sa % sb);
      default: return (b == 0) ? a : 32'(ua % ub);
    endcase
  endfunction
  function automatic logic [31:0] BEQ(logic [4:0] rs1, logic [4:0] rs2, int off);
    return e_b(off, rs2, rs1, 3'd0);
  endfunction
  // Prime test by trial division (a small version of the Is_Prime benchmark):
  // for each of c numbers at DMEM[0x100+4i] it stores 1 (prime) or 0 at
  // DMEM[0x300+4i], trying divisors d = 2, 3, ... while d*d <= n (MUL, REMU).
  // The whole loop is traced (trace_on before it, trace_off after it).
  localparam int PPROG_LEN = 23;
  function automatic logic [31:0] pprog_word(int k, int c);
    case (k)
      0:  return ADDI(5'd1, 5'd0, 12'h100);
      1:  return ADDI(5'd2, 5'd0, 12'h300);
      2:  return ADDI(5'd3, 5'd0, c);
      3:  return TRACE_ON;
      4:  return LW(5'd4, 5'd1, 0);
      5:  return ADDI(5'd5, 5'd0, 1);
      6:  return ADDI(5'd6, 5'd0, 2);
      7:  return ADDI(5'd8, 5'd0, 2);
      8:  return BLT(5'd4, 5'd8, (15 - 8) * 4);
      9:  return MOP(3'd0, 5'd7, 5'd6, 5'd6);
      10: return BLT(5'd4, 5'd7, (16 - 10) * 4);
      11: return MOP(3'd7, 5'd7, 5'd4, 5'd6);
      12: return BEQ(5'd7, 5'd0, (15 - 12) * 4);
      13: return ADDI(5'd6, 5'd6, 1);
      14: return JAL(5'd0, (9 - 14) * 4);
      15: return ADDI(5'd5, 5'd0, 0);
      16: return SW(5'd5, 5'd2, 0);
      17: return ADDI(5'd1, 5'd1, 4);
      18: return ADDI(5'd2, 5'd2, 4);
      19: return ADDI(5'd3, 5'd3, -1);
      20: return BNE(5'd3, 5'd0, (4 - 20) * 4);
      21: return TRACE_OFF;
      22: return EBREAK;
      default: return 32'h13;
    endcase
  endfunction
  function automatic bit is_prime(int unsigned n);
    if (n < 2) return 0;
    for (int unsigned d = 2; d * d <= n; d++) if (n % d == 0) return 0;
    return 1;
  endfunction
  function automatic logic [31:0] ANDI(logic [4:0] rd, logic [4:0] rs1, int imm);
    return e_i(imm, rs1, 3'd7, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] SRLI(logic [4:0] rd, logic [4:0] rs1, int sh);
    return e_i(sh, rs1, 3'd5, rd, 7'b0010011);
  endfunction
  // Modular exponentiation by right-to-left square-and-multiply (a small
  // version of the RSA benchmark): for each of c triples (base, exponent,
  // modulus < 2^16) at DMEM[0x100+12i] it stores base^exponent mod modulus
  // at DMEM[0x300+4i]. The whole loop is traced.
  localparam int XPROG_LEN = 25;
  function automatic logic [31:0] xprog_word(int k, int c);
    case (k)
      0:  return ADDI(5'd1, 5'd0, 12'h100);
      1:  return ADDI(5'd2, 5'd0, 12'h300);
      2:  return ADDI(5'd3, 5'd0, c);
      3:  return TRACE_ON;
      4:  return LW(5'd4, 5'd1, 0);
      5:  return LW(5'd5, 5'd1, 4);
      6:  return LW(5'd6, 5'd1, 8);
      7:  return ADDI(5'd7, 5'd0, 1);
      8:  return MOP(3'd7, 5'd4, 5'd4, 5'd6);
      9:  return BEQ(5'd5, 5'd0, (18 - 9) * 4);
      10: return ANDI(5'd8, 5'd5, 1);
      11: return BEQ(5'd8, 5'd0, (14 - 11) * 4);
      12: return MOP(3'd0, 5'd7, 5'd7, 5'd4);
      13: return MOP(3'd7, 5'd7, 5'd7, 5'd6);
      14: return MOP(3'd0, 5'd4, 5'd4, 5'd4);
      15: return MOP(3'd7, 5'd4, 5'd4, 5'd6);
      16: return SRLI(5'd5, 5'd5, 1);
      17: return JAL(5'd0, (9 - 17) * 4);
      18: return SW(5'd7, 5'd2, 0);
      19: return ADDI(5'd1, 5'd1, 12);
      20: return ADDI(5'd2, 5'd2, 4);
      21: return ADDI(5'd3, 5'd3, -1);
      22: return BNE(5'd3, 5'd0, (4 - 22) * 4);
      23: return TRACE_OFF;
      24: return EBREAK;
      default: return 32'h13;
    endcase
  endfunction
  function automatic logic [31:0] modexp(longint unsigned b, longint unsigned e, longint unsigned m);
    longint unsigned r;
    r = 1; b = b % m;
    while (e != 0) begin
      if (e[0]) r = (r * b) % m;
      b = (b * b) % m;
      e = e >> 1;
    end
    return 32'(r);
  endfunction
  function automatic logic [31:0] ORR(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return e_r(7'b0, rs2, rs1, 3'd6, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] ANDR(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return e_r(7'b0, rs2, rs1, 3'd7, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] XORI(logic [4:0] rd, logic [4:0] rs1, int imm);
    return e_i(imm, rs1, 3'd4, rd, 7'b0010011);
  endfunction
  // SHA-256 compression (a small version of the SHA256 benchmark) over c
  // 64-byte blocks at DMEM[0x400+64b], chaining the state at DMEM[0x100]
  // (H[0..7], preloaded with the initial value). The round constants are at
  // DMEM[0x300], the message schedule is built at DMEM[0x200]. Registers:
  // x10..x17 = a..h, x1 message pointer, x2 block count, x3/x4 loop
  // pointers, x18/x19 constant and schedule pointers, x20 state base.
  // Rotations are SRLI + SLLI + OR. The whole program is traced.
  localparam int SPROG_LEN = 127;
  function automatic logic [31:0] rot(int part, logic [4:0] rd, logic [4:0] rs, logic [4:0] t, int n);
    case (part)
      0: return SRLI(rd, rs, n);
      1: return SLLI(t, rs, 32 - n);
      default: return ORR(rd, rd, t);
    endcase
  endfunction
  function automatic logic [31:0] sprog_word(int k, int c);
    if (k >= 13 && k <= 15) return rot(k - 13, 5'd6, 5'd5, 5'd7, 17);
    if (k >= 16 && k <= 18) return rot(k - 16, 5'd8, 5'd5, 5'd7, 19);
    if (k >= 23 && k <= 25) return rot(k - 23, 5'd9, 5'd5, 5'd7, 7);
    if (k >= 26 && k <= 28) return rot(k - 26, 5'd8, 5'd5, 5'd7, 18);
    if (k >= 40 && k <= 47) return LW(5'(10 + k - 40), 5'd20, 4 * (k - 40));
    if (k >= 50 && k <= 52) return rot(k - 50, 5'd5, 5'd14, 5'd7, 6);
    if (k >= 53 && k <= 55) return rot(k - 53, 5'd6, 5'd14, 5'd7, 11);
    if (k >= 57 && k <= 59) return rot(k - 57, 5'd6, 5'd14, 5'd7, 25);
    if (k >= 71 && k <= 73) return rot(k - 71, 5'd6, 5'd10, 5'd7, 2);
    if (k >= 74 && k <= 76) return rot(k - 74, 5'd8, 5'd10, 5'd7, 13);
    if (k >= 78 && k <= 80) return rot(k - 78, 5'd8, 5'd10, 5'd7, 22);
    if (k >= 99 && k <= 122) begin
      int i, j;
      i = (k - 99) / 3; j = (k - 99) % 3;
      case (j)
        0: return LW(5'd5, 5'd20, 4 * i);
        1: return ADD(5'd5, 5'd5, 5'(10 + i));
        default: return SW(5'd5, 5'd20, 4 * i);
      endcase
    end
    case (k)
      0:  return ADDI(5'd1, 5'd0, 12'h400);
      1:  return ADDI(5'd2, 5'd0, c);
      2:  return ADDI(5'd20, 5'd0, 12'h100);
      3:  return TRACE_ON;
      4:  return ADDI(5'd3, 5'd0, 12'h200);          // copy block to W[0..15]
      5:  return ADDI(5'd4, 5'd0, 12'h240);
      6:  return LW(5'd5, 5'd1, 0);
      7:  return SW(5'd5, 5'd3, 0);
      8:  return ADDI(5'd1, 5'd1, 4);
      9:  return ADDI(5'd3, 5'd3, 4);
      10: return BNE(5'd3, 5'd4, (6 - 10) * 4);
      11: return ADDI(5'd4, 5'd0, 12'h300);          // schedule W[16..63]
      12: return LW(5'd5, 5'd3, -8);
      19: return XORR(5'd6, 5'd6, 5'd8);
      20: return SRLI(5'd8, 5'd5, 10);
      21: return XORR(5'd6, 5'd6, 5'd8);             // sigma1
      22: return LW(5'd5, 5'd3, -60);
      29: return XORR(5'd9, 5'd9, 5'd8);
      30: return SRLI(5'd8, 5'd5, 3);
      31: return XORR(5'd9, 5'd9, 5'd8);             // sigma0
      32: return ADD(5'd6, 5'd6, 5'd9);
      33: return LW(5'd5, 5'd3, -28);
      34: return ADD(5'd6, 5'd6, 5'd5);
      35: return LW(5'd5, 5'd3, -64);
      36: return ADD(5'd6, 5'd6, 5'd5);
      37: return SW(5'd6, 5'd3, 0);
      38: return ADDI(5'd3, 5'd3, 4);
      39: return BNE(5'd3, 5'd4, (12 - 39) * 4);
      48: return ADDI(5'd19, 5'd0, 12'h200);         // rounds
      49: return ADDI(5'd18, 5'd0, 12'h300);
      56: return XORR(5'd5, 5'd5, 5'd6);
      60: return XORR(5'd5, 5'd5, 5'd6);             // Sigma1(e)
      61: return ANDR(5'd6, 5'd14, 5'd15);
      62: return XORI(5'd7, 5'd14, -1);
      63: return ANDR(5'd7, 5'd7, 5'd16);
      64: return XORR(5'd6, 5'd6, 5'd7);             // Ch(e,f,g)
      65: return ADD(5'd5, 5'd5, 5'd6);
      66: return ADD(5'd5, 5'd5, 5'd17);
      67: return LW(5'd6, 5'd18, 0);
      68: return ADD(5'd5, 5'd5, 5'd6);
      69: return LW(5'd6, 5'd19, 0);
      70: return ADD(5'd5, 5'd5, 5'd6);              // T1
      77: return XORR(5'd6, 5'd6, 5'd8);
      81: return XORR(5'd6, 5'd6, 5'd8);             // Sigma0(a)
      82: return ANDR(5'd7, 5'd10, 5'd11);
      83: return ANDR(5'd8, 5'd10, 5'd12);
      84: return XORR(5'd7, 5'd7, 5'd8);
      85: return ANDR(5'd8, 5'd11, 5'd12);
      86: return XORR(5'd7, 5'd7, 5'd8);             // Maj(a,b,c)
      87: return ADD(5'd6, 5'd6, 5'd7);              // T2
      88: return ADDI(5'd17, 5'd16, 0);
      89: return ADDI(5'd16, 5'd15, 0);
      90: return ADDI(5'd15, 5'd14, 0);
      91: return ADD(5'd14, 5'd13, 5'd5);
      92: return ADDI(5'd13, 5'd12, 0);
      93: return ADDI(5'd12, 5'd11, 0);
      94: return ADDI(5'd11, 5'd10, 0);
      95: return ADD(5'd10, 5'd5, 5'd6);
      96: return ADDI(5'd18, 5'd18, 4);
      97: return ADDI(5'd19, 5'd19, 4);
      98: return BNE(5'd19, 5'd4, (50 - 98) * 4);
      123: return ADDI(5'd2, 5'd2, -1);
      124: return BNE(5'd2, 5'd0, (4 - 124) * 4);
      125: return TRACE_OFF;
      126: return EBREAK;
      default: return 32'h13;
    endcase
  endfunction
  // SHA-256 round constant i: the first 32 fractional bits of the cube root
  // of the i-th prime, from a floating-point estimate corrected exactly with
  // wide integer arithmetic (c^3 <= p*2^96 < (c+1)^3)
  function automatic logic [31:0] sha_k(int i);
    int n, p;
    logic [127:0] c, t;
    n = 0; p = 1;
    while (n <= i) begin
      bit pr;
      p++; pr = 1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) pr = 0;
      if (pr) n++;
    end
    c = 128'(longint'($pow(real'(p), 1.0 / 3.0) * 65536.0 * 65536.0));
    t = 128'(p) << 96;
    while (c * c * c > t) c--;
    while ((c + 1) * (c + 1) * (c + 1) <= t) c++;
    return c[31:0];
  endfunction
  typedef logic [31:0] sha_st_t [8];
  typedef logic [31:0] sha_blk_t [16];
  function automatic logic [31:0] rotr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic sha_st_t sha_compress(sha_st_t h, sha_blk_t m);
    logic [31:0] w [64];
    logic [31:0] a, b, c, d, e, f, g, hh, t1, t2;
    for (int t = 0; t < 16; t++) w[t] = m[t];
    for (int t = 16; t < 64; t++)
      w[t] = (rotr(w[t-2], 17) ^ rotr(w[t-2], 19) ^ (w[t-2] >> 10)) + w[t-7] +
             (rotr(w[t-15], 7) ^ rotr(w[t-15], 18) ^ (w[t-15] >> 3)) + w[t-16];
    a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4]; f = h[5]; g = h[6]; hh = h[7];
    for (int t = 0; t < 64; t++) begin
      t1 = hh + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + sha_k(t) + w[t];
      t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
      hh = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
    end
    h[0] += a; h[1] += b; h[2] += c; h[3] += d; h[4] += e; h[5] += f; h[6] += g; h[7] += hh;
    return h;
  endfunction
  // M-extension test program: for each of n operand pairs at DMEM[0x400+8i]
  // it runs all eight M instructions and stores the results at
  // DMEM[0x600+32i+4*f3]; the REMU result is doubled by a dependent ADD.
  localparam int MPROG_LEN = 27;
  function automatic logic [31:0] mprog_word(int k, int n);
    case (k)
      0: return ADDI(5'd1, 5'd0, 12'h400);
      1: return ADDI(5'd2, 5'd0, 12'h600);
      2: return ADDI(5'd3, 5'd0, n);
      3: return LW(5'd4, 5'd1, 0);
      4: return LW(5'd5, 5'd1, 4);
      5, 7, 9, 11, 13, 15, 17, 19: return MOP(3'((k - 5) / 2), 5'd6, 5'd4, 5'd5);
      6, 8, 10, 12, 14, 16, 18: return SW(5'd6, 5'd2, 2 * (k - 6));
      20: return ADD(5'd7, 5'd6, 5'd6);
      21: return SW(5'd7, 5'd2, 28);
      22: return ADDI(5'd1, 5'd1, 8);
      23: return ADDI(5'd2, 5'd2, 32);
      24: return ADDI(5'd3, 5'd3, -1);
      25: return BNE(5'd3, 5'd0, (3 - 25) * 4);
      26: return EBREAK;
      default: return 32'h13;
    endcase
  endfunction

  // Test program (byte address 0). Computes Fibonacci numbers, stores each
  // to DMEM[0x200 + 4k], reloads it (load-use) and accumulates the loads;
  // a call/return pair exercises JAL/JALR. n iterations are traced between
  // trace_on and trace_off; the total is stored at DMEM[0x100].
  // Traced instructions: 12 per iteration (loop body and subroutine).
  localparam int PROG_LEN = 23;
  function automatic logic [31:0] prog_word(int k, int n);
    case (k)
      0:  return ADDI(5'd1, 5'd0, 0);          // i = 0
      1:  return ADDI(5'd2, 5'd0, n);          // n
      2:  return ADDI(5'd3, 5'd0, 0);          // a = 0
      3:  return ADDI(5'd4, 5'd0, 1);          // b = 1
      4:  return ADDI(5'd6, 5'd0, 12'h200);    // ptr
      5:  return ADDI(5'd8, 5'd0, 0);          // acc
      6:  return ADDI(5'd10, 5'd0, 0);         // x10 = 0
      7:  return TRACE_ON;
      8:  return ADD(5'd5, 5'd3, 5'd4);        // loop: t = a + b
      9:  return ADDI(5'd3, 5'd4, 0);          // a = b
      10: return ADDI(5'd4, 5'd5, 0);          // b = t
      11: return SW(5'd5, 5'd6, 0);
      12: return ADDI(5'd6, 5'd6, 4);
      13: return LW(5'd7, 5'd6, -4);
      14: return ADD(5'd8, 5'd8, 5'd7);        // load-use
      15: return JAL(5'd9, 24);                // call k=21
      16: return ADDI(5'd1, 5'd1, 1);
      17: return BLT(5'd1, 5'd2, -36);         // back to k=8
      18: return TRACE_OFF;
      19: return SW(5'd8, 5'd0, 12'h100);
      20: return EBREAK;
      21: return XORR(5'd10, 5'd10, 5'd5);     // subroutine
      22: return JALR(5'd0, 5'd9, 0);          // return to k=16
      default: return 32'h0000_0013;           // nop
    endcase
  endfunction
  // Traced rows for n iterations and the expected results.
  function automatic int prog_rows(int n);
    return 12 * n;
  endfunction
  function automatic logic [31:0] fib(int k);   // value stored in iteration k
    logic [31:0] a, b, t;
    a = 0; b = 1; t = 0;
    for (int i = 0; i <= k; i++) begin t = a + b; a = b; b = t; end
    return t;
  endfunction
endpackage
