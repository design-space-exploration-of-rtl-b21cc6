// tb_saber_decaps: SABER key generation, encapsulation and decapsulation
// run one after another as programs on the full-size core. The key pair and
// the ciphertext are produced by the core itself (their contents are checked
// against an independent model by tb_saber_keygen and tb_saber_encaps); this
// testbench checks that decapsulation of that ciphertext recovers the same
// message m and the same shared key K, and that a ciphertext with one bit
// flipped is rejected: Verify reports a difference and K is replaced by
// SHA3-256(z || SHA3-256(ct)), computed here by a reference Keccak.
//
// Decapsulation program (addresses are 64-bit words; sk = s || pk || H(pk)
// || z at 0, the ciphertext at 180):
//   b'       = BS2POLVECp(ct)                                  -> 332
//   v        = sum_j b'_j s_j                                  -> 944
//   m'       = AddPack in decryption mode (v, c_m)             -> 316
//   (K^, r)  = SHA3-512(m' || H(pk))                           -> 324
//   ct'      = re-encryption of m' exactly as in encapsulation -> 332
//   Verify(ct, ct'), then K^ or z by CMOV, then SHA3-256       -> 996
// The matrix, the products and ct' reuse the same region, in an order in
// which nothing is overwritten before it has been read. Every vector product
// must stay within 970 cycles; the total is printed next to the 9359 cycles
// reported for decapsulation on this architecture.
module tb_saber_decaps;
  import saber_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic         instr_valid = 1'b0, instr_ready, op_done, verify_fail;
  instr_t       instr;
  logic [15:0]  last_cycles;
  mem_req_t     host_req;
  logic [W-1:0] host_rdata;
  logic         host_rvalid;

  saber_top dut (.clk, .rst_n, .instr_valid, .instr, .instr_ready, .op_done, .last_cycles,
                 .host_req, .host_rdata, .host_rvalid, .verify_fail);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  task automatic mem_write(input int a, input logic [W-1:0] d);
    @(negedge clk);
    host_req = '{en: 1'b1, we: 1'b1, addr: AW'(a), wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask

  task automatic mem_read(input int a, output logic [W-1:0] d);
    @(negedge clk);
    host_req = '{en: 1'b1, we: 1'b0, addr: AW'(a), wdata: '0};
    @(negedge clk);
    host_req = '0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask

  int sum_cycles = 0;
  task automatic exec(input opcode_t op, input int s0, input int s1, input int d,
                      input int len, input int len2);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = '{op: op, src0: AW'(s0), src1: AW'(s1), dst: AW'(d), len: 16'(len), len2: 16'(len2)};
    instr_valid = 1'b1;
    @(negedge clk);
    instr_valid = 1'b0;
    while (!op_done) @(negedge clk);
    sum_cycles += int'(last_cycles);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference Keccak, written independently of the design ----
  function automatic bit rc_bit(int t);
    logic [7:0] r;
    logic [8:0] r9;
    if (t % 255 == 0) return 1'b1;
    r = 8'h01;
    for (int i = 1; i <= t % 255; i++) begin
      r9 = {r, 1'b0};
      r9[0] ^= r9[8]; r9[4] ^= r9[8]; r9[5] ^= r9[8]; r9[6] ^= r9[8];
      r = r9[7:0];
    end
    return r[0];
  endfunction

  function automatic logic [63:0] rl(logic [63:0] v, int n);
    n = n % 64;
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic void keccak_f(ref logic [63:0] a [5][5]);
    logic [63:0] c [5], d [5], b [5][5], p [5][5];
    int x, y, nx;
    for (int ir = 0; ir < 24; ir++) begin
      for (int i = 0; i < 5; i++) c[i] = a[i][0] ^ a[i][1] ^ a[i][2] ^ a[i][3] ^ a[i][4];
      for (int i = 0; i < 5; i++) d[i] = c[(i+4)%5] ^ rl(c[(i+1)%5], 1);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] ^= d[i];
      b[0][0] = a[0][0];
      x = 1; y = 0;
      for (int t = 0; t < 24; t++) begin
        b[x][y] = rl(a[x][y], ((t+1)*(t+2)/2) % 64);
        nx = y; y = (2*x + 3*y) % 5; x = nx;
      end
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) p[i][j] = b[(i+3*j)%5][i];
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        a[i][j] = p[i][j] ^ (~p[(i+1)%5][j] & p[(i+2)%5][j]);
      for (int j = 0; j <= 6; j++) a[0][0][(1 << j) - 1] ^= rc_bit(j + 7*ir);
    end
  endfunction

  function automatic void sponge(input logic [7:0] msg [], input int rate, input logic [7:0] dom,
                                 input int outlen, output logic [7:0] out []);
    logic [63:0] a [5][5];
    logic [7:0]  padded [];
    int nblk, k;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] = '0;
    nblk = msg.size() / rate + 1;
    padded = new[nblk * rate];
    foreach (padded[i]) padded[i] = (i < msg.size()) ? msg[i] : 8'h00;
    padded[msg.size()] ^= dom;
    padded[nblk*rate - 1] ^= 8'h80;
    for (int bk = 0; bk < nblk; bk++) begin
      for (int i = 0; i < rate; i++) a[(i/8)%5][(i/8)/5][8*(i%8) +: 8] ^= padded[bk*rate + i];
      keccak_f(a);
    end
    out = new[outlen];
    k = 0;
    while (k < outlen) begin
      for (int i = 0; i < rate && k < outlen; i++) begin
        out[k] = a[(i/8)%5][(i/8)/5][8*(i%8) +: 8];
        k++;
      end
      if (k < outlen) keccak_f(a);
    end
  endfunction


  // Word w of a little-endian byte string.
  function automatic logic [63:0] w64(input logic [7:0] s [], input int w);
    return {s[8*w+7], s[8*w+6], s[8*w+5], s[8*w+4], s[8*w+3], s[8*w+2], s[8*w+1], s[8*w]};
  endfunction

  // Key generation memory map (as in tb_saber_keygen).
  localparam int G_SEED = 0, G_SEED_S = 4, G_ZSTR = 8, G_SEEDA = 12, G_MATA = 16, G_RS = 484,
                 G_SV = 580, G_PROD = 628, G_PK = 680, G_HPK = 804, G_SK = 808;
  // Encapsulation memory map (as in tb_saber_encaps).
  localparam int E_PK = 0, E_MSEED = 132, E_M = 136, E_HPK = 140, E_KR = 144, E_MATA = 152,
                 E_RS = 620, E_SV = 716, E_PROD = 764, E_CT = 816, E_B13 = 152, E_KEY = 308;
  // Decapsulation memory map.
  localparam int D_S = 0, D_PK = 48, D_HPK = 172, D_Z = 176, D_CT = 180, D_M = 316, D_HP2 = 320,
                 D_KR = 324, D_MATA = 332, D_CTP = 332, D_B13 = 488, D_RS = 800, D_SV = 896,
                 D_PROD = 944, D_KEY = 996, D_KF = 1000;

  logic [63:0] skw [180], ctw [136], mw [4], kw [4];

  task automatic keygen();
    for (int w = 0; w < 12; w++) mem_write(w, {$urandom, $urandom});
    exec(OP_SHAKE128, G_SEED, 0, G_SEEDA, 32, 4);
    exec(OP_SHAKE128, G_SEEDA, 0, G_MATA, 32, 9 * 52);
    exec(OP_SHAKE128, G_SEED_S, 0, G_RS, 32, 96);
    exec(OP_SAMPLER, G_RS, 0, G_SV, 768, 0);
    for (int i = 0; i < 3; i++) begin
      exec(OP_MULT, G_MATA + 52 * i, G_SV, G_PROD, 3, 156);
      exec(OP_ADDROUND, G_PROD, 0, G_PK + 40 * i, 256, 0);
    end
    exec(OP_COPYWORDS, G_SEEDA, 0, G_PK + 120, 4, 0);
    exec(OP_SHA3_256, G_PK, 0, G_HPK, 992, 0);
    exec(OP_COPYWORDS, G_SV, 0, G_SK, 48, 0);
    exec(OP_COPYWORDS, G_PK, 0, G_SK + 48, 124, 0);
    exec(OP_COPYWORDS, G_HPK, 0, G_SK + 172, 4, 0);
    exec(OP_COPYWORDS, G_ZSTR, 0, G_SK + 176, 4, 0);
    for (int w = 0; w < 180; w++) mem_read(G_SK + w, skw[w]);
  endtask

  task automatic encaps();
    for (int w = 0; w < 124; w++) mem_write(E_PK + w, skw[48 + w]);
    for (int w = 0; w < 4; w++)   mem_write(E_MSEED + w, {$urandom, $urandom});
    exec(OP_SHA3_256, E_MSEED, 0, E_M, 32, 0);
    exec(OP_SHA3_256, E_PK, 0, E_HPK, 992, 0);
    exec(OP_SHA3_512, E_M, 0, E_KR, 64, 0);
    exec(OP_SHAKE128, E_PK + 120, 0, E_MATA, 32, 9 * 52);
    exec(OP_SHAKE128, E_KR + 4, 0, E_RS, 32, 96);
    exec(OP_SAMPLER, E_RS, 0, E_SV, 768, 0);
    for (int i = 0; i < 3; i++) begin
      exec(OP_MULT, E_MATA + 156 * i, E_SV, E_PROD, 3, 0);
      exec(OP_ADDROUND, E_PROD, 0, E_CT + 40 * i, 256, 0);
    end
    exec(OP_BS2POLVECP, E_PK, 0, E_B13, 768, 0);
    exec(OP_MULT, E_B13, E_SV, E_PROD, 3, 0);
    exec(OP_ADDPACK, E_PROD, E_M, E_CT + 120, 256, 0);
    exec(OP_SHA3_256, E_CT, 0, E_KR + 4, 1088, 0);
    exec(OP_SHA3_256, E_KR, 0, E_KEY, 64, 0);
    for (int w = 0; w < 136; w++) mem_read(E_CT + w, ctw[w]);
    for (int w = 0; w < 4; w++) mem_read(E_M + w, mw[w]);
    for (int w = 0; w < 4; w++) mem_read(E_KEY + w, kw[w]);
  endtask

  // Loads sk and the given ciphertext, runs decapsulation, returns its cycles.
  task automatic decaps(input logic [63:0] c [136], output int cyc);
    int t0;
    for (int w = 0; w < 180; w++) mem_write(D_S + w, skw[w]);
    for (int w = 0; w < 136; w++) mem_write(D_CT + w, c[w]);
    @(negedge clk);
    t0 = cycle;
    exec(OP_BS2POLVECP, D_CT, 0, D_MATA, 768, 0);
    exec(OP_MULT, D_MATA, D_S, D_PROD, 3, 0);
    check(int'(last_cycles) <= 970, $sformatf("vector product took %0d cycles", last_cycles));
    exec(OP_ADDPACK, D_PROD, D_CT + 120, D_M, 256, 1);
    exec(OP_COPYWORDS, D_HPK, 0, D_HP2, 4, 0);
    exec(OP_SHA3_512, D_M, 0, D_KR, 64, 0);
    exec(OP_SHAKE128, D_PK + 120, 0, D_MATA, 32, 9 * 52);
    exec(OP_SHAKE128, D_KR + 4, 0, D_RS, 32, 96);
    exec(OP_SAMPLER, D_RS, 0, D_SV, 768, 0);
    for (int i = 0; i < 3; i++) begin
      exec(OP_MULT, D_MATA + 156 * i, D_SV, D_PROD, 3, 0);
      check(int'(last_cycles) <= 970, $sformatf("vector product took %0d cycles", last_cycles));
      exec(OP_ADDROUND, D_PROD, 0, D_CTP + 40 * i, 256, 0);
    end
    exec(OP_BS2POLVECP, D_PK, 0, D_B13, 768, 0);
    exec(OP_MULT, D_B13, D_SV, D_PROD, 3, 0);
    exec(OP_ADDPACK, D_PROD, D_M, D_CTP + 120, 256, 0);
    exec(OP_VERIFY, D_CT, D_CTP, 0, 136, 0);
    exec(OP_CMOV, D_KR, D_Z, D_KF, 4, 0);
    exec(OP_SHA3_256, D_CT, 0, D_KF + 4, 1088, 0);
    exec(OP_SHA3_256, D_KF, 0, D_KEY, 64, 0);
    cyc = cycle - t0;
  endtask

  initial begin
    logic [63:0] d, bad [136];
    logic [7:0]  ctb [], hct [], zk [], key [];
    int cyc, bitpos;
    host_req = '0;
    instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    keygen();
    encaps();

    // Valid ciphertext: same m, same K, Verify reports equality.
    decaps(ctw, cyc);
    $display("decapsulation: %0d cycles (reported for the architecture: 9359)", cyc);
    check(!verify_fail, "Verify flagged a valid ciphertext");
    for (int w = 0; w < 136; w++) begin
      mem_read(D_CTP + w, d);
      check(d == ctw[w], $sformatf("re-encrypted ct word %0d: %h want %h", w, d, ctw[w]));
    end
    for (int w = 0; w < 4; w++) begin
      mem_read(D_M + w, d);
      check(d == mw[w], $sformatf("decrypted m word %0d: %h want %h", w, d, mw[w]));
    end
    for (int w = 0; w < 4; w++) begin
      mem_read(D_KEY + w, d);
      check(d == kw[w], $sformatf("shared key word %0d: %h want %h", w, d, kw[w]));
    end

    // One flipped bit: implicit rejection.
    bad = ctw;
    bitpos = $urandom_range(0, 136 * 64 - 1);
    bad[bitpos / 64][bitpos % 64] ^= 1'b1;
    decaps(bad, cyc);
    check(verify_fail, "Verify missed a modified ciphertext");
    ctb = new[1088];
    for (int i = 0; i < 1088; i++) ctb[i] = bad[i / 8][8 * (i % 8) +: 8];
    sponge(ctb, 136, 8'h06, 32, hct);
    zk = new[64];
    for (int i = 0; i < 32; i++) begin
      zk[i] = skw[176 + i / 8][8 * (i % 8) +: 8];
      zk[32 + i] = hct[i];
    end
    sponge(zk, 136, 8'h06, 32, key);
    for (int w = 0; w < 4; w++) begin
      mem_read(D_KEY + w, d);
      check(d == w64(key, w), $sformatf("rejection key word %0d: %h want %h", w, d, w64(key, w)));
      check(d != kw[w], "rejection key equals the real key");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
