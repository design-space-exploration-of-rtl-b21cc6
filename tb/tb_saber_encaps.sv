// tb_saber_encaps: SABER encapsulation run as a program on the full-size
// core, checked against a model computed in the testbench from its inputs
// alone (a random public key and a random message seed).
//
// Program (addresses are 64-bit words):
//   m        = SHA3-256(random 32 bytes)                       -> 136
//   H(pk)    = SHA3-256(pk, 992 bytes)                         -> 140
//   (K^, r)  = SHA3-512(m || H(pk))                            -> 144, 148
//   A        = SHAKE-128(seedA from pk, 9 x 416 bytes)         -> 152
//   s'       = binomial samples of SHAKE-128(r, 768 bytes)     -> 716
//   b'_i     = AddRound(sum_j A_ij s'_j), into the ciphertext  -> 816 + 40 i
//   b        = BS2POLVECp(pk), over the no longer needed A     -> 152
//   v'       = sum_j b_j s'_j                                  -> 764
//   c_m      = AddPack(v', m), into the ciphertext             -> 936
//   K        = SHA3-256(K^ || SHA3-256(ct)), ct 1088 bytes     -> 308
// The model runs its own Keccak, the binomial formula, schoolbook
// negacyclic products, the rounding and the packing, and predicts every word
// of the ciphertext and the shared key K. Each vector product must stay
// within the 970 cycles and the sampler within the 246 cycles reported for
// this architecture. The total is printed next to the 7136 cycles reported
// for encapsulation; it depends on the program, which is this design's own
// (this one needs about 5% more). The ciphertext is 1088 bytes, the size the
// architecture quotes.
module tb_saber_encaps;
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
    repeat (100000) @(posedge clk);
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

  // Field i of width w in a little-endian byte string.
  function automatic int bfld(input logic [7:0] s [], input int i, input int w);
    int v = 0;
    for (int b = 0; b < w; b++) v |= int'((s[(i*w + b) / 8] >> ((i*w + b) % 8)) & 1) << b;
    return v;
  endfunction

  // Compares n memory words from address a with a byte string.
  task automatic check_words(input int a, input logic [7:0] s [], input string what);
    logic [63:0] d;
    for (int w = 0; w < s.size() / 8; w++) begin
      mem_read(a + w, d);
      check(d == {s[8*w+7], s[8*w+6], s[8*w+5], s[8*w+4], s[8*w+3], s[8*w+2], s[8*w+1], s[8*w]},
            $sformatf("%s word %0d: %h want %h", what, w, d, {s[8*w+7], s[8*w+6], s[8*w+5], s[8*w+4], s[8*w+3], s[8*w+2], s[8*w+1], s[8*w]}));
    end
  endtask

  localparam int PK = 0, MSEED = 132, M = 136, HPK = 140, KR = 144, MATA = 152, RS = 620, SV = 716,
                 PROD = 764, CT = 816, B13 = 152, KEY = 308;

  function automatic logic [63:0] w64(input logic [7:0] s [], input int w);
    return {s[8*w+7], s[8*w+6], s[8*w+5], s[8*w+4], s[8*w+3], s[8*w+2], s[8*w+1], s[8*w]};
  endfunction

  initial begin
    logic [7:0] pk [], mseed [], m [], hpk [], mh [], kr [], seeda [], amat [], rr [], r [], ct [], hct [], kh [], key [], khat [];
    int s [3][256];
    int acc [256];
    int t_start, t_total;
    host_req = '0;
    instr = '0;
    pk = new[992]; mseed = new[32];
    foreach (pk[i])    pk[i]    = 8'($urandom);
    foreach (mseed[i]) mseed[i] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 124; w++) mem_write(PK + w, w64(pk, w));
    for (int w = 0; w < 4; w++)   mem_write(MSEED + w, w64(mseed, w));

    // ---- the program ----
    @(negedge clk);
    t_start = cycle;
    exec(OP_SHA3_256, MSEED, 0, M, 32, 0);
    exec(OP_SHA3_256, PK, 0, HPK, 992, 0);
    exec(OP_SHA3_512, M, 0, KR, 64, 0);
    exec(OP_SHAKE128, PK + 120, 0, MATA, 32, 9 * 52);
    exec(OP_SHAKE128, KR + 4, 0, RS, 32, 96);
    exec(OP_SAMPLER, RS, 0, SV, 768, 0);
    check(int'(last_cycles) <= 246, $sformatf("sampler took %0d cycles", last_cycles));
    for (int i = 0; i < 3; i++) begin
      exec(OP_MULT, MATA + 156 * i, SV, PROD, 3, 0);
      check(int'(last_cycles) <= 970, $sformatf("vector product took %0d cycles", last_cycles));
      exec(OP_ADDROUND, PROD, 0, CT + 40 * i, 256, 0);
    end
    exec(OP_BS2POLVECP, PK, 0, B13, 768, 0);
    exec(OP_MULT, B13, SV, PROD, 3, 0);
    check(int'(last_cycles) <= 970, $sformatf("vector product took %0d cycles", last_cycles));
    exec(OP_ADDPACK, PROD, M, CT + 120, 256, 0);
    exec(OP_SHA3_256, CT, 0, KR + 4, 1088, 0);
    exec(OP_SHA3_256, KR, 0, KEY, 64, 0);
    t_total = cycle - t_start;
    $display("encapsulation: %0d cycles in total, %0d inside instructions", t_total, sum_cycles);
    // The total depends on the program, which is this design's own; it is
    // reported against the 7136 cycles of the architecture, not checked.
    $display("reported for the architecture: 7136 cycles; this program: %0d (%0d%%)", t_total, t_total * 100 / 7136);

    // ---- the model ----
    sponge(mseed, 136, 8'h06, 32, m);
    sponge(pk, 136, 8'h06, 32, hpk);
    mh = new[64];
    for (int i = 0; i < 32; i++) begin mh[i] = m[i]; mh[32 + i] = hpk[i]; end
    sponge(mh, 72, 8'h06, 64, kr);
    seeda = new[32];
    r = new[32];
    for (int i = 0; i < 32; i++) begin seeda[i] = pk[960 + i]; r[i] = kr[32 + i]; end
    sponge(seeda, 168, 8'h1F, 9 * 416, amat);
    sponge(r, 168, 8'h1F, 768, rr);
    for (int k = 0; k < 768; k++)
      s[k / 256][k % 256] = $countones(rr[k] & 8'h0F) - $countones(rr[k] >> 4);
    ct = new[1088];
    foreach (ct[i]) ct[i] = '0;
    for (int i = 0; i < 3; i++) begin
      foreach (acc[k]) acc[k] = 0;
      for (int j = 0; j < 3; j++)
        for (int a = 0; a < 256; a++) begin
          int ac;
          ac = bfld(amat, 256 * (3*i + j) + a, 13);
          for (int b = 0; b < 256; b++)
            if (a + b < 256) acc[a+b]     += ac * s[j][b];
            else             acc[a+b-256] -= ac * s[j][b];
        end
      for (int k = 0; k < 256; k++) begin
        int bk, pos;
        bk = (((acc[k] & 8191) + 4) & 8191) >> 3;
        pos = 10 * (256 * i + k);
        for (int t = 0; t < 10; t++) ct[(pos + t) / 8] |= 8'(((bk >> t) & 1) << ((pos + t) % 8));
      end
    end
    foreach (acc[k]) acc[k] = 0;
    for (int j = 0; j < 3; j++)
      for (int a = 0; a < 256; a++) begin
        int bc;
        bc = bfld(pk, 256 * j + a, 10);
        for (int b = 0; b < 256; b++)
          if (a + b < 256) acc[a+b]     += bc * s[j][b];
          else             acc[a+b-256] -= bc * s[j][b];
      end
    for (int k = 0; k < 256; k++) begin
      int c, pos;
      c = (((acc[k] & 1023) + 4 - 512 * bfld(m, k, 1)) & 1023) >> 6;
      pos = 960 * 8 + 4 * k;
      for (int t = 0; t < 4; t++) ct[(pos + t) / 8] |= 8'(((c >> t) & 1) << ((pos + t) % 8));
    end
    sponge(ct, 136, 8'h06, 32, hct);
    kh = new[64];
    for (int i = 0; i < 32; i++) begin kh[i] = kr[i]; kh[32 + i] = hct[i]; end
    sponge(kh, 136, 8'h06, 32, key);

    // ---- compare ----
    check_words(M, m, "message m");
    check_words(HPK, hpk, "H(pk)");
    khat = new[32];
    foreach (khat[i]) khat[i] = kr[i];
    check_words(KR, khat, "K^");
    check_words(CT, ct, "ciphertext");
    check_words(KEY, key, "shared key K");
    $display("ciphertext %0d bytes", ct.size());
    check(ct.size() == 1088, "ciphertext size");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
