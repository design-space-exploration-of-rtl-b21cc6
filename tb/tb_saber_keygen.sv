// tb_saber_keygen: SABER key generation run as a program on the full-size
// core, checked against a model computed in the testbench from the seeds
// alone.
//
// Program (addresses are 64-bit words):
//   seedA  = SHAKE-128(seed, 32 bytes)                       -> 12
//   A      = SHAKE-128(seedA, 9 x 416 bytes), 3 x 3 polys    -> 16
//   r      = SHAKE-128(seed_s, 768 bytes)                    -> 484
//   s      = binomial samples of r (mu = 8), 3 x 256         -> 580
//   for each column i: b_i = AddRound(sum_j A_ji s_j)        -> 680 + 40 i
//   pk     = b || seedA (992 bytes)                          -> 680
//   H(pk)  = SHA3-256(pk)                                    -> 804
//   sk     = s || pk || H(pk) || z (CopyWords)               -> 808
// The model runs its own Keccak (as in tb_sha3_unit), the binomial formula,
// a schoolbook negacyclic product and the rounding, and predicts every word
// of seedA, A, s, pk, H(pk) and sk. Key generation uses the transposed
// matrix, b = A^T s: A is stored row by row, so each vector product walks a
// column with the multiplier's stride of three polynomials (156 words).
// The whole program must finish within the 7154 cycles reported for KEM
// key generation on this architecture; the measured count is printed.
// The public key is 992 bytes, the size the architecture quotes; the secret
// key here is s in this design's 4-bit format with pk, H(pk) and z.
module tb_saber_keygen;
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

  localparam int SEED = 0, SEED_S = 4, ZSTR = 8, SEEDA = 12, MATA = 16, RS = 484, SV = 580,
                 PROD = 628, PK = 680, HPK = 804, SK = 808;

  initial begin
    logic [7:0] seed [], seed_s [], z [], seeda [], amat [], r [], pk [], hpk [], sk [], sbytes [];
    int s [3][256];
    int acc [256];
    int t_start, t_total;
    host_req = '0;
    instr = '0;
    seed = new[32]; seed_s = new[32]; z = new[32];
    foreach (seed[i])   seed[i]   = 8'($urandom);
    foreach (seed_s[i]) seed_s[i] = 8'($urandom);
    foreach (z[i])      z[i]      = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 4; w++) begin
      mem_write(SEED + w,   {seed[8*w+7], seed[8*w+6], seed[8*w+5], seed[8*w+4], seed[8*w+3], seed[8*w+2], seed[8*w+1], seed[8*w]});
      mem_write(SEED_S + w, {seed_s[8*w+7], seed_s[8*w+6], seed_s[8*w+5], seed_s[8*w+4], seed_s[8*w+3], seed_s[8*w+2], seed_s[8*w+1], seed_s[8*w]});
      mem_write(ZSTR + w,   {z[8*w+7], z[8*w+6], z[8*w+5], z[8*w+4], z[8*w+3], z[8*w+2], z[8*w+1], z[8*w]});
    end

    // ---- the program ----
    @(negedge clk);
    t_start = cycle;
    exec(OP_SHAKE128, SEED, 0, SEEDA, 32, 4);
    exec(OP_SHAKE128, SEEDA, 0, MATA, 32, 9 * 52);
    exec(OP_SHAKE128, SEED_S, 0, RS, 32, 96);
    exec(OP_SAMPLER, RS, 0, SV, 768, 0);
    for (int i = 0; i < 3; i++) begin
      exec(OP_MULT, MATA + 52 * i, SV, PROD, 3, 156);
      exec(OP_ADDROUND, PROD, 0, PK + 40 * i, 256, 0);
    end
    exec(OP_COPYWORDS, SEEDA, 0, PK + 120, 4, 0);
    exec(OP_SHA3_256, PK, 0, HPK, 992, 0);
    exec(OP_COPYWORDS, SV, 0, SK, 48, 0);
    exec(OP_COPYWORDS, PK, 0, SK + 48, 124, 0);
    exec(OP_COPYWORDS, HPK, 0, SK + 172, 4, 0);
    exec(OP_COPYWORDS, ZSTR, 0, SK + 176, 4, 0);
    t_total = cycle - t_start;
    $display("key generation: %0d cycles in total, %0d inside instructions", t_total, sum_cycles);
    check(t_total <= 7154, $sformatf("key generation took %0d cycles, more than 7154", t_total));

    // ---- the model ----
    sponge(seed, 168, 8'h1F, 32, seeda);
    sponge(seeda, 168, 8'h1F, 9 * 416, amat);
    sponge(seed_s, 168, 8'h1F, 768, r);
    sbytes = new[384];
    foreach (sbytes[i]) sbytes[i] = '0;
    for (int k = 0; k < 768; k++) begin
      s[k / 256][k % 256] = $countones(r[k] & 8'h0F) - $countones(r[k] >> 4);
      sbytes[k / 2] |= {4'b0, 4'(s[k / 256][k % 256])} << (4 * (k % 2));
    end
    pk = new[992];
    foreach (pk[i]) pk[i] = '0;
    for (int i = 0; i < 3; i++) begin
      foreach (acc[k]) acc[k] = 0;
      for (int j = 0; j < 3; j++)
        for (int a = 0; a < 256; a++) begin
          int ac;
          ac = bfld(amat, 256 * (3*j + i) + a, 13);
          for (int b = 0; b < 256; b++)
            if (a + b < 256) acc[a+b]     += ac * s[j][b];
            else             acc[a+b-256] -= ac * s[j][b];
        end
      for (int k = 0; k < 256; k++) begin
        int bk, pos;
        bk = (((acc[k] & 8191) + 4) & 8191) >> 3;
        pos = 10 * (256 * i + k);
        for (int t = 0; t < 10; t++) pk[(pos + t) / 8] |= 8'(((bk >> t) & 1) << ((pos + t) % 8));
      end
    end
    for (int i = 0; i < 32; i++) pk[960 + i] = seeda[i];
    sponge(pk, 136, 8'h06, 32, hpk);
    sk = new[384 + 992 + 32 + 32];
    foreach (sbytes[i]) sk[i] = sbytes[i];
    foreach (pk[i])     sk[384 + i] = pk[i];
    foreach (hpk[i])    sk[1376 + i] = hpk[i];
    foreach (z[i])      sk[1408 + i] = z[i];

    // ---- compare ----
    check_words(SEEDA, seeda, "seedA");
    check_words(MATA, amat, "matrix A");
    check_words(SV, sbytes, "secret s");
    check_words(PK, pk, "public key");
    check_words(HPK, hpk, "H(pk)");
    check_words(SK, sk, "secret key");
    $display("public key %0d bytes, secret key %0d bytes", pk.size(), sk.size());
    check(pk.size() == 992, "public key size");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
