// tb_sha3_unit: self-checking test of the SHA3/SHAKE unit.
//
// Expected digests come from two places: published FIPS 202 example values
// for short inputs (SHA3-256 of "" and "abc", SHA3-512 of "abc",
// SHAKE-128 of "" for 32 bytes), and a Keccak model written here in a
// different style from the design (round constants generated by the LFSR of
// the standard, rotation offsets by the (t+1)(t+2)/2 rule). The model is
// itself checked against the published values. Cases cover multi-block
// absorption, a message of exactly one rate (extra padding block) and a
// SHAKE-128 output longer than one rate (repeated squeezing). The
// permutation must take 24 cycles, one round per cycle, and SHAKE-128 must
// deliver one 1344-bit block per permutation (at most 28 cycles).
module tb_sha3_unit;
  import saber_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Data memory (the real memory manager) and a host port used to preload
  // inputs and read results while the block under test is idle.
  mem_req_t     host_req, unit_req, req;
  logic [W-1:0] rdata;
  logic         rvalid;
  logic         use_host = 1'b1;
  assign req = use_host ? host_req : unit_req;
  mem_manager u_mem (.clk, .rst_n, .req, .rdata, .rvalid);

  task automatic mem_write(input logic [AW-1:0] a, input logic [W-1:0] d);
    @(negedge clk);
    host_req = '{en: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask

  task automatic mem_read(input logic [AW-1:0] a, output logic [W-1:0] d);
    @(negedge clk);
    host_req = '{en: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    host_req = '0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  logic        start = 1'b0, done;
  sha_mode_t   mode = SHA_256;
  logic [15:0] in_len = '0, out_words = '0;
  int          perm_len;

  sha3_unit dut (.clk, .rst_n, .start, .mode, .src(10'd0), .dst(10'd512), .in_len, .out_words,
                 .done, .mem_req(unit_req), .rdata, .rvalid);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  // ---- reference Keccak ----
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

  task automatic run_case(input sha_mode_t m, input logic [7:0] msg [], input int owords,
                          input logic [511:0] known, input int known_bytes, input string name);
    int rate, outlen;
    logic [7:0] dom;
    logic [7:0] exp [];
    logic [63:0] d;
    rate   = (m == SHA_256) ? 136 : (m == SHA_512) ? 72 : 168;
    dom    = (m == SHAKE_128) ? 8'h1F : 8'h06;
    outlen = (m == SHA_256) ? 32 : (m == SHA_512) ? 64 : 8 * owords;
    sponge(msg, rate, dom, outlen, exp);
    for (int i = 0; i < known_bytes; i++)
      check(exp[i] == known[8*(known_bytes-1-i) +: 8], $sformatf("%s: model differs from published value", name));
    for (int w = 0; w < (msg.size() + 7) / 8; w++) begin
      logic [63:0] v;
      v = '0;
      for (int j = 0; j < 8; j++) if (8*w + j < msg.size()) v[8*j +: 8] = msg[8*w + j];
      mem_write(AW'(w), v);
    end
    mode = m;
    in_len = 16'(msg.size());
    out_words = 16'(owords);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    use_host = 1'b1;
    for (int w = 0; w < outlen / 8; w++) begin
      mem_read(AW'(512 + w), d);
      for (int j = 0; j < 8; j++)
        check(d[8*j +: 8] == exp[8*w + j], $sformatf("%s: byte %0d got %h want %h", name, 8*w + j, d[8*j +: 8], exp[8*w + j]));
    end
  endtask

  // A SHAKE-128 output longer than one rate is written in bursts of one rate
  // each; a burst starts as soon as a permutation ends, while the next
  // permutation runs. The distance between the first writes of two bursts is
  // therefore the time per 1344-bit output block: one permutation, 24 cycles
  // (the architecture quotes 28 cycles per 1344 bits).
  logic wrote_q = 1'b0;
  int   last_start = 0;
  always @(posedge clk) begin
    wrote_q <= unit_req.en && unit_req.we && !use_host;
    if (unit_req.en && unit_req.we && !use_host && !wrote_q) begin
      if (last_start != 0 && cycle - last_start < 40) perm_len <= cycle - last_start;
      last_start <= cycle;
    end
  end

  initial begin
    logic [7:0] empty [];
    logic [7:0] abc [];
    logic [7:0] m200 [], m72 [], m136 [], m32 [];
    perm_len = 0;
    host_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    empty = new[0];
    abc = new[3];
    abc[0] = 8'h61; abc[1] = 8'h62; abc[2] = 8'h63;
    m200 = new[200]; foreach (m200[i]) m200[i] = 8'($urandom);
    m72  = new[72];  foreach (m72[i])  m72[i]  = 8'($urandom);
    m136 = new[136]; foreach (m136[i]) m136[i] = 8'($urandom);
    m32  = new[32];  foreach (m32[i])  m32[i]  = 8'($urandom);

    run_case(SHA_256, empty, 0,
      512'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a, 32, "SHA3-256('')");
    run_case(SHA_256, abc, 0,
      512'h3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532, 32, "SHA3-256('abc')");
    run_case(SHA_512, abc, 0,
      512'hb751850b1a57168a5693cd924b6b096e08f621827444f70d884f5d0240d2712e10e116e9192af3c91a7ec57647e3934057340b4cf408d5a56592f8274eec53f0, 64, "SHA3-512('abc')");
    run_case(SHAKE_128, empty, 4,
      512'h7f9c2ba4e88f827d616045507605853ed73b8093f6efbc88eb1a6eacfa66ef26, 32, "SHAKE128('')");
    run_case(SHA_256, m200, 0, '0, 0, "SHA3-256(200 random bytes)");
    run_case(SHA_256, m136, 0, '0, 0, "SHA3-256(136 random bytes)");
    run_case(SHA_512, m72, 0, '0, 0, "SHA3-512(72 random bytes)");
    run_case(SHAKE_128, m32, 60, '0, 0, "SHAKE128(32 random bytes, 480 bytes out)");
    check(perm_len == 24 && perm_len <= 28, $sformatf("1344-bit output block every %0d cycles, want 24 (at most 28)", perm_len));
    finish();
  end
endmodule
