// tb_saber_top: end-to-end test of the SABER coprocessor at its full size.
//
// A program of building-block instructions, shaped like the steps of SABER
// key generation and encryption, runs on the core:
//   SHAKE-128 expands a seed into one row of the public matrix (3 x 256
//   13-bit coefficients) and another seed into 768 random bytes; the sampler
//   turns these into a secret vector s; the multiplier forms the inner
//   product row . s; AddRound rounds it to 10 bits (a public-key polynomial
//   b); BS2POLVECp brings b back to 13-bit form; the multiplier forms b . s_0
//   (v'); Unpack expands a message; AddPack combines v' and the message into
//   a 4-bit packed ciphertext part, and AddPack in decryption mode recovers
//   the message from v' and that part; CopyWords copies it; Verify compares the
//   copy (equal, then with one bit changed) and CMOV selects the key or z;
//   SHA3-256 and SHA3-512 hash a short string and SHAKE-128 the empty string.
// After each instruction the testbench reads the operands and the result
// back and checks the result against values it computes itself from the
// operands, so every step is checked on its own. Hash results are checked
// against published FIPS 202 values. Cycle counts are checked where the
// architecture gives one (256 cycles per polynomial product; 970 for the
// vector product, 246 for the sampler, 295 for Unpack, 211 for copying a polynomial, 28 per 1344 bits of SHAKE-128 output). The mechanisms of the design are
// counted and must each occur: all four clients of the shared buffer, a
// multiplier stall on the buffer, a stream read deferred by a write on the
// single port, reads returned through the pipeline register from all four
// RegFiles, repeated SHAKE squeezing, both AddPack modes, and both Verify
// outcomes with both CMOV selections.
module tb_saber_top;
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

  logic [W-1:0] img [1024];   // testbench copy of memory, refreshed by snap()

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
    img[a] = d;
  endtask

  task automatic snap(input int a, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      host_req = '{en: 1'b1, we: 1'b0, addr: AW'(a + i), wdata: '0};
      @(negedge clk);
      host_req = '0;
      while (!host_rvalid) @(negedge clk);
      img[a + i] = host_rdata;
    end
  endtask

  // Field i of width w in a packed string starting at word `base` of img.
  function automatic int fld(input int base, input int i, input int w);
    int pos;
    logic [127:0] two;
    pos = i * w;
    two = {img[base + pos/64 + 1], img[base + pos/64]};
    return int'((two >> (pos % 64)) & ((128'd1 << w) - 1));
  endfunction

  task automatic exec(input opcode_t op, input int s0, input int s1, input int d,
                      input int len, input int len2, output int cyc);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = '{op: op, src0: AW'(s0), src1: AW'(s1), dst: AW'(d), len: 16'(len), len2: 16'(len2)};
    instr_valid = 1'b1;
    @(negedge clk);
    instr_valid = 1'b0;
    while (!op_done) @(negedge clk);
    cyc = int'(last_cycles);
    $display("%s: %0d cycles", op.name(), cyc);
  endtask

  // ---- mechanism counters ----
  int buf_pops [4];
  int mult_stalls = 0, deferred_reads = 0, rvalids = 0, squeeze_perms = 0;
  int bank_reads [4];
  int fail0 = 0, fail1 = 0;
  int pack_enc = 0, pack_dec = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) if (dut.sbuf_req[c].pop && dut.sbuf_sel == 2'(c)) buf_pops[c]++;
    if (dut.u_mult.state_q == 3'd2 && !dut.u_mult.mac) mult_stalls++;
    if ((dut.u_addround.u_rd.rd_valid && !dut.u_addround.u_rd.grant) ||
        (dut.u_mult.u_rd.rd_valid && !dut.u_mult.u_rd.grant) ||
        (dut.u_addpack.u_rd.rd_valid && !dut.u_addpack.u_rd.grant) ||
        (dut.u_bs2polvecp.u_rd.rd_valid && !dut.u_bs2polvecp.u_rd.grant)) deferred_reads++;
    if (host_rvalid) rvalids++;
    if (dut.u_addpack.take) begin
      if (dut.u_addpack.dec_q) pack_dec++;
      else                     pack_enc++;
    end
    if (dut.mem_req.en && !dut.mem_req.we) bank_reads[dut.mem_req.addr[9:8]]++;
    if (dut.u_sha3.state_q == 3'd2 && dut.u_sha3.squeezing_q && dut.u_sha3.rnd_q == 5'd0) squeeze_perms++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Memory map of the program (word addresses).
  localparam int SEED_A = 0, SEED_S = 4, ABC = 8, ROW_A = 100, RAND_S = 300, SVEC = 400,
                 PROD = 460, BPOLY = 520, B13 = 560, VP = 620, MSG = 700, KEY = 704, ZSTR = 708,
                 MPOLY = 712, CM = 770, CM2 = 800, KOUT = 830, MDEC = 834, H256 = 840, H512 = 850, HSHK = 860, PCOPY = 880;

  initial begin
    int cyc;
    int ref_r [256];
    host_req = '0;
    instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < 4; i++) mem_write(SEED_A + i, {$urandom, $urandom});
    for (int i = 0; i < 4; i++) mem_write(SEED_S + i, {$urandom, $urandom});
    mem_write(ABC, 64'h0000000000636261);
    for (int i = 0; i < 4; i++) mem_write(MSG + i, {$urandom, $urandom});
    for (int i = 0; i < 4; i++) mem_write(KEY + i, {$urandom, $urandom});
    for (int i = 0; i < 4; i++) mem_write(ZSTR + i, {$urandom, $urandom});

    // One matrix row (3 polynomials x 52 words) and 768 bytes of secret randomness.
    exec(OP_SHAKE128, SEED_A, 0, ROW_A, 32, 3 * 52, cyc);
    // 156 words = 8 output blocks of 1344 bits at no more than 28 cycles each,
    // plus absorbing the seed.
    check(cyc <= 28 * 8 + 32, $sformatf("SHAKE-128 of 156 words took %0d cycles", cyc));
    exec(OP_SHAKE128, SEED_S, 0, RAND_S, 32, 96, cyc);

    // Binomial sampling of s (3 x 256 coefficients).
    exec(OP_SAMPLER, RAND_S, 0, SVEC, 768, 0, cyc);
    check(cyc <= 246, $sformatf("sampler took %0d cycles", cyc));
    snap(RAND_S, 96);
    snap(SVEC, 48);
    for (int i = 0; i < 768; i++) begin
      int e, g;
      e = $countones(fld(RAND_S, i, 8) & 15) - $countones(fld(RAND_S, i, 8) >> 4);
      g = fld(SVEC, i, 4);
      if (g >= 8) g -= 16;
      check(g == e, $sformatf("s[%0d] = %0d, want %0d", i, g, e));
    end

    // Inner product of the row with s.
    exec(OP_MULT, ROW_A, SVEC, PROD, 3, 0, cyc);
    check(cyc >= 3 * 256 && cyc <= 970, $sformatf("vector product took %0d cycles", cyc));
    snap(ROW_A, 156);
    snap(PROD, 52);
    for (int i = 0; i < 256; i++) ref_r[i] = 0;
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < 256; i++)
        for (int j = 0; j < 256; j++) begin
          int sj;
          sj = fld(SVEC + 16*k, j, 4);
          if (sj >= 8) sj -= 16;
          if (i + j < 256) ref_r[i+j]     += fld(ROW_A + 52*k, i, 13) * sj;
          else             ref_r[i+j-256] -= fld(ROW_A + 52*k, i, 13) * sj;
        end
    for (int i = 0; i < 256; i++)
      check(fld(PROD, i, 13) == (ref_r[i] & 8191), $sformatf("product coef %0d", i));

    // Rounding to a public-key polynomial and back to 13-bit form.
    exec(OP_ADDROUND, PROD, 0, BPOLY, 256, 0, cyc);
    snap(BPOLY, 40);
    for (int i = 0; i < 256; i++)
      check(fld(BPOLY, i, 10) == ((fld(PROD, i, 13) + 4) % 8192) / 8, $sformatf("AddRound coef %0d", i));
    exec(OP_BS2POLVECP, BPOLY, 0, B13, 256, 0, cyc);
    snap(B13, 52);
    for (int i = 0; i < 256; i++)
      check(fld(B13, i, 13) == fld(BPOLY, i, 10), $sformatf("BS2POLVECp coef %0d", i));

    // v' = b . s_0, a single product: 256 MAC cycles plus load and write-back.
    exec(OP_MULT, B13, SVEC, VP, 1, 0, cyc);
    check(cyc >= 256 && cyc <= 256 + 150, $sformatf("product took %0d cycles", cyc));
    snap(VP, 52);
    for (int i = 0; i < 256; i++) ref_r[i] = 0;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        int sj;
        sj = fld(SVEC, j, 4);
        if (sj >= 8) sj -= 16;
        if (i + j < 256) ref_r[i+j]     += fld(B13, i, 13) * sj;
        else             ref_r[i+j-256] -= fld(B13, i, 13) * sj;
      end
    for (int i = 0; i < 256; i++)
      check(fld(VP, i, 13) == (ref_r[i] & 8191), $sformatf("v' coef %0d", i));

    // Message handling.
    exec(OP_UNPACK, MSG, 0, MPOLY, 256, 0, cyc);
    check(cyc <= 295, $sformatf("Unpack took %0d cycles", cyc));
    snap(MPOLY, 52);
    for (int i = 0; i < 256; i++)
      check(fld(MPOLY, i, 13) == fld(MSG, i, 1), $sformatf("Unpack bit %0d", i));
    exec(OP_ADDPACK, VP, MSG, CM, 256, 0, cyc);
    snap(CM, 16);
    for (int i = 0; i < 256; i++)
      check(fld(CM, i, 4) == (((fld(VP, i, 13) % 1024) + 4 - 512 * fld(MSG, i, 1) + 2048) % 1024) / 64,
            $sformatf("AddPack coef %0d", i));
    // Decrypting with the same v' must give the message back exactly: the
    // rounding error left in c_m is 0..63, well inside the +-256 margin.
    exec(OP_ADDPACK, VP, CM, MDEC, 256, 1, cyc);
    snap(MDEC, 4);
    for (int i = 0; i < 256; i++)
      check(fld(MDEC, i, 1) == fld(MSG, i, 1), $sformatf("AddPack decryption bit %0d", i));

    // Copy, verify and conditional move, both outcomes.
    exec(OP_COPYWORDS, CM, 0, CM2, 16, 0, cyc);
    snap(CM2, 16);
    for (int i = 0; i < 16; i++) check(img[CM2 + i] == img[CM + i], $sformatf("copy word %0d", i));
    // Copying one 13-bit polynomial (52 words): 211 cycles in the architecture.
    exec(OP_COPYWORDS, VP, 0, PCOPY, 52, 0, cyc);
    check(cyc <= 211, $sformatf("CopyWords of 52 words took %0d cycles", cyc));
    snap(PCOPY, 52);
    for (int i = 0; i < 52; i++) check(img[PCOPY + i] == img[VP + i], $sformatf("polynomial copy word %0d", i));
    exec(OP_VERIFY, CM, CM2, 0, 16, 0, cyc);
    check(verify_fail == 1'b0, "equal strings failed Verify");
    if (!verify_fail) fail0++;
    exec(OP_CMOV, KEY, ZSTR, KOUT, 4, 0, cyc);
    snap(KOUT, 4);
    for (int i = 0; i < 4; i++) check(img[KOUT + i] == img[KEY + i], "CMOV did not take the key");
    mem_write(CM2 + 9, img[CM2 + 9] ^ 64'h0000_0100_0000_0000);
    exec(OP_VERIFY, CM, CM2, 0, 16, 0, cyc);
    check(verify_fail == 1'b1, "changed string passed Verify");
    if (verify_fail) fail1++;
    exec(OP_CMOV, KEY, ZSTR, KOUT, 4, 0, cyc);
    snap(KOUT, 4);
    for (int i = 0; i < 4; i++) check(img[KOUT + i] == img[ZSTR + i], "CMOV did not take z");

    // Hash functions against published values.
    exec(OP_SHA3_256, ABC, 0, H256, 3, 0, cyc);
    snap(H256, 4);
    check({img[H256+3], img[H256+2], img[H256+1], img[H256]} ==
          {<<8{256'h3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532}}, "SHA3-256('abc')");
    exec(OP_SHA3_512, ABC, 0, H512, 3, 0, cyc);
    snap(H512, 8);
    check({img[H512+7], img[H512+6], img[H512+5], img[H512+4], img[H512+3], img[H512+2], img[H512+1], img[H512]} ==
          {<<8{512'hb751850b1a57168a5693cd924b6b096e08f621827444f70d884f5d0240d2712e10e116e9192af3c91a7ec57647e3934057340b4cf408d5a56592f8274eec53f0}},
          "SHA3-512('abc')");
    exec(OP_SHAKE128, ABC, 0, HSHK, 0, 4, cyc);
    snap(HSHK, 4);
    check({img[HSHK+3], img[HSHK+2], img[HSHK+1], img[HSHK]} ==
          {<<8{256'h7f9c2ba4e88f827d616045507605853ed73b8093f6efbc88eb1a6eacfa66ef26}}, "SHAKE128('')");

    // Every mechanism must have occurred.
    $display("buffer pops per client (mult, addround, addpack, bs2polvecp): %0d %0d %0d %0d",
             buf_pops[0], buf_pops[1], buf_pops[2], buf_pops[3]);
    $display("multiplier stalls %0d, deferred stream reads %0d, host reads via pipeline register %0d, squeeze permutations %0d",
             mult_stalls, deferred_reads, rvalids, squeeze_perms);
    $display("reads per RegFile %0d %0d %0d %0d, verify pass/fail %0d/%0d",
             bank_reads[0], bank_reads[1], bank_reads[2], bank_reads[3], fail0, fail1);
    for (int c = 0; c < 4; c++) check(buf_pops[c] > 0, $sformatf("buffer client %0d never used", c));
    for (int b = 0; b < 4; b++) check(bank_reads[b] > 0, $sformatf("RegFile %0d never read", b));
    check(mult_stalls > 0, "no multiplier stall");
    check(deferred_reads > 0, "no read deferred by a write");
    check(rvalids > 0, "no read through the pipeline register");
    check(squeeze_perms > 0, "no repeated squeeze");
    check(fail0 > 0 && fail1 > 0, "Verify outcomes not both seen");
    $display("AddPack coefficients encrypted/decrypted %0d/%0d", pack_enc, pack_dec);
    check(pack_enc > 0 && pack_dec > 0, "AddPack modes not both used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
