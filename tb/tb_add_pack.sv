// tb_add_pack: self-checking test of AddPack. A random polynomial v (13-bit
// packed) and a random 256-bit message m are placed in memory; every 4-bit
// output must equal ((v mod 2^10) + 4 - 512*m) mod 2^10 >> 6, computed here.
// A second pass runs the decryption mode on the same v with a random 4-bit
// c_m per coefficient: every output bit must equal
// ((v mod 2^10) - 64*c_m + 228) mod 2^10 >> 9, and the pass must keep the
// rate of one coefficient per cycle apart from the 16 c_m fetches, which
// each stall the stream for about three cycles (at most 256 + 64 cycles).
module tb_add_pack;
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
  localparam int NCO = 256;
  sbuf_req_t   sreq [4];
  sbuf_rsp_t   srsp;
  logic        start = 1'b0, done, dec = 1'b0;
  logic [3:0]  cm [NCO];
  logic [NCO*4-1:0] cmbits;
  logic [NCO-1:0]   mbits;
  int          t0;
  logic [12:0] coef [NCO];
  logic [NCO-1:0]    msg;
  logic [NCO*13-1:0] inbits;
  logic [NCO*4-1:0]  outbits;
  logic [W-1:0] d;

  add_pack dut (.clk, .rst_n, .start, .src0(10'd0), .src1(10'd100), .dst(10'd700), .ncoef(16'(NCO)),
                .dec, .done, .mem_req(unit_req), .rdata, .rvalid, .sbuf_req(sreq[2]), .sbuf_rsp(srsp));
  assign sreq[0] = '0;
  assign sreq[1] = '0;
  assign sreq[3] = '0;
  shared_shift_buffer u_sb (.clk, .rst_n, .clear(start), .sel(2'd2), .req(sreq), .rsp(srsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  initial begin
    host_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NCO; i++) begin
      coef[i] = 13'($urandom);
      inbits[13*i +: 13] = coef[i];
      msg[i] = 1'($urandom);
    end
    for (int w = 0; w < NCO*13/64; w++) mem_write(AW'(w), inbits[64*w +: 64]);
    for (int w = 0; w < NCO/64; w++) mem_write(AW'(100 + w), msg[64*w +: 64]);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    use_host = 1'b1;
    for (int w = 0; w < NCO*4/64; w++) begin
      mem_read(AW'(700 + w), d);
      outbits[64*w +: 64] = d;
    end
    for (int i = 0; i < NCO; i++) begin
      int e;
      e = (((int'(coef[i]) % 1024) + 4 - 512 * int'(msg[i]) + 2048) % 1024) / 64;
      check(outbits[4*i +: 4] == 4'(e), $sformatf("coef %0d: got %0d want %0d", i, outbits[4*i +: 4], e));
    end
    // Decryption pass: c_m at word 100, recovered message at word 700.
    for (int i = 0; i < NCO; i++) begin
      cm[i] = 4'($urandom);
      cmbits[4*i +: 4] = cm[i];
    end
    for (int w = 0; w < NCO*4/64; w++) mem_write(AW'(100 + w), cmbits[64*w +: 64]);
    @(negedge clk);
    use_host = 1'b0;
    dec = 1'b1;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    check(cycle - t0 <= NCO + 64, $sformatf("decryption took %0d cycles", cycle - t0));
    use_host = 1'b1;
    for (int w = 0; w < NCO/64; w++) begin
      mem_read(AW'(700 + w), d);
      mbits[64*w +: 64] = d;
    end
    for (int i = 0; i < NCO; i++) begin
      int e;
      e = (((int'(coef[i]) % 1024) - 64 * int'(cm[i]) + 228 + 2048) % 1024) / 512;
      check(mbits[i] == 1'(e), $sformatf("dec coef %0d: got %0d want %0d", i, mbits[i], e));
    end
    finish();
  end
endmodule
