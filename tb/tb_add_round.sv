// tb_add_round: self-checking test of AddRound. Random 13-bit coefficients
// (plus the edge values 0, 3, 4, 8187, 8191) are packed into memory, the
// block rounds 256 of them, and every 10-bit output is compared with
// ((x + 4) mod 2^13) >> 3 worked out here. The block must finish within a
// bound of a few cycles per coefficient.
module tb_add_round;
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
  logic        start = 1'b0, done;
  logic [12:0] coef [NCO];
  logic [NCO*13-1:0] inbits;
  logic [NCO*10-1:0] outbits;
  logic [W-1:0] d;
  int t0;

  add_round dut (.clk, .rst_n, .start, .src(10'd0), .dst(10'd300), .ncoef(16'(NCO)), .done,
                 .mem_req(unit_req), .rdata, .rvalid, .sbuf_req(sreq[1]), .sbuf_rsp(srsp));
  assign sreq[0] = '0;
  assign sreq[2] = '0;
  assign sreq[3] = '0;
  shared_shift_buffer u_sb (.clk, .rst_n, .clear(start), .sel(2'd1), .req(sreq), .rsp(srsp));

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
    end
    coef[0] = 0; coef[1] = 3; coef[2] = 4; coef[3] = 8187; coef[4] = 8191;
    for (int i = 0; i < 5; i++) inbits[13*i +: 13] = coef[i];
    for (int w = 0; w < NCO*13/64; w++) mem_write(AW'(w), inbits[64*w +: 64]);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    check(cycle - t0 <= 3 * NCO, $sformatf("AddRound took %0d cycles", cycle - t0));
    use_host = 1'b1;
    for (int w = 0; w < NCO*10/64; w++) begin
      mem_read(AW'(300 + w), d);
      outbits[64*w +: 64] = d;
    end
    for (int i = 0; i < NCO; i++) begin
      int unsigned e;
      e = ((int'(coef[i]) + 4) % 8192) / 8;
      check(outbits[10*i +: 10] == 10'(e), $sformatf("coef %0d: got %0d want %0d", i, outbits[10*i +: 10], e));
    end
    finish();
  end
endmodule
