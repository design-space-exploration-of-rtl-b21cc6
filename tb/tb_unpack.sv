// tb_unpack: self-checking test of Unpack. A random 256-bit string is
// converted to 256 one-bit coefficients in 13-bit packed form; each output
// coefficient must equal the matching input bit. The block must take no
// more than the 295 cycles the architecture reports for Unpack.
module tb_unpack;
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
  localparam int NB = 256;
  logic        start = 1'b0, done;
  logic [NB-1:0]    msg;
  logic [NB*13-1:0] outbits;
  logic [W-1:0] d;

  unpack dut (.clk, .rst_n, .start, .src(10'd40), .dst(10'd600), .nbits(16'(NB)), .done,
              .mem_req(unit_req), .rdata, .rvalid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  initial begin
    int t0, ncyc;
    host_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NB; i++) msg[i] = 1'($urandom);
    for (int w = 0; w < NB/64; w++) mem_write(AW'(40 + w), msg[64*w +: 64]);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    ncyc = cycle - t0;
    $display("Unpack of %0d bits: %0d cycles", NB, ncyc);
    check(ncyc >= NB && ncyc <= 295, $sformatf("Unpack took %0d cycles, want at most 295", ncyc));
    use_host = 1'b1;
    for (int w = 0; w < NB*13/64; w++) begin
      mem_read(AW'(600 + w), d);
      outbits[64*w +: 64] = d;
    end
    for (int i = 0; i < NB; i++)
      check(outbits[13*i +: 13] == 13'(msg[i]), $sformatf("bit %0d: got %0d want %0d", i, outbits[13*i +: 13], msg[i]));
    finish();
  end
endmodule
