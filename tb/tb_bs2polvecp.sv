// tb_bs2polvecp: self-checking test of BS2POLVECp. 256 random 10-bit
// coefficients are packed into a byte string in memory; the block must
// write them back as 13-bit packed coefficients with the same values.
module tb_bs2polvecp;
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
  logic [9:0]  coef [NCO];
  logic [NCO*10-1:0] inbits;
  logic [NCO*13-1:0] outbits;
  logic [W-1:0] d;

  bs2polvecp dut (.clk, .rst_n, .start, .src(10'd0), .dst(10'd512), .ncoef(16'(NCO)), .done,
                  .mem_req(unit_req), .rdata, .rvalid, .sbuf_req(sreq[3]), .sbuf_rsp(srsp));
  assign sreq[0] = '0;
  assign sreq[1] = '0;
  assign sreq[2] = '0;
  shared_shift_buffer u_sb (.clk, .rst_n, .clear(start), .sel(2'd3), .req(sreq), .rsp(srsp));

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
      coef[i] = 10'($urandom);
      inbits[10*i +: 10] = coef[i];
    end
    for (int w = 0; w < NCO*10/64; w++) mem_write(AW'(w), inbits[64*w +: 64]);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    use_host = 1'b1;
    for (int w = 0; w < NCO*13/64; w++) begin
      mem_read(AW'(512 + w), d);
      outbits[64*w +: 64] = d;
    end
    for (int i = 0; i < NCO; i++)
      check(outbits[13*i +: 13] == 13'(coef[i]), $sformatf("coef %0d: got %0d want %0d", i, outbits[13*i +: 13], coef[i]));
    finish();
  end
endmodule
