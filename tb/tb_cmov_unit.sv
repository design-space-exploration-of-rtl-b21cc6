// tb_cmov_unit: self-checking test of CMOV. With cond = 0 the destination
// must receive the first source, with cond = 1 the second; both runs must
// take the same number of cycles.
module tb_cmov_unit;
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
  localparam int NW = 4;
  logic        start = 1'b0, done, cond = 1'b0;
  logic [W-1:0] k [NW], z [NW];
  logic [W-1:0] d;
  int t0, c0, c1;

  cmov_unit dut (.clk, .rst_n, .start, .cond, .src0(10'd20), .src1(10'd30), .dst(10'd260),
                 .nwords(16'(NW)), .done, .mem_req(unit_req), .rdata, .rvalid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  task automatic run(output int cyc);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cyc = cycle - t0;
    use_host = 1'b1;
  endtask

  initial begin
    host_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NW; i++) begin
      k[i] = {$urandom, $urandom};
      z[i] = {$urandom, $urandom};
      mem_write(AW'(20 + i), k[i]);
      mem_write(AW'(30 + i), z[i]);
    end
    cond = 1'b0;
    run(c0);
    for (int i = 0; i < NW; i++) begin
      mem_read(AW'(260 + i), d);
      check(d == k[i], $sformatf("cond=0 word %0d", i));
    end
    cond = 1'b1;
    run(c1);
    for (int i = 0; i < NW; i++) begin
      mem_read(AW'(260 + i), d);
      check(d == z[i], $sformatf("cond=1 word %0d", i));
    end
    check(c0 == c1, "CMOV time depends on the condition");
    finish();
  end
endmodule
