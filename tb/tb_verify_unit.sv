// tb_verify_unit: self-checking test of Verify. Two equal 34-word strings
// must give fail = 0; flipping one bit in the first, a middle or the last
// word must give fail = 1. Every comparison must take the same number of
// cycles whatever the data (constant time).
module tb_verify_unit;
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
  localparam int NW = 34;
  logic        start = 1'b0, done, fail;
  logic [W-1:0] a [NW];
  int t0, tref;

  verify_unit dut (.clk, .rst_n, .start, .src0(10'd10), .src1(10'd500), .nwords(16'(NW)), .done,
                   .fail, .mem_req(unit_req), .rdata, .rvalid);

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
    int cyc;
    int pos [3] = '{0, 17, NW-1};
    host_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NW; i++) begin
      a[i] = {$urandom, $urandom};
      mem_write(AW'(10 + i), a[i]);
      mem_write(AW'(500 + i), a[i]);
    end
    run(tref);
    check(fail == 1'b0, "equal strings reported different");
    for (int k = 0; k < 3; k++) begin
      mem_write(AW'(500 + pos[k]), a[pos[k]] ^ (64'd1 << ($urandom % 64)));
      run(cyc);
      check(fail == 1'b1, $sformatf("difference in word %0d missed", pos[k]));
      check(cyc == tref, "comparison time depends on data");
      mem_write(AW'(500 + pos[k]), a[pos[k]]);
      run(cyc);
      check(fail == 1'b0, "restored strings reported different");
    end
    finish();
  end
endmodule
