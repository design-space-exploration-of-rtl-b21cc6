// tb_copy_words: self-checking test of CopyWords. 40 random words are copied
// across a RegFile boundary (words 240..279 to 900..939); the copies must
// match, the words around the destination must be untouched, and the copy
// must take the four-cycles-per-word single-port schedule.
module tb_copy_words;
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
  localparam int NW = 40;
  logic        start = 1'b0, done;
  logic [W-1:0] src_data [NW];
  logic [W-1:0] d;
  int t0;

  copy_words dut (.clk, .rst_n, .start, .src(10'd240), .dst(10'd900), .nwords(16'(NW)), .done,
                  .mem_req(unit_req), .rdata, .rvalid);

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
    for (int i = 0; i < NW; i++) begin
      src_data[i] = {$urandom, $urandom};
      mem_write(AW'(240 + i), src_data[i]);
    end
    mem_write(10'd899, 64'h1111);
    mem_write(10'd940, 64'h2222);
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    check(cycle - t0 == 4 * NW + 1, $sformatf("copy took %0d cycles, want %0d", cycle - t0, 4 * NW + 1));
    use_host = 1'b1;
    for (int i = 0; i < NW; i++) begin
      mem_read(AW'(900 + i), d);
      check(d == src_data[i], $sformatf("word %0d", i));
    end
    mem_read(10'd899, d);
    check(d == 64'h1111, "word before destination changed");
    mem_read(10'd940, d);
    check(d == 64'h2222, "word after destination changed");
    finish();
  end
endmodule
