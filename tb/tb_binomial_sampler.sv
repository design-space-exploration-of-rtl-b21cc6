// tb_binomial_sampler: self-checking test of the binomial sampler. 768
// coefficients (one SABER secret vector, L = 3) are sampled from random
// bytes; each 4-bit output must equal popcount(low nibble) -
// popcount(high nibble) of its byte, and the values must span -4..4.
module tb_binomial_sampler;
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
  localparam int NCO = 768;
  logic        start = 1'b0, done;
  logic [7:0]  rb [NCO];
  logic [W-1:0] d;
  int hist [9];

  binomial_sampler dut (.clk, .rst_n, .start, .src(10'd0), .dst(10'd200), .ncoef(16'(NCO)), .done,
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
    for (int i = 0; i < NCO; i++) rb[i] = 8'($urandom);
    rb[0] = 8'h0F; rb[1] = 8'hF0; rb[2] = 8'h00; rb[3] = 8'hFF;
    for (int w = 0; w < NCO/8; w++) begin
      logic [63:0] v;
      for (int j = 0; j < 8; j++) v[8*j +: 8] = rb[8*w + j];
      mem_write(AW'(w), v);
    end
    @(negedge clk);
    use_host = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    use_host = 1'b1;
    for (int w = 0; w < NCO/16; w++) begin
      mem_read(AW'(200 + w), d);
      for (int j = 0; j < 16; j++) begin
        int i, e;
        logic signed [3:0] got;
        i = 16*w + j;
        e = $countones(rb[i][3:0]) - $countones(rb[i][7:4]);
        got = d[4*j +: 4];
        check(int'(got) == e, $sformatf("coef %0d: got %0d want %0d", i, got, e));
        if (e >= -4 && e <= 4) hist[e + 4]++;
      end
    end
    check(hist[0] > 0 && hist[8] > 0, "extreme values -4 and 4 not produced");
    finish();
  end
endmodule
