// tb_poly_multiplier: self-checking test of the vector-vector multiplier.
// Three random public polynomials a_k (13-bit packed) and three secret
// polynomials s_k (coefficients in -4..4, 4-bit) are placed in memory; the
// block's result must equal sum_k a_k * s_k in Z_(2^13)[x]/(x^256 + 1),
// computed here with a direct negacyclic schoolbook loop. A second run with
// one pair checks the 256-cycle product: the run may not be shorter than
// 256 cycles nor much longer than 256 plus the load and write-back.
module tb_poly_multiplier;
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
  localparam int NC = 256;
  localparam int NP = 3;
  sbuf_req_t   sreq [4];
  sbuf_rsp_t   srsp;
  logic        start = 1'b0, done;
  logic [15:0] npoly;
  logic [12:0] a [NP][NC];
  int          s [NP][NC];
  int          ref_r [NC];
  logic [NC*13-1:0] bits;
  logic [W-1:0] d;
  int t0, cyc;

  poly_multiplier dut (.clk, .rst_n, .start, .src0(10'd0), .src1(10'd400), .dst(10'd800), .npoly, .a_stride(10'd0),
                       .done, .mem_req(unit_req), .rdata, .rvalid, .sbuf_req(sreq[0]), .sbuf_rsp(srsp));
  assign sreq[1] = '0;
  assign sreq[2] = '0;
  assign sreq[3] = '0;
  shared_shift_buffer u_sb (.clk, .rst_n, .clear(start), .sel(2'd0), .req(sreq), .rsp(srsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  task automatic run(input int np);
    npoly = 16'(np);
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

  task automatic check_result(input int np);
    for (int i = 0; i < NC; i++) ref_r[i] = 0;
    for (int k = 0; k < np; k++)
      for (int i = 0; i < NC; i++)
        for (int j = 0; j < NC; j++)
          if (i + j < NC) ref_r[i+j]      += int'(a[k][i]) * s[k][j];
          else            ref_r[i+j-NC]   -= int'(a[k][i]) * s[k][j];
    for (int w = 0; w < NC*13/64; w++) begin
      mem_read(AW'(800 + w), d);
      bits[64*w +: 64] = d;
    end
    for (int i = 0; i < NC; i++)
      check(bits[13*i +: 13] == 13'(ref_r[i]), $sformatf("np=%0d coef %0d: got %0d want %0d",
            np, i, bits[13*i +: 13], 13'(ref_r[i])));
  endtask

  initial begin
    host_req = '0;
    npoly = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NP; k++) begin
      for (int i = 0; i < NC; i++) begin
        a[k][i] = 13'($urandom);
        s[k][i] = int'($urandom % 9) - 4;
        bits[13*i +: 13] = a[k][i];
      end
      for (int w = 0; w < NC*13/64; w++) mem_write(AW'(52*k + w), bits[64*w +: 64]);
      for (int w = 0; w < NC/16; w++) begin
        logic [63:0] v;
        for (int j = 0; j < 16; j++) v[4*j +: 4] = 4'(s[k][16*w + j]);
        mem_write(AW'(400 + 16*k + w), v);
      end
    end
    run(NP);
    $display("vector product of %0d pairs: %0d cycles", NP, cyc);
    check(cyc >= NP * NC && cyc <= 970, $sformatf("vector product took %0d cycles", cyc));
    check_result(NP);
    run(1);
    $display("single product: %0d cycles", cyc);
    check(cyc >= NC && cyc <= NC + 200, $sformatf("one product took %0d cycles", cyc));
    check_result(1);
    finish();
  end
endmodule
