// tb_mem_manager: self-checking test of the memory manager. All 1024 words
// (four 256 x 64 RegFiles) are written with random data; back-to-back reads
// in a scrambled order must return each word exactly two cycles after its
// request, with rvalid high only then.
module tb_mem_manager;
  import saber_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mem_req_t     req;
  logic [W-1:0] rdata;
  logic         rvalid;
  logic [W-1:0] model [1024];
  int           pend [$];

  mem_manager dut (.clk, .rst_n, .req, .rdata, .rvalid);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected-read pipeline: entry k is the address requested k cycles ago.
  int rd_addr_d1 = -1, rd_addr_d2 = -1;
  always @(posedge clk) begin
    rd_addr_d2 <= rd_addr_d1;
    rd_addr_d1 <= (req.en && !req.we) ? int'(req.addr) : -1;
  end
  always @(negedge clk) if (rst_n) begin
    check(rvalid == (rd_addr_d2 >= 0), "rvalid timing");
    if (rd_addr_d2 >= 0) check(rdata == model[rd_addr_d2], $sformatf("word %0d", rd_addr_d2));
  end

  initial begin
    req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      model[i] = {$urandom, $urandom};
      req = '{en: 1'b1, we: 1'b1, addr: AW'(i), wdata: model[i]};
      @(negedge clk);
    end
    for (int k = 0; k < 2048; k++) begin
      req = '{en: 1'b1, we: 1'b0, addr: AW'((k * 389 + 7) % 1024), wdata: '0};
      @(negedge clk);
      if (k % 7 == 0) begin
        req = '0;
        @(negedge clk);
      end
    end
    req = '0;
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
