// tb_regfile_sp: self-checking test of one 256 x 64 single-port RegFile:
// writes every row with random data, reads it back in a shuffled order and
// checks the one-cycle read latency and that the output holds while idle.
module tb_regfile_sp;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic        en = 1'b0, we = 1'b0;
  logic [7:0]  addr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model [256];

  regfile_sp dut (.clk, .en, .we, .addr, .wdata, .rdata);

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

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      model[i] = {$urandom, $urandom};
      en = 1'b1; we = 1'b1; addr = 8'(i); wdata = model[i];
    end
    for (int k = 0; k < 512; k++) begin
      int i;
      i = (k * 37 + 11) % 256;
      @(negedge clk);
      en = 1'b1; we = 1'b0; addr = 8'(i);
      @(negedge clk);
      en = 1'b0;
      check(rdata == model[i], $sformatf("row %0d", i));
      @(negedge clk);
      check(rdata == model[i], $sformatf("row %0d not held", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
