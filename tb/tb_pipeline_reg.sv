// tb_pipeline_reg: self-checking test of the memory pipeline register:
// random data and valid bits must come out exactly one cycle later, and
// valid must be low after reset.
module tb_pipeline_reg;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic        in_valid = 1'b0, out_valid;
  logic [63:0] in_data = '0, out_data;
  logic [64:0] prev;

  pipeline_reg #(.WIDTH(64)) dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_data);

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
    in_valid = 1'b1;
    repeat (2) @(negedge clk);
    check(out_valid == 1'b0, "valid high in reset");
    rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      in_valid = 1'($urandom);
      in_data  = {$urandom, $urandom};
      prev     = {in_valid, in_data};
      @(negedge clk);
      check(out_valid == prev[64] && (!prev[64] || out_data == prev[63:0]), $sformatf("step %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
