// pipeline_reg: the register placed on the memory read data.
//
// Registering the RegFile output makes the memory access time, rather than
// the access time plus the logic behind it, the limit on the clock period.
// It adds one cycle of read latency. Data and a valid bit pass through
// unchanged one cycle later; the valid bit is reset, the data is not.
module pipeline_reg #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) out_data <= in_data;

endmodule
