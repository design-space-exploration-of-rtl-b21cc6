// regfile_sp: one single-port RegFile instance, DEPTH x WIDTH (256 x 64).
//
// Models the compiled high-speed 6T SRAM ("RegFile") macro of the memory
// subsystem as a plain array: one access per cycle, either a write or a
// read, selected by `we` while `en` is high. Read data appears on `rdata` on
// the clock edge after the request and holds until the next read. The sizes
// follow the architecture; the port names and the hold-on-idle behaviour are
// this model's own.
module regfile_sp #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
