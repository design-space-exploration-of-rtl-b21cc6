// mem_manager: the 1024 x 64 data memory built from BANKS single-port
// RegFiles of DEPTH x 64 (four 256 x 64 instances A-D).
//
// The upper address bits select the bank and the lower ones the row; this
// part of the decoding is ordinary logic and so is optimised together with
// the rest of the design ("smart" memory synthesis). Only the selected bank
// is enabled. The bank's read data is chosen by the bank index of the
// request, delayed one cycle, and then registered in pipeline_reg.
//
// Timing: a read issued in cycle t returns `rdata` with `rvalid` high in
// cycle t+2. Writes take effect at the edge ending the request cycle. One
// access (read or write) per cycle: the RegFiles are single-port.
module mem_manager
  import saber_pkg::*;
#(
  parameter int unsigned BANKS = 4,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned BW   = $clog2(BANKS),
  localparam int unsigned RW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  mem_req_t     req,
  output logic [W-1:0] rdata,
  output logic         rvalid
);

  logic [W-1:0]  bank_rdata [BANKS];
  logic [BW-1:0] bank_sel, bank_sel_q;
  logic          rd_q;

  assign bank_sel = req.addr[RW +: BW];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    regfile_sp #(.DEPTH(DEPTH), .WIDTH(W)) u_rf (
      .clk  (clk),
      .en   (req.en && (bank_sel == BW'(b))),
      .we   (req.we),
      .addr (req.addr[RW-1:0]),
      .wdata(req.wdata),
      .rdata(bank_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q       <= 1'b0;
      bank_sel_q <= '0;
    end else begin
      rd_q       <= req.en && !req.we;
      bank_sel_q <= bank_sel;
    end
  end

  pipeline_reg #(.WIDTH(W)) u_pipe (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rd_q),
    .in_data  (bank_rdata[bank_sel_q]),
    .out_valid(rvalid),
    .out_data (rdata)
  );

endmodule
