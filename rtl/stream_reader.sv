// stream_reader: streams NWORDS consecutive memory words into the shared
// shift buffer for the building block that instantiates it.
//
// After `start` it requests reads from `base` upwards whenever the buffer
// has room for the word plus every read still in flight, and the owning
// block grants it the memory port (`grant`, low while the block writes or
// makes a read of its own). A two-bit tag pipeline marks which returning
// read data (two cycles after the request) is its own; that word is pushed
// into the buffer as 64 new bits. `busy` stays high until every word has
// been requested and pushed.
module stream_reader
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [15:0]   nwords,
  input  logic          grant,
  input  logic [SBUF_CW-1:0] sbuf_count,
  output logic          rd_valid,
  output logic [AW-1:0] rd_addr,
  input  logic          rvalid,
  input  logic [W-1:0]  rdata,
  output logic          push,
  output logic [W-1:0]  push_data,
  output logic          busy
);

  logic [15:0] left_q;
  logic [1:0]  tag_q;
  logic [1:0]  inflight;

  assign inflight  = 2'(tag_q[0]) + 2'(tag_q[1]);
  assign rd_valid  = (left_q != 16'd0) &&
                     (32'(sbuf_count) + 32'(W) * (32'(inflight) + 32'd1) <= SBUF_W);
  assign push      = rvalid && tag_q[1];
  assign push_data = rdata;
  assign busy      = (left_q != 16'd0) || (tag_q != 2'b00);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left_q  <= '0;
      rd_addr <= '0;
      tag_q   <= '0;
    end else begin
      tag_q <= {tag_q[0], rd_valid && grant};
      if (start) begin
        left_q  <= nwords;
        rd_addr <= base;
      end else if (rd_valid && grant) begin
        left_q  <= left_q - 16'd1;
        rd_addr <= rd_addr + AW'(1);
      end
    end
  end

endmodule
