// shared_shift_buffer: one WIDTH-bit (676) shift buffer shared by the
// multiplier, AddRound, AddPack and BS2POLVECp.
//
// Each of these blocks reads 64-bit memory words and consumes them as packed
// coefficients of 13, 10 or 4 bits, which needs a register that collects
// hundreds of bits. Because only one building block runs at a time, a single
// buffer serves all of them; `sel` (driven by the controller) chooses whose
// request port is obeyed. The buffer behaves as a bit FIFO: bits are taken
// from the bottom (bit 0 first) and appended above the `count` valid bits.
// In one cycle the selected client may pop `pop_bits` bits and push up to 64
// bits; the pop is applied first. `rsp` shows the lowest 64 bits and the fill
// level as registered state (no combinational path from request to
// response). The width is the architecture's; the FIFO discipline, the
// request/response structs and `clear` are this design's choices.
module shared_shift_buffer
  import saber_pkg::*;
#(
  parameter int unsigned WIDTH   = SBUF_W,
  parameter int unsigned CLIENTS = 4,
  localparam int unsigned SW     = $clog2(CLIENTS)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic [SW-1:0] sel,
  input  sbuf_req_t req [CLIENTS],
  output sbuf_rsp_t rsp
);

  logic [WIDTH-1:0]   sbuf_q, popped, pushed;
  logic [SBUF_CW-1:0] count_q, count_popped;
  sbuf_req_t          r;
  logic [W-1:0]       push_masked;

  assign r = req[sel];

  always_comb begin
    popped       = r.pop ? (sbuf_q >> r.pop_bits) : sbuf_q;
    count_popped = r.pop ? (count_q - SBUF_CW'(r.pop_bits)) : count_q;
    push_masked  = (r.push_bits >= 7'd64) ? r.push_data
                 : (r.push_data & ((W'(1) << r.push_bits[5:0]) - W'(1)));
    pushed       = popped | (WIDTH'(push_masked) << count_popped);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sbuf_q  <= '0;
      count_q <= '0;
    end else if (clear) begin
      sbuf_q  <= '0;
      count_q <= '0;
    end else begin
      sbuf_q  <= r.push ? pushed : popped;
      count_q <= r.push ? (count_popped + SBUF_CW'(r.push_bits)) : count_popped;
    end
  end

  assign rsp.data  = sbuf_q[W-1:0];
  assign rsp.count = count_q;

  // A client may not take more bits than are held, nor overfill the buffer.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clear)
    r.pop |-> (SBUF_CW'(r.pop_bits) <= count_q));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n || clear)
    r.push |-> (32'(count_popped) + 32'(r.push_bits) <= WIDTH));

endmodule
