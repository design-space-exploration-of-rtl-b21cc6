// word_packer: packs IW-bit values, lowest first, into 64-bit memory words.
//
// A value is appended above the bits already held (`push`); once 64 or more
// bits are held, `full` is high and `word` shows the lowest 64, which the
// owner writes to memory and removes with `pop`. The owner pushes only while
// `full` is low, so at most 63 + IW bits are ever held. This is the output
// side of the packing that the shared shift buffer does on the input side;
// it is local to each block, a choice of this design.
// Its assertions use rst_n in `disable iff`; lint reports this as a reset
// used both ways, which is harmless.
module word_packer #(
  parameter int unsigned IW = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [IW-1:0] data,
  input  logic          pop,
  output logic          full,
  output logic          empty,
  output logic [63:0]   word
);

  logic [63+IW:0] acc_q, acc_popped;
  logic [7:0]     cnt_q, cnt_popped;

  assign full  = cnt_q >= 8'd64;
  assign empty = cnt_q == 8'd0;
  assign word  = acc_q[63:0];

  always_comb begin
    acc_popped = pop ? (acc_q >> 64) : acc_q;
    cnt_popped = pop ? (cnt_q - 8'd64) : cnt_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      cnt_q <= '0;
    end else if (clear) begin
      acc_q <= '0;
      cnt_q <= '0;
    end else if (push) begin
      acc_q <= acc_popped | ((64+IW)'(data) << cnt_popped);
      cnt_q <= cnt_popped + 8'(IW);
    end else begin
      acc_q <= acc_popped;
      cnt_q <= cnt_popped;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_pop_full:    assert property (@(posedge clk) disable iff (!rst_n) pop |-> full);

endmodule
