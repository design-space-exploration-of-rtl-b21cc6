// unpack: Unpack building block. Converts a byte string into a bit string:
// every bit of the input becomes one polynomial coefficient (0 or 1), bit 0
// of byte 0 first, as SABER does when it turns a message into a polynomial.
//
// Input: `nbits` bits (a multiple of 64) from word `src`, fetched one word
// at a time into a local register. Output: one 13-bit packed coefficient per
// bit, from word `dst` (nbits*13/64 words). One bit per cycle, written
// out as soon as 64 bits are packed, in parallel with the next bits; each
// input word fetch pauses the bit stream for three cycles (a fetch waits a
// cycle if it meets a write, the memory being single-port). 256 bits take
// about 275 cycles, within the 295 the architecture reports for this block.
// `done` pulses once at the end. The architecture names this block and its
// purpose only; the coefficient format and the schedule are this design's.
module unpack
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   nbits,
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid
);

  logic          running_q;
  logic [15:0]   bits_left_q;
  logic [AW-1:0] wr_addr_q, rd_addr_q;
  logic [W-1:0]  word_q;
  logic [6:0]    word_left_q;
  logic          pend_q;
  logic          wr, rd, take;
  logic          pk_full, pk_empty;
  logic [63:0]   pk_word;

  assign wr   = running_q && pk_full;
  assign rd   = running_q && !wr && (bits_left_q != 0) && (word_left_q == 0) && !pend_q;
  // A coefficient enters the packer every cycle, also while a full word is
  // being written out (the packer pops and pushes in the same cycle).
  assign take = running_q && (bits_left_q != 0) && (word_left_q != 0);

  word_packer #(.IW(EQ)) u_pk (
    .clk, .rst_n, .clear(start),
    .push(take), .data(EQ'(word_q[0])), .pop(wr),
    .full(pk_full), .empty(pk_empty), .word(pk_word)
  );

  always_comb begin
    mem_req = '0;
    if (wr) begin
      mem_req.en    = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = wr_addr_q;
      mem_req.wdata = pk_word;
    end else if (rd) begin
      mem_req.en   = 1'b1;
      mem_req.addr = rd_addr_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q   <= 1'b0;
      bits_left_q <= '0;
      wr_addr_q   <= '0;
      rd_addr_q   <= '0;
      word_q      <= '0;
      word_left_q <= '0;
      pend_q      <= 1'b0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running_q   <= 1'b1;
        bits_left_q <= nbits;
        wr_addr_q   <= dst;
        rd_addr_q   <= src;
        word_left_q <= '0;
        pend_q      <= 1'b0;
      end else if (running_q) begin
        if (wr) wr_addr_q <= wr_addr_q + AW'(1);
        if (rd) begin
          pend_q    <= 1'b1;
          rd_addr_q <= rd_addr_q + AW'(1);
        end
        if (pend_q && rvalid) begin
          word_q      <= rdata;
          word_left_q <= 7'd64;
          pend_q      <= 1'b0;
        end else if (take) begin
          word_q      <= word_q >> 1;
          word_left_q <= word_left_q - 7'd1;
        end
        if (take) bits_left_q <= bits_left_q - 16'd1;
        if (bits_left_q == 0 && pk_empty) begin
          running_q <= 1'b0;
          done      <= 1'b1;
        end
      end
    end
  end

endmodule
