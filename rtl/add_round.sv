// add_round: AddRound building block. Adds the rounding constant
// h1 = 2^(EQ-EP-1) = 4 to each 13-bit coefficient and keeps the top EP = 10
// bits: out = ((x + h1) mod q) >> (EQ - EP). This is the rounding of the
// product A^T s (or A s') in SABER key generation and encryption.
//
// Input: `ncoef` coefficients (a multiple of 64) in 13-bit packed form from
// word `src`, streamed through the shared shift buffer (13 bits popped per
// coefficient). Output: 10-bit packed coefficients written from word `dst`
// (ncoef*10/64 words). One coefficient per cycle while the buffer holds 13
// bits, also while a full packer word is being written (the packer pops and
// pushes in the same cycle); the write has priority over reads on the single
// memory port. 256 coefficients take about 263 cycles.
// `done` pulses for one cycle at the end. The operation follows the
// architecture; the packed formats and the handshake are this design's.
// The low three bits of the sum are dropped by the rounding itself, so lint
// reports them as unused; that is intended.
module add_round
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   ncoef,
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid,
  output sbuf_req_t     sbuf_req,
  input  sbuf_rsp_t     sbuf_rsp
);

  logic          running_q;
  logic [15:0]   coef_left_q;
  logic [AW-1:0] wr_addr_q;
  logic          wr, take;
  logic          pk_full, pk_empty;
  logic [63:0]   pk_word;
  logic          rd_valid, rd_busy, rd_push;
  logic [AW-1:0] rd_addr;
  logic [W-1:0]  rd_data;
  logic [EQ-1:0] sum;
  logic [EP-1:0] rounded;

  assign wr   = running_q && pk_full;
  assign take = running_q && (coef_left_q != 0) && (sbuf_rsp.count >= SBUF_CW'(EQ));

  stream_reader u_rd (
    .clk, .rst_n, .start,
    .base(src), .nwords((ncoef >> 6) * 16'(EQ)),
    .grant(!wr), .sbuf_count(sbuf_rsp.count),
    .rd_valid, .rd_addr, .rvalid, .rdata,
    .push(rd_push), .push_data(rd_data), .busy(rd_busy)
  );

  assign sum     = sbuf_rsp.data[EQ-1:0] + EQ'(H1);
  assign rounded = sum[EQ-1 -: EP];

  word_packer #(.IW(EP)) u_pk (
    .clk, .rst_n, .clear(start),
    .push(take), .data(rounded), .pop(wr),
    .full(pk_full), .empty(pk_empty), .word(pk_word)
  );

  always_comb begin
    sbuf_req           = '0;
    sbuf_req.push      = rd_push;
    sbuf_req.push_bits = 7'd64;
    sbuf_req.push_data = rd_data;
    sbuf_req.pop       = take;
    sbuf_req.pop_bits  = 7'(EQ);
    mem_req            = '0;
    if (wr) begin
      mem_req.en    = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = wr_addr_q;
      mem_req.wdata = pk_word;
    end else if (rd_valid) begin
      mem_req.en   = 1'b1;
      mem_req.addr = rd_addr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q   <= 1'b0;
      coef_left_q <= '0;
      wr_addr_q   <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running_q   <= 1'b1;
        coef_left_q <= ncoef;
        wr_addr_q   <= dst;
      end else if (running_q) begin
        if (take) coef_left_q <= coef_left_q - 16'd1;
        if (wr)   wr_addr_q   <= wr_addr_q + AW'(1);
        if (coef_left_q == 0 && pk_empty && !rd_busy) begin
          running_q <= 1'b0;
          done      <= 1'b1;
        end
      end
    end
  end

endmodule
