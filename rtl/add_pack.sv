// add_pack: AddPack building block. It has two modes, chosen by `dec`.
// Encryption (dec = 0): for each coefficient v of the inner product v'
// (mod p) and the matching message bit m it computes
//   c = ((v + h1 - 2^(EP-1) * m) mod p) >> (EP - ET)
// with h1 = 4, and packs the ET = 4-bit results into a byte string: the
// message-carrying part c_m of a SABER ciphertext.
// Decryption (dec = 1): the second input is c_m itself (4 bits per
// coefficient) and the block recovers one message bit per coefficient,
//   m' = ((v - 2^(EP-ET) * c_m + h2) mod p) >> (EP - 1),  h2 = 228,
// packed 64 bits to a word. Both are "coefficient-wise addition with a
// constant followed by the message, then packing"; folding the decryption
// step into the same block is this design's choice.
//
// Inputs: `ncoef` coefficients (a multiple of 64) in 13-bit packed form from
// word `src0` (only the low EP bits are used), streamed through the shared
// shift buffer; the message (or c_m) as a byte string from word `src1`,
// fetched one 64-bit word at a time into a local register and used from
// bit 0. Output: ncoef*4/64 words (ncoef/64 when decrypting) from `dst`. Memory port priority: output write,
// then message fetch, then the stream reader. One coefficient per cycle
// when the data is ready, apart from a stall of about three cycles at each
// 64-bit fetch of the second input (4 fetches when encrypting, 16 when
// decrypting: 276 and 311 cycles for 256 coefficients); `done` pulses once
// at the end. The operation is the
// architecture's; the formats and the port order are this design's.
// The low bits of both sums are dropped by the rounding itself, so lint
// reports them as unused; that is intended.
module add_pack
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src0,
  input  logic [AW-1:0] src1,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   ncoef,
  input  logic          dec,
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid,
  output sbuf_req_t     sbuf_req,
  input  sbuf_rsp_t     sbuf_rsp
);

  logic          running_q;
  logic [15:0]   coef_left_q;
  logic [AW-1:0] wr_addr_q, msg_addr_q;
  logic [W-1:0]  msg_q;
  logic [6:0]    msg_left_q;
  logic          msg_pend_q;
  logic [1:0]    msg_tag_q;
  logic          wr, take, msg_rd;
  logic          pk_full, pk_empty;
  logic [63:0]   pk_word;
  logic          rd_valid, rd_busy, rd_push;
  logic [AW-1:0] rd_addr;
  logic [W-1:0]  rd_data;
  logic [EP-1:0] v, c_full, m_full;
  logic          dec_q;
  logic          pk4_full, pk4_empty, pk1_full, pk1_empty;
  logic [63:0]   pk4_word, pk1_word;
  logic [6:0]    msg_step;

  localparam int unsigned H2 = (1 << (EP - 2)) - (1 << (EP - ET - 1)) + (1 << (EQ - EP - 1));

  assign wr     = running_q && pk_full;
  assign msg_rd = running_q && !wr && (coef_left_q != 0) && (msg_left_q == 0) && !msg_pend_q;
  assign take   = running_q && (coef_left_q != 0) && (msg_left_q != 0) &&
                  (sbuf_rsp.count >= SBUF_CW'(EQ));

  stream_reader u_rd (
    .clk, .rst_n, .start,
    .base(src0), .nwords((ncoef >> 6) * 16'(EQ)),
    .grant(!wr && !msg_rd), .sbuf_count(sbuf_rsp.count),
    .rd_valid, .rd_addr, .rvalid, .rdata,
    .push(rd_push), .push_data(rd_data), .busy(rd_busy)
  );

  assign v      = sbuf_rsp.data[EP-1:0];
  assign c_full = v + EP'(H1) - (EP'(msg_q[0]) << (EP - 1));
  assign m_full = v + EP'(H2) - (EP'(msg_q[ET-1:0]) << (EP - ET));
  assign msg_step = dec_q ? 7'(ET) : 7'd1;

  word_packer #(.IW(ET)) u_pk (
    .clk, .rst_n, .clear(start),
    .push(take && !dec_q), .data(c_full[EP-1 -: ET]), .pop(wr && !dec_q),
    .full(pk4_full), .empty(pk4_empty), .word(pk4_word)
  );

  word_packer #(.IW(1)) u_pk_dec (
    .clk, .rst_n, .clear(start),
    .push(take && dec_q), .data(m_full[EP-1]), .pop(wr && dec_q),
    .full(pk1_full), .empty(pk1_empty), .word(pk1_word)
  );

  assign pk_full  = dec_q ? pk1_full  : pk4_full;
  assign pk_empty = dec_q ? pk1_empty : pk4_empty;
  assign pk_word  = dec_q ? pk1_word  : pk4_word;

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
    end else if (msg_rd) begin
      mem_req.en   = 1'b1;
      mem_req.addr = msg_addr_q;
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
      msg_addr_q  <= '0;
      msg_q       <= '0;
      msg_left_q  <= '0;
      msg_pend_q  <= 1'b0;
      msg_tag_q   <= '0;
      dec_q       <= 1'b0;
      done        <= 1'b0;
    end else begin
      done      <= 1'b0;
      msg_tag_q <= {msg_tag_q[0], msg_rd};
      if (start) begin
        running_q   <= 1'b1;
        coef_left_q <= ncoef;
        wr_addr_q   <= dst;
        msg_addr_q  <= src1;
        msg_left_q  <= '0;
        msg_pend_q  <= 1'b0;
        dec_q       <= dec;
      end else if (running_q) begin
        if (wr) wr_addr_q <= wr_addr_q + AW'(1);
        if (msg_rd) begin
          msg_pend_q <= 1'b1;
          msg_addr_q <= msg_addr_q + AW'(1);
        end
        if (rvalid && msg_tag_q[1]) begin
          msg_q      <= rdata;
          msg_left_q <= 7'd64;
          msg_pend_q <= 1'b0;
        end else if (take) begin
          msg_q      <= msg_q >> msg_step;
          msg_left_q <= msg_left_q - msg_step;
        end
        if (take) coef_left_q <= coef_left_q - 16'd1;
        if (coef_left_q == 0 && pk_empty && !rd_busy) begin
          running_q <= 1'b0;
          done      <= 1'b1;
        end
      end
    end
  end

endmodule
