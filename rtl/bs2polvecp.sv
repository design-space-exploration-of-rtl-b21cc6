// bs2polvecp: BS2POLVECp building block. Converts a byte string of packed
// EP = 10-bit coefficients (a public key b or ciphertext b') into a
// polynomial vector in the design's working format, 13-bit packed
// coefficients, so that the multiplier can use it as its public operand.
//
// Input: `ncoef` coefficients (a multiple of 64) from word `src`, streamed
// through the shared shift buffer, 10 bits popped per coefficient. Output:
// the same coefficients zero-extended to 13 bits, packed from word `dst`
// (ncoef*13/64 words). One coefficient per cycle when data is there, also
// while a full output word is written; the write goes first on the
// single-port memory and reads wait. 256 coefficients take about 263 cycles. `done` pulses
// once at the end. The function follows the architecture; the 13-bit target
// format is this design's choice.
module bs2polvecp
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

  assign wr   = running_q && pk_full;
  assign take = running_q && (coef_left_q != 0) && (sbuf_rsp.count >= SBUF_CW'(EP));

  stream_reader u_rd (
    .clk, .rst_n, .start,
    .base(src), .nwords((ncoef >> 6) * 16'(EP)),
    .grant(!wr), .sbuf_count(sbuf_rsp.count),
    .rd_valid, .rd_addr, .rvalid, .rdata,
    .push(rd_push), .push_data(rd_data), .busy(rd_busy)
  );

  word_packer #(.IW(EQ)) u_pk (
    .clk, .rst_n, .clear(start),
    .push(take), .data(EQ'(sbuf_rsp.data[EP-1:0])), .pop(wr),
    .full(pk_full), .empty(pk_empty), .word(pk_word)
  );

  always_comb begin
    sbuf_req           = '0;
    sbuf_req.push      = rd_push;
    sbuf_req.push_bits = 7'd64;
    sbuf_req.push_data = rd_data;
    sbuf_req.pop       = take;
    sbuf_req.pop_bits  = 7'(EP);
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
