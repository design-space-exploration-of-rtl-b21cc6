// poly_multiplier: polynomial vector-vector multiplier in
// Z_q[x]/(x^N + 1), q = 2^13, N = 256, built as a centralized schoolbook
// multiplier with N multiply-accumulate units.
//
// For one polynomial pair a * s the block holds s (small secret
// coefficients, -4..4) in an N-entry register and the accumulator in N
// 13-bit registers. In cycle i it takes coefficient a_i of the public
// polynomial and adds a_i * (x^i * s mod x^N+1) to the accumulator: every
// MAC unit j adds a_i * s'_j, then s' is rotated by one place with the
// coefficient that wraps around negated (the negacyclic reduction). A full
// product thus takes N = 256 cycles. For a vector product sum_k a_k * s_k
// the accumulator is not cleared between the `npoly` pairs. As the secret
// coefficients are at most 4 in magnitude, each MAC is a 13x3-bit product
// and a conditional negation rather than a full multiplier.
//
// Memory formats: public polynomials in 13-bit packed form, N*13/64 words
// each, from `src0` and then every `a_stride` words (0 selects N*13/64, i.e.
// consecutive polynomials; a matrix stored row by row is walked by column
// with a stride of three polynomials), streamed through the shared shift
// buffer; secrets as
// 4-bit two's complement, N/16 words each, from `src1`. Result: 13-bit packed,
// N*13/64 words from `dst`. Per pair: N/16 reads to load s, then N MAC
// cycles (one stall cycle whenever the buffer lacks 13 bits); then the result
// is written out, four coefficients (52 bits) entering the output packer per
// cycle, so the write-back of N*13/64 words takes about N/4 + N*13/64 cycles.
// `done` pulses once at the end. The schoolbook structure and
// the 256-cycle product follow the architecture; the load and write-back
// schedule and the formats are this design's.
module poly_multiplier
  import saber_pkg::*;
#(
  parameter int unsigned NC = N
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src0,
  input  logic [AW-1:0] src1,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   npoly,
  input  logic [AW-1:0] a_stride,
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid,
  output sbuf_req_t     sbuf_req,
  input  sbuf_rsp_t     sbuf_rsp
);

  localparam int unsigned A_WORDS = NC * EQ / W;
  localparam int unsigned S_WORDS = NC / 16;
  localparam int unsigned CW      = $clog2(NC + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MAC, S_OUT} state_t;
  state_t        state_q;
  logic [EQ-1:0] acc_q [NC];
  logic [3:0]    s_q   [NC];
  logic [15:0]   poly_left_q;
  logic [AW-1:0] a_base_q, s_addr_q, wr_addr_q, a_step_q;
  logic [CW-1:0] cnt_q;       // s words issued / MAC step / coefficients written
  logic [CW-1:0] s_recv_q;
  logic [1:0]    s_tag_q;
  logic          s_rd, rd_start, mac, wr, out_push;
  logic          pk_full, pk_empty;
  logic [63:0]   pk_word;
  logic          rd_valid, rd_busy, rd_push;
  logic [AW-1:0] rd_addr;
  logic [W-1:0]  rd_data;
  logic [EQ-1:0] a_coef;

  assign wr       = (state_q == S_OUT) && pk_full;
  assign s_rd     = (state_q == S_LOAD) && (cnt_q < CW'(S_WORDS));
  assign mac      = (state_q == S_MAC) && (sbuf_rsp.count >= SBUF_CW'(EQ));
  assign out_push = (state_q == S_OUT) && (cnt_q < CW'(NC)) && !pk_full;
  assign a_coef   = sbuf_rsp.data[EQ-1:0];

  stream_reader u_rd (
    .clk, .rst_n, .start(rd_start),
    .base(a_base_q), .nwords(16'(A_WORDS)),
    .grant(!s_rd && !wr), .sbuf_count(sbuf_rsp.count),
    .rd_valid, .rd_addr, .rvalid, .rdata,
    .push(rd_push), .push_data(rd_data), .busy(rd_busy)
  );

  word_packer #(.IW(4*EQ)) u_pk (
    .clk, .rst_n, .clear(start),
    .push(out_push), .data({acc_q[3], acc_q[2], acc_q[1], acc_q[0]}), .pop(wr),
    .full(pk_full), .empty(pk_empty), .word(pk_word)
  );

  // a * s mod 2^EQ for a small signed s in [-4, 4].
  function automatic logic [EQ-1:0] small_mul(input logic [EQ-1:0] a, input logic [3:0] s);
    logic [2:0]    mag;
    logic [EQ-1:0] p;
    mag = s[3] ? 3'(-s) : s[2:0];
    p   = EQ'(a * mag);
    return s[3] ? EQ'(-p) : p;
  endfunction

  always_comb begin
    sbuf_req           = '0;
    sbuf_req.push      = rd_push;
    sbuf_req.push_bits = 7'd64;
    sbuf_req.push_data = rd_data;
    sbuf_req.pop       = mac;
    sbuf_req.pop_bits  = 7'(EQ);
    mem_req            = '0;
    if (wr) begin
      mem_req.en    = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = wr_addr_q;
      mem_req.wdata = pk_word;
    end else if (s_rd) begin
      mem_req.en   = 1'b1;
      mem_req.addr = s_addr_q;
    end else if (rd_valid) begin
      mem_req.en   = 1'b1;
      mem_req.addr = rd_addr;
    end
  end

  assign rd_start = (state_q == S_LOAD) && (cnt_q == '0) && (s_recv_q == '0) && !s_tag_q[0] && !s_tag_q[1];

  // Secret register and accumulator.
  always_ff @(posedge clk) begin
    if (start) begin
      for (int j = 0; j < NC; j++) acc_q[j] <= '0;
    end else if (state_q == S_LOAD && rvalid && s_tag_q[1]) begin
      for (int j = 0; j < NC - 16; j++) s_q[j] <= s_q[j+16];
      for (int k = 0; k < 16; k++) s_q[NC-16+k] <= rdata[4*k +: 4];
    end else if (mac) begin
      for (int j = 0; j < NC; j++) acc_q[j] <= acc_q[j] + small_mul(a_coef, s_q[j]);
      s_q[0] <= 4'(-s_q[NC-1]);
      for (int j = 1; j < NC; j++) s_q[j] <= s_q[j-1];
    end else if (out_push) begin
      for (int j = 0; j < NC - 4; j++) acc_q[j] <= acc_q[j+4];
      for (int j = NC - 4; j < NC; j++) acc_q[j] <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      poly_left_q <= '0;
      a_base_q    <= '0;
      a_step_q    <= '0;
      s_addr_q    <= '0;
      wr_addr_q   <= '0;
      cnt_q       <= '0;
      s_recv_q    <= '0;
      s_tag_q     <= '0;
      done        <= 1'b0;
    end else begin
      done    <= 1'b0;
      s_tag_q <= {s_tag_q[0], s_rd};
      case (state_q)
        S_IDLE: if (start) begin
          poly_left_q <= npoly;
          a_base_q    <= src0;
          a_step_q    <= (a_stride == '0) ? AW'(A_WORDS) : a_stride;
          s_addr_q    <= src1;
          wr_addr_q   <= dst;
          cnt_q       <= '0;
          s_recv_q    <= '0;
          state_q     <= (npoly == 0) ? S_OUT : S_LOAD;
        end
        S_LOAD: begin
          if (s_rd) begin
            cnt_q    <= cnt_q + CW'(1);
            s_addr_q <= s_addr_q + AW'(1);
          end
          if (rvalid && s_tag_q[1]) begin
            if (s_recv_q == CW'(S_WORDS - 1)) begin
              s_recv_q <= '0;
              cnt_q    <= '0;
              state_q  <= S_MAC;
            end else begin
              s_recv_q <= s_recv_q + CW'(1);
            end
          end
        end
        S_MAC: if (mac) begin
          if (cnt_q == CW'(NC - 1)) begin
            cnt_q       <= '0;
            poly_left_q <= poly_left_q - 16'd1;
            a_base_q    <= a_base_q + a_step_q;
            state_q     <= (poly_left_q == 16'd1) ? S_OUT : S_LOAD;
          end else begin
            cnt_q <= cnt_q + CW'(1);
          end
        end
        S_OUT: begin
          if (out_push) cnt_q <= cnt_q + CW'(4);
          if (wr)       wr_addr_q <= wr_addr_q + AW'(1);
          if (cnt_q == CW'(NC) && pk_empty && !rd_busy) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
