// sha3_unit: SHA3-256, SHA3-512 and SHAKE-128 on one serial Keccak sponge.
//
// A single Keccak-f[1600] state register and one round of logic
// (keccak_round) are shared by the three functions; a permutation takes 24
// cycles, one round per cycle. The functions differ only in the rate
// (136, 72 and 168 bytes, i.e. 17, 9 and 21 lanes), the domain-separation
// padding byte (0x06 for SHA3, 0x1F for SHAKE) and the output length.
//
// Operation: the message of `in_len` bytes starting at word `src` is
// absorbed one rate block at a time. Within a block, lane k is XORed with
// memory word src + (block offset)/8 + k, bytes beyond the message masked
// off; reads are issued back to back and their data is taken as it returns
// through the pipeline register, so a block costs about rate/8 + 2 cycles
// before its permutation. The final block gets the pad10*1 padding: the
// domain byte at byte in_len and 0x80 in the last byte of the rate.
//
// Squeezing: when a permutation ends, the rate lanes are copied into an
// output buffer (21 lanes) and, if more output is wanted, the next
// permutation starts in the same cycle. The buffer drains to memory from
// word `dst`, one lane per cycle, while that permutation runs: 21 writes fit
// in its 24 cycles, so SHAKE-128 delivers 1344 bits every 24 cycles. Output
// length: 4 words for SHA3-256, 8 for SHA3-512, `out_words` for SHAKE-128.
// `done` pulses the cycle after the last write.
//
// The single serial sponge follows the architecture, as does the output rate
// of under 28 cycles per 1344 bits; the output buffer that achieves it, the
// lane order and the handshake are this design's.
module sha3_unit
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  sha_mode_t     mode,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   in_len,     // bytes
  input  logic [15:0]   out_words,  // SHAKE-128 only
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid
);

  typedef enum logic [2:0] {S_IDLE, S_ABSORB, S_PERM, S_DRAIN} state_t;
  state_t            state_q;
  sha_mode_t         mode_q;
  logic [24:0][63:0] st_q, st_round;
  logic [4:0]        rnd_q;
  logic [15:0]       len_q, off_q;      // message bytes, offset of current block
  logic [15:0]       out_left_q;
  logic [AW-1:0]     rd_addr_q, wr_addr_q;
  logic [4:0]        lane_q, issue_q;   // lane being absorbed / reads issued
  logic              squeezing_q;
  logic [20:0][63:0] out_q;             // output buffer, one rate of lanes
  logic [4:0]        drain_lane_q, drain_cnt_q, n_out;
  logic              wr;

  logic [4:0]  rate;
  logic [7:0]  dom;
  logic [15:0] rate_bytes, blk_bytes_left;
  logic [4:0]  n_mem;                   // lanes of this block that hold message bytes
  logic        final_blk, lane_mem, rd, absorb_step;
  logic [15:0] lane_byte;
  logic [63:0] lane_data, pad;

  keccak_round u_round (.state_in(st_q), .rnd(rnd_q), .state_out(st_round));

  always_comb begin
    unique case (mode_q)
      SHA_256:  begin rate = 5'd17; dom = 8'h06; end
      SHA_512:  begin rate = 5'd9;  dom = 8'h06; end
      default:  begin rate = 5'd21; dom = 8'h1F; end
    endcase
    rate_bytes     = 16'(rate) << 3;
    blk_bytes_left = len_q - off_q;
    final_blk      = blk_bytes_left < rate_bytes;
    n_mem          = final_blk ? 5'((blk_bytes_left + 16'd7) >> 3) : rate;
    lane_byte      = off_q + (16'(lane_q) << 3);
    lane_mem       = lane_q < n_mem;
    rd             = (state_q == S_ABSORB) && (issue_q < n_mem);
    absorb_step    = (state_q == S_ABSORB) && (!lane_mem || rvalid);
    n_out          = (out_left_q > 16'(rate)) ? rate : 5'(out_left_q);
    wr             = drain_cnt_q != 5'd0;

    // Message bytes of this lane, later bytes masked off.
    lane_data = '0;
    for (int j = 0; j < 8; j++)
      if (lane_mem && (lane_byte + 16'(j) < len_q)) lane_data[8*j +: 8] = rdata[8*j +: 8];
    // pad10*1: domain byte right after the message, 0x80 at the end of the rate.
    pad = '0;
    if (final_blk) begin
      for (int j = 0; j < 8; j++)
        if (lane_byte + 16'(j) == len_q) pad[8*j +: 8] = dom;
      if (lane_q == rate - 5'd1) pad[63:56] = pad[63:56] ^ 8'h80;
    end
  end

  always_comb begin
    mem_req = '0;
    if (rd) begin
      mem_req.en   = 1'b1;
      mem_req.addr = rd_addr_q;
    end else if (wr) begin
      mem_req.en    = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = wr_addr_q;
      mem_req.wdata = out_q[(drain_lane_q < 5'd21) ? drain_lane_q : 5'd0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      mode_q      <= SHA_256;
      st_q        <= '0;
      rnd_q       <= '0;
      len_q       <= '0;
      off_q       <= '0;
      out_left_q  <= '0;
      rd_addr_q   <= '0;
      wr_addr_q   <= '0;
      lane_q      <= '0;
      issue_q     <= '0;
      squeezing_q <= 1'b0;
      out_q       <= '0;
      drain_lane_q <= '0;
      drain_cnt_q <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      // Output drain, running alongside the permutation.
      if (wr) begin
        wr_addr_q    <= wr_addr_q + AW'(1);
        drain_lane_q <= drain_lane_q + 5'd1;
        drain_cnt_q  <= drain_cnt_q - 5'd1;
      end
      case (state_q)
        S_IDLE: if (start) begin
          mode_q      <= mode;
          st_q        <= '0;
          len_q       <= in_len;
          off_q       <= '0;
          rd_addr_q   <= src;
          wr_addr_q   <= dst;
          lane_q      <= '0;
          issue_q     <= '0;
          squeezing_q <= 1'b0;
          unique case (mode)
            SHA_256: out_left_q <= 16'd4;
            SHA_512: out_left_q <= 16'd8;
            default: out_left_q <= out_words;
          endcase
          state_q <= S_ABSORB;
        end
        S_ABSORB: begin
          if (rd) begin
            issue_q   <= issue_q + 5'd1;
            rd_addr_q <= rd_addr_q + AW'(1);
          end
          if (absorb_step) begin
            st_q[lane_q] <= st_q[lane_q] ^ lane_data ^ pad;
            if (lane_q == rate - 5'd1) begin
              lane_q  <= '0;
              rnd_q   <= '0;
              state_q <= S_PERM;
            end else begin
              lane_q <= lane_q + 5'd1;
            end
          end
        end
        S_PERM: begin
          st_q  <= st_round;
          rnd_q <= rnd_q + 5'd1;
          if (rnd_q == 5'd23) begin
            lane_q  <= '0;
            issue_q <= '0;
            if (squeezing_q || final_blk) begin
              squeezing_q  <= 1'b1;
              out_q        <= st_round[20:0];
              drain_lane_q <= '0;
              drain_cnt_q  <= n_out;
              out_left_q   <= out_left_q - 16'(n_out);
              if (out_left_q > 16'(rate)) rnd_q   <= '0;     // next permutation at once
              else                        state_q <= S_DRAIN;
            end else begin
              off_q   <= off_q + rate_bytes;
              state_q <= S_ABSORB;
            end
          end
        end
        S_DRAIN: if (drain_cnt_q <= 5'd1) begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Reads (absorbing) and output writes (squeezing) never share a cycle.
  a_port: assert property (@(posedge clk) disable iff (!rst_n) !(rd && wr));

endmodule
