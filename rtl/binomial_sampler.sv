// binomial_sampler: centered binomial sampler for SABER (mu = 8).
//
// Each secret coefficient takes one byte r of pseudo-random input:
// s = HW(r[3:0]) - HW(r[7:4]), a value in [-4, 4]. This is the SABER
// reference sampler for mu = 8 (bytes used in order, bit 0 first). The
// coefficients are stored as 4-bit two's complement values, 16 per 64-bit
// word, the operand format of the multiplier's secret input.
//
// Input: `ncoef` coefficients (a multiple of 16) worth of bytes from word
// `src`. Output: ncoef/16 words from `dst`. Per output word the block reads
// two input words back to back, waits for them to pass the pipeline register
// (the register sits between memory and sampler), and writes the result:
// five cycles per output word. `done` pulses once at the end. The 4-bit
// storage format and the schedule are this design's choices.
module binomial_sampler
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
  input  logic          rvalid
);

  typedef enum logic [2:0] {S_IDLE, S_RD0, S_RD1, S_WAIT, S_WR} state_t;
  state_t        state_q;
  logic [15:0]   left_q;  // output words still to write
  logic [AW-1:0] rd_addr_q, wr_addr_q;
  logic [31:0]   lo_q;     // coefficients 0..7 of the current output word
  logic [63:0]   out_q;
  logic          have_lo_q;
  logic [31:0]   sampled;

  // Eight coefficients from one 64-bit word of random bytes.
  function automatic logic [31:0] sample_word(input logic [63:0] r);
    logic [31:0] s;
    for (int j = 0; j < 8; j++) begin
      logic [3:0] a, b;
      a = 4'(r[8*j]) + 4'(r[8*j+1]) + 4'(r[8*j+2]) + 4'(r[8*j+3]);
      b = 4'(r[8*j+4]) + 4'(r[8*j+5]) + 4'(r[8*j+6]) + 4'(r[8*j+7]);
      s[4*j +: 4] = a - b;
    end
    return s;
  endfunction

  assign sampled = sample_word(rdata);

  always_comb begin
    mem_req = '0;
    case (state_q)
      S_RD0, S_RD1: begin mem_req.en = 1'b1; mem_req.addr = rd_addr_q; end
      S_WR: begin
        mem_req.en    = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = wr_addr_q;
        mem_req.wdata = out_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      left_q    <= '0;
      rd_addr_q <= '0;
      wr_addr_q <= '0;
      lo_q      <= '0;
      out_q     <= '0;
      have_lo_q <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          left_q    <= ncoef >> 4;
          rd_addr_q <= src;
          wr_addr_q <= dst;
          have_lo_q <= 1'b0;
          if ((ncoef >> 4) == 0) done    <= 1'b1;
          else                   state_q <= S_RD0;
        end
        S_RD0: begin
          rd_addr_q <= rd_addr_q + AW'(1);
          state_q   <= S_RD1;
        end
        S_RD1: begin
          rd_addr_q <= rd_addr_q + AW'(1);
          state_q   <= S_WAIT;
        end
        S_WAIT: if (rvalid) begin
          if (!have_lo_q) begin
            lo_q      <= sampled;
            have_lo_q <= 1'b1;
          end else begin
            out_q     <= {sampled, lo_q};
            have_lo_q <= 1'b0;
            state_q   <= S_WR;
          end
        end
        S_WR: begin
          wr_addr_q <= wr_addr_q + AW'(1);
          left_q    <= left_q - 16'd1;
          if (left_q == 16'd1) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_RD0;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
