// verify_unit: Verify building block. Compares two byte strings of `nwords`
// 64-bit words, at `src0` and `src1`, in constant time: every word pair is
// read and XORed, and the OR of all differences is kept, with no early exit.
//
// `fail` is high when the strings differ. It is updated with `done` and held
// until the next comparison starts, so that CMOV can use it. Schedule per
// word: read A, read B, then both return through the pipeline register
// (four cycles per pair). In SABER decapsulation this compares the received
// ciphertext with the re-encrypted one.
module verify_unit
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src0,
  input  logic [AW-1:0] src1,
  input  logic [15:0]   nwords,
  output logic          done,
  output logic          fail,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid
);

  typedef enum logic [1:0] {S_IDLE, S_RDA, S_RDB, S_WAIT} state_t;
  state_t        state_q;
  logic [15:0]   left_q;
  logic [AW-1:0] a_addr_q, b_addr_q;
  logic [W-1:0]  a_q;
  logic          have_a_q, diff_q;

  always_comb begin
    mem_req = '0;
    if (state_q == S_RDA) begin
      mem_req.en   = 1'b1;
      mem_req.addr = a_addr_q;
    end else if (state_q == S_RDB) begin
      mem_req.en   = 1'b1;
      mem_req.addr = b_addr_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      left_q   <= '0;
      a_addr_q <= '0;
      b_addr_q <= '0;
      a_q      <= '0;
      have_a_q <= 1'b0;
      diff_q   <= 1'b0;
      fail     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          left_q   <= nwords;
          a_addr_q <= src0;
          b_addr_q <= src1;
          diff_q   <= 1'b0;
          have_a_q <= 1'b0;
          if (nwords == 0) begin
            fail <= 1'b0;
            done <= 1'b1;
          end else begin
            state_q <= S_RDA;
          end
        end
        S_RDA: begin
          a_addr_q <= a_addr_q + AW'(1);
          state_q  <= S_RDB;
        end
        S_RDB: begin
          b_addr_q <= b_addr_q + AW'(1);
          state_q  <= S_WAIT;
        end
        S_WAIT: if (rvalid) begin
          if (!have_a_q) begin
            a_q      <= rdata;
            have_a_q <= 1'b1;
          end else begin
            have_a_q <= 1'b0;
            left_q   <= left_q - 16'd1;
            if (left_q == 16'd1) begin
              fail    <= diff_q | (|(a_q ^ rdata));
              done    <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              diff_q  <= diff_q | (|(a_q ^ rdata));
              state_q <= S_RDA;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
