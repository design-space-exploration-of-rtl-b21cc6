// cmov_unit: constant-time conditional move (CMOV) building block. Writes
// `nwords` words to `dst`, each taken from `src0` (the decrypted session
// key material) when `cond` is low and from `src1` (the pseudo-random
// string z) when `cond` is high. `cond` is the Verify unit's fail flag.
//
// Both sources are read for every word whatever `cond` is, so the memory
// access pattern and the cycle count do not reveal the comparison result.
// Schedule per word: read src0, read src1, wait for both, write dst (five
// cycles). `done` pulses once at the end.
module cmov_unit
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          cond,
  input  logic [AW-1:0] src0,
  input  logic [AW-1:0] src1,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   nwords,
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid
);

  typedef enum logic [2:0] {S_IDLE, S_RDA, S_RDB, S_WAIT, S_WR} state_t;
  state_t        state_q;
  logic [15:0]   left_q;
  logic [AW-1:0] a_addr_q, b_addr_q, wr_addr_q;
  logic [W-1:0]  a_q, sel_q;
  logic          have_a_q, cond_q;

  always_comb begin
    mem_req = '0;
    case (state_q)
      S_RDA: begin mem_req.en = 1'b1; mem_req.addr = a_addr_q; end
      S_RDB: begin mem_req.en = 1'b1; mem_req.addr = b_addr_q; end
      S_WR: begin
        mem_req.en    = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = wr_addr_q;
        mem_req.wdata = sel_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      left_q    <= '0;
      a_addr_q  <= '0;
      b_addr_q  <= '0;
      wr_addr_q <= '0;
      a_q       <= '0;
      sel_q     <= '0;
      have_a_q  <= 1'b0;
      cond_q    <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          left_q    <= nwords;
          a_addr_q  <= src0;
          b_addr_q  <= src1;
          wr_addr_q <= dst;
          cond_q    <= cond;
          have_a_q  <= 1'b0;
          if (nwords == 0) done    <= 1'b1;
          else             state_q <= S_RDA;
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
            // Mask select: the same logic runs whichever source is taken.
            sel_q    <= (a_q & {W{!cond_q}}) | (rdata & {W{cond_q}});
            state_q  <= S_WR;
          end
        end
        S_WR: begin
          wr_addr_q <= wr_addr_q + AW'(1);
          left_q    <= left_q - 16'd1;
          if (left_q == 16'd1) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_RDA;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
