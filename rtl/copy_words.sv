// copy_words: CopyWords building block. Copies `nwords` 64-bit words from
// word address `src` to word address `dst`.
//
// The RegFiles are single-port, so a word is read, held until it returns
// through the pipeline register, and then written: four cycles per word
// (RD, two cycles of read latency, WR). This sequential schedule is why
// CopyWords takes more cycles on the single-port memory than on a dual-port
// one. `done` pulses for one cycle at the end.
module copy_words
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [15:0]   nwords,
  output logic          done,
  output mem_req_t      mem_req,
  input  logic [W-1:0]  rdata,
  input  logic          rvalid
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WAIT, S_WR} state_t;
  state_t        state_q;
  logic [15:0]   left_q;
  logic [AW-1:0] rd_addr_q, wr_addr_q;
  logic [W-1:0]  data_q;

  always_comb begin
    mem_req = '0;
    case (state_q)
      S_RD: begin
        mem_req.en   = 1'b1;
        mem_req.addr = rd_addr_q;
      end
      S_WR: begin
        mem_req.en    = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = wr_addr_q;
        mem_req.wdata = data_q;
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
      data_q    <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          left_q    <= nwords;
          rd_addr_q <= src;
          wr_addr_q <= dst;
          if (nwords == 0) done    <= 1'b1;
          else             state_q <= S_RD;
        end
        S_RD: begin
          rd_addr_q <= rd_addr_q + AW'(1);
          state_q   <= S_WAIT;
        end
        S_WAIT: if (rvalid) begin
          data_q  <= rdata;
          state_q <= S_WR;
        end
        S_WR: begin
          wr_addr_q <= wr_addr_q + AW'(1);
          left_q    <= left_q - 16'd1;
          if (left_q == 16'd1) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_RD;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
