// fsm_controller: the FSM controller of the coprocessor.
//
// Instructions come from a program memory outside the core over a
// valid/ready port. The controller accepts one when idle, latches it
// (`cur`), and one cycle later pulses the start line of the building block
// named by its opcode, clearing the shared shift buffer at the same time and
// pointing the buffer at that block. While the block runs, the controller
// routes that block's memory requests to the memory manager; when the
// block's done line rises it returns to idle, pulses `op_done` and reports
// the instruction's cycle count in `last_cycles` (from the start pulse to
// done, inclusive). While idle, the host port `host_req` reaches the memory,
// which is how inputs are loaded and results read back.
//
// Instruction fields (instr_t): src0, src1 and dst are word addresses; len
// and len2 are counts whose unit depends on the opcode (bytes for the hash
// input, output words for SHAKE-128, coefficients, polynomials, bits or
// words, or a stride or mode flag). The architecture keeps an ISA and an external program memory but
// does not publish the encoding; this encoding is the design's own.
module fsm_controller
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          instr_valid,
  input  instr_t        instr,
  output logic          instr_ready,
  output logic          op_done,
  output logic [15:0]   last_cycles,
  output instr_t        cur,
  output logic [15:0]   start_vec,
  input  logic [15:0]   done_vec,
  input  mem_req_t      unit_req [16],
  input  mem_req_t      host_req,
  output mem_req_t      mem_req,
  output logic          sbuf_clear,
  output logic [1:0]    sbuf_sel
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} state_t;
  state_t      state_q;
  logic [15:0] cyc_q;

  assign instr_ready = (state_q == S_IDLE);
  assign mem_req     = (state_q == S_IDLE) ? host_req : unit_req[cur.op];

  always_comb begin
    start_vec  = '0;
    sbuf_clear = 1'b0;
    if (state_q == S_START) begin
      start_vec[cur.op] = 1'b1;
      sbuf_clear        = 1'b1;
    end
    unique case (cur.op)
      OP_ADDROUND:   sbuf_sel = 2'(SB_ADDROUND);
      OP_ADDPACK:    sbuf_sel = 2'(SB_ADDPACK);
      OP_BS2POLVECP: sbuf_sel = 2'(SB_BS2POLVECP);
      default:       sbuf_sel = 2'(SB_MULT);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      cur         <= '0;
      op_done     <= 1'b0;
      cyc_q       <= '0;
      last_cycles <= '0;
    end else begin
      op_done <= 1'b0;
      case (state_q)
        S_IDLE: if (instr_valid) begin
          cur     <= instr;
          state_q <= (instr.op == OP_NOP) ? S_IDLE : S_START;
          op_done <= (instr.op == OP_NOP);
        end
        S_START: begin
          cyc_q   <= 16'd1;
          state_q <= S_RUN;
        end
        S_RUN: begin
          cyc_q <= cyc_q + 16'd1;
          if (done_vec[cur.op]) begin
            state_q     <= S_IDLE;
            op_done     <= 1'b1;
            last_cycles <= cyc_q + 16'd1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The host may use the memory only while no instruction runs.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    host_req.en |-> (state_q == S_IDLE));

endmodule
