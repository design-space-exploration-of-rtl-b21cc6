// tb_fsm_controller: self-checking test of the FSM controller with the
// building blocks replaced by this testbench. For every opcode it issues an
// instruction and checks: ready drops, the start line of exactly that
// block pulses one cycle later together with the buffer clear, the shared
// buffer points at the right client, that block's memory requests (and no
// other's) reach the memory, the host port is cut off while busy, op_done
// pulses when the block reports done, and last_cycles gives the run length.
module tb_fsm_controller;
  import saber_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        instr_valid = 1'b0, instr_ready, op_done, sbuf_clear;
  instr_t      instr, cur;
  logic [15:0] last_cycles, start_vec, done_vec;
  mem_req_t    unit_req [16];
  mem_req_t    host_req, mem_req;
  logic [1:0]  sbuf_sel;

  fsm_controller dut (.clk, .rst_n, .instr_valid, .instr, .instr_ready, .op_done, .last_cycles,
                      .cur, .start_vec, .done_vec, .unit_req, .host_req, .mem_req,
                      .sbuf_clear, .sbuf_sel);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    done_vec = '0;
    host_req = '{en: 1'b1, we: 1'b0, addr: 10'h3AB, wdata: '0};
    for (int i = 0; i < 16; i++) unit_req[i] = '{en: 1'b1, we: 1'b1, addr: AW'(i), wdata: W'(i)};
    instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(mem_req == host_req, "host port not connected while idle");
    for (int op = 1; op <= 12; op++) begin
      int run_len, want_sel;
      run_len = 3 + op;
      want_sel = (op == OP_ADDROUND) ? 1 : (op == OP_ADDPACK) ? 2 : (op == OP_BS2POLVECP) ? 3 : 0;
      check(instr_ready, "not ready when idle");
      instr = '{op: opcode_t'(op), src0: 10'd1, src1: 10'd2, dst: 10'd3, len: 16'd4, len2: 16'd5};
      instr_valid = 1'b1;
      host_req.en = 1'b0;
      @(negedge clk);
      instr_valid = 1'b0;
      check(!instr_ready, "ready while busy");
      check(start_vec == (16'd1 << op) && sbuf_clear, $sformatf("op %0d: start %b", op, start_vec));
      check(cur.op == opcode_t'(op) && cur.len == 16'd4, "instruction not latched");
      check(int'(sbuf_sel) == want_sel, $sformatf("op %0d: buffer select %0d", op, sbuf_sel));
      check(mem_req == unit_req[op], $sformatf("op %0d: memory port not routed", op));
      repeat (run_len - 1) begin
        @(negedge clk);
        check(start_vec == '0, "start not a single pulse");
        check(!op_done, "done too early");
      end
      done_vec[op] = 1'b1;
      @(negedge clk);
      done_vec[op] = 1'b0;
      check(op_done && instr_ready, $sformatf("op %0d: no op_done", op));
      check(int'(last_cycles) == run_len, $sformatf("op %0d: last_cycles %0d want %0d", op, last_cycles, run_len));
      host_req.en = 1'b1;
      #1;
      check(mem_req == host_req, "host port not back after done");
    end
    // A NOP completes at once.
    host_req.en = 1'b0;
    instr = '0;
    instr_valid = 1'b1;
    @(negedge clk);
    instr_valid = 1'b0;
    check(op_done && instr_ready && start_vec == '0, "NOP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
