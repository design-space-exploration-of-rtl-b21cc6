// saber_top: SABER coprocessor, PIP_SP_4(256x64) configuration.
//
// The core executes SABER one building-block instruction at a time. An
// external program memory (outside the core) feeds instructions to the FSM
// controller, which starts one building block and gives it the single
// memory port. The 1024 x 64 data memory is four single-port 256 x 64
// RegFiles behind the memory manager, whose read data passes a pipeline
// register (two-cycle read latency). The multiplier, AddRound, AddPack and
// BS2POLVECp share one 676-bit shift buffer for unpacking coefficients.
// Building blocks: SHA3-256/512 and SHAKE-128 (one sponge), binomial
// sampler, polynomial vector-vector multiplier, AddRound, AddPack, Unpack,
// BS2POLVECp, CopyWords, Verify and CMOV (which uses Verify's result).
// The instruction's second count, len2, gives SHAKE-128's output length,
// the multiplier's stride between public polynomials (so that key
// generation can walk a column of the matrix) and AddPack's decryption flag.
//
// Interface: `instr`/`instr_valid`/`instr_ready` take instructions (see
// fsm_controller for the fields); `op_done` pulses when one has finished and
// `last_cycles` gives its cycle count. `host_req`, `host_rdata`, `host_rvalid`
// reach the data memory while the core is idle (reads return two cycles
// later). `verify_fail` is the last Verify result. The block set and the
// memory organisation follow the architecture; the instruction encoding and
// the host port are this design's.
//
// Lint notes: start_vec has bits for opcodes with no unit (NOP and the three
// spare codes), which stay unused. The assertions in the blocks use rst_n
// in `disable iff`, which lint reports as a reset used both synchronously
// and asynchronously; the flops themselves all use the asynchronous reset.
module saber_top
  import saber_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          instr_valid,
  input  instr_t        instr,
  output logic          instr_ready,
  output logic          op_done,
  output logic [15:0]   last_cycles,
  input  mem_req_t      host_req,
  output logic [W-1:0]  host_rdata,
  output logic          host_rvalid,
  output logic          verify_fail
);

  instr_t      cur;
  logic [15:0] start_vec, done_vec;
  mem_req_t    unit_req [16];
  mem_req_t    mem_req;
  logic [W-1:0] rdata;
  logic        rvalid;
  logic        sbuf_clear;
  logic [1:0]  sbuf_sel;
  sbuf_req_t   sbuf_req [4];
  sbuf_rsp_t   sbuf_rsp;
  sha_mode_t   sha_mode;
  logic        sha_done;
  mem_req_t    sha_req;

  fsm_controller u_ctrl (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .op_done, .last_cycles,
    .cur, .start_vec, .done_vec, .unit_req, .host_req, .mem_req,
    .sbuf_clear, .sbuf_sel
  );

  mem_manager u_mem (.clk, .rst_n, .req(mem_req), .rdata, .rvalid);

  assign host_rdata  = rdata;
  assign host_rvalid = rvalid;

  shared_shift_buffer u_sbuf (
    .clk, .rst_n, .clear(sbuf_clear), .sel(sbuf_sel), .req(sbuf_req), .rsp(sbuf_rsp)
  );

  always_comb begin
    unique case (cur.op)
      OP_SHA3_512: sha_mode = SHA_512;
      OP_SHAKE128: sha_mode = SHAKE_128;
      default:     sha_mode = SHA_256;
    endcase
  end

  sha3_unit u_sha3 (
    .clk, .rst_n,
    .start(start_vec[OP_SHA3_256] | start_vec[OP_SHA3_512] | start_vec[OP_SHAKE128]),
    .mode(sha_mode), .src(cur.src0), .dst(cur.dst), .in_len(cur.len), .out_words(cur.len2),
    .done(sha_done), .mem_req(sha_req), .rdata, .rvalid
  );

  binomial_sampler u_sampler (
    .clk, .rst_n, .start(start_vec[OP_SAMPLER]), .src(cur.src0), .dst(cur.dst), .ncoef(cur.len),
    .done(done_vec[OP_SAMPLER]), .mem_req(unit_req[OP_SAMPLER]), .rdata, .rvalid
  );

  poly_multiplier u_mult (
    .clk, .rst_n, .start(start_vec[OP_MULT]), .src0(cur.src0), .src1(cur.src1), .dst(cur.dst),
    .npoly(cur.len), .a_stride(cur.len2[AW-1:0]), .done(done_vec[OP_MULT]), .mem_req(unit_req[OP_MULT]), .rdata, .rvalid,
    .sbuf_req(sbuf_req[SB_MULT]), .sbuf_rsp
  );

  add_round u_addround (
    .clk, .rst_n, .start(start_vec[OP_ADDROUND]), .src(cur.src0), .dst(cur.dst), .ncoef(cur.len),
    .done(done_vec[OP_ADDROUND]), .mem_req(unit_req[OP_ADDROUND]), .rdata, .rvalid,
    .sbuf_req(sbuf_req[SB_ADDROUND]), .sbuf_rsp
  );

  add_pack u_addpack (
    .clk, .rst_n, .start(start_vec[OP_ADDPACK]), .src0(cur.src0), .src1(cur.src1), .dst(cur.dst),
    .ncoef(cur.len), .dec(cur.len2[0]), .done(done_vec[OP_ADDPACK]), .mem_req(unit_req[OP_ADDPACK]), .rdata, .rvalid,
    .sbuf_req(sbuf_req[SB_ADDPACK]), .sbuf_rsp
  );

  unpack u_unpack (
    .clk, .rst_n, .start(start_vec[OP_UNPACK]), .src(cur.src0), .dst(cur.dst), .nbits(cur.len),
    .done(done_vec[OP_UNPACK]), .mem_req(unit_req[OP_UNPACK]), .rdata, .rvalid
  );

  bs2polvecp u_bs2polvecp (
    .clk, .rst_n, .start(start_vec[OP_BS2POLVECP]), .src(cur.src0), .dst(cur.dst), .ncoef(cur.len),
    .done(done_vec[OP_BS2POLVECP]), .mem_req(unit_req[OP_BS2POLVECP]), .rdata, .rvalid,
    .sbuf_req(sbuf_req[SB_BS2POLVECP]), .sbuf_rsp
  );

  copy_words u_copy (
    .clk, .rst_n, .start(start_vec[OP_COPYWORDS]), .src(cur.src0), .dst(cur.dst), .nwords(cur.len),
    .done(done_vec[OP_COPYWORDS]), .mem_req(unit_req[OP_COPYWORDS]), .rdata, .rvalid
  );

  verify_unit u_verify (
    .clk, .rst_n, .start(start_vec[OP_VERIFY]), .src0(cur.src0), .src1(cur.src1), .nwords(cur.len),
    .done(done_vec[OP_VERIFY]), .fail(verify_fail), .mem_req(unit_req[OP_VERIFY]), .rdata, .rvalid
  );

  cmov_unit u_cmov (
    .clk, .rst_n, .start(start_vec[OP_CMOV]), .cond(verify_fail), .src0(cur.src0), .src1(cur.src1),
    .dst(cur.dst), .nwords(cur.len), .done(done_vec[OP_CMOV]), .mem_req(unit_req[OP_CMOV]),
    .rdata, .rvalid
  );

  assign done_vec[OP_SHA3_256] = sha_done;
  assign done_vec[OP_SHA3_512] = sha_done;
  assign done_vec[OP_SHAKE128] = sha_done;
  assign unit_req[OP_SHA3_256] = sha_req;
  assign unit_req[OP_SHA3_512] = sha_req;
  assign unit_req[OP_SHAKE128] = sha_req;
  assign done_vec[OP_NOP]      = 1'b1;
  assign unit_req[OP_NOP]      = '0;
  for (genvar i = 13; i < 16; i++) begin : g_unused_op
    assign done_vec[i] = 1'b1;
    assign unit_req[i] = '0;
  end

endmodule
