// saber_pkg: constants and shared types of the SABER coprocessor.
//
// The ring parameters follow the SABER scheme as the design uses it: degree
// N = 256, q = 2^13 and p = 2^10; the module dimension L = 3 and message
// modulus T = 2^4 are those of the AES-192 level variant (SABER) that the
// results target. Memory is 1024 words of 64 bits, spread over four 256x64
// single-port RegFiles. The instruction format and the memory/buffer request
// structs are choices of this design: the original instruction encoding is
// not published with the architecture.
// L and MU record the variant; the datapaths are sized for them (three
// pairs per vector product in the programs, 4+4 bits per sample) without
// reading the constants directly.
package saber_pkg;

  localparam int unsigned N     = 256;  // polynomial degree
  localparam int unsigned EQ    = 13;   // log2 q
  localparam int unsigned EP    = 10;   // log2 p
  localparam int unsigned ET    = 4;    // log2 T (SABER, AES-192 level)
  localparam int unsigned L     = 3;    // module dimension (SABER)
  localparam int unsigned MU    = 8;    // binomial parameter (SABER)

  localparam int unsigned W     = 64;   // memory word width
  localparam int unsigned AW    = 10;   // word address width (1024 words)
  localparam int unsigned SBUF_W  = 676; // shared shift buffer width
  localparam int unsigned SBUF_CW = 10;  // width of its fill counter

  // Rounding constants of SABER: h1 = 2^(EQ-EP-1).
  localparam int unsigned H1 = 1 << (EQ - EP - 1);

  // One request to the data memory. Read data comes back two cycles later
  // (RegFile + pipeline register) together with a valid flag.
  typedef struct packed {
    logic          en;
    logic          we;
    logic [AW-1:0] addr;
    logic [W-1:0]  wdata;
  } mem_req_t;

  // Request of one client to the shared shift buffer: take `pop_bits` bits
  // from its bottom and append the low `push_bits` bits of `push_data`.
  typedef struct packed {
    logic         push;
    logic [6:0]   push_bits;
    logic [W-1:0] push_data;
    logic         pop;
    logic [6:0]   pop_bits;
  } sbuf_req_t;

  // What the buffer shows its clients: the lowest 64 bits and the fill level.
  typedef struct packed {
    logic [W-1:0]       data;
    logic [SBUF_CW-1:0] count;
  } sbuf_rsp_t;

  // Shared-buffer clients, in the order of the buffer's request ports.
  localparam int unsigned SB_MULT = 0, SB_ADDROUND = 1, SB_ADDPACK = 2, SB_BS2POLVECP = 3;

  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_SHA3_256   = 4'd1,
    OP_SHA3_512   = 4'd2,
    OP_SHAKE128   = 4'd3,
    OP_SAMPLER    = 4'd4,
    OP_MULT       = 4'd5,
    OP_ADDROUND   = 4'd6,
    OP_ADDPACK    = 4'd7,
    OP_UNPACK     = 4'd8,
    OP_BS2POLVECP = 4'd9,
    OP_COPYWORDS  = 4'd10,
    OP_VERIFY     = 4'd11,
    OP_CMOV       = 4'd12
  } opcode_t;

  typedef enum logic [1:0] {SHA_256 = 2'd0, SHA_512 = 2'd1, SHAKE_128 = 2'd2} sha_mode_t;

  // One instruction. Field meaning per opcode is given in fsm_controller.
  typedef struct packed {
    opcode_t       op;
    logic [AW-1:0] src0;
    logic [AW-1:0] src1;
    logic [AW-1:0] dst;
    logic [15:0]   len;
    logic [15:0]   len2;
  } instr_t;

endpackage
