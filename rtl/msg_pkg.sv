// msg_pkg: message format and instruction set of the message-driven site array.
//
// Every transfer in the array is one 64-bit message. Its five fields, from bit 0 up:
//   [3:0]   op        opcode to execute at the destination
//   [15:4]  dest      destination site address
//   [47:16] value     IEEE-754 single-precision operand
//   [51:48] nxt_op    opcode placed in the message a site generates
//   [63:52] nxt_dest  destination placed in the message a site generates
// The field widths, their order and the ten opcodes follow the published format and ISA
// table; bit 0 is the least significant bit of the 64-bit word, which matches the example
// messages given in hexadecimal (0x00f44121999a0051 = Prog to site 5, value 10.1, next
// A_ADD to site 15).
//
// A site address is row * COLS + column. This numbering is a choice of this design: with
// the 12-bit address field it reaches exactly the 4096 sites of a 64 x 64 array.
package msg_pkg;

  localparam int unsigned MSG_W   = 64;
  localparam int unsigned OP_W    = 4;
  localparam int unsigned ADDR_W  = 12;
  localparam int unsigned VALUE_W = 32;

  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [VALUE_W-1:0] fp32_t;

  // Opcodes (4-bit). Codes not listed are unused; a site that receives one ignores it.
  typedef enum logic [OP_W-1:0] {
    OP_NOP    = 4'b0000,
    OP_PROG   = 4'b0001,  // load value, next opcode and next destination into the site
    OP_A_MUL  = 4'b0010,  // multiply and store in the site
    OP_A_ADD  = 4'b0100,  // add and store
    OP_A_SUB  = 4'b0101,  // subtract and store
    OP_A_DIV  = 4'b0110,  // divide and store
    OP_A_ADDS = 4'b0111,  // add and stream a new message
    OP_A_SUBS = 4'b1000,  // subtract and stream
    OP_A_MULS = 4'b1001,  // multiply and stream
    OP_A_DIVS = 4'b1010,  // divide and stream
    OP_UPDATE = 4'b1101   // overwrite the stored value
  } opcode_e;

  // Packed message; the first member is the most significant (MSG_W bits in all).
  typedef struct packed {
    addr_t   nxt_dest;
    logic [OP_W-1:0] nxt_op;
    fp32_t   value;
    addr_t   dest;
    logic [OP_W-1:0] op;
  } msg_t;

  // Operation selected in the floating-point unit.
  typedef enum logic [1:0] {
    FPU_ADD = 2'd0,
    FPU_SUB = 2'd1,
    FPU_MUL = 2'd2,
    FPU_DIV = 2'd3
  } fpu_op_e;

  function automatic msg_t make_msg(logic [OP_W-1:0] op, addr_t dest, fp32_t value,
                                    logic [OP_W-1:0] nxt_op, addr_t nxt_dest);
    msg_t m;
    m.op       = op;
    m.dest     = dest;
    m.value    = value;
    m.nxt_op   = nxt_op;
    m.nxt_dest = nxt_dest;
    return m;
  endfunction

endpackage
