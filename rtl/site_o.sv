// site_o: one programmable site ("SiteO") of the array.
//
// A site holds one single-precision value together with a next opcode and a next
// destination. It executes whatever message its decoder hands it:
//   Prog               store the message value, and keep the message's nxt_op and
//                      nxt_dest as the site's next opcode and next destination;
//   UPDATE             overwrite the stored value;
//   A_ADD/SUB/MUL/DIV  stored = stored (op) message value;
//   A_ADDS/SUBS/MULS/DIVS
//                      compute stored (op) message value and send it on as a new message
//                      whose op and dest are the site's next opcode and next destination.
// Messages for other sites pass through: right or down, one site per clock cycle.
// The instruction set, the Prog/stream semantics and the port names (WriteToLeft,
// LeftMessage, WriteToTop, TopMessage, WriteToRight, RightMessage, WriteToDown,
// DownMessage, Clock, Reset) follow the paper. This design's own choices: the stored value
// is the left operand of subtraction and division; a streaming instruction leaves the
// stored value unchanged; the generated message carries the incoming message's nxt_op and
// nxt_dest in its own next fields; unused opcodes are ignored; a site whose next opcode is
// still NOP (never programmed) generates nothing, so a bus broadcast to a whole column
// does not make unused sites emit messages; a bus input (BusWrite, BusMessage) delivers
// the column's vertical-bus broadcast.
//
// Timing: the right and down outputs are registered. A message entering at a clock edge
// leaves one edge later, whether it is forwarded or generated by a streaming instruction;
// a storing instruction updates the value register at the edge after the message arrives.
// Reset (synchronous, active high) clears the value, next opcode, next destination and
// the output strobes. Collision is registered: it is high for one cycle one edge after the
// decoder dropped a message.
module site_o
  import msg_pkg::*;
#(
  parameter int unsigned COLS = 64
) (
  input  logic  Clock,
  input  logic  Reset,
  input  addr_t my_addr,
  input  logic  WriteToLeft,
  input  msg_t  LeftMessage,
  input  logic  WriteToTop,
  input  msg_t  TopMessage,
  input  logic  BusWrite,
  input  msg_t  BusMessage,
  output logic  WriteToRight,
  output msg_t  RightMessage,
  output logic  WriteToDown,
  output msg_t  DownMessage,
  output logic  Collision
);

  fp32_t value_q;
  logic [OP_W-1:0] nxt_op_q;
  addr_t nxt_dest_q;

  logic    local_valid, right_valid, down_valid, collision;
  msg_t    local_msg, right_msg, down_msg, gen_msg;
  logic    gen_valid;
  fpu_op_e fop;
  fp32_t   result;

  site_decoder #(.COLS(COLS)) u_decoder (
    .my_addr    (my_addr),
    .left_valid (WriteToLeft),
    .left_msg   (LeftMessage),
    .top_valid  (WriteToTop),
    .top_msg    (TopMessage),
    .bus_valid  (BusWrite),
    .bus_msg    (BusMessage),
    .gen_valid  (gen_valid),
    .gen_msg    (gen_msg),
    .local_valid(local_valid),
    .local_msg  (local_msg),
    .right_valid(right_valid),
    .right_msg  (right_msg),
    .down_valid (down_valid),
    .down_msg   (down_msg),
    .collision  (collision)
  );

  // operation of the floating-point unit for the local message
  always_comb begin
    unique case (local_msg.op)
      OP_A_SUB, OP_A_SUBS: fop = FPU_SUB;
      OP_A_MUL, OP_A_MULS: fop = FPU_MUL;
      OP_A_DIV, OP_A_DIVS: fop = FPU_DIV;
      default:             fop = FPU_ADD;
    endcase
  end

  fpu u_fpu (.a(value_q), .b(local_msg.value), .op(fop), .y(result));

  // message generated by a streaming instruction
  always_comb begin
    gen_valid = local_valid && nxt_op_q != OP_NOP &&
                (local_msg.op == OP_A_ADDS || local_msg.op == OP_A_SUBS ||
                 local_msg.op == OP_A_MULS || local_msg.op == OP_A_DIVS);
    gen_msg   = make_msg(nxt_op_q, nxt_dest_q, result, local_msg.nxt_op, local_msg.nxt_dest);
  end

  // site state
  always_ff @(posedge Clock) begin
    if (Reset) begin
      value_q    <= '0;
      nxt_op_q   <= OP_NOP;
      nxt_dest_q <= '0;
    end else if (local_valid) begin
      unique case (local_msg.op)
        OP_PROG: begin
          value_q    <= local_msg.value;
          nxt_op_q   <= local_msg.nxt_op;
          nxt_dest_q <= local_msg.nxt_dest;
        end
        OP_UPDATE:                          value_q <= local_msg.value;
        OP_A_ADD, OP_A_SUB, OP_A_MUL, OP_A_DIV: value_q <= result;
        default: ;
      endcase
    end
  end

  // registered outputs
  always_ff @(posedge Clock) begin
    if (Reset) begin
      WriteToRight <= 1'b0;
      WriteToDown  <= 1'b0;
      Collision    <= 1'b0;
      RightMessage <= '0;
      DownMessage  <= '0;
    end else begin
      WriteToRight <= right_valid;
      WriteToDown  <= down_valid;
      Collision    <= collision;
      if (right_valid) RightMessage <= right_msg;
      if (down_valid)  DownMessage  <= down_msg;
    end
  end

  // A message sent down must be for a lower row.
  a_down_is_lower : assert property (@(posedge Clock) disable iff (Reset)
    down_valid |-> int'(down_msg.dest) / COLS > int'(my_addr) / COLS);

endmodule
