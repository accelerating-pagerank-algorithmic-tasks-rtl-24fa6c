// site_decoder: message decoder and router of one site.
//
// Each cycle a site can receive a message from its left neighbour, one from its top
// neighbour and one from the vertical bus of its column, and it can generate one message of
// its own (the result of a streaming instruction). The decoder sorts them:
//   * a bus message is always for this site (the bus broadcasts to the whole column);
//   * a left or top message whose destination is this site's address is consumed here;
//   * any other message moves on: down if its destination lies in a lower row, otherwise
//     right. The generated message is routed the same way, except that it never turns back
//     into this site (a generated message addressed to the site itself goes right).
// Routing right or down by destination, and decoding at the site whose address matches,
// follow the paper; the exact rule (down while the destination row is below, else right)
// is this design's choice, as is what happens when two messages want the same place in one
// cycle, which the paper does not discuss. Fixed priorities apply: for local use bus > left
// > top; for the right port left > top > generated; for the down port top > left >
// generated. A message that loses is dropped and `collision` is raised in that cycle:
// schedules are meant to be built so that this never happens, and the flag makes it visible.
//
// Purely combinational. Site addresses are row * COLS + column.
module site_decoder
  import msg_pkg::*;
#(
  parameter int unsigned COLS = 64
) (
  input  addr_t my_addr,
  input  logic  left_valid,
  input  msg_t  left_msg,
  input  logic  top_valid,
  input  msg_t  top_msg,
  input  logic  bus_valid,
  input  msg_t  bus_msg,
  input  logic  gen_valid,
  input  msg_t  gen_msg,
  output logic  local_valid,
  output msg_t  local_msg,
  output logic  right_valid,
  output msg_t  right_msg,
  output logic  down_valid,
  output msg_t  down_msg,
  output logic  collision
);

  typedef enum logic [1:0] {R_LOCAL, R_RIGHT, R_DOWN} route_e;

  function automatic route_e route(input addr_t dest, input addr_t here);
    if (dest == here)                                   return R_LOCAL;
    else if (int'(dest) / COLS > int'(here) / COLS)     return R_DOWN;
    else                                                return R_RIGHT;
  endfunction

  route_e left_r, top_r, gen_r;
  logic   loc_left, loc_top, r_left, r_top, d_left, d_top, r_gen, d_gen;
  logic   coll_in, coll_gen;

  // routing of the incoming messages (independent of the generated one)
  always_comb begin
    left_r   = route(left_msg.dest, my_addr);
    top_r    = route(top_msg.dest, my_addr);
    loc_left = left_valid && left_r == R_LOCAL;
    loc_top  = top_valid  && top_r  == R_LOCAL;
    r_left   = left_valid && left_r == R_RIGHT;
    r_top    = top_valid  && top_r  == R_RIGHT;
    d_left   = left_valid && left_r == R_DOWN;
    d_top    = top_valid  && top_r  == R_DOWN;

    local_valid = bus_valid || loc_left || loc_top;
    if (bus_valid)     local_msg = bus_msg;
    else if (loc_left) local_msg = left_msg;
    else               local_msg = top_msg;

    coll_in = (bus_valid && (loc_left || loc_top)) || (loc_left && loc_top) ||
              (r_left && r_top) || (d_left && d_top);
  end

  // merge of the generated message onto the output ports
  always_comb begin
    gen_r = route(gen_msg.dest, my_addr);
    d_gen = gen_valid && gen_r == R_DOWN;
    r_gen = gen_valid && gen_r != R_DOWN;

    right_valid = r_left || r_top || r_gen;
    if (r_left)     right_msg = left_msg;
    else if (r_top) right_msg = top_msg;
    else            right_msg = gen_msg;

    down_valid = d_top || d_left || d_gen;
    if (d_top)       down_msg = top_msg;
    else if (d_left) down_msg = left_msg;
    else             down_msg = gen_msg;

    coll_gen  = (r_gen && (r_left || r_top)) || (d_gen && (d_left || d_top));
    collision = coll_in || coll_gen;
  end

endmodule
