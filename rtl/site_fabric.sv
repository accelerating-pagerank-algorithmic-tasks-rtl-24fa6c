// site_fabric: the programmable accelerator, a ROWS x COLS array of sites.
//
// Sites sit in rows and columns. Each site passes messages to its right neighbour and to the
// neighbour below, one hop per clock cycle, and consumes the messages addressed to it, so a
// message injected anywhere reaches any site further right or further down. Each column
// also has a vertical bus that delivers one message to every site of the column in the same
// cycle; the matrix-vector scheme uses it to broadcast one vector element per column.
// The host (software) injects 64-bit messages at the top of each column and at the left of
// each row; messages that run off the right edge or the bottom edge leave the array on the
// right and bottom outputs, which is how results are offloaded.
//
// From the paper: the row/column organisation, the right/down hopping, the vertical bus,
// the 64-bit message entering each column from the top, the 12-bit address (hence at most
// 4096 sites) and the 64 x 64 = 4096-site size used for its evaluation. This design's own
// choices: the array is not closed into a ring (the paper's analogy passes messages around
// a circle, but its figures draw the right-edge arrows leaving the array); the bus is
// driven only from the top edge; the left-edge inputs; and the single `collision` output,
// the OR of all sites' collision flags (see site_decoder).
//
// Site (r, c) has address r * COLS + c. All outputs are registered in the sites; latency
// from a top or left input to a site d hops away is d + 1 edges.
module site_fabric
  import msg_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64
) (
  input  logic clk,
  input  logic rst,
  input  logic top_in_valid   [COLS],
  input  msg_t top_in_msg     [COLS],
  input  logic left_in_valid  [ROWS],
  input  msg_t left_in_msg    [ROWS],
  input  logic bus_valid      [COLS],
  input  msg_t bus_msg        [COLS],
  output logic right_out_valid[ROWS],
  output msg_t right_out_msg  [ROWS],
  output logic bottom_out_valid[COLS],
  output msg_t bottom_out_msg [COLS],
  output logic collision
);

  initial begin
    assert ($bits(msg_t) == MSG_W && ROWS * COLS <= 2 ** ADDR_W)
      else $fatal(1, "site_fabric: %0d x %0d sites exceed the 12-bit address space", ROWS, COLS);
  end

  // right_v[r][c] / right_m[r][c]: output of site (r, c) towards (r, c + 1)
  // down_v[r][c]  / down_m[r][c]:  output of site (r, c) towards (r + 1, c)
  logic right_v [ROWS][COLS];
  msg_t right_m [ROWS][COLS];
  logic down_v  [ROWS][COLS];
  msg_t down_m  [ROWS][COLS];
  logic coll    [ROWS][COLS];
  logic [ROWS*COLS-1:0] coll_flat;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic in_left_v, in_top_v;
      msg_t in_left_m, in_top_m;

      if (c == 0) begin : g_left_edge
        assign in_left_v = left_in_valid[r];
        assign in_left_m = left_in_msg[r];
      end else begin : g_left_site
        assign in_left_v = right_v[r][c-1];
        assign in_left_m = right_m[r][c-1];
      end

      if (r == 0) begin : g_top_edge
        assign in_top_v = top_in_valid[c];
        assign in_top_m = top_in_msg[c];
      end else begin : g_top_site
        assign in_top_v = down_v[r-1][c];
        assign in_top_m = down_m[r-1][c];
      end

      site_o #(.COLS(COLS)) u_site (
        .Clock       (clk),
        .Reset       (rst),
        .my_addr     (ADDR_W'(r * COLS + c)),
        .WriteToLeft (in_left_v),
        .LeftMessage (in_left_m),
        .WriteToTop  (in_top_v),
        .TopMessage  (in_top_m),
        .BusWrite    (bus_valid[c]),
        .BusMessage  (bus_msg[c]),
        .WriteToRight(right_v[r][c]),
        .RightMessage(right_m[r][c]),
        .WriteToDown (down_v[r][c]),
        .DownMessage (down_m[r][c]),
        .Collision   (coll[r][c])
      );

      assign coll_flat[r*COLS + c] = coll[r][c];
    end

    assign right_out_valid[r] = right_v[r][COLS-1];
    assign right_out_msg[r]   = right_m[r][COLS-1];
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign bottom_out_valid[c] = down_v[ROWS-1][c];
    assign bottom_out_msg[c]   = down_m[ROWS-1][c];
  end

  assign collision = |coll_flat;

endmodule
