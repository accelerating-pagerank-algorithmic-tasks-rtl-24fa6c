// site_fabric_tb: end-to-end test of the site array on a 6 x 6 instance.
//
// 1. The published 4 x 3 matrix-vector example: A = [0 .5 .5; 0 0 0; .33 .33 0; 0 0 1],
//    B = [.25 .25 .25], expected [.25 0 .165 .25] (printed rounded as .17); run with d = 1 and
//    offset 0, so the offloaded value is the plain product. The cycle count from the first
//    load edge to the edge that takes the last result is checked against N + COLS + 3.
// 2. The published 4-node PageRank example: H as printed, d = 0.85, PR0 = 0.25 each,
//    (1-d)/N = 0.0375, three iterations with the results fed back as the next vector; each
//    result is checked bit-exactly against the same sequence of single-precision operations
//    and, loosely, against a double-precision PageRank.
// 3. A message injected at the left edge travels right then down to its site.
// 4. A message for a row below the array leaves at the bottom edge.
// 5. Two messages that want the same port in one cycle raise the collision flag.
// Every mechanism (hop load, bus broadcast, stream and accumulate, right-edge offload,
// left injection, bottom exit, collision) is counted and must occur at least once.
//
// Cycle count, in clock edges: the matrix takes N edges to hop in (all rows arrive at the
// same edge), the vector broadcast and multiply 1, the products of columns 0..M-1 reach
// the accumulator one per edge (M edges), the scale by d 1 and the add-and-stream 1; the
// result then needs COLS-1-M hops to reach the right edge, where the host takes it one edge
// later: N + M + 4 + (COLS-1-M) = N + COLS + 3. With the matrix kept in place, a further
// iteration needs COLS + 3 edges from its broadcast.
module site_fabric_tb;
  import msg_pkg::*;
  import fp_ref_pkg::*;

  localparam int ROWS = 6;
  localparam int COLS = 6;

  logic clk, rst, collision;
  logic top_in_valid[COLS], left_in_valid[ROWS], bus_valid[COLS];
  msg_t top_in_msg[COLS], left_in_msg[ROWS], bus_msg[COLS];
  logic right_out_valid[ROWS], bottom_out_valid[COLS];
  msg_t right_out_msg[ROWS], bottom_out_msg[COLS];

  site_fabric #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  fabric_host #(.ROWS(ROWS), .COLS(COLS)) host (.*);

  function automatic fp32_t f(input real r);
    return to_fp32(r);
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    host.failures++;
    host.finish();
  end

  initial begin
    fp32_t  a[][], b[], pr[];
    real    h[4][4], prd[4], nxt[4];
    longint t0, tb_bus, td;
    int     n_stream;

    // ---- 1. matrix-vector example ----
    host.do_reset();
    a = new[4];
    foreach (a[i]) a[i] = new[3];
    a[0] = '{f(0), f(0.5), f(0.5)};
    a[1] = '{f(0), f(0), f(0)};
    a[2] = '{f(0.33), f(0.33), f(0)};
    a[3] = '{f(0), f(0), f(1)};
    b = '{f(0.25), f(0.25), f(0.25)};
    host.load_matrix(4, 3, a, t0);
    host.iterate(4, 3, b, f(1.0), f(0.0), tb_bus, td);
    host.check_results(4, 3, a, b, f(1.0), f(0.0), pr);
    host.expect_eq("matvec 0.25", 64'(pr[0]), 64'(f(0.25)));
    host.expect_eq("matvec 0", 64'(pr[1]), 64'(f(0.0)));
    host.expect_eq("matvec 0.25 last", 64'(pr[3]), 64'(f(0.25)));
    $display("matvec: load at %0d, bus at %0d, last result at %0d", t0, tb_bus, td);
    host.expect_eq("matvec load cycles", 64'(tb_bus - t0), 64'(4));
    host.expect_eq("matvec total cycles", 64'(td - t0), 64'(4 + COLS + 3));
    n_stream = 4 * 3;

    // ---- 2. PageRank example ----
    host.do_reset();
    h = '{'{0, 0.5, 0.5, 0}, '{0, 0, 0, 1}, '{0.33, 0.33, 0, 0.33}, '{0, 0, 1, 0}};
    a = new[4];
    foreach (a[i]) begin
      a[i] = new[4];
      foreach (a[i][j]) a[i][j] = f(h[i][j]);
    end
    b = '{f(0.25), f(0.25), f(0.25), f(0.25)};
    prd = '{0.25, 0.25, 0.25, 0.25};
    host.load_matrix(4, 4, a, t0);
    for (int it = 0; it < 3; it++) begin
      host.iterate(4, 4, b, f(0.85), f(0.15 / 4), tb_bus, td);
      host.check_results(4, 4, a, b, f(0.85), f(0.15 / 4), pr);
      foreach (nxt[i]) begin
        nxt[i] = 0.15 / 4;
        for (int j = 0; j < 4; j++) nxt[i] += 0.85 * h[i][j] * prd[j];
      end
      prd = nxt;
      for (int i = 0; i < 4; i++) begin
        host.checks++;
        if (to_real(pr[i]) - prd[i] > 1e-5 || prd[i] - to_real(pr[i]) > 1e-5) begin
          host.failures++;
          $display("FAIL PageRank it %0d node %0d: %f vs %f", it, i, to_real(pr[i]), prd[i]);
        end
      end
      $display("PageRank iteration %0d: %f %f %f %f (bus at %0d, done at %0d)", it + 1,
               to_real(pr[0]), to_real(pr[1]), to_real(pr[2]), to_real(pr[3]), tb_bus, td);
      // matrix stays loaded: later iterations take only the broadcast-to-result time
      if (it > 0) host.expect_eq("iteration cycles", 64'(td - tb_bus), 64'(COLS + 3));
      b = pr;
      n_stream += 16;
    end

    // ---- 3. left-edge injection: Prog to site (3, 2) enters row 1 ----
    host.do_reset();
    host.clear_results();
    host.send_left(1, make_msg(OP_PROG, host.site(3, 2), f(5.0), OP_UPDATE, host.site(3, 0)));
    repeat (6) @(negedge clk);
    host.send_top(2, make_msg(OP_A_ADDS, host.site(3, 2), f(1.0), OP_NOP, '0));
    repeat (10) @(negedge clk);
    host.expect_eq("left injection reached (3,2)", 64'(host.res_seen[3]), 1);
    host.expect_eq("streamed 5 + 1", 64'(host.res_val[3]), 64'(f(6.0)));

    // ---- 4. bottom exit ----
    begin
      int nb;
      msg_t m;
      nb = host.n_bottom;
      m  = make_msg(OP_PROG, addr_t'(ROWS * COLS + 1), f(2.0), OP_NOP, '0);
      host.send_top(1, m);
      repeat (ROWS + 2) @(negedge clk);
      host.expect_eq("bottom exit", 64'(host.n_bottom - nb), 1);
      host.expect_eq("bottom message intact", 64'(host.last_bottom), 64'(m));
    end

    // ---- 5. collision: left and top messages both for the right port of site (0, 0) ----
    begin
      int nc;
      nc = host.n_collisions;
      @(negedge clk);
      host.left_in_valid[0] = 1'b1;
      host.left_in_msg[0]   = make_msg(OP_PROG, host.site(0, 4), f(1.0), OP_NOP, '0);
      host.top_in_valid[0]  = 1'b1;
      host.top_in_msg[0]    = make_msg(OP_PROG, host.site(0, 5), f(1.0), OP_NOP, '0);
      @(negedge clk);
      host.idle_inputs();
      repeat (2) @(negedge clk);
      host.expect_eq("collision seen", 64'(host.n_collisions - nc), 1);
    end

    host.expect_seen("hop-loaded Prog messages", host.n_hop_loads);
    host.expect_seen("vertical-bus broadcasts", host.n_bus);
    host.expect_seen("streamed products", n_stream);
    host.expect_seen("right-edge offloads", host.n_offloads);
    host.expect_seen("left-edge injections", host.n_left);
    host.expect_seen("bottom-edge exits", host.n_bottom);
    host.expect_seen("collisions", host.n_collisions);
    host.finish();
  end
endmodule
