// pagerank_tb: PageRank on a random graph, on a 12 x 12 array.
//
// Generates a random 11-node directed graph (each node links to 1..4 others), forms the
// column-stochastic transition matrix H (H[i][j] = 1 / outdegree(j) for a link j -> i), and
// runs two PageRank iterations PR' = (1-d)/N + d * H * PR with d = 0.85 from PR0 = 1/N.
// An array with COLS columns holds a graph of up to COLS - 1 nodes in one tile (COLS - 1
// matrix columns plus the accumulator column); on the full 64 x 64 array that is 63 nodes.
// ROWS, COLS and N below can be raised together (N = COLS - 1) to run larger graphs. Every result is checked bit-exactly against the same
// sequence of single-precision operations, loosely against double-precision PageRank, and
// the ranks must sum to 1.
// The first iteration, matrix load included, must take N + COLS + 3 edges; the second,
// with the matrix kept in the array, COLS + 3.
module pagerank_tb;
  import msg_pkg::*;
  import fp_ref_pkg::*;

  localparam int ROWS = 12;
  localparam int COLS = 12;
  localparam int N    = 11;

  logic clk, rst, collision;
  logic top_in_valid[COLS], left_in_valid[ROWS], bus_valid[COLS];
  msg_t top_in_msg[COLS], left_in_msg[ROWS], bus_msg[COLS];
  logic right_out_valid[ROWS], bottom_out_valid[COLS];
  msg_t right_out_msg[ROWS], bottom_out_msg[COLS];

  site_fabric #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  fabric_host #(.ROWS(ROWS), .COLS(COLS)) host (.*);

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    host.failures++;
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures);
    $finish;
  end

  initial begin
    fp32_t  a[][], b[], pr[];
    real    h[N][N], prd[N], nxt[N];
    longint t0, t_bus, td;
    fp32_t  d, e;

    // random graph
    foreach (h[i, j]) h[i][j] = 0.0;
    for (int j = 0; j < N; j++) begin
      int k, t;
      automatic int tgt[$] = {};
      k = 1 + int'($urandom % 4);
      while (tgt.size() < k) begin
        t = int'($urandom % N);
        if (t != j && !(t inside {tgt})) tgt.push_back(t);
      end
      foreach (tgt[x]) h[tgt[x]][j] = 1.0 / real'(k);
    end
    a = new[N];
    foreach (a[i]) begin
      a[i] = new[N];
      foreach (a[i][j]) a[i][j] = to_fp32(h[i][j]);
    end
    b = new[N];
    foreach (b[i]) begin
      b[i]   = to_fp32(1.0 / N);
      prd[i] = 1.0 / N;
    end
    d = to_fp32(0.85);
    e = to_fp32(0.15 / N);

    host.do_reset();
    host.load_matrix(N, N, a, t0);
    for (int it = 0; it < 2; it++) begin
      host.iterate(N, N, b, d, e, t_bus, td);
      host.check_results(N, N, a, b, d, e, pr);
      foreach (nxt[i]) begin
        nxt[i] = 0.15 / N;
        for (int j = 0; j < N; j++) nxt[i] += 0.85 * h[i][j] * prd[j];
      end
      prd = nxt;
      begin
        real sum;
        sum = 0.0;
        foreach (pr[i]) sum += to_real(pr[i]);
        host.checks++;
        if (sum < 0.9999 || sum > 1.0001) begin
          host.failures++;
          $display("FAIL ranks sum to %f", sum);
        end
      end
      for (int i = 0; i < N; i++) begin
        host.checks++;
        if (to_real(pr[i]) - prd[i] > 1e-5 || prd[i] - to_real(pr[i]) > 1e-5) begin
          host.failures++;
          $display("FAIL PageRank it %0d node %0d: %f vs %f", it, i, to_real(pr[i]), prd[i]);
        end
      end
      if (it == 0) host.expect_eq("first iteration cycles", 64'(td - t0), 64'(N + COLS + 3));
      else         host.expect_eq("iteration cycles", 64'(td - t_bus), 64'(COLS + 3));
      $display("iteration %0d: PR[0..3] = %f %f %f %f, cycles from %0d to %0d", it + 1,
               to_real(pr[0]), to_real(pr[1]), to_real(pr[2]), to_real(pr[3]),
               (it == 0) ? t0 : t_bus, td);
      b = pr;
    end
    host.expect_seen("hop-loaded Prog messages", host.n_hop_loads);
    host.expect_seen("vertical-bus broadcasts", host.n_bus);
    host.expect_seen("right-edge offloads", host.n_offloads);
    host.expect_eq("no collisions", 64'(host.n_collisions), 0);
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures);
    $finish;
  end
endmodule
