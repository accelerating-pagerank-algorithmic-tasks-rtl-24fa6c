// fabric_host: behavioural model of the host software that drives the site array.
//
// Not hardware: it stands for the "Software" that generates the 64-bit message stream. It
// produces the clock and reset, and offers tasks that run the matrix-vector and PageRank
// schedule on the array:
//   load_matrix   hop the N x M matrix in from the top edge, last row first, one row per
//                 cycle (all columns in parallel); every matrix site gets the next opcode
//                 A_ADD (UPDATE for the column nearest the accumulator) and the next
//                 destination (r, M), the accumulator site at the end of its row, which is
//                 programmed in the same cycles with next opcode UPDATE and next destination
//                 (r, 0), an address behind it, so that its streamed result leaves the array
//                 on the right edge;
//   iterate       broadcast the vector on the vertical buses (A_MULS), wait while the
//                 products stream right into the accumulators, then broadcast A_MUL d and
//                 A_ADDS (1-d)/N to the accumulator column; the accumulators stream
//                 PR = (1-d)/N + d * (A x B) out of the right edge;
//   send_top / send_left  inject single messages.
// A monitor collects the right-edge results per row and counts right-edge and bottom-edge
// exits and collision cycles. Expected values are computed here in the same order of
// single-precision operations as the array performs them, with the reference conversions of
// fp_ref_pkg (never with the design's own floating-point unit).
module fabric_host
  import msg_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64
) (
  output logic clk,
  output logic rst,
  output logic top_in_valid    [COLS],
  output msg_t top_in_msg      [COLS],
  output logic left_in_valid   [ROWS],
  output msg_t left_in_msg     [ROWS],
  output logic bus_valid       [COLS],
  output msg_t bus_msg         [COLS],
  input  logic right_out_valid [ROWS],
  input  msg_t right_out_msg   [ROWS],
  input  logic bottom_out_valid[COLS],
  input  msg_t bottom_out_msg  [COLS],
  input  logic collision
);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_hop_loads = 0, n_bus = 0, n_offloads = 0, n_bottom = 0, n_collisions = 0;
  int n_left = 0;
  longint cyc = 0;

  // results seen on the right edge
  logic  res_seen [ROWS];
  fp32_t res_val  [ROWS];
  msg_t  res_msg  [ROWS];
  longint res_cyc [ROWS];
  msg_t  last_bottom;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc = cyc + 1;
    if (!rst) begin
      for (int r = 0; r < ROWS; r++)
        if (right_out_valid[r]) begin
          res_seen[r] = 1'b1;
          res_val[r]  = right_out_msg[r].value;
          res_msg[r]  = right_out_msg[r];
          res_cyc[r]  = cyc;
          n_offloads++;
        end
      for (int c = 0; c < COLS; c++)
        if (bottom_out_valid[c]) begin
          n_bottom++;
          last_bottom = bottom_out_msg[c];
        end
      if (collision) n_collisions++;
    end
  end

  function automatic addr_t site(input int r, input int c);
    return addr_t'(r * COLS + c);
  endfunction

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s: got %h expected %h at cycle %0d", what, got, exp_v, cyc);
    end
  endtask

  task automatic idle_inputs();
    for (int c = 0; c < COLS; c++) begin
      top_in_valid[c] = 1'b0;
      bus_valid[c]    = 1'b0;
    end
    for (int r = 0; r < ROWS; r++) left_in_valid[r] = 1'b0;
  endtask

  task automatic do_reset();
    idle_inputs();
    for (int c = 0; c < COLS; c++) begin
      top_in_msg[c] = '0;
      bus_msg[c]    = '0;
    end
    for (int r = 0; r < ROWS; r++) left_in_msg[r] = '0;
    rst = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
  endtask

  task automatic clear_results();
    for (int r = 0; r < ROWS; r++) res_seen[r] = 1'b0;
  endtask

  // Load the N x M matrix a (fp32 bits) and program the accumulator column M.
  // Returns the value of cyc at the first cycle of the load.
  task automatic load_matrix(input int n, input int m, input fp32_t a[][], output longint t0);
    for (int k = 0; k < n; k++) begin
      int r;
      r = n - 1 - k;  // last row first
      @(negedge clk);
      idle_inputs();
      if (k == 0) t0 = cyc;
      for (int c = 0; c < m; c++) begin
        top_in_valid[c] = 1'b1;
        top_in_msg[c]   = make_msg(OP_PROG, site(r, c), a[r][c],
                                   (c == m - 1) ? OP_UPDATE : OP_A_ADD, site(r, m));
      end
      top_in_valid[m] = 1'b1;
      top_in_msg[m]   = make_msg(OP_PROG, site(r, m), 32'h0, OP_UPDATE, site(r, 0));
      n_hop_loads += m + 1;
    end
    // the last row stays on the inputs for one cycle; the next task's first step clears it
  endtask

  // One multiply-accumulate-scale-offset pass with vector b, damping d and offset e:
  // result[r] = e + d * sum_c a[r][c] * b[c]. The caller has loaded the matrix.
  // Waits for all n results; returns the cycle of the bus broadcast and of the last result.
  task automatic iterate(input int n, input int m, input fp32_t b[], input fp32_t d,
                         input fp32_t e, output longint t_bus, output longint t_done);
    int  wait_cycles;
    bit  all;
    clear_results();
    @(negedge clk);
    idle_inputs();
    t_bus = cyc;
    for (int c = 0; c < m; c++) begin
      bus_valid[c] = 1'b1;
      bus_msg[c]   = make_msg(OP_A_MULS, site(0, c), b[c], OP_NOP, '0);
    end
    n_bus++;
    // the product of column 0 needs m hops to reach the accumulator
    repeat (m) begin
      @(negedge clk);
      idle_inputs();
    end
    @(negedge clk);
    bus_valid[m] = 1'b1;
    bus_msg[m]   = make_msg(OP_A_MUL, site(0, m), d, OP_NOP, '0);
    n_bus++;
    @(negedge clk);
    bus_valid[m] = 1'b1;
    bus_msg[m]   = make_msg(OP_A_ADDS, site(0, m), e, OP_NOP, '0);
    n_bus++;
    @(negedge clk);
    idle_inputs();
    wait_cycles = 0;
    do begin
      @(negedge clk);
      wait_cycles++;
      all = 1;
      for (int r = 0; r < n; r++) if (!res_seen[r]) all = 0;
    end while (!all && wait_cycles < COLS + 8);
    t_done = 0;
    for (int r = 0; r < n; r++)
      if (res_seen[r] && res_cyc[r] > t_done) t_done = res_cyc[r];
  endtask

  // Expected result of iterate for row r, in the array's order of operations:
  // acc = p[m-1]; acc += p[m-2]; ... acc += p[0]; acc *= d; out = acc + e.
  function automatic fp32_t expected_row(input int r, input int m, input fp32_t a[][],
                                         input fp32_t b[], input fp32_t d, input fp32_t e);
    fp32_t acc;
    acc = to_fp32(to_real(a[r][m-1]) * to_real(b[m-1]));
    for (int c = m - 2; c >= 0; c--)
      acc = to_fp32(to_real(acc) + to_real(to_fp32(to_real(a[r][c]) * to_real(b[c]))));
    acc = to_fp32(to_real(acc) * to_real(d));
    return to_fp32(to_real(acc) + to_real(e));
  endfunction

  // Check all n results of the last iterate against the reference; returns the results.
  task automatic check_results(input int n, input int m, input fp32_t a[][], input fp32_t b[],
                               input fp32_t d, input fp32_t e, output fp32_t pr[]);
    pr = new[n];
    for (int r = 0; r < n; r++) begin
      fp32_t x;
      x = expected_row(r, m, a, b, d, e);
      expect_eq($sformatf("row %0d result seen", r), 64'(res_seen[r]), 1);
      expect_eq($sformatf("row %0d result", r), 64'(res_val[r]), 64'(x));
      expect_eq($sformatf("row %0d offload op", r), 64'(res_msg[r].op), 64'(OP_UPDATE));
      expect_eq($sformatf("row %0d offload dest", r), 64'(res_msg[r].dest), 64'(site(r, 0)));
      pr[r] = res_val[r];
    end
  endtask

  task automatic send_top(input int c, input msg_t msg);
    @(negedge clk);
    idle_inputs();
    top_in_valid[c] = 1'b1;
    top_in_msg[c]   = msg;
    @(negedge clk);
    idle_inputs();
  endtask

  task automatic send_left(input int r, input msg_t msg);
    @(negedge clk);
    idle_inputs();
    left_in_valid[r] = 1'b1;
    left_in_msg[r]   = msg;
    n_left++;
    @(negedge clk);
    idle_inputs();
  endtask

  // Require that a mechanism happened at least once.
  task automatic expect_seen(input string what, input int count);
    checks++;
    $display("mechanism %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

endmodule
