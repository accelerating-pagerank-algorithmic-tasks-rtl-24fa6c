// site_decoder_tb: self-checking test of a site's message decoder and router.
//
// Drives random combinations of left, top, bus and generated messages into the decoder of
// a site in a 4-column array and compares the local, right and down outputs and the
// collision flag with a reference model written from the routing rules: consume at the
// matching address (bus always), go down while the destination row is lower, else go right;
// priorities bus > left > top locally, left > top > generated to the right, top > left >
// generated downward. Destinations are drawn close to the site so that every case occurs.
module site_decoder_tb;
  import msg_pkg::*;

  localparam int COLS = 4;

  addr_t my_addr;
  logic  left_valid, top_valid, bus_valid, gen_valid;
  msg_t  left_msg, top_msg, bus_msg, gen_msg;
  logic  local_valid, right_valid, down_valid, collision;
  msg_t  local_msg, right_msg, down_msg;
  int    checks = 0, failures = 0;
  int    n_local = 0, n_right = 0, n_down = 0, n_coll = 0;

  site_decoder #(.COLS(COLS)) dut (.*);

  function automatic msg_t rnd_msg(input int here);
    msg_t m;
    m = {$urandom, $urandom};
    m.dest = addr_t'(here - 5 + int'($urandom % 14));  // around the site, some rows below
    return m;
  endfunction

  // 0: local, 1: right, 2: down
  function automatic int ref_route(input addr_t dest, input addr_t here);
    int dr, hr;
    dr = int'(dest) / COLS;
    hr = int'(here) / COLS;
    if (dest == here) return 0;
    if (dr > hr) return 2;
    return 1;
  endfunction

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s: got %h expected %h (addr %0d)", what, got, exp_v, my_addr);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      int   here, lr, tr, gr;
      logic e_lv, e_rv, e_dv, e_c;
      msg_t e_lm, e_rm, e_dm;
      int   nloc, nr, nd;
      here       = 6 + int'($urandom % 20);
      my_addr    = addr_t'(here);
      left_valid = ($urandom % 3) != 0;
      top_valid  = ($urandom % 3) != 0;
      bus_valid  = ($urandom % 5) == 0;
      gen_valid  = ($urandom % 3) == 0;
      left_msg   = rnd_msg(here);
      top_msg    = rnd_msg(here);
      bus_msg    = rnd_msg(here);
      gen_msg    = rnd_msg(here);
      if (($urandom % 4) == 0) left_msg.dest = my_addr;
      if (($urandom % 4) == 0) top_msg.dest  = my_addr;
      #1;
      lr = left_valid ? ref_route(left_msg.dest, my_addr) : -1;
      tr = top_valid  ? ref_route(top_msg.dest, my_addr)  : -1;
      gr = gen_valid  ? (ref_route(gen_msg.dest, my_addr) == 2 ? 2 : 1) : -1;
      // local
      nloc = int'(bus_valid) + int'(lr == 0) + int'(tr == 0);
      e_lv = nloc > 0;
      e_lm = bus_valid ? bus_msg : (lr == 0) ? left_msg : top_msg;
      // right
      nr   = int'(lr == 1) + int'(tr == 1) + int'(gr == 1);
      e_rv = nr > 0;
      e_rm = (lr == 1) ? left_msg : (tr == 1) ? top_msg : gen_msg;
      // down
      nd   = int'(lr == 2) + int'(tr == 2) + int'(gr == 2);
      e_dv = nd > 0;
      e_dm = (tr == 2) ? top_msg : (lr == 2) ? left_msg : gen_msg;
      e_c  = nloc > 1 || nr > 1 || nd > 1;
      expect_eq("local_valid", 64'(local_valid), 64'(e_lv));
      if (e_lv) expect_eq("local_msg", local_msg, e_lm);
      expect_eq("right_valid", 64'(right_valid), 64'(e_rv));
      if (e_rv) expect_eq("right_msg", right_msg, e_rm);
      expect_eq("down_valid", 64'(down_valid), 64'(e_dv));
      if (e_dv) expect_eq("down_msg", down_msg, e_dm);
      expect_eq("collision", 64'(collision), 64'(e_c));
      n_local += int'(e_lv); n_right += int'(e_rv); n_down += int'(e_dv); n_coll += int'(e_c);
    end
    // every case must have occurred
    checks++;
    if (n_local == 0 || n_right == 0 || n_down == 0 || n_coll == 0) begin
      failures++;
      $display("FAIL coverage local=%0d right=%0d down=%0d collision=%0d",
               n_local, n_right, n_down, n_coll);
    end
    $display("coverage local=%0d right=%0d down=%0d collision=%0d", n_local, n_right, n_down, n_coll);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
