// site_o_tb: self-checking test of one programmable site.
//
// Part 1 replays the published single-site experiment: a site with address 5 in a 4-column
// array (neighbours 4 left, 6 right, 9 below) receives LEFT-1 = 0x00f44121999a0051 (Prog,
// destination 5, value 10.1, next A_ADD to 15) from the left while TOP-1..TOP-5 (all Prog to
// site 9) arrive from the top one per cycle. LEFT-1 must be decoded in the site, the five
// top messages must leave through the down port unchanged and in order, one cycle after
// they enter, and nothing may leave to the right.
// Part 2 checks every instruction: the stored value after Prog, UPDATE and the four storing
// operations, the messages generated by the four streaming operations (op and destination
// taken from the site's next fields, value from the FPU), the published example
// 1.3 x 3 -> UPDATE 3.9 to site 3, bus delivery, a collision and reset.
module site_o_tb;
  import msg_pkg::*;
  import fp_ref_pkg::*;

  localparam int COLS = 4;

  logic  clk = 1'b0, rst;
  addr_t my_addr;
  logic  wl, wt, wb;
  msg_t  lm, tm, bm;
  logic  wr, wd, coll;
  msg_t  rm, dm;
  int    checks = 0, failures = 0;

  site_o #(.COLS(COLS)) dut (
    .Clock(clk), .Reset(rst), .my_addr(my_addr),
    .WriteToLeft(wl), .LeftMessage(lm), .WriteToTop(wt), .TopMessage(tm),
    .BusWrite(wb), .BusMessage(bm),
    .WriteToRight(wr), .RightMessage(rm), .WriteToDown(wd), .DownMessage(dm),
    .Collision(coll)
  );

  always #5 clk = ~clk;

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s: got %h expected %h at %0t", what, got, exp_v, $time);
    end
  endtask

  task automatic idle();
    wl = 0; wt = 0; wb = 0;
  endtask

  // drive one message for one cycle on the given input (0 left, 1 top, 2 bus)
  task automatic send(input int port, input msg_t m);
    @(negedge clk);
    idle();
    case (port)
      0: begin wl = 1; lm = m; end
      1: begin wt = 1; tm = m; end
      default: begin wb = 1; bm = m; end
    endcase
    @(negedge clk);
    idle();
  endtask

  // read the stored value by asking the site to stream it: A_ADDS +0
  // (the generated message carries the site's next op and next destination)
  task automatic read_value(output fp32_t v, output msg_t g);
    send(0, make_msg(OP_A_ADDS, my_addr, 32'h0000_0000, OP_NOP, '0));
    // output registered at the edge that consumed the message; we are at the following negedge
    g = wr ? rm : dm;
    checks++;
    if (!(wr || wd)) begin
      failures++;
      $display("FAIL no message streamed at %0t", $time);
    end
    v = g.value;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  msg_t  top_msgs[5];
  fp32_t v;
  msg_t  g;
  int    n_down;

  initial begin
    idle();
    lm = '0; tm = '0; bm = '0;
    my_addr = 12'd5;
    rst = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    expect_eq("reset right", 64'(wr), 0);
    expect_eq("reset down", 64'(wd), 0);

    // ---- part 1: published single-site experiment ----
    top_msgs[0] = 64'h00f44111999a0091;  // Prog 9, 9.1
    top_msgs[1] = 64'h00f44101999a0091;  // Prog 9, 8.1
    top_msgs[2] = 64'h00f440e333330091;  // Prog 9, 7.1
    top_msgs[3] = 64'h00d7404000000091;  // Prog 9, 3, next A_ADDS 13
    top_msgs[4] = 64'h00f440c333330091;  // Prog 9, 6.1
    n_down = 0;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      wt = 1; tm = top_msgs[i];
      wl = (i == 3); lm = 64'h00f44121999a0051;  // LEFT-1 together with TOP-4
      @(posedge clk); #1;
      // one cycle after entering, the top message is on the down port
      expect_eq("down strobe", 64'(wd), 1);
      expect_eq("down message", dm, top_msgs[i]);
      expect_eq("no right", 64'(wr), 0);
      n_down += int'(wd);
    end
    @(negedge clk) idle();
    expect_eq("all five passed down", 64'(n_down), 5);
    // LEFT-1 was decoded here: value 10.1, next op A_ADD, next destination 15 (row 3: down)
    read_value(v, g);
    expect_eq("LEFT-1 value", 64'(v), 64'h4121999a);
    expect_eq("LEFT-1 next op", 64'(g.op), 64'(OP_A_ADD));
    expect_eq("LEFT-1 next dest", 64'(g.dest), 15);
    expect_eq("LEFT-1 next goes down", 64'(wd), 1);

    // ---- part 2: instructions ----
    // published example: site 2 (row 0) holds 1.3 with next UPDATE to 3; A_MULS by 3
    my_addr = 12'd2;
    send(1, make_msg(OP_PROG, 12'd2, 32'h3fa66666, OP_UPDATE, 12'd3));
    send(2, make_msg(OP_A_MULS, 12'd2, 32'h40400000, OP_NOP, 12'd0));
    expect_eq("A_MULS streams right", 64'(wr), 1);
    expect_eq("A_MULS op", 64'(rm.op), 64'(OP_UPDATE));
    expect_eq("A_MULS dest", 64'(rm.dest), 3);
    expect_eq("A_MULS value 3.9", 64'(rm.value), 64'(to_fp32(to_real(32'h3fa66666) * 3.0)));
    read_value(v, g);
    expect_eq("stream keeps value", 64'(v), 64'h3fa66666);

    // storing operations at site 6 (row 1); next destination 13 (row 3, goes down)
    my_addr = 12'd6;
    send(0, make_msg(OP_PROG, 12'd6, 32'h41200000, OP_A_ADD, 12'd13));      // 10
    send(0, make_msg(OP_A_ADD, 12'd6, 32'h40a00000, OP_NOP, 12'd0));        // +5 = 15
    send(0, make_msg(OP_A_SUB, 12'd6, 32'h3f800000, OP_NOP, 12'd0));        // -1 = 14
    send(1, make_msg(OP_A_MUL, 12'd6, 32'h3f000000, OP_NOP, 12'd0));        // *0.5 = 7
    send(1, make_msg(OP_A_DIV, 12'd6, 32'h40000000, OP_NOP, 12'd0));        // /2 = 3.5
    read_value(v, g);
    expect_eq("store chain 3.5", 64'(v), 64'h40600000);
    expect_eq("generated goes down", 64'(wd), 1);
    expect_eq("generated dest", 64'(g.dest), 13);
    send(0, make_msg(OP_UPDATE, 12'd6, 32'hc0800000, OP_NOP, 12'd0));       // -4
    read_value(v, g);
    expect_eq("UPDATE -4", 64'(v), 64'hc0800000);

    // streaming operations: value of the generated message, next fields passed on
    send(0, make_msg(OP_A_SUBS, 12'd6, 32'h3f800000, OP_A_MUL, 12'd15));    // -4 - 1
    expect_eq("A_SUBS value", 64'(dm.value), 64'hc0a00000);
    expect_eq("A_SUBS nxt_op", 64'(dm.nxt_op), 64'(OP_A_MUL));
    expect_eq("A_SUBS nxt_dest", 64'(dm.nxt_dest), 15);
    send(0, make_msg(OP_A_DIVS, 12'd6, 32'h40000000, OP_NOP, 12'd0));       // -4 / 2
    expect_eq("A_DIVS value", 64'(dm.value), 64'hc0000000);
    send(0, make_msg(OP_A_ADDS, 12'd6, 32'h41000000, OP_NOP, 12'd0));       // -4 + 8
    expect_eq("A_ADDS value", 64'(dm.value), 64'h40800000);

    // unused opcode is ignored: nothing stored, nothing sent
    send(0, make_msg(4'b1111, 12'd6, 32'h3f800000, OP_NOP, 12'd0));
    expect_eq("unused op sends nothing", 64'(wr | wd), 0);
    read_value(v, g);
    expect_eq("unused op keeps value", 64'(v), 64'hc0800000);

    // collision: two messages for the right port in one cycle
    @(negedge clk);
    wl = 1; lm = make_msg(OP_PROG, 12'd7, 32'h0, OP_NOP, 12'd0);
    wt = 1; tm = make_msg(OP_PROG, 12'd7, 32'h0, OP_NOP, 12'd0);
    @(negedge clk) idle();
    expect_eq("collision flagged", 64'(coll), 1);
    expect_eq("left wins right port", 64'(rm), 64'(make_msg(OP_PROG, 12'd7, 32'h0, OP_NOP, 12'd0)));
    @(negedge clk);
    expect_eq("collision one cycle", 64'(coll), 0);

    // reset clears the site
    @(negedge clk) rst = 1;
    @(negedge clk) rst = 0;
    // an unprogrammed site (next opcode NOP) streams nothing
    send(0, make_msg(OP_A_ADDS, my_addr, 32'h3f800000, OP_NOP, '0));
    expect_eq("reset: nothing streamed", 64'(wr | wd), 0);
    send(0, make_msg(OP_PROG, my_addr, 32'h3f800000, OP_A_ADD, 12'd7));
    send(0, make_msg(OP_A_SUB, my_addr, 32'h3f800000, OP_NOP, '0));
    read_value(v, g);
    expect_eq("after reset 1 - 1", 64'(v), 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
