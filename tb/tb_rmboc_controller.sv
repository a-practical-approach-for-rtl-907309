// tb_rmboc_controller: self-checking test of the crosspoint controller,
// with a configuration store attached and the main FIFO modelled in the
// testbench. The controller sits at address 2 of a 4-PE network with K = 2
// segments, so that segment exhaustion can be reached.
// Checks, against expectations written out by hand from the protocol:
// routing of each command type to LEFT / RIGHT / PE; REPLY takes the highest
// free incoming segment, writes the in/out entries and passes its index on;
// a repeated (src, dst) REPLY reuses its segment; with no free segment a
// REPLY turns into CANCEL towards the source and DESTROY towards the
// destination; DESTROY clears the channel; 4-cycle processing (output valid
// 3 cycles after the main-FIFO read strobe and one command per 4 cycles).
module tb_rmboc_controller;
  import rmboc_pkg::*;
  localparam int K = 2, AW = 2, SW = 1;
  localparam int CW = 3 + 2 * AW + SW;
  localparam int OUT_EW = 2 + SW + 2 * AW, IN_EW = 2 + 2 * AW;
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  logic clk = 0, rst_n = 0;
  logic [AW-1:0] my_id = 2;
  logic mf_empty, mf_rd, mf_dout_valid = 0;
  logic [CW-1:0] mf_dout = '0;
  logic [OUT_EW-1:0] out_tab [2][K];
  logic [IN_EW-1:0]  in_tab  [2][K];
  logic clr_en, in_wr_en, in_wr_side, out_wr_en, out_wr_side;
  logic [AW-1:0] clr_src, clr_dst;
  logic [SW-1:0] in_wr_idx, out_wr_idx;
  logic [IN_EW-1:0] in_wr_ent;
  logic [OUT_EW-1:0] out_wr_ent;
  logic to_left_valid, to_right_valid, to_pe_valid;
  logic [CW-1:0] to_left_cmd, to_right_cmd, to_pe_cmd;
  logic ev_cmd, ev_alloc, ev_reuse, ev_fail, ev_free;
  int checks = 0, failures = 0, cycle = 0, rd_cycle = 0, out_cycle = 0;
  int n_reuse = 0, n_fail = 0;

  rmboc_controller #(.K(K), .AW(AW), .SW(SW)) dut (.*);
  rmboc_config_store #(.K(K), .AW(AW), .SW(SW)) u_cfg (
    .clk, .rst_n, .clr_en, .clr_src, .clr_dst, .in_wr_en, .in_wr_side, .in_wr_idx,
    .in_wr_ent, .out_wr_en, .out_wr_side, .out_wr_idx, .out_wr_ent, .out_tab, .in_tab);

  always #5 clk = ~clk;

  // main FIFO model
  logic [CW-1:0] mq [$];
  int mq_n = 0;
  assign mf_empty = (mq_n == 0);
  always @(posedge clk) begin
    cycle <= cycle + 1;
    mf_dout_valid <= 1'b0;
    if (mf_rd) begin
      mf_dout <= mq.pop_front();
      mq_n <= mq_n - 1;
      mf_dout_valid <= 1'b1;
      rd_cycle = cycle;
    end
    if (rst_n && ev_reuse) n_reuse++;
    if (rst_n && ev_fail) n_fail++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  function automatic logic [CW-1:0] mk(cmd_op_e op, int s, int d, int g);
    cmd_t c;
    c.op = op; c.src = AW'(s); c.dst = AW'(d); c.seg = SW'(g);
    return c;
  endfunction

  // Push one command, wait for the OUT cycle and compare the three outputs
  // (an expected value of '1 means "no output on that port").
  task automatic run(input logic [CW-1:0] c, input logic [CW-1:0] el,
                     input logic [CW-1:0] er, input logic [CW-1:0] ep, input string what);
    mq.push_back(c);
    mq_n++;
    do begin @(posedge clk); #1; end while (!(to_left_valid || to_right_valid || to_pe_valid));
    out_cycle = cycle;
    check(out_cycle - rd_cycle == 3, {what, ": output 3 cycles after read strobe"});
    check(to_left_valid == (el != '1), {what, ": left valid"});
    check(to_right_valid == (er != '1), {what, ": right valid"});
    check(to_pe_valid == (ep != '1), {what, ": pe valid"});
    if (el != '1) check(to_left_cmd == el, {what, ": left cmd"});
    if (er != '1) check(to_right_cmd == er, {what, ": right cmd"});
    if (ep != '1) check(to_pe_cmd == ep, {what, ": pe cmd"});
    @(posedge clk); #1;
  endtask

  function automatic in_ent_t ine(int s, int b);
    return in_tab[s][b];
  endfunction
  function automatic out_ent_t oute(int s, int b);
    return out_tab[s][b];
  endfunction

  localparam logic [CW-1:0] NONE = '1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_ent_t ie;
    out_ent_t oe;
    int t0, t1;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    // routing of commands that change nothing
    run(mk(CMD_REQUEST, 0, 3, 0), NONE, mk(CMD_REQUEST, 0, 3, 0), NONE, "REQUEST 0->3 goes right");
    run(mk(CMD_REQUEST, 3, 1, 0), mk(CMD_REQUEST, 3, 1, 0), NONE, NONE, "REQUEST 3->1 goes left");
    run(mk(CMD_REQUEST, 0, 2, 0), NONE, NONE, mk(CMD_REQUEST, 0, 2, 0), "REQUEST 0->2 to PE");
    run(mk(CMD_CANCEL, 0, 3, 0), mk(CMD_CANCEL, 0, 3, 0), NONE, NONE, "CANCEL goes to source");
    run(mk(CMD_CONFIRM, 3, 0, 0), NONE, mk(CMD_CONFIRM, 3, 0, 0), NONE, "CONFIRM goes to source");
    run(mk(CMD_CONFIRM, 2, 0, 0), NONE, NONE, mk(CMD_CONFIRM, 2, 0, 0), "CONFIRM to own PE");
    // REPLY 0->3 arriving from the right with segment 0 chosen downstream:
    // highest free LEFT incoming segment is 1
    run(mk(CMD_REPLY, 0, 3, 0), mk(CMD_REPLY, 0, 3, 1), NONE, NONE, "REPLY 0->3 allocates seg 1");
    ie = ine(0, 1); oe = oute(1, 0);
    check(ie.busy && !ie.to_pe && ie.src == 0 && ie.dst == 3, "in entry LEFT/1");
    check(oe.used && !oe.from_pe && oe.idx == 1 && oe.src == 0 && oe.dst == 3, "out entry RIGHT/0 <- LEFT/1");
    // REPLY 1->2 from own PE (destination here): next free LEFT segment is 0
    run(mk(CMD_REPLY, 1, 2, 0), mk(CMD_REPLY, 1, 2, 0), NONE, NONE, "REPLY 1->2 allocates seg 0");
    ie = ine(0, 0);
    check(ie.busy && ie.to_pe && ie.src == 1, "in entry LEFT/0 ends at PE");
    // repeated REPLY 0->3 (seg 1 downstream this time): reuse LEFT/1
    run(mk(CMD_REPLY, 0, 3, 1), mk(CMD_REPLY, 0, 3, 1), NONE, NONE, "repeated REPLY reuses seg 1");
    oe = oute(1, 0);
    check(!oe.used, "stale out entry RIGHT/0 cleared on reuse");
    oe = oute(1, 1);
    check(oe.used && oe.idx == 1, "new out entry RIGHT/1");
    check(n_reuse == 1, "reuse event");
    // REPLY 0->2: LEFT side full -> CANCEL to source (left), DESTROY to PE
    run(mk(CMD_REPLY, 0, 2, 0), mk(CMD_CANCEL, 0, 2, 0), NONE, mk(CMD_DESTROY, 0, 2, 0),
        "no free segment: CANCEL + DESTROY");
    check(n_fail == 1, "fail event");
    ie = ine(0, 0);
    check(ie.src == 1 && ie.dst == 2, "failed REPLY leaves table untouched");
    // REPLY 2->0 from the right? source is own PE: out entry LEFT/seg from PE
    run(mk(CMD_REPLY, 2, 0, 1), NONE, NONE, mk(CMD_REPLY, 2, 0, 0), "REPLY at source goes to PE");
    oe = oute(0, 1);
    check(oe.used && oe.from_pe && oe.src == 2 && oe.dst == 0, "out entry LEFT/1 fed by PE");
    // REPLY 3->0 arriving from left: RIGHT incoming side, highest free = 1
    run(mk(CMD_REPLY, 3, 0, 0), NONE, mk(CMD_REPLY, 3, 0, 1), NONE, "REPLY 3->0 allocates RIGHT seg 1");
    oe = oute(0, 0);
    check(oe.used && oe.idx == 1 && oe.src == 3, "out LEFT/0 <- RIGHT/1");
    // DESTROY 0->3 clears its entries and goes on to the right
    run(mk(CMD_DESTROY, 0, 3, 0), NONE, mk(CMD_DESTROY, 0, 3, 0), NONE, "DESTROY forwarded");
    ie = ine(0, 1); oe = oute(1, 1);
    check(!ie.busy && !oe.used, "DESTROY frees the channel");
    ie = ine(0, 0);
    check(ie.busy, "DESTROY leaves other channels");
    // the freed segment is allocated again
    run(mk(CMD_REPLY, 0, 2, 0), mk(CMD_REPLY, 0, 2, 1), NONE, NONE, "freed segment reused");
    // throughput: 4 commands back to back, one output every 4 cycles
    for (int i = 0; i < 4; i++) begin mq.push_back(mk(CMD_REQUEST, 0, 3, 0)); mq_n++; end
    t0 = -1;
    for (int i = 0; i < 4; i++) begin
      do begin @(posedge clk); #1; end while (!to_right_valid);
      if (t0 >= 0) check(cycle - t0 == 4, "one command per 4 cycles");
      t0 = cycle;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
