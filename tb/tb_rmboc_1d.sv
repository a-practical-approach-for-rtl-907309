// tb_rmboc_1d: end-to-end test of the 1-D RMBoC with four PEs (behavioural
// models) at N = 4, W = 16, FIFO depth 16 and K = 2 segments instead of 4:
// with four PEs and four segments a crosspoint can never run out of
// segments (at most j*(N-j) <= 4 distinct channels cross any gap in one
// direction, and repeated requests reuse their segment), so K is reduced to
// make allocation failure reachable. The sequence:
//   1. REQUEST 0->3 on the idle network reaches PE 3 after 4 hops x 8 cycles.
//   2. Channels 2->3 and 0->3 (the latter changes bus level at crosspoint 3)
//      and 3->0; data words cross from source to destination in the cycle
//      they are driven.
//   3. PE 2 rejects PE 1: the source gets CANCEL.
//   4. Channel 0->1 fills crosspoint 1; 0->2 then finds no segment: PE 0 gets
//      CANCEL, PE 2 gets DESTROY (and answers CONFIRM).
//   5. A repeated REQUEST 0->3 reuses its segments instead of taking new ones.
//   6. DESTROY 0->3 tears the channel down, PE 3 confirms; 0->2 then succeeds.
//   7. A burst of 30 commands from PE 1 overflows its input FIFO.
// Each mechanism is counted; one that never occurred is a failure.
module tb_rmboc_1d;
  import rmboc_pkg::*;
  localparam int N = 4, K = 2, W = 16, DEPTH = 16;
  localparam int AW = 2, SW = 1, CW = 3 + 2 * AW + SW;

  logic clk = 0, rst_n = 0;
  logic          pe_cmd_in_valid  [N];
  logic [CW-1:0] pe_cmd_in        [N];
  logic          pe_cmd_out_rd    [N];
  logic [CW-1:0] pe_cmd_out       [N];
  logic          pe_cmd_out_valid [N];
  logic          pe_cmd_out_empty [N];
  logic [W-1:0]  pe_tx_data  [N];
  logic [AW-1:0] pe_rx_src   [N];
  logic [W-1:0]  pe_rx_data  [N];
  logic          pe_rx_valid [N];
  logic [3:0]    overflow [N];
  logic [4:0]    ev       [N];
  int checks = 0, failures = 0, cycle = 0;
  int n_alloc = 0, n_reuse = 0, n_fail = 0, n_free = 0, n_ovf = 0, n_contend = 0;
  int n_xfer = 0;

  rmboc_1d #(.N(N), .K(K), .W(W), .DEPTH(DEPTH)) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_pe
    rmboc_pe_model #(.N(N), .AW(AW), .SW(SW)) u_pe (
      .clk, .rst_n, .my_id(AW'(i)),
      .cmd_valid(pe_cmd_in_valid[i]), .cmd(pe_cmd_in[i]),
      .out_rd(pe_cmd_out_rd[i]), .out_cmd(pe_cmd_out[i]),
      .out_valid(pe_cmd_out_valid[i]), .out_empty(pe_cmd_out_empty[i]));
    // each PE transmits its address and the cycle number
    assign pe_tx_data[i] = {4'(i), 12'(cycle)};
    always @(posedge clk) if (rst_n) begin
      if (ev[i][1]) n_alloc++;
      if (ev[i][2]) n_reuse++;
      if (ev[i][3]) n_fail++;
      if (ev[i][4]) n_free++;
      if (overflow[i] != 0) n_ovf++;
      if ($countones(~dut.u_line.g_cp[i].u_cp.in_empty) > 1) n_contend++;
    end
  end

  always #5 clk = ~clk;
  always_ff @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask
  task automatic tick();
    @(posedge clk); #1;
  endtask
  task automatic settle(input int n);
    repeat (n) tick();
  endtask

  // destination d listens to source s for a few cycles; every word must be
  // the one the source drives in that same cycle
  task automatic check_data(input int s, input int d, input string what);
    pe_rx_src[d] = AW'(s);
    for (int i = 0; i < 5; i++) begin
      #1;
      check(pe_rx_valid[d], {what, ": channel visible at destination"});
      check(pe_rx_data[d] == pe_tx_data[s], {what, ": word arrives in the same cycle"});
      if (pe_rx_valid[d] && pe_rx_data[d] == pe_tx_data[s]) n_xfer++;
      tick();
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int i = 0; i < N; i++) pe_rx_src[i] = '0;
    settle(3);
    rst_n = 1;
    settle(2);
    // 1. latency of a REQUEST over four crosspoints
    g_pe[0].u_pe.open_chan(3);
    @(posedge clk); #1; t0 = cycle;            // PE 0 drives the command now
    while (!dut.u_line.g_cp[3].u_cp.to_pe_valid && cycle - t0 < 200) tick();
    check(cycle - t0 == 32, $sformatf("REQUEST 0->3 takes 4 x 8 cycles (took %0d)", cycle - t0));
    settle(60);
    check(g_pe[0].u_pe.chan_up[3], "channel 0->3 up");
    check_data(0, 3, "0->3");
    g_pe[0].u_pe.close_chan(3);
    settle(80);
    // 2. 2->3 first, then 0->3 must change level at crosspoint 3; and 3->0
    g_pe[2].u_pe.open_chan(3);
    settle(60);
    g_pe[0].u_pe.open_chan(3);
    g_pe[3].u_pe.open_chan(0);
    settle(120);
    check(g_pe[2].u_pe.chan_up[3] && g_pe[0].u_pe.chan_up[3] && g_pe[3].u_pe.chan_up[0],
          "channels 2->3, 0->3, 3->0 up");
    check_data(2, 3, "2->3");
    check_data(0, 3, "0->3 with level change");
    check_data(3, 0, "3->0");
    // 3. rejection by the destination
    g_pe[2].u_pe.reject_mask[1] = 1'b1;
    g_pe[1].u_pe.open_chan(2);
    settle(100);
    check(g_pe[1].u_pe.n_cancel[2] == 1 && !g_pe[1].u_pe.chan_up[2], "PE 2 rejects PE 1");
    // 4. exhaustion at crosspoint 1 (K = 2, 0->3 already crosses it)
    g_pe[0].u_pe.open_chan(1);
    settle(60);
    check(g_pe[0].u_pe.chan_up[1], "channel 0->1 up");
    g_pe[0].u_pe.open_chan(2);
    settle(120);
    check(g_pe[0].u_pe.n_cancel[2] == 1 && !g_pe[0].u_pe.chan_up[2], "0->2 refused: no free segment");
    check(g_pe[2].u_pe.n_destroy_rx == 1, "destination got the automatic DESTROY");
    check(g_pe[0].u_pe.n_confirm[2] == 1, "destination confirmed the DESTROY");
    pe_rx_src[2] = 0; #1;
    check(!pe_rx_valid[2], "no half-built channel left at PE 2");
    // 5. repeated request reuses the segments of 0->3
    t0 = n_reuse;
    g_pe[0].u_pe.open_chan(3);
    settle(120);
    check(n_reuse - t0 == 3, $sformatf("repeated 0->3 reuses at 3 crosspoints (%0d)", n_reuse - t0));
    check_data(0, 3, "0->3 after reuse");
    // 6. teardown and CONFIRM, then the freed segment serves 0->2
    g_pe[0].u_pe.close_chan(3);
    settle(120);
    check(g_pe[0].u_pe.n_confirm[3] == 2, "PE 3 confirmed both teardowns of 0->3");
    pe_rx_src[3] = 0; #1;
    check(!pe_rx_valid[3], "0->3 gone");
    check_data(2, 3, "2->3 unaffected");
    g_pe[0].u_pe.open_chan(2);
    settle(120);
    check(g_pe[0].u_pe.chan_up[2], "0->2 up after 0->3 was freed");
    check_data(0, 2, "0->2");
    // 7. burst from PE 1 to itself overflows its input FIFO; meanwhile PEs 0
    // and 3 exchange refused requests, so that commands from both sides
    // meet at crosspoints 1 and 2 and wait for the round robin
    g_pe[0].u_pe.reject_mask = '1;
    g_pe[3].u_pe.reject_mask = '1;
    for (int i = 0; i < 4; i++) begin
      g_pe[0].u_pe.open_chan(3);
      g_pe[3].u_pe.open_chan(0);
    end
    for (int i = 0; i < 30; i++) g_pe[1].u_pe.open_chan(1);
    settle(400);
    check(g_pe[0].u_pe.n_bad + g_pe[1].u_pe.n_bad + g_pe[2].u_pe.n_bad + g_pe[3].u_pe.n_bad == 0,
          "PEs received only commands addressed to them");
    // every mechanism occurred
    $display("mechanisms: alloc=%0d reuse=%0d fail=%0d free=%0d overflow=%0d contention=%0d transfers=%0d",
             n_alloc, n_reuse, n_fail, n_free, n_ovf, n_contend, n_xfer);
    check(n_alloc > 0, "segment allocation happened");
    check(n_reuse > 0, "segment reuse happened");
    check(n_fail > 0, "allocation failure happened");
    check(n_free > 0, "DESTROY processing happened");
    check(n_ovf > 0, "FIFO overflow happened");
    check(n_contend > 0, "round-robin contention happened");
    check(n_xfer > 0, "data transfer happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
