// tb_rmboc_2d: end-to-end test of the 2-D RMBoC at its default size (4 x 4
// PEs, K = 4, W = 16). The testbench plays the processors, including the
// two that turn a connection from a column line into a row line or back.
// Two routes of the kind shown for the 2-D network are built:
//   A = (3,0) -> B = (1,2): up column 0 to row 1, PE (1,0) relays, then
//                           right along row 1 (upward first);
//   C = (0,3) -> D = (3,1): left along row 0 to column 1, PE (0,1) relays,
//                           then down column 1 (down only in D's column).
// Checks: the REQUEST is delivered to the turning PE by the first line and
// to the destination by the second; the REPLY builds both halves (the turning
// PE acts as destination of one half and source of the other); data driven
// by the source reaches the destination in the same cycle through the relay;
// DESTROY removes both halves.
module tb_rmboc_2d;
  import rmboc_pkg::*;
  localparam int N = 4, K = 4, W = 16;
  localparam int RB = 2, AW = 4, SW = 2, CW = 3 + 2 * AW + SW, P = N * N;
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  logic clk = 0, rst_n = 0;
  logic          row_cmd_in_valid [P], col_cmd_in_valid [P];
  logic [CW-1:0] row_cmd_in [P], col_cmd_in [P];
  logic          row_cmd_out_rd [P], col_cmd_out_rd [P];
  logic [CW-1:0] row_cmd_out [P], col_cmd_out [P];
  logic          row_cmd_out_valid [P], col_cmd_out_valid [P];
  logic          row_cmd_out_empty [P], col_cmd_out_empty [P];
  logic [W-1:0]  row_tx_data [P], col_tx_data [P];
  logic [AW-1:0] row_rx_src [P], col_rx_src [P];
  logic [W-1:0]  row_rx_data [P], col_rx_data [P];
  logic          row_rx_valid [P], col_rx_valid [P];
  logic [3:0]    row_overflow [P], col_overflow [P];
  logic [4:0]    row_ev [P], col_ev [P];
  int checks = 0, failures = 0, cycle = 0;

  rmboc_2d dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) cycle <= cycle + 1;

  function automatic int ix(int r, int c);
    return r * N + c;
  endfunction
  function automatic logic [AW-1:0] ad(int r, int c);
    return {RB'(r), RB'(c)};
  endfunction
  function automatic logic [CW-1:0] mk(cmd_op_e op, logic [AW-1:0] s, logic [AW-1:0] d);
    cmd_t c;
    c.op = op; c.src = s; c.dst = d; c.seg = '0;
    return c;
  endfunction

  // the two turning PEs forward what they receive on one line to the other
  localparam int T1 = 1 * N + 0;   // (1,0): column half in, row half out
  localparam int T2 = 0 * N + 1;   // (0,1): row half in, column half out
  for (genvar p = 0; p < P; p++) begin : g_tx
    if (p == T1) begin : g_t1
      assign row_tx_data[p] = col_rx_data[p];
      assign col_tx_data[p] = '0;
    end else if (p == T2) begin : g_t2
      assign col_tx_data[p] = row_rx_data[p];
      assign row_tx_data[p] = '0;
    end else begin : g_src
      assign row_tx_data[p] = {4'(p), 12'(cycle)};
      assign col_tx_data[p] = {4'(p), 12'(cycle) ^ 12'hFFF};
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask
  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic send(input bit col, input int p, input logic [CW-1:0] c);
    if (col) begin col_cmd_in_valid[p] = 1; col_cmd_in[p] = c; end
    else     begin row_cmd_in_valid[p] = 1; row_cmd_in[p] = c; end
    tick();
    col_cmd_in_valid[p] = 0; row_cmd_in_valid[p] = 0;
  endtask

  // wait for a command at PE p on the row or column port and compare it
  task automatic expect_cmd(input bit col, input int p, input logic [CW-1:0] c, input string what);
    int n = 0;
    while ((col ? col_cmd_out_empty[p] : row_cmd_out_empty[p]) && n < 300) begin tick(); n++; end
    check(n < 300, {what, ": command arrives"});
    if (col) col_cmd_out_rd[p] = 1; else row_cmd_out_rd[p] = 1;
    tick();
    col_cmd_out_rd[p] = 0; row_cmd_out_rd[p] = 0;
    check((col ? col_cmd_out_valid[p] : row_cmd_out_valid[p]) &&
          (col ? col_cmd_out[p] : row_cmd_out[p]) == c, {what, ": right command"});
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] a, b, c, d;
    a = ad(3, 0); b = ad(1, 2); c = ad(0, 3); d = ad(3, 1);
    for (int p = 0; p < P; p++) begin
      row_cmd_in_valid[p] = 0; col_cmd_in_valid[p] = 0; row_cmd_in[p] = '0; col_cmd_in[p] = '0;
      row_cmd_out_rd[p] = 0; col_cmd_out_rd[p] = 0; row_rx_src[p] = '0; col_rx_src[p] = '0;
    end
    repeat (3) tick();
    rst_n = 1;
    repeat (2) tick();
    // ---- A -> B: column first, then row
    send(1, ix(3, 0), mk(CMD_REQUEST, a, b));
    expect_cmd(1, T1, mk(CMD_REQUEST, a, b), "A->B REQUEST reaches turning PE (1,0) by column");
    send(0, T1, mk(CMD_REQUEST, a, b));
    expect_cmd(0, ix(1, 2), mk(CMD_REQUEST, a, b), "A->B REQUEST reaches B by row");
    send(0, ix(1, 2), mk(CMD_REPLY, a, b));
    expect_cmd(0, T1, mk(CMD_REPLY, a, b), "A->B REPLY back at turning PE");
    send(1, T1, mk(CMD_REPLY, a, b));
    expect_cmd(1, ix(3, 0), mk(CMD_REPLY, a, b), "A->B REPLY reaches A");
    col_rx_src[T1] = a;
    row_rx_src[ix(1, 2)] = a;
    for (int i = 0; i < 4; i++) begin
      #1;
      check(col_rx_valid[T1], "column half ends at turning PE");
      check(row_rx_valid[ix(1, 2)] && row_rx_data[ix(1, 2)] == col_tx_data[ix(3, 0)],
            "A's word reaches B in the same cycle");
      tick();
    end
    // ---- C -> D: row first, then column
    send(0, ix(0, 3), mk(CMD_REQUEST, c, d));
    expect_cmd(0, T2, mk(CMD_REQUEST, c, d), "C->D REQUEST reaches turning PE (0,1) by row");
    send(1, T2, mk(CMD_REQUEST, c, d));
    expect_cmd(1, ix(3, 1), mk(CMD_REQUEST, c, d), "C->D REQUEST reaches D by column");
    send(1, ix(3, 1), mk(CMD_REPLY, c, d));
    expect_cmd(1, T2, mk(CMD_REPLY, c, d), "C->D REPLY back at turning PE");
    send(0, T2, mk(CMD_REPLY, c, d));
    expect_cmd(0, ix(0, 3), mk(CMD_REPLY, c, d), "C->D REPLY reaches C");
    row_rx_src[T2] = c;
    col_rx_src[ix(3, 1)] = c;
    for (int i = 0; i < 4; i++) begin
      #1;
      check(col_rx_valid[ix(3, 1)] && col_rx_data[ix(3, 1)] == row_tx_data[ix(0, 3)],
            "C's word reaches D in the same cycle");
      tick();
    end
    // A -> B still intact
    #1;
    check(row_rx_valid[ix(1, 2)] && row_rx_data[ix(1, 2)] == col_tx_data[ix(3, 0)], "A->B unaffected");
    // ---- tear down A -> B
    send(1, ix(3, 0), mk(CMD_DESTROY, a, b));
    expect_cmd(1, T1, mk(CMD_DESTROY, a, b), "DESTROY reaches turning PE");
    send(0, T1, mk(CMD_DESTROY, a, b));
    expect_cmd(0, ix(1, 2), mk(CMD_DESTROY, a, b), "DESTROY reaches B");
    #1;
    check(!row_rx_valid[ix(1, 2)] && !col_rx_valid[T1], "both halves of A->B removed");
    check(col_rx_valid[ix(3, 1)], "C->D unaffected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
