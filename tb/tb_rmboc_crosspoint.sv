// tb_rmboc_crosspoint: self-checking test of one crosspoint (address 1 of a
// 4-PE network, K = 4 segments, W = 16, FIFO depth 16: the default sizes).
// The neighbours and the PE are driven by the testbench. Checks:
//   - a command entering an idle crosspoint leaves it 8 cycles later
//     (2 cycles per step for steps 1-3, 2 for steps 4-5);
//   - commands queued on all three inputs are served round-robin LEFT,
//     RIGHT, PE at one every 4 cycles;
//   - REPLY builds a pass-through, a PE-terminated and a PE-sourced channel
//     with the highest free segments, and data crosses in the same cycle;
//   - DESTROY removes a channel;
//   - worst case: MaxTotalComm = ceil((n^2+2n-4)/2) = 10 commands queued at
//     once (3 from the left, 4 from the right, 3 from the PE, the counts of
//     the second crosspoint of four) leave one every 4 cycles, the last one
//     4 + (10-1)*4 + 4 cycles after they arrived (the first stage of the
//     first command plus the bound on the processing time);
//   - a burst from the PE overflows its FIFO.
module tb_rmboc_crosspoint;
  import rmboc_pkg::*;
  localparam int K = 4, W = 16, AW = 2, SW = 2, DEPTH = 16;
  localparam int CW = 3 + 2 * AW + SW;
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  logic clk = 0, rst_n = 0;
  logic [AW-1:0] my_id = 1;
  logic cmd_from_left_valid = 0, cmd_from_right_valid = 0, pe_cmd_in_valid = 0;
  logic [CW-1:0] cmd_from_left = '0, cmd_from_right = '0, pe_cmd_in = '0;
  logic cmd_to_left_valid, cmd_to_right_valid;
  logic [CW-1:0] cmd_to_left, cmd_to_right, pe_cmd_out;
  logic pe_cmd_out_rd = 0, pe_cmd_out_valid, pe_cmd_out_empty;
  logic [W-1:0] rseg_in [K], lseg_in [K], rseg_out [K], lseg_out [K];
  logic [W-1:0] pe_tx_data = '0, pe_rx_data;
  logic [AW-1:0] pe_rx_src = '0;
  logic pe_rx_valid;
  logic [3:0] overflow;
  logic [4:0] ev;
  int checks = 0, failures = 0, cycle = 0, n_ovf = 0;
  logic watch = 0;
  int out_cycles [$];

  rmboc_crosspoint #(.K(K), .W(W), .AW(AW), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && overflow[2]) n_ovf++;
    if (watch && (cmd_to_left_valid || cmd_to_right_valid)) out_cycles.push_back(cycle);
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

  task automatic tick();
    @(posedge clk); #1;
  endtask

  // drive one command on port p (0 LEFT, 1 RIGHT, 2 PE) for one cycle
  task automatic send(input int p, input logic [CW-1:0] c);
    case (p)
      0: begin cmd_from_left_valid = 1; cmd_from_left = c; end
      1: begin cmd_from_right_valid = 1; cmd_from_right = c; end
      default: begin pe_cmd_in_valid = 1; pe_cmd_in = c; end
    endcase
  endtask
  task automatic release_inputs();
    cmd_from_left_valid = 0; cmd_from_right_valid = 0; pe_cmd_in_valid = 0;
  endtask

  // wait for the next command on port p; return the cycle distance from t0
  task automatic expect_out(input int p, input logic [CW-1:0] c, input int t0,
                            input int lat, input string what);
    int n = 0;
    while (!(p == 0 ? cmd_to_left_valid : p == 1 ? cmd_to_right_valid : dut.to_pe_valid) && n < 100) begin
      tick(); n++;
    end
    check(n < 100, {what, ": output seen"});
    check((p == 0 ? cmd_to_left : p == 1 ? cmd_to_right : dut.to_pe_cmd) == c, {what, ": command"});
    if (lat > 0) check(cycle - t0 == lat, $sformatf("%s: latency %0d (want %0d)", what, cycle - t0, lat));
  endtask

  // pop one command from the PE output FIFO and compare it
  task automatic pe_pop(input logic [CW-1:0] c, input string what);
    int n = 0;
    while (pe_cmd_out_empty && n < 100) begin tick(); n++; end
    pe_cmd_out_rd = 1; tick(); pe_cmd_out_rd = 0;
    check(pe_cmd_out_valid && pe_cmd_out == c, {what, ": PE receives"});
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int b = 0; b < K; b++) begin rseg_in[b] = W'(16'hA000 + b); lseg_in[b] = W'(16'hB000 + b); end
    repeat (3) tick();
    rst_n = 1; tick();
    // ---- 8-cycle hop latency
    send(0, mk(CMD_REQUEST, 0, 3, 0)); t0 = cycle; tick(); release_inputs();
    expect_out(1, mk(CMD_REQUEST, 0, 3, 0), t0, 8, "REQUEST left->right");
    repeat (4) tick();
    send(1, mk(CMD_REQUEST, 3, 1, 0)); t0 = cycle; tick(); release_inputs();
    expect_out(2, mk(CMD_REQUEST, 3, 1, 0), t0, 8, "REQUEST right->PE");
    pe_pop(mk(CMD_REQUEST, 3, 1, 0), "REQUEST 3->1");
    repeat (4) tick();
    // ---- round robin and one command per 4 cycles. RIGHT was served last,
    // so service starts at PE, then LEFT, RIGHT, PE, LEFT, RIGHT.
    send(0, mk(CMD_REQUEST, 0, 2, 0)); send(1, mk(CMD_CANCEL, 0, 2, 0)); send(2, mk(CMD_REQUEST, 1, 3, 0));
    t0 = cycle; tick();
    send(0, mk(CMD_REQUEST, 0, 3, 0)); send(1, mk(CMD_CONFIRM, 0, 3, 0)); send(2, mk(CMD_REQUEST, 1, 0, 0));
    tick(); release_inputs();
    expect_out(1, mk(CMD_REQUEST, 1, 3, 0), t0, 8, "RR 1: PE");
    tick();
    expect_out(1, mk(CMD_REQUEST, 0, 2, 0), t0, 12, "RR 2: LEFT");
    tick();
    expect_out(0, mk(CMD_CANCEL, 0, 2, 0), t0, 16, "RR 3: RIGHT");
    tick();
    expect_out(0, mk(CMD_REQUEST, 1, 0, 0), t0, 20, "RR 4: PE");
    tick();
    expect_out(1, mk(CMD_REQUEST, 0, 3, 0), t0, 24, "RR 5: LEFT");
    tick();
    expect_out(0, mk(CMD_CONFIRM, 0, 3, 0), t0, 28, "RR 6: RIGHT");
    repeat (4) tick();
    // ---- pass-through channel 0->3: REPLY from the right with seg 2
    send(1, mk(CMD_REPLY, 0, 3, 2)); t0 = cycle; tick(); release_inputs();
    expect_out(0, mk(CMD_REPLY, 0, 3, 3), t0, 8, "REPLY 0->3 takes LEFT seg 3");
    tick();
    check(rseg_out[2] == 16'hA003, "data LEFT seg 3 -> RIGHT seg 2");
    rseg_in[3] = 16'h1234; #1;
    check(rseg_out[2] == 16'h1234, "data follows in the same cycle");
    // ---- channel 0->1 ending at the PE, REPLY from own PE
    send(2, mk(CMD_REPLY, 0, 1, 0)); t0 = cycle; tick(); release_inputs();
    expect_out(0, mk(CMD_REPLY, 0, 1, 2), t0, 8, "REPLY 0->1 takes LEFT seg 2");
    tick();
    pe_rx_src = 0; #1;
    check(pe_rx_valid && pe_rx_data == 16'hA002, "PE receives channel from 0");
    pe_rx_src = 2; #1;
    check(!pe_rx_valid, "no channel from 2");
    // ---- channel 1->3 sourced by the PE, REPLY from the right with seg 1
    send(1, mk(CMD_REPLY, 1, 3, 1)); t0 = cycle; tick(); release_inputs();
    expect_out(2, mk(CMD_REPLY, 1, 3, 0), t0, 8, "REPLY 1->3 reaches source PE");
    pe_pop(mk(CMD_REPLY, 1, 3, 0), "REPLY 1->3");
    pe_tx_data = 16'h5A5A; #1;
    check(rseg_out[1] == 16'h5A5A, "PE word on RIGHT seg 1");
    // ---- DESTROY 0->3
    send(0, mk(CMD_DESTROY, 0, 3, 0)); t0 = cycle; tick(); release_inputs();
    expect_out(1, mk(CMD_DESTROY, 0, 3, 0), t0, 8, "DESTROY forwarded");
    tick();
    check(rseg_out[2] == 0 && rseg_out[1] == 16'h5A5A, "DESTROY frees only its channel");
    // ---- worst-case queue: MaxTotalComm commands arrive within 4 cycles
    repeat (4) tick();
    watch = 1;
    t0 = cycle;
    for (int i = 0; i < 4; i++) begin
      if (i < 3) send(0, mk(CMD_REQUEST, 0, 2 + i % 2, 0));
      send(1, mk(CMD_CANCEL, 0, 2 + i % 2, 0));
      if (i < 3) send(2, mk(CMD_REQUEST, 1, i == 1 ? 0 : 3, 0));
      tick(); release_inputs();
    end
    repeat (60) tick();
    watch = 0;
    check(out_cycles.size() == max_total_comm(4), $sformatf("%0d of %0d queued commands processed",
          out_cycles.size(), max_total_comm(4)));
    for (int i = 1; i < out_cycles.size(); i++)
      check(out_cycles[i] - out_cycles[i-1] == 4, "queued commands leave one every 4 cycles");
    if (out_cycles.size() > 0)
      check(out_cycles[out_cycles.size()-1] - t0 == 4 + max_proc_cycles(4),
            $sformatf("last queued command leaves after %0d cycles (want %0d)",
                      out_cycles[out_cycles.size()-1] - t0, 4 + max_proc_cycles(4)));
    // ---- PE burst overflows the PE input FIFO
    for (int i = 0; i < 30; i++) begin send(2, mk(CMD_REQUEST, 1, 1, 0)); tick(); end
    release_inputs();
    check(n_ovf > 0, "overflow on a burst of 30 commands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
