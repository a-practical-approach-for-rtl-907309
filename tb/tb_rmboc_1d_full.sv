// tb_rmboc_1d_full: the 1-D RMBoC at its default size (N = 4 PEs, K = 4
// segments, W = 16 bits, FIFO depth 16) taken through complete channel
// lifetimes: every PE opens a channel to every other PE (12 channels, the
// fully connected case that four segments per direction can carry), all
// twelve are checked to carry data in the cycle it is driven, then all are
// torn down with DESTROY and confirmed with CONFIRM, and the REQUEST
// latency over four crosspoints is checked to be 4 x 8 cycles.
module tb_rmboc_1d_full;
  import rmboc_pkg::*;
  localparam int N = 4, K = 4, W = 16;
  localparam int AW = 2, SW = 2, CW = 3 + 2 * AW + SW;

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
  int checks = 0, failures = 0, cycle = 0, n_fail = 0, n_ovf = 0;

  rmboc_1d dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_pe
    rmboc_pe_model #(.N(N), .AW(AW), .SW(SW)) u_pe (
      .clk, .rst_n, .my_id(AW'(i)),
      .cmd_valid(pe_cmd_in_valid[i]), .cmd(pe_cmd_in[i]),
      .out_rd(pe_cmd_out_rd[i]), .out_cmd(pe_cmd_out[i]),
      .out_valid(pe_cmd_out_valid[i]), .out_empty(pe_cmd_out_empty[i]));
    assign pe_tx_data[i] = {4'(i), 12'(cycle)};
    always @(posedge clk) if (rst_n) begin
      if (ev[i][3]) n_fail++;
      if (overflow[i] != 0) n_ovf++;
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

  task automatic open_from(input int s, input int d);
    case (s)
      0: g_pe[0].u_pe.open_chan(d);
      1: g_pe[1].u_pe.open_chan(d);
      2: g_pe[2].u_pe.open_chan(d);
      default: g_pe[3].u_pe.open_chan(d);
    endcase
  endtask
  task automatic close_from(input int s, input int d);
    case (s)
      0: g_pe[0].u_pe.close_chan(d);
      1: g_pe[1].u_pe.close_chan(d);
      2: g_pe[2].u_pe.close_chan(d);
      default: g_pe[3].u_pe.close_chan(d);
    endcase
  endtask
  function automatic logic [N-1:0] up_of(input int s);
    case (s)
      0: return g_pe[0].u_pe.chan_up;
      1: return g_pe[1].u_pe.chan_up;
      2: return g_pe[2].u_pe.chan_up;
      default: return g_pe[3].u_pe.chan_up;
    endcase
  endfunction
  function automatic int confirms(input int s, input int d);
    case (s)
      0: return g_pe[0].u_pe.n_confirm[d];
      1: return g_pe[1].u_pe.n_confirm[d];
      2: return g_pe[2].u_pe.n_confirm[d];
      default: return g_pe[3].u_pe.n_confirm[d];
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int i = 0; i < N; i++) pe_rx_src[i] = '0;
    repeat (3) tick();
    rst_n = 1;
    repeat (2) tick();
    // latency of one REQUEST across the idle array
    open_from(0, 3);
    @(posedge clk); #1; t0 = cycle;
    while (!dut.u_line.g_cp[3].u_cp.to_pe_valid && cycle - t0 < 200) tick();
    check(cycle - t0 == 32, $sformatf("REQUEST 0->3 takes 32 cycles (took %0d)", cycle - t0));
    // all other channels
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++)
        if (s != d && !(s == 0 && d == 3)) open_from(s, d);
    repeat (600) tick();
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++)
        if (s != d) check(up_of(s)[d], $sformatf("channel %0d->%0d up", s, d));
    check(n_fail == 0, "no allocation failure in the fully connected case");
    check(n_ovf == 0, "no command lost");
    // every channel carries data in the cycle it is driven
    for (int s = 0; s < N; s++) begin
      for (int d = 0; d < N; d++) if (d != s) pe_rx_src[d] = AW'(s);
      for (int c = 0; c < 3; c++) begin
        #1;
        for (int d = 0; d < N; d++)
          if (d != s) check(pe_rx_valid[d] && pe_rx_data[d] == pe_tx_data[s],
                            $sformatf("data %0d->%0d", s, d));
        tick();
      end
    end
    // tear everything down
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++)
        if (s != d) close_from(s, d);
    repeat (600) tick();
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++)
        if (s != d) check(confirms(s, d) == 1, $sformatf("CONFIRM for %0d->%0d", s, d));
    for (int d = 0; d < N; d++) begin
      for (int s = 0; s < N; s++) begin
        pe_rx_src[d] = AW'(s); #1;
        check(!pe_rx_valid[d], "no channel left after teardown");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
