// rmboc_tradeoff_case: one configuration of the segment-count versus
// segment-width trade-off, for testbenches only. It builds a 1-D RMBoC with
// four PEs and K segments of W bits per direction, drives it with four
// behavioural PEs and runs a fixed traffic pattern:
//   - one REQUEST across all four crosspoints, whose latency must be 32
//     cycles whatever K and W are;
//   - K >= 4: all twelve PE-to-PE channels are opened and every one must
//     come up and carry data in the cycle it is driven;
//   - K == 2: four channels needing two segments in each loaded gap and
//     direction come up, and a fifth that would need a third segment on the
//     PE2-PE3 gap must be cancelled (the flexibility the narrower-bus
//     configurations give up).
// Results are reported as check and failure counts and a done flag; the
// enclosing testbench sums them.
module rmboc_tradeoff_case
  import rmboc_pkg::*;
#(
  parameter int K = 4,
  parameter int W = 16
) (
  input  logic clk,
  output int   n_checks,
  output int   n_failures,
  output logic done
);
  localparam int N = 4, AW = 2, SW = (K > 1) ? $clog2(K) : 1, CW = 3 + 2 * AW + SW;

  logic rst_n = 0;
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
  int cycle = 0;

  rmboc_1d #(.N(N), .K(K), .W(W)) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_pe
    rmboc_pe_model #(.N(N), .AW(AW), .SW(SW)) u_pe (
      .clk, .rst_n, .my_id(AW'(i)),
      .cmd_valid(pe_cmd_in_valid[i]), .cmd(pe_cmd_in[i]),
      .out_rd(pe_cmd_out_rd[i]), .out_cmd(pe_cmd_out[i]),
      .out_valid(pe_cmd_out_valid[i]), .out_empty(pe_cmd_out_empty[i]));
    assign pe_tx_data[i] = W'({cycle[13:0], 2'(i)} * 16'h9E37);
  end

  always_ff @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic ok, input string what);
    n_checks++;
    if (!ok) begin n_failures++; $display("FAIL K=%0d W=%0d: %s (cycle %0d)", K, W, what, cycle); end
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
  function automatic logic [N-1:0] up_of(input int s);
    case (s)
      0: return g_pe[0].u_pe.chan_up;
      1: return g_pe[1].u_pe.chan_up;
      2: return g_pe[2].u_pe.chan_up;
      default: return g_pe[3].u_pe.chan_up;
    endcase
  endfunction
  function automatic int cancels(input int s, input int d);
    case (s)
      0: return g_pe[0].u_pe.n_cancel[d];
      1: return g_pe[1].u_pe.n_cancel[d];
      2: return g_pe[2].u_pe.n_cancel[d];
      default: return g_pe[3].u_pe.n_cancel[d];
    endcase
  endfunction
  task automatic data_check(input int s, input int d);
    pe_rx_src[d] = AW'(s); #1;
    check(pe_rx_valid[d] && pe_rx_data[d] == pe_tx_data[s], $sformatf("data %0d->%0d", s, d));
  endtask

  initial begin
    int t0;
    n_checks = 0; n_failures = 0; done = 0;
    for (int i = 0; i < N; i++) pe_rx_src[i] = '0;
    repeat (3) tick();
    rst_n = 1;
    repeat (2) tick();
    open_from(0, 3);
    @(posedge clk); #1; t0 = cycle;
    while (!dut.u_line.g_cp[3].u_cp.to_pe_valid && cycle - t0 < 200) tick();
    check(cycle - t0 == 32, $sformatf("REQUEST 0->3 takes 32 cycles (took %0d)", cycle - t0));
    if (K >= 4) begin
      for (int s = 0; s < N; s++)
        for (int d = 0; d < N; d++)
          if (s != d && !(s == 0 && d == 3)) open_from(s, d);
      repeat (600) tick();
      for (int s = 0; s < N; s++)
        for (int d = 0; d < N; d++)
          if (s != d) begin
            check(up_of(s)[d], $sformatf("channel %0d->%0d up", s, d));
            data_check(s, d);
          end
    end else begin
      // rightward on gap 2-3: 0->3 and 1->3; leftward on gap 1-2: 3->0 and 2->1
      open_from(1, 3); open_from(3, 0); open_from(2, 1);
      repeat (400) tick();
      check(up_of(0)[3] && up_of(1)[3] && up_of(3)[0] && up_of(2)[1], "four channels up");
      data_check(0, 3); data_check(3, 0); data_check(2, 1);
      open_from(2, 3);
      repeat (300) tick();
      check(!up_of(2)[3] && cancels(2, 3) == 1, "third rightward channel on gap 2-3 cancelled");
      data_check(1, 3);
    end
    done = 1;
  end
endmodule
