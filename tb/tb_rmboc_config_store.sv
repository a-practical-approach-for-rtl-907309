// tb_rmboc_config_store: self-checking test of the crosspoint configuration
// table. A testbench copy of the table is the reference. Checks: reset
// empties it; single-entry writes to both tables and sides; a clear removes
// exactly the entries tagged with the given (src, dst) pair; a write in the
// same cycle as a clear wins; random sequences of writes and clears.
module tb_rmboc_config_store;
  localparam int K = 4, AW = 2, SW = 2;
  localparam int OUT_EW = 2 + SW + 2 * AW, IN_EW = 2 + 2 * AW;
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  logic clk = 0, rst_n = 0;
  logic clr_en = 0, in_wr_en = 0, in_wr_side = 0, out_wr_en = 0, out_wr_side = 0;
  logic [AW-1:0] clr_src = '0, clr_dst = '0;
  logic [SW-1:0] in_wr_idx = '0, out_wr_idx = '0;
  logic [IN_EW-1:0] in_wr_ent = '0;
  logic [OUT_EW-1:0] out_wr_ent = '0;
  logic [OUT_EW-1:0] out_tab [2][K];
  logic [IN_EW-1:0]  in_tab  [2][K];
  int checks = 0, failures = 0;
  out_ent_t m_out [2][K];
  in_ent_t  m_in  [2][K];

  rmboc_config_store #(.K(K), .AW(AW), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic compare(input string what);
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < K; b++) begin
        check(out_tab[s][b] == m_out[s][b], {what, ": out_tab"});
        check(in_tab[s][b] == m_in[s][b], {what, ": in_tab"});
      end
  endtask

  task automatic op(input logic c, input logic [AW-1:0] cs, input logic [AW-1:0] cd,
                    input logic iw, input logic is, input logic [SW-1:0] ii, input in_ent_t ie,
                    input logic ow, input logic os, input logic [SW-1:0] oi, input out_ent_t oe);
    clr_en = c; clr_src = cs; clr_dst = cd;
    in_wr_en = iw; in_wr_side = is; in_wr_idx = ii; in_wr_ent = ie;
    out_wr_en = ow; out_wr_side = os; out_wr_idx = oi; out_wr_ent = oe;
    // reference
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < K; b++) begin
        if (c && m_out[s][b].used && m_out[s][b].src == cs && m_out[s][b].dst == cd) m_out[s][b] = '0;
        if (c && m_in[s][b].busy && m_in[s][b].src == cs && m_in[s][b].dst == cd) m_in[s][b] = '0;
      end
    if (ow) m_out[os][oi] = oe;
    if (iw) m_in[is][ii] = ie;
    @(posedge clk); #1;
    clr_en = 0; in_wr_en = 0; out_wr_en = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_ent_t ie, ie2;
    out_ent_t oe;
    for (int s = 0; s < 2; s++) for (int b = 0; b < K; b++) begin m_out[s][b] = '0; m_in[s][b] = '0; end
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    compare("after reset");
    // channel 1 -> 3 passing through: in LEFT seg 3, out RIGHT seg 2
    ie = '{busy: 1, to_pe: 0, src: 1, dst: 3};
    oe = '{used: 1, from_pe: 0, idx: 3, src: 1, dst: 3};
    op(0, 0, 0, 1, 0, 3, ie, 1, 1, 2, oe);
    compare("write pass-through");
    ie = in_tab[0][3]; oe = out_tab[1][2];
    check(ie.busy && oe.idx == 3, "entry fields");
    // channel 3 -> 0 passing leftwards: in RIGHT seg 1, out LEFT seg 0
    ie = '{busy: 1, to_pe: 0, src: 3, dst: 0};
    oe = '{used: 1, from_pe: 0, idx: 1, src: 3, dst: 0};
    op(0, 0, 0, 1, 1, 1, ie, 1, 0, 0, oe);
    compare("write second channel");
    // clear 1 -> 3 only
    op(1, 1, 3, 0, 0, 0, '0, 0, 0, 0, '0);
    compare("clear one channel");
    ie = in_tab[0][3]; ie2 = in_tab[1][1];
    check(!ie.busy && ie2.busy, "clear is selective");
    // clear and rewrite the same channel in one cycle: the write wins
    ie = '{busy: 1, to_pe: 1, src: 3, dst: 0};
    op(1, 3, 0, 1, 1, 1, ie, 0, 0, 0, '0);
    compare("clear with write");
    ie2 = in_tab[1][1]; oe = out_tab[0][0];
    check(ie2.busy && !oe.used, "write wins, other cleared");
    // random
    for (int i = 0; i < 500; i++) begin
      ie = in_ent_t'($urandom); ie.busy = 1;
      oe = out_ent_t'($urandom); oe.used = 1;
      op(1'($urandom_range(0, 3) == 0), AW'($urandom), AW'($urandom),
         1'($urandom), 1'($urandom), SW'($urandom), ie,
         1'($urandom), 1'($urandom), SW'($urandom), oe);
      compare("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
