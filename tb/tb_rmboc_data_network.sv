// tb_rmboc_data_network: self-checking test of the crosspoint data path.
// Random configuration tables and random segment data are applied and every
// output is compared with a reference computed in the testbench: an unused
// outgoing segment is 0, a used one carries the PE word or the named
// incoming segment of the opposite side, and the PE receive port returns the
// channel from the selected source that ends here. Directed cases cover a
// bus-level change (in on segment 3, out on segment 0) in both directions.
module tb_rmboc_data_network;
  localparam int K = 4, W = 16, AW = 2, SW = 2;
  localparam int OUT_EW = 2 + SW + 2 * AW, IN_EW = 2 + 2 * AW;
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  logic [OUT_EW-1:0] out_tab [2][K];
  logic [IN_EW-1:0]  in_tab  [2][K];
  logic [W-1:0] rseg_in [K], lseg_in [K], rseg_out [K], lseg_out [K];
  logic [W-1:0] pe_tx_data, pe_rx_data;
  logic [AW-1:0] pe_rx_src;
  logic pe_rx_valid;
  int checks = 0, failures = 0;

  rmboc_data_network #(.K(K), .W(W), .AW(AW), .SW(SW)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic verify(input string what);
    logic [W-1:0] e;
    logic v;
    #1;
    for (int b = 0; b < K; b++) begin
      out_ent_t ol, orr;
      ol = out_ent_t'(out_tab[0][b]);
      orr = out_ent_t'(out_tab[1][b]);
      e = !ol.used ? '0 : ol.from_pe ? pe_tx_data : lseg_in[ol.idx];
      check(lseg_out[b] == e, {what, ": lseg_out"});
      e = !orr.used ? '0 : orr.from_pe ? pe_tx_data : rseg_in[orr.idx];
      check(rseg_out[b] == e, {what, ": rseg_out"});
    end
    v = 0; e = '0;
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < K; b++) begin
        in_ent_t ie;
        ie = in_ent_t'(in_tab[s][b]);
        if (!v && ie.busy && ie.to_pe && ie.src == pe_rx_src) begin
          v = 1; e = s == 0 ? rseg_in[b] : lseg_in[b];
        end
      end
    check(pe_rx_valid == v, {what, ": pe_rx_valid"});
    if (v) check(pe_rx_data == e, {what, ": pe_rx_data"});
  endtask

  initial begin
    for (int s = 0; s < 2; s++) for (int b = 0; b < K; b++) begin out_tab[s][b] = '0; in_tab[s][b] = '0; end
    for (int b = 0; b < K; b++) begin rseg_in[b] = W'(16'h1000 + b); lseg_in[b] = W'(16'h2000 + b); end
    pe_tx_data = 16'hBEEF; pe_rx_src = 0;
    verify("empty table");
    for (int b = 0; b < K; b++) check(rseg_out[b] == 0 && lseg_out[b] == 0, "idle segments are 0");
    // rightward pass-through, level change 3 -> 0
    out_tab[1][0] = out_ent_t'{used: 1, from_pe: 0, idx: 3, src: 0, dst: 3};
    verify("rightward level change");
    check(rseg_out[0] == 16'h1003, "rightward data follows segment 3 to segment 0");
    // leftward from PE on segment 2
    out_tab[0][2] = out_ent_t'{used: 1, from_pe: 1, idx: 0, src: 2, dst: 0};
    verify("leftward from PE");
    check(lseg_out[2] == 16'hBEEF, "PE word on leftward segment 2");
    // channel from 3 ending here on RIGHT seg 1
    in_tab[1][1] = in_ent_t'{busy: 1, to_pe: 1, src: 3, dst: 2};
    pe_rx_src = 3;
    verify("rx from right");
    check(pe_rx_valid && pe_rx_data == 16'h2001, "PE receives segment 1 from the right");
    pe_rx_src = 1;
    verify("rx other source");
    check(!pe_rx_valid, "no channel from source 1");
    for (int i = 0; i < 3000; i++) begin
      for (int s = 0; s < 2; s++) for (int b = 0; b < K; b++) begin
        out_tab[s][b] = OUT_EW'($urandom);
        in_tab[s][b]  = IN_EW'($urandom);
      end
      for (int b = 0; b < K; b++) begin rseg_in[b] = W'($urandom); lseg_in[b] = W'($urandom); end
      pe_tx_data = W'($urandom);
      pe_rx_src  = AW'($urandom);
      verify("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
