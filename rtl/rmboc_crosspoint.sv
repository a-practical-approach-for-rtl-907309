// rmboc_crosspoint: one crosspoint of the RMBoC, i.e. all bus switches of
// one column merged into a single block with one controller, so that the
// free-segment decision is taken in one cycle instead of by switches
// talking to each other.
//
// Structure (command path): commands from the LEFT and RIGHT neighbours and
// from the PE each enter an input FIFO; the FIFO selector moves them
// round-robin into the main FIFO; the controller processes them and writes
// results straight into the neighbours' input FIFOs (cmd_to_left/right) or
// into the PE output FIFO, from which the PE pops them (pe_cmd_out_rd, word
// on pe_cmd_out one cycle later with pe_cmd_out_valid). Data path: the data
// network connects incoming and outgoing segments and the PE according to
// the configuration store.
//
// Timing: a command written into an input FIFO in cycle t is written into
// the next FIFO (neighbour or PE output FIFO) in cycle t+8 when the
// crosspoint is idle: 2 cycles to read the input FIFO, 2 to write the main
// FIFO, 2 to read it and 2 to decide and write the result, the step times the
// paper gives. In steady state one command is processed every 4 cycles.
// Data on an established channel is combinational through the crosspoint.
//
// overflow[3:0] pulses when a command is dropped at the LEFT, RIGHT, PE
// input FIFO or the PE output FIFO. ev[4:0] = {free, fail, reuse, alloc,
// cmd} are the controller's event pulses.
module rmboc_crosspoint #(
  parameter int K     = 4,   // segments per direction (paper: k = 4)
  parameter int W     = 16,  // data bits per segment (paper: w = 16)
  parameter int AW    = 2,   // PE address width (n = 4 PEs)
  parameter int DEPTH = 16,  // command FIFO depth
  parameter int ROUTE_LSB = 0,  // address field used for LEFT/RIGHT routing
  parameter int ROUTE_W   = AW,
  localparam int SW = (K > 1) ? $clog2(K) : 1,
  localparam int CW = 3 + 2 * AW + SW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] my_id,
  // command links to the neighbours
  input  logic          cmd_from_left_valid,
  input  logic [CW-1:0] cmd_from_left,
  input  logic          cmd_from_right_valid,
  input  logic [CW-1:0] cmd_from_right,
  output logic          cmd_to_left_valid,
  output logic [CW-1:0] cmd_to_left,
  output logic          cmd_to_right_valid,
  output logic [CW-1:0] cmd_to_right,
  // command port of the PE
  input  logic          pe_cmd_in_valid,
  input  logic [CW-1:0] pe_cmd_in,
  input  logic          pe_cmd_out_rd,
  output logic [CW-1:0] pe_cmd_out,
  output logic          pe_cmd_out_valid,
  output logic          pe_cmd_out_empty,
  // data segments
  input  logic [W-1:0]  rseg_in  [K],
  input  logic [W-1:0]  lseg_in  [K],
  output logic [W-1:0]  rseg_out [K],
  output logic [W-1:0]  lseg_out [K],
  // data port of the PE
  input  logic [W-1:0]  pe_tx_data,
  input  logic [AW-1:0] pe_rx_src,
  output logic [W-1:0]  pe_rx_data,
  output logic          pe_rx_valid,
  // observation
  output logic [3:0]    overflow,
  output logic [4:0]    ev
);
  localparam int OUT_EW = 2 + SW + 2 * AW;
  localparam int IN_EW  = 2 + 2 * AW;
  localparam int CNTW   = $clog2(DEPTH + 1);

  // ---- input FIFOs: 0 LEFT, 1 RIGHT, 2 PE -----------------------------------
  logic [2:0]    in_wr, in_empty, in_rd, in_dvalid, in_full;
  logic [CW-1:0] in_din [3];
  logic [CW-1:0] in_dout [3];
  logic [CNTW-1:0] in_count [3];

  assign in_wr  = {pe_cmd_in_valid, cmd_from_right_valid, cmd_from_left_valid};
  assign in_din = '{cmd_from_left, cmd_from_right, pe_cmd_in};

  for (genvar i = 0; i < 3; i++) begin : g_in_fifo
    rmboc_fifo #(.WIDTH(CW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en(in_wr[i]), .din(in_din[i]), .full(in_full[i]),
      .overflow(overflow[i]),
      .rd_en(in_rd[i]), .dout(in_dout[i]), .dout_valid(in_dvalid[i]),
      .empty(in_empty[i]), .count(in_count[i])
    );
  end

  // ---- FIFO selector and main FIFO ----------------------------------------
  logic          mf_full, mf_wr, mf_empty, mf_rd, mf_dvalid, mf_ovf;
  logic [CW-1:0] mf_din, mf_dout;
  logic [1:0]    grant;
  logic [CNTW-1:0] mf_count;

  rmboc_fifo_selector #(.WIDTH(CW)) u_sel (
    .clk, .rst_n,
    .in_empty, .in_rd, .in_dout, .in_dout_valid(in_dvalid),
    .mf_full, .mf_wr, .mf_din, .grant
  );

  rmboc_fifo #(.WIDTH(CW), .DEPTH(DEPTH)) u_main_fifo (
    .clk, .rst_n,
    .wr_en(mf_wr), .din(mf_din), .full(mf_full), .overflow(mf_ovf),
    .rd_en(mf_rd), .dout(mf_dout), .dout_valid(mf_dvalid),
    .empty(mf_empty), .count(mf_count)
  );

  // ---- controller and configuration store ----------------------------------
  logic [OUT_EW-1:0] out_tab [2][K];
  logic [IN_EW-1:0]  in_tab  [2][K];
  logic              clr_en, in_wr_en, in_wr_side, out_wr_en, out_wr_side;
  logic [AW-1:0]     clr_src, clr_dst;
  logic [SW-1:0]     in_wr_idx, out_wr_idx;
  logic [IN_EW-1:0]  in_wr_ent;
  logic [OUT_EW-1:0] out_wr_ent;
  logic              to_pe_valid;
  logic [CW-1:0]     to_pe_cmd;
  logic              pe_full, pe_ovf;
  logic [CNTW-1:0]   pe_count;

  rmboc_controller #(.K(K), .AW(AW), .SW(SW), .ROUTE_LSB(ROUTE_LSB), .ROUTE_W(ROUTE_W)) u_ctrl (
    .clk, .rst_n, .my_id,
    .mf_empty, .mf_rd, .mf_dout, .mf_dout_valid(mf_dvalid),
    .in_tab,
    .clr_en, .clr_src, .clr_dst,
    .in_wr_en, .in_wr_side, .in_wr_idx, .in_wr_ent,
    .out_wr_en, .out_wr_side, .out_wr_idx, .out_wr_ent,
    .to_left_valid(cmd_to_left_valid), .to_left_cmd(cmd_to_left),
    .to_right_valid(cmd_to_right_valid), .to_right_cmd(cmd_to_right),
    .to_pe_valid, .to_pe_cmd,
    .ev_cmd(ev[0]), .ev_alloc(ev[1]), .ev_reuse(ev[2]), .ev_fail(ev[3]),
    .ev_free(ev[4])
  );

  rmboc_config_store #(.K(K), .AW(AW), .SW(SW)) u_cfg (
    .clk, .rst_n,
    .clr_en, .clr_src, .clr_dst,
    .in_wr_en, .in_wr_side, .in_wr_idx, .in_wr_ent,
    .out_wr_en, .out_wr_side, .out_wr_idx, .out_wr_ent,
    .out_tab, .in_tab
  );

  // ---- PE output FIFO --------------------------------------------------------
  rmboc_fifo #(.WIDTH(CW), .DEPTH(DEPTH)) u_pe_fifo (
    .clk, .rst_n,
    .wr_en(to_pe_valid), .din(to_pe_cmd), .full(pe_full), .overflow(pe_ovf),
    .rd_en(pe_cmd_out_rd), .dout(pe_cmd_out), .dout_valid(pe_cmd_out_valid),
    .empty(pe_cmd_out_empty), .count(pe_count)
  );
  assign overflow[3] = pe_ovf;

  // ---- data network ----------------------------------------------------------
  rmboc_data_network #(.K(K), .W(W), .AW(AW), .SW(SW)) u_dnet (
    .out_tab, .in_tab,
    .rseg_in, .lseg_in, .rseg_out, .lseg_out,
    .pe_tx_data, .pe_rx_src, .pe_rx_data, .pe_rx_valid
  );

  // The selector never writes a full main FIFO.
  a_main_no_drop: assert property (@(posedge clk) disable iff (!rst_n) !mf_ovf);
endmodule
