// rmboc_line: a chain of M RMBoC crosspoints, the common building block of
// the 1-D network (one line) and of the 2-D network (one line per row and
// one per column). Crosspoint i gets the address ids[i]; LEFT/RIGHT routing
// compares the address bits [ROUTE_LSB +: ROUTE_W], so the same line serves
// as a row (column field) or a column (row field) of a 2-D array.
//
// Neighbouring crosspoints are joined by K rightward and K leftward W-bit
// segments and by one command link per direction; the links at both ends
// are tied off, so a command routed past an end is lost. All per-PE ports
// are arrays indexed by the position in the line; see rmboc_crosspoint for
// their timing.
module rmboc_line #(
  parameter int M         = 4,   // crosspoints in the line
  parameter int K         = 4,   // segments per direction
  parameter int W         = 16,  // data bits per segment
  parameter int AW        = 2,   // address width
  parameter int DEPTH     = 16,  // command FIFO depth
  parameter int ROUTE_LSB = 0,
  parameter int ROUTE_W   = AW,
  localparam int SW = (K > 1) ? $clog2(K) : 1,
  localparam int CW = 3 + 2 * AW + SW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] ids [M],
  input  logic          pe_cmd_in_valid  [M],
  input  logic [CW-1:0] pe_cmd_in        [M],
  input  logic          pe_cmd_out_rd    [M],
  output logic [CW-1:0] pe_cmd_out       [M],
  output logic          pe_cmd_out_valid [M],
  output logic          pe_cmd_out_empty [M],
  input  logic [W-1:0]  pe_tx_data  [M],
  input  logic [AW-1:0] pe_rx_src   [M],
  output logic [W-1:0]  pe_rx_data  [M],
  output logic          pe_rx_valid [M],
  output logic [3:0]    overflow [M],
  output logic [4:0]    ev       [M]
);
  logic          to_l_v [M];
  logic [CW-1:0] to_l   [M];
  logic          to_r_v [M];
  logic [CW-1:0] to_r   [M];
  logic          from_l_v [M];
  logic [CW-1:0] from_l   [M];
  logic          from_r_v [M];
  logic [CW-1:0] from_r   [M];

  // The segment wires are declared per crosspoint (inside g_cp) rather than
  // as one array, so that the tools see the rightward and leftward chains
  // as the acyclic paths they are.
  for (genvar i = 0; i < M; i++) begin : g_cp
    logic [W-1:0] rseg_in  [K];
    logic [W-1:0] lseg_in  [K];
    logic [W-1:0] rseg_out [K];
    logic [W-1:0] lseg_out [K];
    if (i == 0) begin : g_left_end
      assign from_l_v[i] = 1'b0;
      assign from_l[i]   = '0;
      for (genvar b = 0; b < K; b++) begin : g_b
        assign rseg_in[b] = '0;
      end
    end else begin : g_left
      assign from_l_v[i] = to_r_v[i-1];
      assign from_l[i]   = to_r[i-1];
      assign rseg_in = g_cp[i-1].rseg_out;
    end
    if (i == M - 1) begin : g_right_end
      assign from_r_v[i] = 1'b0;
      assign from_r[i]   = '0;
      for (genvar b = 0; b < K; b++) begin : g_b
        assign lseg_in[b] = '0;
      end
    end else begin : g_right
      assign from_r_v[i] = to_l_v[i+1];
      assign from_r[i]   = to_l[i+1];
      assign lseg_in = g_cp[i+1].lseg_out;
    end

    rmboc_crosspoint #(.K(K), .W(W), .AW(AW), .DEPTH(DEPTH),
                       .ROUTE_LSB(ROUTE_LSB), .ROUTE_W(ROUTE_W)) u_cp (
      .clk, .rst_n,
      .my_id(ids[i]),
      .cmd_from_left_valid(from_l_v[i]),  .cmd_from_left(from_l[i]),
      .cmd_from_right_valid(from_r_v[i]), .cmd_from_right(from_r[i]),
      .cmd_to_left_valid(to_l_v[i]),      .cmd_to_left(to_l[i]),
      .cmd_to_right_valid(to_r_v[i]),     .cmd_to_right(to_r[i]),
      .pe_cmd_in_valid(pe_cmd_in_valid[i]), .pe_cmd_in(pe_cmd_in[i]),
      .pe_cmd_out_rd(pe_cmd_out_rd[i]),     .pe_cmd_out(pe_cmd_out[i]),
      .pe_cmd_out_valid(pe_cmd_out_valid[i]),
      .pe_cmd_out_empty(pe_cmd_out_empty[i]),
      .rseg_in, .lseg_in, .rseg_out, .lseg_out,
      .pe_tx_data(pe_tx_data[i]), .pe_rx_src(pe_rx_src[i]),
      .pe_rx_data(pe_rx_data[i]), .pe_rx_valid(pe_rx_valid[i]),
      .overflow(overflow[i]), .ev(ev[i])
    );
  end

  // Nothing leaves the ends of the line.
  logic unused_ends;
  assign unused_ends = to_l_v[0] | to_r_v[M-1] | ^to_l[0] | ^to_r[M-1];
endmodule
