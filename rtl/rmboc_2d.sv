// rmboc_2d: the two-dimensional RMBoC. NxN processing elements form a grid;
// every row and every column is a 1-D RMBoC line with K segments per
// direction, so each PE is attached to two crosspoints, one in its row and
// one in its column (2*N*N crosspoints in all).
//
// Addresses are {row, col}, each field $clog2(N) bits, and every command
// carries full source and destination addresses. A row crosspoint routes on
// the column field and a column crosspoint on the row field; a command thus
// travels along one line until it reaches the PE whose row (or column)
// matches, and is delivered there. Crossing from a row line to a column
// line, and the choice of which line to start on (upwards first, then left
// or right, downwards only in the destination's column), is the task of the
// processors: they receive the command on one line and resend it on the
// other, and likewise join the two channel halves. The crosspoints are the
// same as in the 1-D network except for the address width.
//
// Ports: row_* belong to the row crosspoint of PE (r, c), col_* to its
// column crosspoint, both flattened at index r*N + c. In a column line
// "left" is the row-0 end. Timing per crosspoint as in rmboc_crosspoint.
module rmboc_2d #(
  parameter int N     = 4,   // grid side: N x N = 16 PEs
  parameter int K     = 4,   // segments per direction in each row and column
  parameter int W     = 16,  // data bits per segment
  parameter int DEPTH = 16,
  localparam int RB = (N > 1) ? $clog2(N) : 1,
  localparam int AW = 2 * RB,
  localparam int SW = (K > 1) ? $clog2(K) : 1,
  localparam int CW = 3 + 2 * AW + SW,
  localparam int P  = N * N
) (
  input  logic          clk,
  input  logic          rst_n,
  // row crosspoint ports of each PE
  input  logic          row_cmd_in_valid  [P],
  input  logic [CW-1:0] row_cmd_in        [P],
  input  logic          row_cmd_out_rd    [P],
  output logic [CW-1:0] row_cmd_out       [P],
  output logic          row_cmd_out_valid [P],
  output logic          row_cmd_out_empty [P],
  input  logic [W-1:0]  row_tx_data  [P],
  input  logic [AW-1:0] row_rx_src   [P],
  output logic [W-1:0]  row_rx_data  [P],
  output logic          row_rx_valid [P],
  output logic [3:0]    row_overflow [P],
  output logic [4:0]    row_ev       [P],
  // column crosspoint ports of each PE
  input  logic          col_cmd_in_valid  [P],
  input  logic [CW-1:0] col_cmd_in        [P],
  input  logic          col_cmd_out_rd    [P],
  output logic [CW-1:0] col_cmd_out       [P],
  output logic          col_cmd_out_valid [P],
  output logic          col_cmd_out_empty [P],
  input  logic [W-1:0]  col_tx_data  [P],
  input  logic [AW-1:0] col_rx_src   [P],
  output logic [W-1:0]  col_rx_data  [P],
  output logic          col_rx_valid [P],
  output logic [3:0]    col_overflow [P],
  output logic [4:0]    col_ev       [P]
);
  // line l of kind "row" holds PEs (l, 0..N-1); of kind "col" PEs (0..N-1, l)
  for (genvar l = 0; l < N; l++) begin : g_row
    logic [AW-1:0] ids [N];
    logic          ci_v [N], co_rd [N], co_v [N], co_e [N], rx_v [N];
    logic [CW-1:0] ci [N], co [N];
    logic [W-1:0]  tx [N], rx [N];
    logic [AW-1:0] rs [N];
    logic [3:0]    ov [N];
    logic [4:0]    e  [N];
    for (genvar i = 0; i < N; i++) begin : g_map
      localparam int IX = l * N + i;
      assign ids[i] = {RB'(l), RB'(i)};
      assign ci_v[i] = row_cmd_in_valid[IX];
      assign ci[i]   = row_cmd_in[IX];
      assign co_rd[i] = row_cmd_out_rd[IX];
      assign tx[i]   = row_tx_data[IX];
      assign rs[i]   = row_rx_src[IX];
      assign row_cmd_out[IX]       = co[i];
      assign row_cmd_out_valid[IX] = co_v[i];
      assign row_cmd_out_empty[IX] = co_e[i];
      assign row_rx_data[IX]       = rx[i];
      assign row_rx_valid[IX]      = rx_v[i];
      assign row_overflow[IX]      = ov[i];
      assign row_ev[IX]            = e[i];
    end
    rmboc_line #(.M(N), .K(K), .W(W), .AW(AW), .DEPTH(DEPTH),
                 .ROUTE_LSB(0), .ROUTE_W(RB)) u_line (
      .clk, .rst_n, .ids,
      .pe_cmd_in_valid(ci_v), .pe_cmd_in(ci), .pe_cmd_out_rd(co_rd),
      .pe_cmd_out(co), .pe_cmd_out_valid(co_v), .pe_cmd_out_empty(co_e),
      .pe_tx_data(tx), .pe_rx_src(rs), .pe_rx_data(rx), .pe_rx_valid(rx_v),
      .overflow(ov), .ev(e)
    );
  end

  for (genvar l = 0; l < N; l++) begin : g_col
    logic [AW-1:0] ids [N];
    logic          ci_v [N], co_rd [N], co_v [N], co_e [N], rx_v [N];
    logic [CW-1:0] ci [N], co [N];
    logic [W-1:0]  tx [N], rx [N];
    logic [AW-1:0] rs [N];
    logic [3:0]    ov [N];
    logic [4:0]    e  [N];
    for (genvar i = 0; i < N; i++) begin : g_map
      localparam int IX = i * N + l;
      assign ids[i] = {RB'(i), RB'(l)};
      assign ci_v[i] = col_cmd_in_valid[IX];
      assign ci[i]   = col_cmd_in[IX];
      assign co_rd[i] = col_cmd_out_rd[IX];
      assign tx[i]   = col_tx_data[IX];
      assign rs[i]   = col_rx_src[IX];
      assign col_cmd_out[IX]       = co[i];
      assign col_cmd_out_valid[IX] = co_v[i];
      assign col_cmd_out_empty[IX] = co_e[i];
      assign col_rx_data[IX]       = rx[i];
      assign col_rx_valid[IX]      = rx_v[i];
      assign col_overflow[IX]      = ov[i];
      assign col_ev[IX]            = e[i];
    end
    rmboc_line #(.M(N), .K(K), .W(W), .AW(AW), .DEPTH(DEPTH),
                 .ROUTE_LSB(RB), .ROUTE_W(RB)) u_line (
      .clk, .rst_n, .ids,
      .pe_cmd_in_valid(ci_v), .pe_cmd_in(ci), .pe_cmd_out_rd(co_rd),
      .pe_cmd_out(co), .pe_cmd_out_valid(co_v), .pe_cmd_out_empty(co_e),
      .pe_tx_data(tx), .pe_rx_src(rs), .pe_rx_data(rx), .pe_rx_valid(rx_v),
      .overflow(ov), .ev(e)
    );
  end
endmodule
