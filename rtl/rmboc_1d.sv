// rmboc_1d: the one-dimensional Reconfigurable Multiple Bus on Chip. N
// processing elements (PEs) sit side by side, each above one crosspoint;
// neighbouring crosspoints are joined by K bus positions (each a rightward
// and a leftward W-bit segment) and by a command link in each direction.
// The array is linear, not a ring, so no wire runs past a reconfigurable
// module; on an FPGA every inter-crosspoint wire would pass through bus
// macros, which are plain connections here.
//
// Use: a PE opens a channel by sending REQUEST(src = own address, dst) into
// its pe_cmd_in port. The destination PE pops the REQUEST from its
// pe_cmd_out FIFO and answers REPLY (accept) or CANCEL (reject). The REPLY
// reserves the highest free segment hop by hop on its way back; when it
// reaches the source PE the channel exists, and pe_tx_data of the source
// appears combinationally on pe_rx_data of the destination while the
// destination selects that source on pe_rx_src. If a hop has no free
// segment, the source gets a CANCEL and the destination a DESTROY, which
// also frees the part already built. The source ends a channel with
// DESTROY; the destination may acknowledge with CONFIRM.
//
// Command word layout (MSB first): op[2:0], src[AW-1:0], dst[AW-1:0],
// seg[SW-1:0]; see rmboc_pkg for the op encoding. PE addresses run from 0
// (leftmost) to N-1. Each PE's command reaches the next crosspoint 8 cycles
// after it was written, when nothing is queued ahead of it.
//
// Defaults follow the configuration the paper measured: n = 4 PEs, k = 4
// segments, w = 16 bits. The FIFO depth is not given in the paper; 16 holds
// the worst case of ceil((n^2+2n-4)/2) = 10 commands per crosspoint for n=4.
// Commands sent past either end of the array are dropped. The chain itself
// is built by rmboc_line, with PE i at address i.
module rmboc_1d #(
  parameter int N     = 4,
  parameter int K     = 4,
  parameter int W     = 16,
  parameter int DEPTH = 16,
  localparam int AW = (N > 1) ? $clog2(N) : 1,
  localparam int SW = (K > 1) ? $clog2(K) : 1,
  localparam int CW = 3 + 2 * AW + SW
) (
  input  logic          clk,
  input  logic          rst_n,
  // per-PE command ports
  input  logic          pe_cmd_in_valid  [N],
  input  logic [CW-1:0] pe_cmd_in        [N],
  input  logic          pe_cmd_out_rd    [N],
  output logic [CW-1:0] pe_cmd_out       [N],
  output logic          pe_cmd_out_valid [N],
  output logic          pe_cmd_out_empty [N],
  // per-PE data ports
  input  logic [W-1:0]  pe_tx_data  [N],
  input  logic [AW-1:0] pe_rx_src   [N],
  output logic [W-1:0]  pe_rx_data  [N],
  output logic          pe_rx_valid [N],
  // observation: dropped commands and controller events per crosspoint
  output logic [3:0]    overflow [N],
  output logic [4:0]    ev       [N]
);
  logic [AW-1:0] ids [N];
  for (genvar i = 0; i < N; i++) begin : g_id
    assign ids[i] = AW'(i);
  end

  rmboc_line #(.M(N), .K(K), .W(W), .AW(AW), .DEPTH(DEPTH)) u_line (
    .clk, .rst_n, .ids,
    .pe_cmd_in_valid, .pe_cmd_in, .pe_cmd_out_rd, .pe_cmd_out,
    .pe_cmd_out_valid, .pe_cmd_out_empty,
    .pe_tx_data, .pe_rx_src, .pe_rx_data, .pe_rx_valid,
    .overflow, .ev
  );
endmodule
