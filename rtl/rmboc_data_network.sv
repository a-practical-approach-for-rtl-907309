// rmboc_data_network: the data path of one RMBoC crosspoint. It replaces
// the column of X-, T- and L-switches of the conceptual RMBoC by
// multiplexers driven from the configuration table.
//
// Each bus position between two crosspoints is a pair of unidirectional
// W-bit wires, one carrying data rightwards and one leftwards:
//   rseg_in[b]  -> arrives from the left neighbour   (in_tab[0][b])
//   lseg_in[b]  -> arrives from the right neighbour  (in_tab[1][b])
//   lseg_out[b] -> leaves towards the left neighbour (out_tab[0][b])
//   rseg_out[b] -> leaves towards the right neighbour(out_tab[1][b])
// An outgoing segment in use carries either the PE's transmit word or the
// incoming segment of the opposite side named by its entry, so a channel
// may change bus level at every crosspoint. Unused outgoing segments are
// driven with zero. The PE receive port returns the data of the channel
// from source pe_rx_src that ends at this crosspoint, with pe_rx_valid set
// when such a channel exists.
//
// The path is purely combinational, so an established channel moves a word
// from source PE to destination PE within one clock cycle, as the paper
// states. The PE transmits a single word, placed on every channel it
// sources (this design's choice; the paper does not describe the PE data
// port).
module rmboc_data_network #(
  parameter int K  = 4,
  parameter int W  = 16,
  parameter int AW = 2,
  parameter int SW = 2,
  localparam int OUT_EW = 2 + SW + 2 * AW,
  localparam int IN_EW  = 2 + 2 * AW
) (
  input  logic [OUT_EW-1:0] out_tab [2][K],
  input  logic [IN_EW-1:0]  in_tab  [2][K],
  input  logic [W-1:0]      rseg_in  [K],
  input  logic [W-1:0]      lseg_in  [K],
  output logic [W-1:0]      rseg_out [K],
  output logic [W-1:0]      lseg_out [K],
  input  logic [W-1:0]      pe_tx_data,
  input  logic [AW-1:0]     pe_rx_src,
  output logic [W-1:0]      pe_rx_data,
  output logic              pe_rx_valid
);
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  always_comb begin
    for (int b = 0; b < K; b++) begin
      automatic out_ent_t ol = out_ent_t'(out_tab[0][b]);
      automatic out_ent_t orr = out_ent_t'(out_tab[1][b]);
      lseg_out[b] = '0;
      rseg_out[b] = '0;
      if (ol.used)  lseg_out[b] = ol.from_pe  ? pe_tx_data : lseg_in[ol.idx];
      if (orr.used) rseg_out[b] = orr.from_pe ? pe_tx_data : rseg_in[orr.idx];
    end
  end

  always_comb begin
    pe_rx_data  = '0;
    pe_rx_valid = 1'b0;
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < K; b++) begin
        automatic in_ent_t e = in_ent_t'(in_tab[s][b]);
        if (!pe_rx_valid && e.busy && e.to_pe && e.src == pe_rx_src) begin
          pe_rx_valid = 1'b1;
          pe_rx_data  = (s == 0) ? rseg_in[b] : lseg_in[b];
        end
      end
  end
endmodule
