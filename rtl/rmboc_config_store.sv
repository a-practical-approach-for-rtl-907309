// rmboc_config_store: the channel configuration of one RMBoC crosspoint
// (the "Block RAMs" beside the controller in the crosspoint diagram). It
// holds one entry per segment end the crosspoint touches:
//   out_tab[side][b]  outgoing segment b towards side (0 = LEFT, 1 = RIGHT):
//                     in use, fed by the PE or by incoming segment idx of
//                     the opposite side, and the channel's (src, dst).
//   in_tab[side][b]   incoming segment b from side: allocated, terminates
//                     at the PE, and the channel's (src, dst).
// A crosspoint owns (allocates) the segments that arrive at it, so the
// in_tab busy bits are the free/occupied status the controller searches;
// no two crosspoints ever allocate the same wire.
//
// The whole table is visible in parallel: the data network needs every
// multiplexer select at once, and the controller searches all busy bits in
// one cycle. The paper keeps this state in Block RAMs so that it survives
// partial reconfiguration of the neighbouring PE; here it is a register
// array, which an FPGA flow may map to LUT RAM or flip-flops.
//
// Write port, applied at the clock edge in this order: clr_en clears every
// entry tagged (clr_src, clr_dst) in both tables, then in_wr_en and
// out_wr_en write one entry each (a write wins over the clear). Synchronous
// active-low reset empties the table.
module rmboc_config_store #(
  parameter int K  = 4,   // segments per direction between two crosspoints
  parameter int AW = 2,   // PE address width
  parameter int SW = 2,   // segment index width, >= $clog2(K)
  localparam int OUT_EW = 2 + SW + 2 * AW,
  localparam int IN_EW  = 2 + 2 * AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr_en,
  input  logic [AW-1:0]     clr_src,
  input  logic [AW-1:0]     clr_dst,
  input  logic              in_wr_en,
  input  logic              in_wr_side,
  input  logic [SW-1:0]     in_wr_idx,
  input  logic [IN_EW-1:0]  in_wr_ent,
  input  logic              out_wr_en,
  input  logic              out_wr_side,
  input  logic [SW-1:0]     out_wr_idx,
  input  logic [OUT_EW-1:0] out_wr_ent,
  output logic [OUT_EW-1:0] out_tab [2][K],
  output logic [IN_EW-1:0]  in_tab  [2][K]
);
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  out_ent_t out_q [2][K];
  in_ent_t  in_q  [2][K];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++)
        for (int b = 0; b < K; b++) begin
          out_q[s][b] <= '0;
          in_q[s][b]  <= '0;
        end
    end else begin
      for (int s = 0; s < 2; s++)
        for (int b = 0; b < K; b++) begin
          if (clr_en && out_q[s][b].used && out_q[s][b].src == clr_src &&
              out_q[s][b].dst == clr_dst)
            out_q[s][b] <= '0;
          if (clr_en && in_q[s][b].busy && in_q[s][b].src == clr_src &&
              in_q[s][b].dst == clr_dst)
            in_q[s][b] <= '0;
          if (out_wr_en && out_wr_side == s[0] && int'(out_wr_idx) == b)
            out_q[s][b] <= out_ent_t'(out_wr_ent);
          if (in_wr_en && in_wr_side == s[0] && int'(in_wr_idx) == b)
            in_q[s][b] <= in_ent_t'(in_wr_ent);
        end
    end
  end

  always_comb begin
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < K; b++) begin
        out_tab[s][b] = out_q[s][b];
        in_tab[s][b]  = in_q[s][b];
      end
  end
endmodule
