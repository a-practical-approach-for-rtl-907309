// rmboc_controller: command processor of one RMBoC crosspoint. It reads one
// command at a time from the main FIFO, updates the channel configuration
// and emits the resulting command(s) to the LEFT and RIGHT neighbours and
// to the PE.
//
// Routing: REQUEST and DESTROY travel towards the destination address,
// REPLY, CANCEL and CONFIRM back towards the source. The target address is
// compared with my_id: equal goes to the PE, larger to the RIGHT, smaller to
// the LEFT. In a 2-D network only the address field of the crosspoint's own
// dimension (ROUTE_LSB, ROUTE_W) is compared, while the full addresses still
// name the channel.
//
// What each command does here:
//   REQUEST  forwarded unchanged; nothing is reserved while a request
//            travels, since the destination may still refuse it.
//   REPLY    travels from destination to source and builds the channel.
//            The crosspoint picks an incoming segment on the side facing the
//            source, the highest-numbered free one, and connects it to the
//            outgoing segment named in the REPLY (chosen by the previous
//            crosspoint) or to the PE. The REPLY goes on carrying the index
//            just picked. If this crosspoint already holds a channel for the
//            same (src, dst) pair, from a request that was repeated, its
//            segment is reused, so a repeated request never ties up a
//            second segment. If no segment is free, a DESTROY is sent
//            towards the destination, freeing what was built so far, and a
//            CANCEL towards the source.
//   DESTROY  clears every configuration entry of the (src, dst) channel and
//            is forwarded.
//   CANCEL, CONFIRM  forwarded unchanged.
//
// Timing: four states, two cycles to read the main FIFO (RD, CAP) and two to
// decide, update the configuration and write the output (EXEC, OUT). The
// configuration is written at the end of EXEC; the output commands are
// registered and their valid flags are high for the OUT cycle only, which is
// when the neighbour's input FIFO or the PE FIFO takes them. One command is
// processed every four cycles. The state names and the single-REPLY segment
// hand-over in the seg field are this design's choices.
module rmboc_controller
  import rmboc_pkg::*;
#(
  parameter int K  = 4,
  parameter int AW = 2,
  parameter int SW = 2,
  // address bits that steer LEFT/RIGHT: the whole address in the 1-D
  // network; the column (row) field in a 2-D row (column) network
  parameter int ROUTE_LSB = 0,
  parameter int ROUTE_W   = AW,
  localparam int CW     = 3 + 2 * AW + SW,
  localparam int OUT_EW = 2 + SW + 2 * AW,
  localparam int IN_EW  = 2 + 2 * AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     my_id,
  // main FIFO read side
  input  logic              mf_empty,
  output logic              mf_rd,
  input  logic [CW-1:0]     mf_dout,
  input  logic              mf_dout_valid,
  // configuration store
  input  logic [IN_EW-1:0]  in_tab  [2][K],
  output logic              clr_en,
  output logic [AW-1:0]     clr_src,
  output logic [AW-1:0]     clr_dst,
  output logic              in_wr_en,
  output logic              in_wr_side,
  output logic [SW-1:0]     in_wr_idx,
  output logic [IN_EW-1:0]  in_wr_ent,
  output logic              out_wr_en,
  output logic              out_wr_side,
  output logic [SW-1:0]     out_wr_idx,
  output logic [OUT_EW-1:0] out_wr_ent,
  // output commands, valid during the OUT cycle
  output logic              to_left_valid,
  output logic [CW-1:0]     to_left_cmd,
  output logic              to_right_valid,
  output logic [CW-1:0]     to_right_cmd,
  output logic              to_pe_valid,
  output logic [CW-1:0]     to_pe_cmd,
  // one-cycle event pulses (end of EXEC) for observation
  output logic              ev_cmd,
  output logic              ev_alloc,
  output logic              ev_reuse,
  output logic              ev_fail,
  output logic              ev_free
);
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  typedef enum logic [1:0] {S_RD, S_CAP, S_EXEC, S_OUT} state_e;
  state_e state;
  cmd_t   cmd_q;

  // A command leaves towards the PE when the target's routing field equals
  // this crosspoint's, otherwise towards the side where that field lies.
  function automatic port_e port_of(logic [AW-1:0] a, logic [AW-1:0] me);
    logic [ROUTE_W-1:0] ra, rm;
    ra = a[ROUTE_LSB +: ROUTE_W];
    rm = me[ROUTE_LSB +: ROUTE_W];
    if (ra == rm)     return PORT_PE;
    else if (ra > rm) return PORT_RIGHT;
    else              return PORT_LEFT;
  endfunction

  // ---- decision logic on the latched command ------------------------------
  port_e         fwd_port, from_port, to_port;
  logic          fs;            // side of the incoming segment (0 L, 1 R)
  logic          have_match, have_free, alloc_ok;
  logic [SW-1:0] match_idx, free_idx, pick_idx;

  always_comb begin
    fwd_port  = port_of(goes_to_dst(cmd_q.op) ? cmd_q.dst : cmd_q.src, my_id);
    from_port = port_of(cmd_q.src, my_id);
    to_port   = port_of(cmd_q.dst, my_id);
    fs        = (from_port == PORT_RIGHT);
    have_match = 1'b0;
    have_free  = 1'b0;
    match_idx  = '0;
    free_idx   = '0;
    // ascending scan: the last hit is the highest-numbered segment
    for (int b = 0; b < K; b++) begin
      automatic in_ent_t e = in_ent_t'(in_tab[fs][b]);
      if (e.busy && e.src == cmd_q.src && e.dst == cmd_q.dst) begin
        have_match = 1'b1;
        match_idx  = SW'(b);
      end
      if (!e.busy) begin
        have_free = 1'b1;
        free_idx  = SW'(b);
      end
    end
    pick_idx = have_match ? match_idx : free_idx;
    alloc_ok = (from_port == PORT_PE) || have_match || have_free;
  end

  // ---- configuration writes (during EXEC) ---------------------------------
  logic is_exec, is_reply, is_destroy;
  assign is_exec    = (state == S_EXEC);
  assign is_reply   = is_exec && cmd_q.op == CMD_REPLY;
  assign is_destroy = is_exec && cmd_q.op == CMD_DESTROY;

  always_comb begin
    in_ent_t  ie;
    out_ent_t oe;
    ie.busy    = 1'b1;
    ie.to_pe   = (to_port == PORT_PE);
    ie.src     = cmd_q.src;
    ie.dst     = cmd_q.dst;
    oe.used    = 1'b1;
    oe.from_pe = (from_port == PORT_PE);
    oe.idx     = pick_idx;
    oe.src     = cmd_q.src;
    oe.dst     = cmd_q.dst;

    clr_en      = is_destroy || (is_reply && alloc_ok);
    clr_src     = cmd_q.src;
    clr_dst     = cmd_q.dst;
    in_wr_en    = is_reply && alloc_ok && from_port != PORT_PE;
    in_wr_side  = fs;
    in_wr_idx   = pick_idx;
    in_wr_ent   = ie;
    out_wr_en   = is_reply && alloc_ok && to_port != PORT_PE;
    out_wr_side = (to_port == PORT_RIGHT);
    out_wr_idx  = cmd_q.seg;
    out_wr_ent  = oe;
  end

  assign mf_rd = rst_n && (state == S_RD) && !mf_empty;

  // ---- sequencing and output registers -------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= S_RD;
      cmd_q          <= '0;
      to_left_valid  <= 1'b0;
      to_right_valid <= 1'b0;
      to_pe_valid    <= 1'b0;
      to_left_cmd    <= '0;
      to_right_cmd   <= '0;
      to_pe_cmd      <= '0;
      {ev_cmd, ev_alloc, ev_reuse, ev_fail, ev_free} <= '0;
    end else begin
      to_left_valid  <= 1'b0;
      to_right_valid <= 1'b0;
      to_pe_valid    <= 1'b0;
      {ev_cmd, ev_alloc, ev_reuse, ev_fail, ev_free} <= '0;
      unique case (state)
        S_RD:  if (!mf_empty) state <= S_CAP;
        S_CAP: begin
          cmd_q <= cmd_t'(mf_dout);
          state <= S_EXEC;
        end
        S_EXEC: begin
          automatic cmd_t o1 = cmd_q;     // command towards fwd_port
          automatic cmd_t o2 = cmd_q;     // second command on failure
          automatic port_e p1 = fwd_port;
          automatic port_e p2 = fwd_port;
          automatic logic  two = 1'b0;
          ev_cmd <= 1'b1;
          if (cmd_q.op == CMD_REPLY) begin
            if (alloc_ok) begin
              o1.seg   = (from_port == PORT_PE) ? '0 : pick_idx;
              ev_alloc <= (from_port != PORT_PE);
              ev_reuse <= (from_port != PORT_PE) && have_match;
            end else begin
              o1.op  = CMD_CANCEL;  o1.seg = '0;  p1 = from_port;
              o2.op  = CMD_DESTROY; o2.seg = '0;  p2 = to_port;
              two    = 1'b1;
              ev_fail <= 1'b1;
            end
          end
          ev_free <= (cmd_q.op == CMD_DESTROY);
          if (p1 == PORT_LEFT  || (two && p2 == PORT_LEFT)) begin
            to_left_valid <= 1'b1;
            to_left_cmd   <= (p1 == PORT_LEFT) ? o1 : o2;
          end
          if (p1 == PORT_RIGHT || (two && p2 == PORT_RIGHT)) begin
            to_right_valid <= 1'b1;
            to_right_cmd   <= (p1 == PORT_RIGHT) ? o1 : o2;
          end
          if (p1 == PORT_PE    || (two && p2 == PORT_PE)) begin
            to_pe_valid <= 1'b1;
            to_pe_cmd   <= (p1 == PORT_PE) ? o1 : o2;
          end
          state <= S_OUT;
        end
        S_OUT: state <= S_RD;
      endcase
    end
  end

  a_cap_has_data: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_CAP |-> mf_dout_valid);
endmodule
