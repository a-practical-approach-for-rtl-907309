// rmboc_pe_model: behavioural model of a processing element attached to an
// RMBoC crosspoint, for testbenches only. The PE itself is a user module
// that the network serves; this model implements the command protocol the
// network expects from it:
//   - an incoming REQUEST addressed to it is answered with REPLY, or with
//     CANCEL when the requesting source is set in reject_mask;
//   - an incoming DESTROY is acknowledged with CONFIRM to the source;
//   - REPLY, CANCEL and CONFIRM for its own requests are counted per
//     destination (n_reply, n_cancel, n_confirm) and chan_up is kept.
// The testbench opens and closes channels with open_chan(dst) and
// close_chan(dst). Outgoing commands wait in a queue and are sent one per
// cycle; incoming ones are popped as soon as the output FIFO is non-empty.
module rmboc_pe_model
  import rmboc_pkg::*;
#(
  parameter int N  = 4,
  parameter int AW = 2,
  parameter int SW = 2,
  localparam int CW = 3 + 2 * AW + SW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] my_id,
  output logic          cmd_valid,
  output logic [CW-1:0] cmd,
  output logic          out_rd,
  input  logic [CW-1:0] out_cmd,
  input  logic          out_valid,
  input  logic          out_empty
);
  `include "rmboc_types.svh"
  `RMBOC_TYPES

  logic [N-1:0] reject_mask = '0;
  logic [N-1:0] chan_up = '0;
  int n_reply [N], n_cancel [N], n_confirm [N];
  int n_req_rx = 0, n_destroy_rx = 0, n_bad = 0;
  int last_req_cycle = 0, cycle = 0;
  logic [CW-1:0] sendq [$];
  int sendq_n = 0;

  initial for (int i = 0; i < N; i++) begin n_reply[i] = 0; n_cancel[i] = 0; n_confirm[i] = 0; end

  function automatic logic [CW-1:0] mk(cmd_op_e op, int s, int d);
    cmd_t c;
    c.op = op; c.src = AW'(s); c.dst = AW'(d); c.seg = '0;
    return c;
  endfunction

  task automatic push(input logic [CW-1:0] c);
    sendq.push_back(c);
    sendq_n++;
  endtask
  task automatic open_chan(input int dst);
    push(mk(CMD_REQUEST, int'(my_id), dst));
  endtask
  task automatic close_chan(input int dst);
    chan_up[dst] = 1'b0;
    push(mk(CMD_DESTROY, int'(my_id), dst));
  endtask

  assign out_rd = rst_n && !out_empty;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    cmd_valid <= 1'b0;
    if (rst_n && sendq_n > 0) begin
      cmd_valid <= 1'b1;
      cmd       <= sendq.pop_front();
      sendq_n--;
    end
    if (rst_n && out_valid) begin
      cmd_t c;
      c = out_cmd;
      case (c.op)
        CMD_REQUEST: begin
          n_req_rx++;
          last_req_cycle = cycle;
          if (c.dst != my_id) n_bad++;
          else if (reject_mask[c.src]) push(mk(CMD_CANCEL, int'(c.src), int'(c.dst)));
          else push(mk(CMD_REPLY, int'(c.src), int'(c.dst)));
        end
        CMD_REPLY: begin
          if (c.src != my_id) n_bad++;
          else begin n_reply[c.dst]++; chan_up[c.dst] = 1'b1; end
        end
        CMD_CANCEL: begin
          if (c.src != my_id) n_bad++;
          else n_cancel[c.dst]++;
        end
        CMD_DESTROY: begin
          n_destroy_rx++;
          if (c.dst != my_id) n_bad++;
          else push(mk(CMD_CONFIRM, int'(c.src), int'(c.dst)));
        end
        CMD_CONFIRM: begin
          if (c.src != my_id) n_bad++;
          else n_confirm[c.dst]++;
        end
        default: n_bad++;
      endcase
    end
  end

  initial begin
    cmd_valid = 1'b0;
    cmd = '0;
  end
endmodule
