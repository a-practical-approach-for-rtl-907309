// rmboc_pkg: shared types and helpers of the Reconfigurable Multiple Bus on
// Chip (RMBoC), a circuit-switched network in which every processing element
// (PE) sits below a crosspoint, and neighbouring crosspoints are joined by k
// parallel bus segments and a command link.
//
// Commands: the four commands REQUEST, REPLY, CANCEL and DESTROY carry
// connection set-up and tear-down; CONFIRM acknowledges a completed
// DESTROY so that a source can repeat a DESTROY lost during partial
// reconfiguration. The 3-bit encoding is this design's choice.
//
// Sides: a crosspoint has three ports, LEFT, RIGHT and PE. A command whose
// target address equals the crosspoint's own address goes to the PE, a
// larger address goes right and a smaller one left.
package rmboc_pkg;

  typedef enum logic [2:0] {
    CMD_REQUEST = 3'd0,
    CMD_REPLY   = 3'd1,
    CMD_CANCEL  = 3'd2,
    CMD_DESTROY = 3'd3,
    CMD_CONFIRM = 3'd4
  } cmd_op_e;

  typedef enum logic [1:0] {
    PORT_LEFT  = 2'd0,
    PORT_RIGHT = 2'd1,
    PORT_PE    = 2'd2
  } port_e;

  // Width of a command word for address width aw and segment index width sw.
  function automatic int cmd_width(int aw, int sw);
    return 3 + 2 * aw + sw;
  endfunction

  // Address width for n nodes (at least one bit).
  function automatic int addr_width(int n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // REQUEST and DESTROY travel towards the destination; REPLY, CANCEL and
  // CONFIRM travel back towards the source.
  function automatic logic goes_to_dst(cmd_op_e op);
    return (op == CMD_REQUEST) || (op == CMD_DESTROY);
  endfunction

  // MaxTotalComm = ceil((n^2 + 2n - 4) / 2): largest number of commands that
  // can be waiting at one crosspoint of an n-node network.
  function automatic int max_total_comm(int n);
    return (n * n + 2 * n - 4 + 1) / 2;
  endfunction

  // Worst-case processing time in cycles: (MaxTotalComm - 1) * 4 + 4.
  function automatic int max_proc_cycles(int n);
    return (max_total_comm(n) - 1) * 4 + 4;
  endfunction

endpackage
