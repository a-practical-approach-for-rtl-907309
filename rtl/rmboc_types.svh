// rmboc_types.svh: parameter-dependent types of the RMBoC. Expand
// `RMBOC_TYPES inside a module that has parameters AW (address width) and
// SW (segment index width) in scope.
//
//   cmd_t       command word: operation, source and destination PE address,
//               and the segment the sender has configured for the channel
//               (meaningful in REPLY only).
//   out_ent_t   one outgoing segment of a crosspoint: in use, fed by the PE
//               or by incoming segment idx on the opposite side, and the
//               (src, dst) pair of the channel it carries.
//   in_ent_t    one incoming segment: allocated, terminates at the PE, and
//               the (src, dst) pair of its channel.
`ifndef RMBOC_TYPES_SVH
`define RMBOC_TYPES_SVH
`define RMBOC_TYPES \
  typedef struct packed { \
    rmboc_pkg::cmd_op_e op; \
    logic [AW-1:0] src; \
    logic [AW-1:0] dst; \
    logic [SW-1:0] seg; \
  } cmd_t; \
  typedef struct packed { \
    logic used; \
    logic from_pe; \
    logic [SW-1:0] idx; \
    logic [AW-1:0] src; \
    logic [AW-1:0] dst; \
  } out_ent_t; \
  typedef struct packed { \
    logic busy; \
    logic to_pe; \
    logic [AW-1:0] src; \
    logic [AW-1:0] dst; \
  } in_ent_t;
`endif
