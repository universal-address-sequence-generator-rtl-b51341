// uasg_pkg: types and constants shared by the universal address sequence
// generator (UASG).
//
// UASG_M is the default address width m. m = 8 is the width of the FPGA
// build the design was characterised with; the worked examples use m = 4,
// which every module accepts through its M parameter.
//
// uasg_sync_t is the sequence-marker bundle that travels with each address:
// sequence_begin flags A(0), sequence_end flags A(2^m - 1) and
// sequence_valid flags every cycle on which the address output is meaningful.
// The three field names are those of the FPGA build's sync bundle.
package uasg_pkg;

  parameter int unsigned UASG_M = 8;

  typedef struct packed {
    logic sequence_begin;
    logic sequence_end;
    logic sequence_valid;
  } uasg_sync_t;

endpackage
