// ram_arbiter_pkg: types and constants shared by the RAM arbiter modules.
//
// The arbiter keeps two state registers, one for the RAM read port and one
// for the RAM write port. Both use the same six-valued state type, as in the
// original design: RESET (RAM being cleared), IDLE, and a read or write grant
// for client1 (high priority) or client2 (low priority). The read register
// only ever holds RESET, IDLE, C1_READ or C2_READ; the write register only
// RESET, IDLE, C1_WRITE or C2_WRITE.
package ram_arbiter_pkg;

  typedef enum logic [2:0] {
    ST_RESET    = 3'd0,
    ST_IDLE     = 3'd1,
    ST_C1_READ  = 3'd2,
    ST_C2_READ  = 3'd3,
    ST_C1_WRITE = 3'd4,
    ST_C2_WRITE = 3'd5
  } client_state_t;

endpackage
