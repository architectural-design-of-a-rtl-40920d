// arbiter_fsm: fixed-priority grant FSM of the RAM arbiter, with its reset
// sequence.
//
// The RAM has a read port and a write port, and each port is granted on its
// own, so the FSM is two state registers of the same type: rd_state for the
// read port and wr_state for the write port. Client1 has priority on both.
// Client2 asks with REQUEST_C2 and says read (RD_NOT_WRITE_C2 = 1) or write
// (0); it gets the port it asks for only while client1 is not using that port.
// Hence, with client1 only writing client2 may read, with client1 only reading
// client2 may write, with client1 doing both client2 waits, and with client1
// silent client2 may do either. For every present state except RESET:
//
//   rd_next = RD_EN_C1 ? C1_READ  : (REQUEST_C2 &&  RD_NOT_WRITE_C2) ? C2_READ  : IDLE
//   wr_next = WR_EN_C1 ? C1_WRITE : (REQUEST_C2 && !RD_NOT_WRITE_C2) ? C2_WRITE : IDLE
//
// This is the twenty-transition list of the original design folded into one
// expression per port (client1 pre-empts client2 at once, client2 falls back
// to IDLE when it drops or flips its request).
//
// Reset: RST_N low (asynchronous) puts both registers in RESET. After RST_N
// rises the FSM stays in RESET for RAM_DEPTH = 2**ADDR_WIDTH cycles, the time
// the RAM needs to clear itself, then enters IDLE; RST_DONE is high whenever
// the FSM is out of RESET. Client inputs are ignored while in RESET.
//
// rd_next and wr_next are combinational and are used by the arbiter's request
// registers, which load at the same clock edge as the state registers.
//
// RST_N is an asynchronous reset for every register. The assertions also use
// it in "disable iff", which lint reports as a reset net that is sampled
// synchronously as well; no logic does so.
module arbiter_fsm
  import ram_arbiter_pkg::*;
#(
  parameter int unsigned ADDR_WIDTH = 4
) (
  input  logic          CLOCK,
  input  logic          RST_N,
  input  logic          RD_EN_C1,
  input  logic          WR_EN_C1,
  input  logic          REQUEST_C2,
  input  logic          RD_NOT_WRITE_C2,
  output client_state_t rd_state,
  output client_state_t wr_state,
  output client_state_t rd_next,
  output client_state_t wr_next,
  output logic          RST_DONE
);

  localparam int unsigned RAM_DEPTH = 2 ** ADDR_WIDTH;

  logic [ADDR_WIDTH-1:0] reset_count;
  logic                  reset_last;

  assign reset_last = (reset_count == ADDR_WIDTH'(RAM_DEPTH - 1));

  always_ff @(posedge CLOCK or negedge RST_N) begin
    if (!RST_N) begin
      reset_count <= '0;
    end else if (rd_state == ST_RESET) begin
      reset_count <= reset_count + 1'b1;
    end
  end

  always_comb begin
    if (rd_state == ST_RESET) begin
      rd_next = reset_last ? ST_IDLE : ST_RESET;
    end else if (RD_EN_C1) begin
      rd_next = ST_C1_READ;
    end else if (REQUEST_C2 && RD_NOT_WRITE_C2) begin
      rd_next = ST_C2_READ;
    end else begin
      rd_next = ST_IDLE;
    end

    if (wr_state == ST_RESET) begin
      wr_next = reset_last ? ST_IDLE : ST_RESET;
    end else if (WR_EN_C1) begin
      wr_next = ST_C1_WRITE;
    end else if (REQUEST_C2 && !RD_NOT_WRITE_C2) begin
      wr_next = ST_C2_WRITE;
    end else begin
      wr_next = ST_IDLE;
    end
  end

  always_ff @(posedge CLOCK or negedge RST_N) begin
    if (!RST_N) begin
      rd_state <= ST_RESET;
      wr_state <= ST_RESET;
    end else begin
      rd_state <= rd_next;
      wr_state <= wr_next;
    end
  end

  assign RST_DONE = (rd_state != ST_RESET);

  // Each register stays within its own port's states, and both leave RESET
  // together.
  a_rd_states : assert property (@(posedge CLOCK) disable iff (!RST_N)
    rd_state inside {ST_RESET, ST_IDLE, ST_C1_READ, ST_C2_READ});
  a_wr_states : assert property (@(posedge CLOCK) disable iff (!RST_N)
    wr_state inside {ST_RESET, ST_IDLE, ST_C1_WRITE, ST_C2_WRITE});
  a_reset_together : assert property (@(posedge CLOCK) disable iff (!RST_N)
    (rd_state == ST_RESET) == (wr_state == ST_RESET));

endmodule
