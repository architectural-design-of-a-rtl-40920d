// arbiter: two-client, fixed-priority arbiter for a simple dual-port RAM.
//
// Client1 (high priority) has a RAM-like port: separate read and write
// enables, addresses and write data, and may read and write in the same cycle.
// Client2 (low priority) has a request port: REQUEST_C2, RD_NOT_WRITE_C2,
// ADDR_C2 and DATAIN_C2, one operation at a time, acknowledged on ACK_C2.
// arbiter_fsm decides, per RAM port, who is granted; this module registers the
// granted request onto the RAM port and returns the read data.
//
// RAM request registers (RD_EN, RD_ADDR, WR_EN, WR_ADDR, WR_DATA) load at the
// same edge as the FSM state, from the FSM's next state:
//   IDLE      - enable low, address and data cleared.
//   C1_READ   - client1's read enable and address, every cycle.
//   C1_WRITE  - client1's write enable, address and data, every cycle.
//   C2_READ   - ADDR_C2 is loaded with the enable set once per access; an
//               access lasts three cycles and ACK_C2 pulses high in its
//               third, when DATAOUT_C2 holds the word read.
//   C2_WRITE  - ADDR_C2 and DATAIN_C2 are loaded once per access; an access
//               lasts two cycles and ACK_C2 pulses high in its second. The
//               enable stays high, so the RAM writes the same word twice.
// A client2 request held high is served again and again, one ACK_C2 pulse per
// access; a client2 access in progress keeps its enable until the FSM moves
// the port to IDLE or to client1.
//
// Timing: a client1 read sampled at edge k is presented to the RAM after
// edge k, read at edge k+1, and RDDATA_C1 is valid after edge k+1 (one cycle
// more with REGISTERED_DATA = 1). A write sampled at edge k is written to the
// RAM at edge k+1. Reads and writes of the same address in the same cycle
// return the new word through addr_clash_bypass.
//
// Follows the original design: ports, the FSM, the request registers, the ACK
// pulse trains and the clash bypass. This design's own choices: all registers
// reset asynchronously to zero, and the FSM's latch-based next-state process
// is written as plain combinational logic (see arbiter_fsm).
//
// RST_N is an asynchronous reset for every register. The assertions also use
// it in "disable iff", which lint reports as a reset net that is sampled
// synchronously as well; no logic does so.
module arbiter
  import ram_arbiter_pkg::*;
#(
  parameter int unsigned ADDR_WIDTH      = 4,
  parameter int unsigned DATA_WIDTH      = 8,
  parameter bit          REGISTERED_DATA = 1'b0
) (
  input  logic                  RST_N,
  input  logic                  CLOCK,
  output logic                  RST_DONE,
  // Client1
  input  logic                  RD_EN_C1,
  input  logic                  WR_EN_C1,
  input  logic [ADDR_WIDTH-1:0] RD_ADDR_C1,
  input  logic [ADDR_WIDTH-1:0] WR_ADDR_C1,
  input  logic [DATA_WIDTH-1:0] WR_DATA_C1,
  output logic [DATA_WIDTH-1:0] RDDATA_C1,
  // Client2
  input  logic [DATA_WIDTH-1:0] DATAIN_C2,
  input  logic                  REQUEST_C2,
  input  logic                  RD_NOT_WRITE_C2,
  input  logic [ADDR_WIDTH-1:0] ADDR_C2,
  output logic [DATA_WIDTH-1:0] DATAOUT_C2,
  output logic                  ACK_C2,
  // RAM port
  output logic                  RD_EN,
  output logic                  WR_EN,
  output logic [ADDR_WIDTH-1:0] WR_ADDR,
  output logic [ADDR_WIDTH-1:0] RD_ADDR,
  output logic [DATA_WIDTH-1:0] WR_DATA,
  input  logic [DATA_WIDTH-1:0] RD_DATA
);

  client_state_t rd_state, wr_state, rd_next, wr_next;

  arbiter_fsm #(
    .ADDR_WIDTH(ADDR_WIDTH)
  ) u_fsm (
    .CLOCK           (CLOCK),
    .RST_N           (RST_N),
    .RD_EN_C1        (RD_EN_C1),
    .WR_EN_C1        (WR_EN_C1),
    .REQUEST_C2      (REQUEST_C2),
    .RD_NOT_WRITE_C2 (RD_NOT_WRITE_C2),
    .rd_state        (rd_state),
    .wr_state        (wr_state),
    .rd_next         (rd_next),
    .wr_next         (wr_next),
    .RST_DONE        (RST_DONE)
  );

  // Client2 access sequencers: rd_ack_a marks a read access in flight,
  // rd_ack_b is its delayed copy and the read acknowledge; wr_ack marks a
  // write access and is the write acknowledge.
  logic rd_ack_a, rd_ack_b, wr_ack;

  always_ff @(posedge CLOCK or negedge RST_N) begin
    if (!RST_N) begin
      RD_EN    <= 1'b0;
      RD_ADDR  <= '0;
      WR_EN    <= 1'b0;
      WR_ADDR  <= '0;
      WR_DATA  <= '0;
      rd_ack_a <= 1'b0;
      rd_ack_b <= 1'b0;
      wr_ack   <= 1'b0;
    end else begin
      // Read port
      unique case (rd_next)
        ST_IDLE: begin
          RD_EN   <= 1'b0;
          RD_ADDR <= '0;
        end
        ST_C1_READ: begin
          RD_EN   <= RD_EN_C1;
          RD_ADDR <= RD_ADDR_C1;
        end
        ST_C2_READ: begin
          if (!rd_ack_a) begin
            RD_EN    <= 1'b1;
            RD_ADDR  <= ADDR_C2;
            rd_ack_a <= 1'b1;
          end
        end
        default: ;
      endcase

      // Write port
      unique case (wr_next)
        ST_IDLE: begin
          WR_EN   <= 1'b0;
          WR_ADDR <= '0;
          WR_DATA <= '0;
        end
        ST_C1_WRITE: begin
          WR_EN   <= WR_EN_C1;
          WR_ADDR <= WR_ADDR_C1;
          WR_DATA <= WR_DATA_C1;
        end
        ST_C2_WRITE: begin
          if (!wr_ack) begin
            WR_EN   <= 1'b1;
            WR_ADDR <= ADDR_C2;
            WR_DATA <= DATAIN_C2;
            wr_ack  <= 1'b1;
          end
        end
        default: ;
      endcase

      // A write acknowledge lasts one cycle.
      if (wr_ack) wr_ack <= 1'b0;

      // The read acknowledge follows the access by one cycle and ends it.
      rd_ack_b <= rd_ack_a;
      if (rd_ack_b) begin
        rd_ack_b <= 1'b0;
        rd_ack_a <= 1'b0;
      end
    end
  end

  assign ACK_C2 = rd_ack_b || wr_ack;

  addr_clash_bypass #(
    .ADDR_WIDTH      (ADDR_WIDTH),
    .DATA_WIDTH      (DATA_WIDTH),
    .REGISTERED_DATA (REGISTERED_DATA)
  ) u_bypass (
    .CLOCK       (CLOCK),
    .RST_N       (RST_N),
    .req_rd_en   (RD_EN),
    .req_wr_en   (WR_EN),
    .req_rd_addr (RD_ADDR),
    .req_wr_addr (WR_ADDR),
    .req_wr_data (WR_DATA),
    .RD_DATA     (RD_DATA),
    .RDDATA_C1   (RDDATA_C1),
    .DATAOUT_C2  (DATAOUT_C2)
  );

  // Nothing reaches the RAM before the reset sequence has finished.
  a_no_req_in_reset : assert property (@(posedge CLOCK) disable iff (!RST_N)
    !RST_DONE |-> !(RD_EN || WR_EN));
  // Each acknowledge is a single-cycle pulse.
  a_rd_ack_pulse : assert property (@(posedge CLOCK) disable iff (!RST_N)
    rd_ack_b |=> !rd_ack_b);
  a_wr_ack_pulse : assert property (@(posedge CLOCK) disable iff (!RST_N)
    wr_ack |=> !wr_ack);
  // The RAM port follows the state: enabled for client1, idle when no one holds it.
  a_rd_port_state : assert property (@(posedge CLOCK) disable iff (!RST_N)
    ((rd_state == ST_C1_READ) |-> RD_EN) and ((rd_state == ST_IDLE) |-> !RD_EN));
  a_wr_port_state : assert property (@(posedge CLOCK) disable iff (!RST_N)
    ((wr_state == ST_C1_WRITE) |-> WR_EN) and ((wr_state == ST_IDLE) |-> !WR_EN));

endmodule
