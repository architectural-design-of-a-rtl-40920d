// ram_arbiter: a 16 x 8-bit RAM shared by two clients through a fixed-priority
// arbiter (top level).
//
// The arbiter and the RAM are connected port to port: the arbiter drives the
// RAM's read enable and address and its write enable, address and data, and
// receives its read data; clock and reset go to both. The ports of this
// module are the two client ports of the arbiter plus RST_DONE, low while the
// RAM clears itself after reset (2**ADDR_WIDTH cycles) and high when client
// requests are accepted.
//
// Client1 (RD_EN_C1, WR_EN_C1, RD_ADDR_C1, WR_ADDR_C1, WR_DATA_C1, RDDATA_C1)
// has priority and may read and write in the same cycle. Client2 (REQUEST_C2,
// RD_NOT_WRITE_C2, ADDR_C2, DATAIN_C2, DATAOUT_C2, ACK_C2) gets the RAM port
// client1 leaves free, one operation at a time, acknowledged by ACK_C2 pulses.
// Read latency from the client's request to valid read data is two clock
// edges (three with REGISTERED_DATA = 1 on RDDATA_C1). A read of an address
// written in the same RAM cycle returns the new word. Structure, generics and
// defaults follow the original design.
//
// RST_N is an asynchronous reset for every register. The assertions in the
// arbiter also use it in "disable iff", which lint reports as a reset net
// that is sampled synchronously as well; no logic does so.
module ram_arbiter #(
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
  output logic                  ACK_C2
);

  logic                  rd_en, wr_en;
  logic [ADDR_WIDTH-1:0] rd_addr, wr_addr;
  logic [DATA_WIDTH-1:0] wr_data, rd_data;

  ram #(
    .ADDR_WIDTH (ADDR_WIDTH),
    .DATA_WIDTH (DATA_WIDTH)
  ) u_ram (
    .CLOCK   (CLOCK),
    .RST_N   (RST_N),
    .RD_EN   (rd_en),
    .WR_EN   (wr_en),
    .RD_ADDR (rd_addr),
    .WR_ADDR (wr_addr),
    .WR_DATA (wr_data),
    .RD_DATA (rd_data)
  );

  arbiter #(
    .ADDR_WIDTH      (ADDR_WIDTH),
    .DATA_WIDTH      (DATA_WIDTH),
    .REGISTERED_DATA (REGISTERED_DATA)
  ) u_arbiter (
    .RST_N           (RST_N),
    .CLOCK           (CLOCK),
    .RST_DONE        (RST_DONE),
    .RD_EN_C1        (RD_EN_C1),
    .WR_EN_C1        (WR_EN_C1),
    .RD_ADDR_C1      (RD_ADDR_C1),
    .WR_ADDR_C1      (WR_ADDR_C1),
    .WR_DATA_C1      (WR_DATA_C1),
    .RDDATA_C1       (RDDATA_C1),
    .DATAIN_C2       (DATAIN_C2),
    .REQUEST_C2      (REQUEST_C2),
    .RD_NOT_WRITE_C2 (RD_NOT_WRITE_C2),
    .ADDR_C2         (ADDR_C2),
    .DATAOUT_C2      (DATAOUT_C2),
    .ACK_C2          (ACK_C2),
    .RD_EN           (rd_en),
    .WR_EN           (wr_en),
    .WR_ADDR         (wr_addr),
    .RD_ADDR         (rd_addr),
    .WR_DATA         (wr_data),
    .RD_DATA         (rd_data)
  );

endmodule
