// addr_clash_bypass: address-clash detection and read-data forwarding.
//
// The RAM reads before it writes, so when its read and write ports hit the
// same address in the same cycle, RD_DATA carries the old word. This block
// watches the request the arbiter presents to the RAM (req_*). At a clock edge
// where both enables are high and the addresses match, it raises ADDR_CLASH
// and captures the written word into TEMP_RD_DATA; ADDR_CLASH drops at the
// next edge without a clash, while TEMP_RD_DATA keeps its last value. Both are
// valid in the same cycle as the RAM's RD_DATA for that access, so the read
// outputs take TEMP_RD_DATA instead of RD_DATA whenever ADDR_CLASH is high:
// a reader always sees the updated word.
//
// Unregistered mode (REGISTERED_DATA = 0, the default): RDDATA_C1 and
// DATAOUT_C2 are both the mux of RD_DATA and TEMP_RD_DATA, with no extra
// delay. Registered mode (REGISTERED_DATA = 1): RDDATA_C1 comes one cycle
// later, from TEMP_RD_DATA2 (RD_DATA delayed) or TEMP_RD_DATA1 (TEMP_RD_DATA
// delayed), selected by ADDR_CLASHI (ADDR_CLASH delayed). DATAOUT_C2 is never
// registered. All of this, register names included, follows the original
// design; the reset of every register to zero is this design's choice.
module addr_clash_bypass #(
  parameter int unsigned ADDR_WIDTH      = 4,
  parameter int unsigned DATA_WIDTH      = 8,
  parameter bit          REGISTERED_DATA = 1'b0
) (
  input  logic                  CLOCK,
  input  logic                  RST_N,
  // Request currently presented to the RAM
  input  logic                  req_rd_en,
  input  logic                  req_wr_en,
  input  logic [ADDR_WIDTH-1:0] req_rd_addr,
  input  logic [ADDR_WIDTH-1:0] req_wr_addr,
  input  logic [DATA_WIDTH-1:0] req_wr_data,
  // RAM read data
  input  logic [DATA_WIDTH-1:0] RD_DATA,
  // Client read data
  output logic [DATA_WIDTH-1:0] RDDATA_C1,
  output logic [DATA_WIDTH-1:0] DATAOUT_C2
);

  logic                  ADDR_CLASH;
  logic [DATA_WIDTH-1:0] temp_rd_data;

  always_ff @(posedge CLOCK or negedge RST_N) begin
    if (!RST_N) begin
      ADDR_CLASH   <= 1'b0;
      temp_rd_data <= '0;
    end else begin
      if (req_rd_en && req_wr_en && (req_rd_addr == req_wr_addr)) begin
        ADDR_CLASH   <= 1'b1;
        temp_rd_data <= req_wr_data;
      end else begin
        ADDR_CLASH   <= 1'b0;
      end
    end
  end

  assign DATAOUT_C2 = ADDR_CLASH ? temp_rd_data : RD_DATA;

  if (REGISTERED_DATA) begin : g_registered
    // One register stage on the client1 side only
    logic [DATA_WIDTH-1:0] temp_rd_data1;
    logic [DATA_WIDTH-1:0] temp_rd_data2;
    logic                  addr_clash_i;

    always_ff @(posedge CLOCK or negedge RST_N) begin
      if (!RST_N) begin
        addr_clash_i  <= 1'b0;
        temp_rd_data1 <= '0;
        temp_rd_data2 <= '0;
      end else begin
        addr_clash_i  <= ADDR_CLASH;
        temp_rd_data1 <= temp_rd_data;
        temp_rd_data2 <= RD_DATA;
      end
    end

    assign RDDATA_C1 = addr_clash_i ? temp_rd_data1 : temp_rd_data2;
  end else begin : g_unregistered
    assign RDDATA_C1 = ADDR_CLASH ? temp_rd_data : RD_DATA;
  end

endmodule
