// ram: simple dual-port synchronous RAM with a power-on clearing sequence.
//
// The array has 2**ADDR_WIDTH words of DATA_WIDTH bits, one write port and one
// read port that both act on the rising edge of CLOCK. A write stores WR_DATA
// at WR_ADDR when WR_EN is high. A read copies the word at RD_ADDR into the
// RD_DATA register when RD_EN is high; RD_DATA holds its value otherwise. A
// read and a write of the same address in the same cycle return the old word
// (read-before-write); the arbiter in front of this RAM corrects for that.
//
// Reset: RST_N is active low and asynchronous. While it is low, and for
// 2**ADDR_WIDTH cycles after it rises, the RAM is initialising: each of those
// cycles writes zero into one word, address 0 first, through the same write
// port, and client reads and writes are ignored. The first edge at which a
// request is served is therefore edge 2**ADDR_WIDTH + 1 after RST_N rises.
//
// Follows the original design: ports, generics, the clear-after-reset sequence
// and the registered read. This design's own choices: RD_DATA is reset to zero,
// and the clearing takes exactly 2**ADDR_WIDTH cycles (the original spends one
// more cycle dropping its reset flag).
module ram #(
  parameter int unsigned ADDR_WIDTH = 4,
  parameter int unsigned DATA_WIDTH = 8
) (
  input  logic                  CLOCK,
  input  logic                  RST_N,
  input  logic                  RD_EN,
  input  logic                  WR_EN,
  input  logic [ADDR_WIDTH-1:0] RD_ADDR,
  input  logic [ADDR_WIDTH-1:0] WR_ADDR,
  input  logic [DATA_WIDTH-1:0] WR_DATA,
  output logic [DATA_WIDTH-1:0] RD_DATA
);

  localparam int unsigned RAM_DEPTH = 2 ** ADDR_WIDTH;

  logic [DATA_WIDTH-1:0] memory [RAM_DEPTH];

  // Clearing sequence: init_busy is high from reset until the last word has
  // been cleared; clr_addr walks through the array.
  logic                  init_busy;
  logic [ADDR_WIDTH-1:0] clr_addr;

  always_ff @(posedge CLOCK or negedge RST_N) begin
    if (!RST_N) begin
      init_busy <= 1'b1;
      clr_addr  <= '0;
    end else if (init_busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == ADDR_WIDTH'(RAM_DEPTH - 1)) init_busy <= 1'b0;
    end
  end

  // Single physical write port, shared by the clearing sequence and clients.
  logic                  mem_we;
  logic [ADDR_WIDTH-1:0] mem_waddr;
  logic [DATA_WIDTH-1:0] mem_wdata;

  always_comb begin
    if (init_busy) begin
      mem_we    = 1'b1;
      mem_waddr = clr_addr;
      mem_wdata = '0;
    end else begin
      mem_we    = WR_EN;
      mem_waddr = WR_ADDR;
      mem_wdata = WR_DATA;
    end
  end

  always_ff @(posedge CLOCK) begin
    if (mem_we) memory[mem_waddr] <= mem_wdata;
  end

  always_ff @(posedge CLOCK or negedge RST_N) begin
    if (!RST_N) begin
      RD_DATA <= '0;
    end else if (!init_busy && RD_EN) begin
      RD_DATA <= memory[RD_ADDR];
    end
  end

endmodule
