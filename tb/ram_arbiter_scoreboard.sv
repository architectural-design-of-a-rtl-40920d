// ram_arbiter_scoreboard: client-side checker for the ram_arbiter top level.
//
// Watches only the top level's client ports and keeps its own copy of the
// memory. It samples the inputs at every rising edge and checks on the
// following falling edge:
//   - RST_DONE rises exactly 2**ADDR_WIDTH edges after RST_N rises; the
//     memory copy is all zero after a reset, and inputs given before RST_DONE
//     change nothing.
//   - A client1 write sampled at edge k lands at edge k+1; a client2 write is
//     acknowledged by ACK_C2 in the cycle after it is taken (edge e) and lands
//     at edge e+1.
//   - A client1 read sampled at edge k returns on RDDATA_C1 after edge k+1
//     (k+2 with REGISTERED_DATA) the word as it is after the write landing at
//     edge k+1, i.e. a same-cycle write to that address is seen.
//   - A client2 read is acknowledged two edges after it is taken, with
//     DATAOUT_C2 holding the word as it is after the write landing at that
//     edge.
// Client2 must hold REQUEST_C2, RD_NOT_WRITE_C2, ADDR_C2 and DATAIN_C2 until
// it sees ACK_C2. The scoreboard also counts the mechanisms it saw.
module ram_arbiter_scoreboard #(
  parameter int unsigned ADDR_WIDTH      = 4,
  parameter int unsigned DATA_WIDTH      = 8,
  parameter bit          REGISTERED_DATA = 1'b0
) (
  input  logic                  CLOCK,
  input  logic                  RST_N,
  input  logic                  RST_DONE,
  input  logic                  RD_EN_C1,
  input  logic                  WR_EN_C1,
  input  logic [ADDR_WIDTH-1:0] RD_ADDR_C1,
  input  logic [ADDR_WIDTH-1:0] WR_ADDR_C1,
  input  logic [DATA_WIDTH-1:0] WR_DATA_C1,
  input  logic [DATA_WIDTH-1:0] RDDATA_C1,
  input  logic [DATA_WIDTH-1:0] DATAIN_C2,
  input  logic                  REQUEST_C2,
  input  logic                  RD_NOT_WRITE_C2,
  input  logic [ADDR_WIDTH-1:0] ADDR_C2,
  input  logic [DATA_WIDTH-1:0] DATAOUT_C2,
  input  logic                  ACK_C2
);

  localparam int unsigned DEPTH = 2 ** ADDR_WIDTH;

  int checks = 0;
  int failures = 0;
  // Mechanism counters
  int n_reset_seq = 0, n_ignored_in_reset = 0;
  int n_c1_rd = 0, n_c1_wr = 0, n_c1_both = 0;
  int n_c2_rd = 0, n_c2_wr = 0;
  int n_c2_blocked = 0, n_clash = 0;
  int n_c2_blocked_both = 0;

  logic [DATA_WIDTH-1:0] mem [DEPTH];

  // Sampled at the last rising edge
  logic                  s_valid, s_rd, s_wr, s_req, s_rnw;
  logic [ADDR_WIDTH-1:0] s_rd_addr, s_wr_addr, s_addr_c2;
  logic [DATA_WIDTH-1:0] s_wr_data, s_datain_c2;

  // Writes landing at the next edge
  logic                  p_wr1, p_wr2;
  logic [ADDR_WIDTH-1:0] p_addr1, p_addr2;
  logic [DATA_WIDTH-1:0] p_data1, p_data2;
  // Client1 read issued at the previous edge, and registered-mode delay
  logic                  p_rd1, d_valid;
  logic [ADDR_WIDTH-1:0] p_rd_addr1;
  logic [DATA_WIDTH-1:0] d_exp;
  int                    reset_cycles;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic clear_state();
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    p_wr1 = 0; p_wr2 = 0; p_rd1 = 0; d_valid = 0;
    p_addr1 = '0; p_addr2 = '0; p_data1 = '0; p_data2 = '0; p_rd_addr1 = '0; d_exp = '0;
    reset_cycles = 0;
  endtask

  initial clear_state();

  always @(negedge RST_N) clear_state();

  always @(posedge CLOCK) begin
    if (RST_N && !RST_DONE) reset_cycles++;
    s_valid     <= RST_N && RST_DONE;
    s_rd        <= RD_EN_C1;
    s_wr        <= WR_EN_C1;
    s_rd_addr   <= RD_ADDR_C1;
    s_wr_addr   <= WR_ADDR_C1;
    s_wr_data   <= WR_DATA_C1;
    s_req       <= REQUEST_C2;
    s_rnw       <= RD_NOT_WRITE_C2;
    s_addr_c2   <= ADDR_C2;
    s_datain_c2 <= DATAIN_C2;
  end

  always @(negedge CLOCK) begin
    if (RST_N) begin
      if (!RST_DONE) begin
        if (RD_EN_C1 || WR_EN_C1 || REQUEST_C2) n_ignored_in_reset++;
      end else if (reset_cycles > 0) begin
        check(reset_cycles == DEPTH,
              $sformatf("RST_DONE %0d edges after RST_N rises (expected %0d)", reset_cycles, DEPTH));
        n_reset_seq++;
        reset_cycles = 0;
      end
      if (s_valid) begin
        logic wr_now;
        // 1. Writes landing at the edge just passed.
        wr_now = p_wr1 || p_wr2;
        if (p_wr1 && p_wr2) check(0, "two writes in one RAM cycle");
        if (p_wr1) mem[p_addr1] = p_data1;
        if (p_wr2) mem[p_addr2] = p_data2;
        // 2. Client1 read issued at the previous edge returns now.
        if (REGISTERED_DATA) begin
          if (d_valid) check(RDDATA_C1 == d_exp, "RDDATA_C1 (registered)");
          d_valid = p_rd1;
          d_exp   = mem[p_rd_addr1];
        end else if (p_rd1) begin
          check(RDDATA_C1 == mem[p_rd_addr1], "RDDATA_C1");
        end
        if (p_rd1 && wr_now && ((p_wr1 && p_addr1 == p_rd_addr1) || (p_wr2 && p_addr2 == p_rd_addr1)))
          n_clash++;
        // 3. Client2 acknowledge.
        p_wr2 = 1'b0;
        if (ACK_C2) begin
          check(s_req, $sformatf("ACK_C2 only for a pending client2 request (%0t)", $time));
          if (s_rnw) begin
            check(DATAOUT_C2 == mem[s_addr_c2], "DATAOUT_C2 at ACK_C2");
            n_c2_rd++;
          end else begin
            p_wr2 = 1'b1; p_addr2 = s_addr_c2; p_data2 = s_datain_c2;
            n_c2_wr++;
          end
        end
        // 4. Client1 requests sampled at the edge just passed.
        p_wr1 = s_wr; p_addr1 = s_wr_addr; p_data1 = s_wr_data;
        p_rd1 = s_rd; p_rd_addr1 = s_rd_addr;
        if (s_rd) n_c1_rd++;
        if (s_wr) n_c1_wr++;
        if (s_rd && s_wr) n_c1_both++;
        if (s_req && ((s_rnw && s_rd) || (!s_rnw && s_wr))) n_c2_blocked++;
        if (s_req && s_rd && s_wr) n_c2_blocked_both++;
      end else begin
        p_wr1 = 0; p_wr2 = 0; p_rd1 = 0;
        for (int i = 0; i < DEPTH; i++) mem[i] = '0;
      end
    end
  end

  task automatic report();
    $display("COUNT reset sequences=%0d inputs ignored during reset=%0d", n_reset_seq, n_ignored_in_reset);
    $display("COUNT client1 reads=%0d writes=%0d read+write=%0d", n_c1_rd, n_c1_wr, n_c1_both);
    $display("COUNT client2 reads=%0d writes=%0d", n_c2_rd, n_c2_wr);
    $display("COUNT client2 held off by client1=%0d (both ports=%0d) address clashes=%0d",
             n_c2_blocked, n_c2_blocked_both, n_clash);
    check(n_reset_seq >= 2, "reset sequence seen, also in mid-traffic");
    check(n_ignored_in_reset > 0, "inputs given before RST_DONE");
    check(n_c1_rd > 0 && n_c1_wr > 0 && n_c1_both > 0, "client1 read, write, read+write");
    check(n_c2_rd > 0 && n_c2_wr > 0, "client2 read and write");
    check(n_c2_blocked > 0 && n_c2_blocked_both > 0, "priority hold-off of client2");
    check(n_clash > 0, "address clash bypass");
  endtask

endmodule
