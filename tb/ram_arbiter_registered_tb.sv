// ram_arbiter_registered_tb: end-to-end testbench of ram_arbiter in its
// registered read-data mode (REGISTERED_DATA = 1).
//
// In this mode RDDATA_C1 comes one cycle later than in the default mode, from
// registers, while DATAOUT_C2 is unchanged. The test checks the three-edge
// client1 read latency directly, including a same-address read and write
// (new word returned), then runs random traffic from both clients against
// ram_arbiter_scoreboard, which checks every read and counts the mechanisms.
module ram_arbiter_registered_tb;

  localparam int unsigned AW = 4;
  localparam int unsigned DW = 8;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          rd_en_c1 = 1'b0, wr_en_c1 = 1'b0;
  logic [AW-1:0] rd_addr_c1 = '0, wr_addr_c1 = '0, addr_c2 = '0;
  logic [DW-1:0] wr_data_c1 = '0, datain_c2 = '0;
  logic          req_c2 = 1'b0, rnw_c2 = 1'b0;
  logic [DW-1:0] rddata_c1, dataout_c2;
  logic          ack_c2, rst_done;

  ram_arbiter #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW), .REGISTERED_DATA(1'b1)) dut (
    .RST_N(rst_n), .CLOCK(clk), .RST_DONE(rst_done),
    .RD_EN_C1(rd_en_c1), .WR_EN_C1(wr_en_c1), .RD_ADDR_C1(rd_addr_c1),
    .WR_ADDR_C1(wr_addr_c1), .WR_DATA_C1(wr_data_c1), .RDDATA_C1(rddata_c1),
    .DATAIN_C2(datain_c2), .REQUEST_C2(req_c2), .RD_NOT_WRITE_C2(rnw_c2),
    .ADDR_C2(addr_c2), .DATAOUT_C2(dataout_c2), .ACK_C2(ack_c2)
  );

  ram_arbiter_scoreboard #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW), .REGISTERED_DATA(1'b1)) sb (
    .CLOCK(clk), .RST_N(rst_n), .RST_DONE(rst_done),
    .RD_EN_C1(rd_en_c1), .WR_EN_C1(wr_en_c1), .RD_ADDR_C1(rd_addr_c1),
    .WR_ADDR_C1(wr_addr_c1), .WR_DATA_C1(wr_data_c1), .RDDATA_C1(rddata_c1),
    .DATAIN_C2(datain_c2), .REQUEST_C2(req_c2), .RD_NOT_WRITE_C2(rnw_c2),
    .ADDR_C2(addr_c2), .DATAOUT_C2(dataout_c2), .ACK_C2(ack_c2)
  );

  always #25 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic finish();
    sb.report();
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb.checks, failures + sb.failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    finish();
  end

  task automatic c1_set(input logic rd, input logic wr, input logic [AW-1:0] ra,
                        input logic [AW-1:0] wa, input logic [DW-1:0] wd);
    rd_en_c1 = rd; wr_en_c1 = wr; rd_addr_c1 = ra; wr_addr_c1 = wa; wr_data_c1 = wd;
  endtask

  initial begin
    int waited;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Inputs before RST_DONE are ignored.
    c1_set(1'b1, 1'b1, 4'b0100, 4'b0100, 8'h99);
    req_c2 = 1'b1;
    while (!rst_done) @(negedge clk);
    c1_set(1'b0, 1'b0, '0, '0, '0);
    req_c2 = 1'b0;
    // Write 10100011 at 1010, then read it: data after the third edge.
    c1_set(1'b0, 1'b1, '0, 4'b1010, 8'b10100011);
    @(negedge clk);
    c1_set(1'b1, 1'b0, 4'b1010, '0, '0);
    @(negedge clk);
    c1_set(1'b0, 1'b0, '0, '0, '0);
    @(negedge clk);
    check(rddata_c1 != 8'b10100011, "registered read data not yet valid after two edges");
    @(negedge clk);
    check(rddata_c1 == 8'b10100011, "registered read data valid after three edges");
    // Same-address read and write: the new word, three edges later.
    c1_set(1'b1, 1'b1, 4'b1010, 4'b1010, 8'b10111011);
    @(negedge clk);
    c1_set(1'b0, 1'b0, '0, '0, '0);
    @(negedge clk);
    check(dataout_c2 == 8'b10111011, "DATAOUT_C2 unregistered: new word after two edges");
    @(negedge clk);
    check(rddata_c1 == 8'b10111011, "registered RDDATA_C1: new word after three edges");

    fork
      begin : client1
        for (int n = 0; n < 4000; n++) begin
          if (n == 2000) begin
            rst_n = 1'b0;
            @(negedge clk);
            rst_n = 1'b1;
          end
          if ($urandom_range(0, 3) == 0)
            c1_set(1'($urandom_range(0, 2) == 0), 1'($urandom_range(0, 2) == 0),
                   AW'($urandom_range(0, 7)), AW'($urandom_range(0, 7)), DW'($urandom));
          else
            c1_set(rd_en_c1, wr_en_c1, AW'($urandom_range(0, 7)), AW'($urandom_range(0, 7)),
                   DW'($urandom));
          @(negedge clk);
        end
      end
      begin : client2
        forever begin
          if ($urandom_range(0, 3) == 0) begin
            req_c2 = 1'b0;
            repeat ($urandom_range(1, 4)) @(negedge clk);
          end
          req_c2 = 1'b1; rnw_c2 = 1'($urandom_range(0, 1));
          addr_c2 = AW'($urandom_range(0, 7)); datain_c2 = DW'($urandom);
          waited = 0;
          do begin
            @(negedge clk);
            waited++;
          end while (!ack_c2 && waited < 50);
          req_c2 = 1'b0;
        end
      end
    join_any
    disable fork;
    req_c2 = 1'b0;
    c1_set(1'b0, 1'b0, '0, '0, '0);
    repeat (4) @(negedge clk);
    finish();
  end

endmodule
