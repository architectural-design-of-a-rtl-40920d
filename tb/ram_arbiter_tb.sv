// ram_arbiter_tb: end-to-end testbench of the ram_arbiter top level at its
// default size (16 x 8-bit RAM, unregistered read data).
//
// Part 1 replays the scenarios the design was demonstrated with, using their
// addresses and data: client1 write then read; client2 write then read, with
// the acknowledge rhythm (one pulse every 2 cycles for writes, every 3 for
// reads); client1 reading and writing one address in the same cycle (the new
// word is returned); client1 writing while client2 reads the same address
// (client2 gets the new word); both clients reading, or both writing, at
// once (client2 waits); client1 reading and writing while client2 asks (no
// access for client2); inputs given before RST_DONE (ignored); reset in the
// middle of operation (memory cleared). Part 2 runs random traffic from both
// clients, client2 behaving as a requester that holds its request until
// ACK_C2, with one reset in the middle.
//
// ram_arbiter_scoreboard checks every read against its own copy of the
// memory and counts each mechanism; the test fails if one never happened.
module ram_arbiter_tb;

  localparam int unsigned AW    = 4;
  localparam int unsigned DW    = 8;
  localparam int unsigned DEPTH = 2 ** AW;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          rd_en_c1 = 1'b0, wr_en_c1 = 1'b0;
  logic [AW-1:0] rd_addr_c1 = '0, wr_addr_c1 = '0, addr_c2 = '0;
  logic [DW-1:0] wr_data_c1 = '0, datain_c2 = '0;
  logic          req_c2 = 1'b0, rnw_c2 = 1'b0;
  logic [DW-1:0] rddata_c1, dataout_c2;
  logic          ack_c2, rst_done;

  ram_arbiter dut (
    .RST_N(rst_n), .CLOCK(clk), .RST_DONE(rst_done),
    .RD_EN_C1(rd_en_c1), .WR_EN_C1(wr_en_c1), .RD_ADDR_C1(rd_addr_c1),
    .WR_ADDR_C1(wr_addr_c1), .WR_DATA_C1(wr_data_c1), .RDDATA_C1(rddata_c1),
    .DATAIN_C2(datain_c2), .REQUEST_C2(req_c2), .RD_NOT_WRITE_C2(rnw_c2),
    .ADDR_C2(addr_c2), .DATAOUT_C2(dataout_c2), .ACK_C2(ack_c2)
  );

  ram_arbiter_scoreboard #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW), .REGISTERED_DATA(1'b0)) sb (
    .CLOCK(clk), .RST_N(rst_n), .RST_DONE(rst_done),
    .RD_EN_C1(rd_en_c1), .WR_EN_C1(wr_en_c1), .RD_ADDR_C1(rd_addr_c1),
    .WR_ADDR_C1(wr_addr_c1), .WR_DATA_C1(wr_data_c1), .RDDATA_C1(rddata_c1),
    .DATAIN_C2(datain_c2), .REQUEST_C2(req_c2), .RD_NOT_WRITE_C2(rnw_c2),
    .ADDR_C2(addr_c2), .DATAOUT_C2(dataout_c2), .ACK_C2(ack_c2)
  );

  always #25 clk = ~clk;   // 50 ns clock period

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
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    finish();
  end

  task automatic c1_set(input logic rd, input logic wr, input logic [AW-1:0] ra,
                        input logic [AW-1:0] wa, input logic [DW-1:0] wd);
    rd_en_c1 = rd; wr_en_c1 = wr; rd_addr_c1 = ra; wr_addr_c1 = wa; wr_data_c1 = wd;
  endtask

  task automatic c1_idle();
    c1_set(1'b0, 1'b0, '0, '0, '0);
  endtask

  // Client1 read of one cycle; returns RDDATA_C1 two edges later.
  task automatic c1_read(input logic [AW-1:0] a, output logic [DW-1:0] d);
    c1_set(1'b1, 1'b0, a, '0, '0);
    @(negedge clk);
    c1_idle();
    @(negedge clk);
    d = rddata_c1;
  endtask

  task automatic c1_write(input logic [AW-1:0] a, input logic [DW-1:0] d);
    c1_set(1'b0, 1'b1, '0, a, d);
    @(negedge clk);
    c1_idle();
  endtask

  // Client2 request held until ACK_C2 (or timeout); returns DATAOUT_C2 at
  // the acknowledge and the number of cycles waited.
  task automatic c2_op(input logic rnw, input logic [AW-1:0] a, input logic [DW-1:0] d,
                       output logic [DW-1:0] q, output int waited);
    req_c2 = 1'b1; rnw_c2 = rnw; addr_c2 = a; datain_c2 = d;
    waited = 0;
    do begin
      @(negedge clk);
      waited++;
    end while (!ack_c2 && waited < 50);
    q = dataout_c2;
    req_c2 = 1'b0;
  endtask

  task automatic wait_reset_done();
    int n = 0;
    while (!rst_done && n < 4 * DEPTH) begin
      @(negedge clk);
      n++;
    end
  endtask

  // Times of ACK_C2 pulses while client2 holds one request for n cycles.
  task automatic ack_period(input logic rnw, input logic [AW-1:0] a, input logic [DW-1:0] d,
                            input int n, output int period, output int pulses);
    int last, first_gap;
    last = -1; period = 0; pulses = 0; first_gap = 1;
    req_c2 = 1'b1; rnw_c2 = rnw; addr_c2 = a; datain_c2 = d;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if (ack_c2) begin
        if (last >= 0) begin
          if (first_gap) period = i - last;
          else if (period != i - last) period = -1;
          first_gap = 0;
        end
        last = i;
        pulses++;
      end
    end
    req_c2 = 1'b0;
    @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    logic [DW-1:0] q;
    int waited, period, pulses;

    // ---- Inputs before RST_DONE are ignored --------------------------------
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    c1_set(1'b0, 1'b1, '0, 4'b0001, 8'hFF);
    req_c2 = 1'b1; rnw_c2 = 1'b0; addr_c2 = 4'b0010; datain_c2 = 8'hEE;
    @(negedge clk);
    check(!ack_c2 && !rst_done, "no acknowledge before RST_DONE");
    wait_reset_done();
    c1_idle(); req_c2 = 1'b0;
    c1_read(4'b0001, q);
    check(q == '0, "client1 write given before RST_DONE was ignored");
    c1_read(4'b0010, q);
    check(q == '0, "client2 write given before RST_DONE was ignored");

    // ---- Client1 write, then read back ------------------------------------
    c1_write(4'b1010, 8'b10100011);
    c1_read(4'b1010, q);
    check(q == 8'b10100011, "client1 reads back 10100011 at 1010");

    // ---- Client2 write with acknowledge every 2 cycles ---------------------
    ack_period(1'b0, 4'b1110, 8'b11100011, 12, period, pulses);
    check(period == 2 && pulses >= 5, $sformatf("client2 write ACK period 2 (got %0d, %0d pulses)", period, pulses));
    // ---- Client2 read with acknowledge every 3 cycles ----------------------
    ack_period(1'b1, 4'b1110, '0, 12, period, pulses);
    check(period == 3 && pulses >= 3, $sformatf("client2 read ACK period 3 (got %0d, %0d pulses)", period, pulses));
    c2_op(1'b1, 4'b1110, '0, q, waited);
    check(q == 8'b11100011 && waited == 2, "client2 reads 11100011 at 1110, ACK two cycles after request");

    // ---- Client1 reads and writes the same address in one cycle ------------
    c1_set(1'b1, 1'b1, 4'b1010, 4'b1010, 8'b10111011);
    @(negedge clk);
    c1_idle();
    @(negedge clk);
    check(rddata_c1 == 8'b10111011, "client1 same-address read+write returns the new word");
    check(dataout_c2 == 8'b10111011, "DATAOUT_C2 shows the new word too");

    // ---- Client1 reads and writes different addresses in one cycle ---------
    c1_set(1'b1, 1'b1, 4'b1010, 4'b1001, 8'b00110011);
    @(negedge clk);
    c1_idle();
    @(negedge clk);
    check(rddata_c1 == 8'b10111011, "client1 read+write of different addresses");
    c1_read(4'b1001, q);
    check(q == 8'b00110011, "client1 write of 1001 landed");

    // ---- Client1 writes while client2 reads the same address ---------------
    req_c2 = 1'b1; rnw_c2 = 1'b1; addr_c2 = 4'b1110;
    c1_set(1'b0, 1'b1, '0, 4'b1110, 8'b01010101);
    @(negedge clk);
    c1_idle();
    @(negedge clk);
    check(ack_c2 && dataout_c2 == 8'b01010101, "client2 read sees client1's same-cycle write");
    req_c2 = 1'b0;
    repeat (2) @(negedge clk);

    // ---- Client1 reads while client2 writes the same address ---------------
    req_c2 = 1'b1; rnw_c2 = 1'b0; addr_c2 = 4'b1000; datain_c2 = 8'b10101111;
    c1_set(1'b1, 1'b0, 4'b1000, '0, '0);
    @(negedge clk);
    check(ack_c2, "client2 write granted while client1 only reads");
    req_c2 = 1'b0;
    @(negedge clk);
    check(rddata_c1 == 8'b10101111, "client1 read sees client2's same-cycle write");
    c1_idle();
    repeat (2) @(negedge clk);

    // ---- Both read at once: client2 waits until client1 stops --------------
    c1_set(1'b1, 1'b0, 4'b1010, '0, '0);
    req_c2 = 1'b1; rnw_c2 = 1'b1; addr_c2 = 4'b1010;
    repeat (6) begin
      @(negedge clk);
      check(!ack_c2, "client2 read held off while client1 reads");
    end
    c1_idle();
    waited = 0;
    while (!ack_c2 && waited < 10) begin
      @(negedge clk);
      waited++;
    end
    check(ack_c2 && dataout_c2 == 8'b10111011 && waited == 2, "client2 read served after client1 stops");
    req_c2 = 1'b0;
    repeat (2) @(negedge clk);

    // ---- Both write at once: client1 wins ----------------------------------
    c1_set(1'b0, 1'b1, '0, 4'b0110, 8'h3C);
    req_c2 = 1'b1; rnw_c2 = 1'b0; addr_c2 = 4'b0110; datain_c2 = 8'hC3;
    repeat (4) begin
      @(negedge clk);
      check(!ack_c2, "client2 write held off while client1 writes");
    end
    req_c2 = 1'b0;
    c1_idle();
    @(negedge clk);
    c1_read(4'b0110, q);
    check(q == 8'h3C, "client1's word kept when both write");

    // ---- Client1 reads and writes: client2 gets no access at all ----------
    c1_set(1'b1, 1'b1, 4'b1001, 4'b1001, 8'b10100011);
    req_c2 = 1'b1; rnw_c2 = 1'b1; addr_c2 = 4'b1001;
    repeat (3) @(negedge clk);
    rnw_c2 = 1'b0; datain_c2 = 8'h11;
    repeat (3) begin
      @(negedge clk);
      check(!ack_c2, "no client2 access while client1 reads and writes");
    end
    req_c2 = 1'b0;
    c1_idle();
    @(negedge clk);
    c1_read(4'b1001, q);
    check(q == 8'b10100011, "client1's word at 1001");

    // ---- Reset in the middle of operation ----------------------------------
    c1_set(1'b1, 1'b1, 4'b1010, 4'b0101, 8'h77);
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    check(!rst_done, "RST_DONE low during reset");
    rst_n = 1'b1;
    wait_reset_done();
    c1_idle();
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      c1_read(AW'(a), q);
      check(q == '0, $sformatf("word %0d cleared by reset", a));
    end

    // ---- Random traffic ----------------------------------------------------
    fork
      begin : client1
        for (int n = 0; n < 6000; n++) begin
          if (n == 3000) begin
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
        c1_idle();
      end
      begin : client2
        for (int n = 0; n < 1500; n++) begin
          if ($urandom_range(0, 3) == 0) begin
            req_c2 = 1'b0;
            repeat ($urandom_range(1, 4)) @(negedge clk);
          end
          c2_op(1'($urandom_range(0, 1)), AW'($urandom_range(0, 7)), DW'($urandom), q, waited);
        end
      end
    join_any
    disable fork;
    req_c2 = 1'b0;
    c1_idle();
    repeat (4) @(negedge clk);
    finish();
  end

endmodule
