// ram_arbiter_cases_tb: the 34 numbered test cases of the RAM arbiter, run one
// after another on the top level at its default size.
//
// Each case starts from a reset, lets the RAM clear itself, optionally
// preloads a word (the "first RAM_DEPTH cycle" of the case), then runs a
// client1 action and a client2 action side by side. "Same time" means both
// start on the same clock edge; "different time" means they start 10 cycles
// (500 ns at the 50 ns clock) apart. A client2 action holds its request for a
// fixed number of cycles, like a client that keeps asking; the testbench
// counts its ACK_C2 pulses, notes when the first came and the data of the
// last read acknowledge. Each case then checks what the arbiter promises:
// who got the RAM, what each reader saw (the new word on a same-cycle write),
// what ended up in memory. ram_arbiter_scoreboard checks every read on top.
module ram_arbiter_cases_tb;

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

  always #25 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int tc = 0;
  int cases_run = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL case %0d: %s at %0t", tc, what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb.checks, failures + sb.failures);
    $finish;
  end

  // Cycle counter, relative to the start of a case's main phase.
  int cyc = 0;
  always @(negedge clk) cyc++;

  // Results of the client2 action
  int            c2_acks, c2_first_ack;
  logic [DW-1:0] c2_last_rd;
  // Client1 read data seen two edges after its last read cycle
  logic [DW-1:0] c1_last_rd;

  task automatic idle_all();
    rd_en_c1 = 0; wr_en_c1 = 0; rd_addr_c1 = '0; wr_addr_c1 = '0; wr_data_c1 = '0;
    req_c2 = 0; rnw_c2 = 0; addr_c2 = '0; datain_c2 = '0;
  endtask

  task automatic start_case(input int n);
    tc = n;
    cases_run++;
    idle_all();
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    while (!rst_done) @(negedge clk);
  endtask

  task automatic c1_write(input logic [AW-1:0] a, input logic [DW-1:0] d);
    wr_en_c1 = 1; wr_addr_c1 = a; wr_data_c1 = d;
    @(negedge clk);
    wr_en_c1 = 0; wr_addr_c1 = '0; wr_data_c1 = '0;
    @(negedge clk);
  endtask

  task automatic c2_write(input logic [AW-1:0] a, input logic [DW-1:0] d);
    int n = 0;
    req_c2 = 1; rnw_c2 = 0; addr_c2 = a; datain_c2 = d;
    do begin
      @(negedge clk);
      n++;
    end while (!ack_c2 && n < 20);
    check(ack_c2, "preload write by client2 acknowledged");
    req_c2 = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic c1_read(input logic [AW-1:0] a, output logic [DW-1:0] d);
    rd_en_c1 = 1; rd_addr_c1 = a;
    @(negedge clk);
    rd_en_c1 = 0;
    @(negedge clk);
    d = rddata_c1;
  endtask

  // Client1 action: from cycle `start` for `len` cycles
  task automatic c1_act(input int start, input int len, input logic rd, input logic wr,
                        input logic [AW-1:0] ra, input logic [AW-1:0] wa, input logic [DW-1:0] wd);
    repeat (start) @(negedge clk);
    // Only the port in use is driven, so a read and a write action can overlap.
    if (rd) begin rd_en_c1 = 1; rd_addr_c1 = ra; end
    if (wr) begin wr_en_c1 = 1; wr_addr_c1 = wa; wr_data_c1 = wd; end
    repeat (len) @(negedge clk);
    if (rd) rd_en_c1 = 0;
    if (wr) wr_en_c1 = 0;
    @(negedge clk);
    if (rd) c1_last_rd = rddata_c1;
  endtask

  // True while a client2 access is in progress and its ACK_C2 is still to come
  function automatic logic c2_busy();
    return !ack_c2 && dut.u_arbiter.rd_ack_a;
  endfunction

  // Client2 action: request held from cycle `start` for `len` cycles, and
  // beyond that until the acknowledge of an access already under way.
  task automatic c2_act(input int start, input int len, input logic rnw,
                        input logic [AW-1:0] a, input logic [DW-1:0] d);
    repeat (start) @(negedge clk);
    req_c2 = 1; rnw_c2 = rnw; addr_c2 = a; datain_c2 = d;
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      if (ack_c2) begin
        if (c2_acks == 0) c2_first_ack = start + i;
        c2_acks++;
        if (rnw) c2_last_rd = dataout_c2;
      end
    end
    while (c2_busy()) begin
      @(negedge clk);
      if (ack_c2) begin
        c2_acks++;
        if (rnw) c2_last_rd = dataout_c2;
      end
    end
    req_c2 = 0;
  endtask

  // Run both actions side by side; a zero length skips an action.
  task automatic run(input int s1, input int l1, input logic rd, input logic wr,
                     input logic [AW-1:0] ra, input logic [AW-1:0] wa, input logic [DW-1:0] wd,
                     input int s2, input int l2, input logic rnw,
                     input logic [AW-1:0] a2, input logic [DW-1:0] d2);
    c2_acks = 0; c2_first_ack = -1; c2_last_rd = '0; c1_last_rd = '0;
    fork
      if (l1 > 0) c1_act(s1, l1, rd, wr, ra, wa, wd);
      if (l2 > 0) c2_act(s2, l2, rnw, a2, d2);
    join
    repeat (4) @(negedge clk);
  endtask

  function automatic logic [DW-1:0] peek(input logic [AW-1:0] a);
    return sb.mem[a];
  endfunction

  localparam logic [DW-1:0] D1 = 8'b10100011;
  localparam logic [DW-1:0] D2 = 8'b11100011;
  localparam logic [DW-1:0] D3 = 8'b10111011;
  localparam logic [DW-1:0] D4 = 8'b00100011;
  localparam logic [DW-1:0] D5 = 8'b10101111;

  initial begin
    logic [DW-1:0] q;
    repeat (2) @(negedge clk);

    // 1. Only client1 writes.
    start_case(1);
    run(0, 1, 0, 1, '0, 4'b1010, D1, 0, 0, 0, '0, '0);
    c1_read(4'b1010, q);
    check(q == D1, "client1 write of 10100011 at 1010");
    // 2. Only client1 reads.
    start_case(2);
    c1_write(4'b1010, D1);
    run(0, 3, 1, 0, 4'b1010, '0, '0, 0, 0, 0, '0, '0);
    check(c1_last_rd == D1, "client1 reads 10100011 at 1010");
    // 3. Only client2 writes: periodic acknowledges.
    start_case(3);
    run(0, 0, 0, 0, '0, '0, '0, 0, 20, 0, 4'b1110, D2);
    check(c2_acks == 10 && c2_first_ack == 0, $sformatf("client2 write: ACK every 2 cycles (%0d acks)", c2_acks));
    check(peek(4'b1110) == D2, "client2 write of 11100011 at 1110");
    // 4. Only client2 reads: acknowledges at a longer period.
    start_case(4);
    c2_write(4'b1110, D2);
    run(0, 0, 0, 0, '0, '0, '0, 0, 21, 1, 4'b1110, '0);
    check(c2_acks == 7 && c2_first_ack == 1, $sformatf("client2 read: ACK every 3 cycles (%0d acks)", c2_acks));
    check(c2_last_rd == D2, "client2 reads 11100011 at 1110");
    // 5. Client1 reads and writes different locations at the same time.
    start_case(5);
    c1_write(4'b1010, D1);
    run(0, 3, 1, 1, 4'b1010, 4'b1110, D3, 0, 0, 0, '0, '0);
    check(c1_last_rd == D1 && peek(4'b1110) == D3, "client1 read 1010 and write 1110 together");
    // 6. ... at different times.
    start_case(6);
    c1_write(4'b1010, D1);
    fork
      run(0, 3, 0, 1, '0, 4'b1110, D3, 0, 0, 0, '0, '0);
      begin
        repeat (10) @(negedge clk);
        c1_read(4'b1010, q);
      end
    join
    check(q == D1 && peek(4'b1110) == D3, "client1 read 1010 and write 1110 500 ns apart");
    // 7. Client1 reads and writes the same location at the same time.
    start_case(7);
    c1_write(4'b1010, D1);
    run(0, 3, 1, 1, 4'b1010, 4'b1010, D3, 0, 0, 0, '0, '0);
    check(c1_last_rd == D3, "same-location read+write returns 10111011");
    // 8. ... at different times (write held, read starts 10 cycles later).
    start_case(8);
    c1_write(4'b1010, D1);
    fork
      run(0, 20, 0, 1, '0, 4'b1010, D3, 0, 0, 0, '0, '0);
      begin
        repeat (10) @(negedge clk);
        c1_read(4'b1010, q);
      end
    join
    check(q == D3, "read of a location being written returns 10111011");
    // 9. Client2 reads and writes different locations at the same time: one
    //    request pin, so only the read (RD_NOT_WRITE_C2 = 1) happens.
    start_case(9);
    c2_write(4'b1010, D2);
    run(0, 0, 0, 0, '0, '0, '0, 0, 12, 1, 4'b1010, D4);
    check(c2_acks > 0 && c2_last_rd == D2, "client2 read of 1010");
    check(peek(4'b1001) == '0 && peek(4'b1010) == D2, "no client2 write while reading");
    // 10. ... at different times: write 1001, then read 1010.
    start_case(10);
    c2_write(4'b1010, D2);
    run(0, 0, 0, 0, '0, '0, '0, 0, 4, 0, 4'b1001, D4);
    run(0, 0, 0, 0, '0, '0, '0, 6, 6, 1, 4'b1010, '0);
    check(peek(4'b1001) == D4 && c2_last_rd == D2, "client2 write then read");
    // 11. Client2 reads and writes the same location at the same time: only the read.
    start_case(11);
    c2_write(4'b1010, D2);
    run(0, 0, 0, 0, '0, '0, '0, 0, 12, 1, 4'b1010, D4);
    check(c2_last_rd == D2 && peek(4'b1010) == D2, "client2 same-location: read only");
    // 12. ... at different times: write then read returns the new word.
    start_case(12);
    c2_write(4'b1010, D2);
    run(0, 0, 0, 0, '0, '0, '0, 0, 4, 0, 4'b1010, D4);
    run(0, 0, 0, 0, '0, '0, '0, 6, 6, 1, 4'b1010, '0);
    check(c2_last_rd == D4, "client2 reads its own new word");
    // 13. Client1 writes, client2 reads, different locations, same time.
    start_case(13);
    c2_write(4'b1110, D2);
    run(0, 6, 0, 1, '0, 4'b1001, D3, 0, 6, 1, 4'b1110, '0);
    check(c2_acks > 0 && c2_first_ack == 1 && c2_last_rd == D2, "client2 reads while client1 writes");
    check(peek(4'b1001) == D3, "client1 write landed");
    // 14. ... different times.
    start_case(14);
    c2_write(4'b1110, D2);
    run(0, 6, 0, 1, '0, 4'b1001, D3, 10, 6, 1, 4'b1110, '0);
    check(c2_acks > 0 && c2_last_rd == D2 && peek(4'b1001) == D3, "client1 write, client2 read 500 ns later");
    // 15. Client1 writes, client2 reads, same location, same time.
    start_case(15);
    c2_write(4'b1110, D2);
    run(0, 6, 0, 1, '0, 4'b1110, D3, 0, 6, 1, 4'b1110, '0);
    check(c2_acks > 0 && c2_last_rd == D3, "client2 sees client1's new word");
    // 16. ... different times.
    start_case(16);
    c2_write(4'b1110, D2);
    run(0, 20, 0, 1, '0, 4'b1110, D3, 10, 6, 1, 4'b1110, '0);
    check(c2_acks > 0 && c2_last_rd == D3, "client2 sees client1's new word later");
    // 17. Client1 reads, client2 writes, same location, same time.
    start_case(17);
    c1_write(4'b1010, D1);
    run(0, 6, 1, 0, 4'b1010, '0, '0, 0, 3, 0, 4'b1010, D2);
    check(c2_acks > 0 && c1_last_rd == D2, "client1 sees client2's new word");
    // 18. ... different times.
    start_case(18);
    c1_write(4'b1010, D1);
    run(0, 20, 1, 0, 4'b1010, '0, '0, 10, 3, 0, 4'b1010, D2);
    check(c2_acks > 0 && c1_last_rd == D2, "client1 sees client2's new word later");
    // 19. Client1 reads, client2 writes, different locations, same time.
    start_case(19);
    c1_write(4'b1000, D5);
    run(0, 6, 1, 0, 4'b1000, '0, '0, 0, 3, 0, 4'b1010, D2);
    check(c2_acks > 0 && c1_last_rd == D5 && peek(4'b1010) == D2, "client1 reads 1000, client2 writes 1010");
    // 20. ... different times.
    start_case(20);
    c1_write(4'b1000, D5);
    run(0, 6, 1, 0, 4'b1000, '0, '0, 10, 3, 0, 4'b1010, D2);
    check(c2_acks > 0 && c1_last_rd == D5 && peek(4'b1010) == D2, "client1 reads 1000, client2 writes 1010 later");
    // 21. Both read the same location at different times: client2 waits for client1.
    start_case(21);
    c1_write(4'b1010, D1);
    run(0, 10, 1, 0, 4'b1010, '0, '0, 5, 15, 1, 4'b1010, '0);
    check(c2_acks > 0 && c2_first_ack >= 11 && c2_last_rd == D1, "client2 read served after client1's");
    // 22. ... same time, client1 keeps reading: no acknowledge.
    start_case(22);
    c1_write(4'b1010, D1);
    run(0, 20, 1, 0, 4'b1010, '0, '0, 0, 20, 1, 4'b1010, '0);
    check(c2_acks == 0 && c1_last_rd == D1, "client2 read held off");
    // 23. Both write different locations at different times: client2 waits.
    start_case(23);
    run(0, 10, 0, 1, '0, 4'b1000, D5, 5, 15, 0, 4'b1001, D2);
    check(c2_acks > 0 && c2_first_ack >= 10, "client2 write served after client1's");
    check(peek(4'b1000) == D5 && peek(4'b1001) == D2, "both writes landed");
    // 24. ... same time, client1 keeps writing: no acknowledge.
    start_case(24);
    run(0, 20, 0, 1, '0, 4'b1000, D5, 0, 20, 0, 4'b1001, D2);
    check(c2_acks == 0 && peek(4'b1001) == '0 && peek(4'b1000) == D5, "client2 write held off");
    // 25. Client1 reads+writes 1001, client2 reads 1001 after client1 stops reading.
    start_case(25);
    c1_write(4'b1001, 8'h00);
    run(0, 10, 1, 1, 4'b1001, 4'b1001, D1, 10, 6, 1, 4'b1001, '0);
    check(c1_last_rd == D1 && c2_acks > 0 && c2_last_rd == D1, "both read client1's new word");
    // 26. ... at the same time: client2 gets no access.
    start_case(26);
    run(0, 20, 1, 1, 4'b1001, 4'b1001, D1, 0, 20, 1, 4'b1001, '0);
    check(c1_last_rd == D1 && c2_acks == 0, "client2 shut out while client1 reads and writes");
    // 27. Client1 reads 1001 and writes it for a while; client2 writes 1001 after.
    start_case(27);
    fork
      run(0, 10, 0, 1, '0, 4'b1001, D1, 10, 3, 0, 4'b1001, D2);
      c1_act(0, 20, 1, 0, 4'b1001, '0, '0);
    join
    check(c2_acks > 0 && c1_last_rd == D2, "client1 keeps reading and sees client2's word");
    // 28. ... client2 asks while client1 writes: it waits until client1 stops writing.
    start_case(28);
    fork
      run(0, 10, 0, 1, '0, 4'b1001, D1, 0, 14, 0, 4'b1001, D2);
      c1_act(0, 20, 1, 0, 4'b1001, '0, '0);
    join
    check(c2_acks > 0 && c2_first_ack >= 10 && c1_last_rd == D2, "client2 write after client1's write");
    // 29. Client2 reads 1001, client1 writes 1001 later: client2 sees the new word.
    start_case(29);
    c2_write(4'b1001, D2);
    run(10, 3, 0, 1, '0, 4'b1001, D3, 0, 20, 1, 4'b1001, '0);
    check(c2_acks > 0 && c2_last_rd == D3, "client2 read follows client1's write");
    // 30. ... client1 writes at the same time: client2 is granted the read only.
    start_case(30);
    c2_write(4'b1001, D2);
    run(0, 3, 0, 1, '0, 4'b1001, D3, 0, 9, 1, 4'b1001, D4);
    check(c2_acks > 0 && c2_last_rd == D3 && peek(4'b1001) == D3, "client2 reads, its write is omitted");
    // 31. Client2 and client1 read 1010 at the same time: client1 wins.
    start_case(31);
    c2_write(4'b1010, D2);
    run(0, 10, 1, 0, 4'b1010, '0, '0, 0, 10, 1, 4'b1010, '0);
    check(c2_acks == 0 && c1_last_rd == D2, "client1 reads, client2 waits");
    // 32. ... client1 comes 5 cycles later: client2 served first, then held off.
    start_case(32);
    c2_write(4'b1010, D2);
    run(5, 12, 1, 0, 4'b1010, '0, '0, 0, 17, 1, 4'b1010, '0);
    check(c2_acks == 2 && c2_first_ack == 1 && c2_last_rd == D2 && c1_last_rd == D2,
          $sformatf("client2 served before client1 arrives (%0d acks)", c2_acks));
    // 33. Reset at any time clears the memory.
    start_case(33);
    c1_write(4'b0101, D3);
    c2_write(4'b0110, D2);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    while (!rst_done) @(negedge clk);
    c1_read(4'b0101, q);
    check(q == '0, "client1's word cleared by reset");
    c1_read(4'b0110, q);
    check(q == '0, "client2's word cleared by reset");
    // 34. Inputs before RST_DONE are nullified.
    tc = 34;
    cases_run++;
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    wr_en_c1 = 1; wr_addr_c1 = 4'b0011; wr_data_c1 = D1;
    req_c2 = 1; rnw_c2 = 0; addr_c2 = 4'b0100; datain_c2 = D2;
    repeat (DEPTH - 2) begin
      @(negedge clk);
      check(!ack_c2 && !rst_done, "nothing acknowledged before RST_DONE");
    end
    idle_all();
    repeat (4) @(negedge clk);
    check(rst_done, "RST_DONE high after the reset sequence");
    c1_read(4'b0011, q);
    check(q == '0, "client1 write before RST_DONE ignored");
    c1_read(4'b0100, q);
    check(q == '0, "client2 write before RST_DONE ignored");

    $display("COUNT test cases run=%0d", cases_run);
    check(cases_run == 34, "all 34 cases run");
    sb.report();
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb.checks, failures + sb.failures);
    $finish;
  end

endmodule
