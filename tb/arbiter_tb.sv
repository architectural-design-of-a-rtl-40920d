// arbiter_tb: self-checking testbench for arbiter.
//
// The arbiter's RAM port is connected to a behavioural RAM kept in the
// testbench (read-before-write, one-cycle registered read, like the RAM of
// this design). Random client1 and client2 traffic is applied after the
// reset sequence. Each cycle the testbench's own model predicts the RAM port
// (enables, addresses, write data) from the grant rules and from a phase
// counter per client2 access (reads take three cycles, writes two), and
// predicts ACK_C2. Read data is checked against write-first semantics: the
// word at the read address, or the word written there in the same RAM cycle.
// The testbench counts client1 reads and writes, client2 read and write
// acknowledges, pre-emptions of client2 and address clashes, and fails if any
// of them never happened.
module arbiter_tb;

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
  logic          rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [DW-1:0] wr_data;
  logic [DW-1:0] rd_data = '0;

  arbiter #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW)) dut (
    .RST_N(rst_n), .CLOCK(clk), .RST_DONE(rst_done),
    .RD_EN_C1(rd_en_c1), .WR_EN_C1(wr_en_c1), .RD_ADDR_C1(rd_addr_c1),
    .WR_ADDR_C1(wr_addr_c1), .WR_DATA_C1(wr_data_c1), .RDDATA_C1(rddata_c1),
    .DATAIN_C2(datain_c2), .REQUEST_C2(req_c2), .RD_NOT_WRITE_C2(rnw_c2),
    .ADDR_C2(addr_c2), .DATAOUT_C2(dataout_c2), .ACK_C2(ack_c2),
    .RD_EN(rd_en), .WR_EN(wr_en), .WR_ADDR(wr_addr), .RD_ADDR(rd_addr),
    .WR_DATA(wr_data), .RD_DATA(rd_data)
  );

  // Behavioural RAM on the arbiter's RAM port.
  logic [DW-1:0] mem [DEPTH];
  always @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_c1_rd = 0, n_c1_wr = 0, n_c2_rd_ack = 0, n_c2_wr_ack = 0;
  int n_preempt = 0, n_clash = 0, n_dual_c1 = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model state
  logic          m_rd_en, m_wr_en;
  logic [AW-1:0] m_rd_addr, m_wr_addr;
  logic [DW-1:0] m_wr_data;
  int            rd_phase, wr_phase;     // 0 = no client2 access in flight
  logic          exp_valid;
  logic [DW-1:0] exp_rdata;
  logic          c2_rd_granted_prev;

  initial begin
    int cycles;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cycles = 0;
    while (!rst_done) begin
      @(negedge clk);
      cycles++;
      check(!rd_en && !wr_en, "no RAM access during reset");
    end
    check(cycles == DEPTH, "RST_DONE after RAM_DEPTH cycles");
    m_rd_en = 0; m_wr_en = 0; m_rd_addr = '0; m_wr_addr = '0; m_wr_data = '0;
    rd_phase = 0; wr_phase = 0; exp_valid = 0; exp_rdata = '0;
    c2_rd_granted_prev = 0;

    for (int n = 0; n < 4000; n++) begin
      logic g1r, g1w, g2r, g2w;
      // New client inputs, held for a random number of cycles.
      if ($urandom_range(0, 3) == 0) begin
        rd_en_c1 = 1'($urandom_range(0, 2) == 0);
        wr_en_c1 = 1'($urandom_range(0, 2) == 0);
        req_c2   = 1'($urandom_range(0, 2) != 0);
        rnw_c2   = 1'($urandom_range(0, 1));
      end
      rd_addr_c1 = AW'($urandom_range(0, 3));
      wr_addr_c1 = AW'($urandom_range(0, 3));
      wr_data_c1 = DW'($urandom);
      if ($urandom_range(0, 2) == 0) addr_c2 = AW'($urandom_range(0, 3));
      datain_c2  = DW'($urandom);

      // Model of the next edge.
      g1r = rd_en_c1;
      g1w = wr_en_c1;
      g2r = !rd_en_c1 && req_c2 && rnw_c2;
      g2w = !wr_en_c1 && req_c2 && !rnw_c2;
      if (c2_rd_granted_prev && g1r) n_preempt++;
      c2_rd_granted_prev = g2r;
      // Read data expected one cycle after the access the RAM performs now.
      exp_valid = m_rd_en;
      exp_rdata = (m_wr_en && m_wr_addr == m_rd_addr) ? m_wr_data : mem[m_rd_addr];
      if (m_rd_en && m_wr_en && m_wr_addr == m_rd_addr) n_clash++;
      // Phase counters of client2 accesses advance every edge.
      if (rd_phase == 1) rd_phase = 2;
      else if (rd_phase == 2) rd_phase = 0;
      else if (g2r) begin
        rd_phase = 1; m_rd_en = 1; m_rd_addr = addr_c2;
      end
      if (wr_phase == 1) wr_phase = 0;
      else if (g2w) begin
        wr_phase = 1; m_wr_en = 1; m_wr_addr = addr_c2; m_wr_data = datain_c2;
      end
      if (g1r) begin
        m_rd_en = 1; m_rd_addr = rd_addr_c1; n_c1_rd++;
      end else if (!g2r) begin
        m_rd_en = 0; m_rd_addr = '0;
      end
      if (g1w) begin
        m_wr_en = 1; m_wr_addr = wr_addr_c1; m_wr_data = wr_data_c1; n_c1_wr++;
      end else if (!g2w) begin
        m_wr_en = 0; m_wr_addr = '0; m_wr_data = '0;
      end
      if (g1r && g1w) n_dual_c1++;

      @(negedge clk);
      check(rd_en == m_rd_en && wr_en == m_wr_en, "RAM enables");
      if (m_rd_en) check(rd_addr == m_rd_addr, "RAM read address");
      if (m_wr_en) check(wr_addr == m_wr_addr && wr_data == m_wr_data, "RAM write address/data");
      check(ack_c2 == (rd_phase == 2 || wr_phase == 1), "ACK_C2");
      if (rd_phase == 2) n_c2_rd_ack++;
      if (wr_phase == 1) n_c2_wr_ack++;
      if (exp_valid) begin
        check(rddata_c1 == exp_rdata, "RDDATA_C1 (write-first)");
        check(dataout_c2 == exp_rdata, "DATAOUT_C2 (write-first)");
      end
    end
    $display("COUNT client1 reads=%0d writes=%0d both=%0d", n_c1_rd, n_c1_wr, n_dual_c1);
    $display("COUNT client2 read acks=%0d write acks=%0d", n_c2_rd_ack, n_c2_wr_ack);
    $display("COUNT pre-emptions=%0d address clashes=%0d", n_preempt, n_clash);
    check(n_c1_rd > 0 && n_c1_wr > 0 && n_dual_c1 > 0, "client1 traffic exercised");
    check(n_c2_rd_ack > 0 && n_c2_wr_ack > 0, "client2 traffic exercised");
    check(n_preempt > 0 && n_clash > 0, "pre-emption and clash exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
