// ram_tb: self-checking testbench for ram.
//
// Resets the RAM, checks that writes during the 2**ADDR_WIDTH clearing cycles
// are ignored and that every word reads zero afterwards, then runs random
// reads and writes (including same-address read/write in one cycle, which
// must return the old word) against a reference array. Read data is checked
// right after the edge that performs the read (one-cycle latency), and a
// cycle with RD_EN low must leave RD_DATA unchanged. It ends with the three
// RAM test cases (write, read, read and write together) and their data words. Inputs change on the
// falling edge; outputs are sampled on the falling edge.
module ram_tb;

  localparam int unsigned AW    = 4;
  localparam int unsigned DW    = 8;
  localparam int unsigned DEPTH = 2 ** AW;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          rd_en = 1'b0, wr_en = 1'b0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [DW-1:0] wr_data = '0;
  logic [DW-1:0] rd_data;

  int checks = 0;
  int failures = 0;

  logic [DW-1:0] model [DEPTH];

  ram #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW)) dut (
    .CLOCK(clk), .RST_N(rst_n), .RD_EN(rd_en), .WR_EN(wr_en),
    .RD_ADDR(rd_addr), .WR_ADDR(wr_addr), .WR_DATA(wr_data), .RD_DATA(rd_data)
  );

  always #5 clk = ~clk;

  task automatic check(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h at %0t", what, got, exp, $time);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] prev;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // During the clearing cycles, try to write 8'hFF everywhere: ignored.
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1'b1; wr_addr = AW'(i); wr_data = 8'hFF;
      @(negedge clk);
    end
    wr_en = 1'b0;
    // Read every word: all zero.
    for (int i = 0; i < DEPTH; i++) begin
      rd_en = 1'b1; rd_addr = AW'(i);
      @(negedge clk);
      check(rd_data, '0, $sformatf("cleared word %0d", i));
      model[i] = '0;
    end
    rd_en = 1'b0;
    // Write a pattern to every word, then read it back.
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1'b1; wr_addr = AW'(i); wr_data = DW'(8'h5A ^ (i * 37));
      model[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      rd_en = 1'b1; rd_addr = AW'(i);
      @(negedge clk);
      check(rd_data, model[i], $sformatf("pattern word %0d", i));
    end
    // Random traffic.
    for (int n = 0; n < 400; n++) begin
      rd_en   = 1'($urandom_range(0, 1));
      wr_en   = 1'($urandom_range(0, 1));
      rd_addr = AW'($urandom);
      wr_addr = ($urandom_range(0, 3) == 0) ? rd_addr : AW'($urandom);
      wr_data = DW'($urandom);
      prev    = rd_data;
      @(negedge clk);
      if (rd_en) check(rd_data, model[rd_addr], "random read (old word on clash)");
      else       check(rd_data, prev, "RD_DATA holds when RD_EN low");
      if (wr_en) model[wr_addr] = wr_data;
    end
    rd_en = 1'b0; wr_en = 1'b0;
    // Reset again: the RAM clears itself once more.
    rst_n = 1'b0;
    @(negedge clk);
    check(rd_data, '0, "RD_DATA reset");
    rst_n = 1'b1;
    repeat (DEPTH) @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      rd_en = 1'b1; rd_addr = AW'(i);
      @(negedge clk);
      check(rd_data, '0, $sformatf("re-cleared word %0d", i));
    end
    // The three RAM test cases with their data: write 11100111 at 1101, read
    // it back, then read 1101 while writing 10111001 at 1011, then read 1011
    // while writing 10011111 at 1000.
    rd_en = 1'b0; wr_en = 1'b1; wr_addr = 4'b1101; wr_data = 8'b11100111;
    @(negedge clk);
    wr_en = 1'b0; rd_en = 1'b1; rd_addr = 4'b1101;
    @(negedge clk);
    check(rd_data, 8'b11100111, "test case 1+2: 1101 read back");
    wr_en = 1'b1; wr_addr = 4'b1011; wr_data = 8'b10111001;
    @(negedge clk);
    check(rd_data, 8'b11100111, "test case 3: read 1101 while writing 1011");
    rd_addr = 4'b1011; wr_addr = 4'b1000; wr_data = 8'b10011111;
    @(negedge clk);
    check(rd_data, 8'b10111001, "test case 3: read 1011 while writing 1000");
    wr_en = 1'b0; rd_addr = 4'b1000;
    @(negedge clk);
    check(rd_data, 8'b10011111, "test case 3: 1000 written");
    rd_en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
