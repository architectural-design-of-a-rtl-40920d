// addr_clash_bypass_tb: self-checking testbench for addr_clash_bypass.
//
// Two instances, one unregistered (REGISTERED_DATA = 0) and one registered
// (REGISTERED_DATA = 1), are driven like the arbiter drives them: the RAM
// request and the RAM read data change just after each rising edge. The
// expected read data for the request presented in cycle k is worked out in
// the testbench: the written word if that request read and wrote the same
// address, the RAM's read data of cycle k+1 otherwise. It must appear on
// RDDATA_C1 and DATAOUT_C2 in cycle k+1 (unregistered) and on RDDATA_C1 in
// cycle k+2 (registered; DATAOUT_C2 stays unregistered). Counts the clashes.
module addr_clash_bypass_tb;

  localparam int unsigned AW = 4;
  localparam int unsigned DW = 8;
  localparam int          N  = 600;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          rd_en = 1'b0, wr_en = 1'b0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [DW-1:0] wr_data = '0, rd_data = '0;
  logic [DW-1:0] u_c1, u_c2, r_c1, r_c2;

  int checks = 0;
  int failures = 0;
  int clashes = 0;

  logic          h_clash [N];
  logic [DW-1:0] h_wd    [N];
  logic [DW-1:0] h_rd    [N];
  logic [DW-1:0] exp_data[N];

  addr_clash_bypass #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW), .REGISTERED_DATA(1'b0)) dut_u (
    .CLOCK(clk), .RST_N(rst_n), .req_rd_en(rd_en), .req_wr_en(wr_en),
    .req_rd_addr(rd_addr), .req_wr_addr(wr_addr), .req_wr_data(wr_data),
    .RD_DATA(rd_data), .RDDATA_C1(u_c1), .DATAOUT_C2(u_c2)
  );

  addr_clash_bypass #(.ADDR_WIDTH(AW), .DATA_WIDTH(DW), .REGISTERED_DATA(1'b1)) dut_r (
    .CLOCK(clk), .RST_N(rst_n), .req_rd_en(rd_en), .req_wr_en(wr_en),
    .req_rd_addr(rd_addr), .req_wr_addr(wr_addr), .req_wr_data(wr_data),
    .RD_DATA(rd_data), .RDDATA_C1(r_c1), .DATAOUT_C2(r_c2)
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
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) begin
      @(posedge clk);
      #1;
      // Cycle k: new RAM output, then a new request.
      rd_data = DW'($urandom);
      h_rd[k] = rd_data;
      if (k >= 1) exp_data[k-1] = h_clash[k-1] ? h_wd[k-1] : rd_data;
      rd_en   = 1'($urandom_range(0, 3) != 0);
      wr_en   = 1'($urandom_range(0, 3) != 0);
      rd_addr = AW'($urandom_range(0, 3));
      wr_addr = AW'($urandom_range(0, 3));
      wr_data = DW'($urandom);
      h_clash[k] = rd_en && wr_en && (rd_addr == wr_addr);
      h_wd[k]    = wr_data;
      if (h_clash[k]) clashes++;
      #2;
      if (k >= 1) begin
        check(u_c1, exp_data[k-1], "unregistered RDDATA_C1");
        check(u_c2, exp_data[k-1], "unregistered DATAOUT_C2");
        check(r_c2, exp_data[k-1], "DATAOUT_C2 in registered mode");
      end
      if (k >= 2) check(r_c1, exp_data[k-2], "registered RDDATA_C1");
    end
    $display("COUNT address clashes: %0d", clashes);
    checks++;
    if (clashes == 0) begin
      failures++;
      $display("FAIL no address clash exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
