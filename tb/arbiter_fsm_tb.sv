// arbiter_fsm_tb: self-checking testbench for arbiter_fsm.
//
// Checks the reset sequence (RESET for exactly 2**ADDR_WIDTH cycles after
// RST_N rises, inputs ignored meanwhile, RST_DONE high on leaving it), then
// drives random client1/client2 inputs and compares both state registers and
// both next-state outputs with a reference model written from the priority
// rules: client1 owns a port whenever it asks for it; client2 gets the port
// matching RD_NOT_WRITE_C2 only when client1 leaves it free. Also counts that
// every state and the client1-over-client2 pre-emption were seen, and
// applies a reset in the middle of traffic.
module arbiter_fsm_tb;
  import ram_arbiter_pkg::*;

  localparam int unsigned AW    = 4;
  localparam int unsigned DEPTH = 2 ** AW;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rd_en_c1 = 1'b0, wr_en_c1 = 1'b0, req_c2 = 1'b0, rnw_c2 = 1'b0;
  client_state_t rd_state, wr_state, rd_next, wr_next;
  logic rst_done;

  int checks = 0;
  int failures = 0;
  int seen [client_state_t];
  int preempt_rd = 0, preempt_wr = 0;

  arbiter_fsm #(.ADDR_WIDTH(AW)) dut (
    .CLOCK(clk), .RST_N(rst_n), .RD_EN_C1(rd_en_c1), .WR_EN_C1(wr_en_c1),
    .REQUEST_C2(req_c2), .RD_NOT_WRITE_C2(rnw_c2),
    .rd_state(rd_state), .wr_state(wr_state), .rd_next(rd_next), .wr_next(wr_next),
    .RST_DONE(rst_done)
  );

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t (rd=%s wr=%s)", what, $time, rd_state.name(), wr_state.name());
    end
  endtask

  function automatic client_state_t model_rd(logic c1, logic req, logic rnw);
    if (c1) return ST_C1_READ;
    if (req && rnw) return ST_C2_READ;
    return ST_IDLE;
  endfunction

  function automatic client_state_t model_wr(logic c1, logic req, logic rnw);
    if (c1) return ST_C1_WRITE;
    if (req && !rnw) return ST_C2_WRITE;
    return ST_IDLE;
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reset_sequence();
    int cycles = 0;
    rst_n = 1'b0;
    @(negedge clk);
    check(rd_state == ST_RESET && wr_state == ST_RESET && !rst_done, "RESET while RST_N low");
    rst_n = 1'b1;
    // Busy clients during the reset sequence must be ignored.
    rd_en_c1 = 1'b1; wr_en_c1 = 1'b1; req_c2 = 1'b1;
    while (!rst_done && cycles < 4 * DEPTH) begin
      @(negedge clk);
      cycles++;
      if (!rst_done) check(rd_state == ST_RESET && wr_state == ST_RESET, "stay in RESET");
    end
    check(cycles == DEPTH, $sformatf("reset takes RAM_DEPTH=%0d cycles (took %0d)", DEPTH, cycles));
    check(rd_state == ST_IDLE && wr_state == ST_IDLE, "RESET -> IDLE");
    rd_en_c1 = 1'b0; wr_en_c1 = 1'b0; req_c2 = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    client_state_t exp_rd, exp_wr, prev_rd, prev_wr;
    repeat (2) @(negedge clk);
    reset_sequence();
    for (int n = 0; n < 3000; n++) begin
      if (n == 1500) reset_sequence();
      // Inputs held for a few cycles at a time so that states persist.
      if ($urandom_range(0, 2) == 0) begin
        rd_en_c1 = 1'($urandom_range(0, 2) == 0);
        wr_en_c1 = 1'($urandom_range(0, 2) == 0);
        req_c2   = 1'($urandom_range(0, 1));
        rnw_c2   = 1'($urandom_range(0, 1));
      end
      #1;
      exp_rd = model_rd(rd_en_c1, req_c2, rnw_c2);
      exp_wr = model_wr(wr_en_c1, req_c2, rnw_c2);
      check(rd_next == exp_rd, "rd_next");
      check(wr_next == exp_wr, "wr_next");
      prev_rd = rd_state;
      prev_wr = wr_state;
      @(negedge clk);
      check(rd_state == exp_rd, "rd_state");
      check(wr_state == exp_wr, "wr_state");
      check(rst_done, "RST_DONE stays high");
      seen[rd_state]++;
      seen[wr_state]++;
      if (prev_rd == ST_C2_READ  && rd_state == ST_C1_READ)  preempt_rd++;
      if (prev_wr == ST_C2_WRITE && wr_state == ST_C1_WRITE) preempt_wr++;
    end
    foreach (seen[s]) $display("COUNT state %s: %0d", s.name(), seen[s]);
    $display("COUNT pre-emptions read=%0d write=%0d", preempt_rd, preempt_wr);
    check(seen.size() == 5, "all five run-time states reached");
    check(preempt_rd > 0 && preempt_wr > 0, "client1 pre-empts client2 on both ports");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
