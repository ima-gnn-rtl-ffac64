// tb_controller: self-checking test of the run sequencer. Starts a run,
// follows the programming walk row by row (read address, then the write
// strobes of the same row one cycle later, each gated by its array's size),
// takes the destination stream with random back-pressure, returns results
// at random times and checks that `done` comes exactly after the last one.
// Runs twice, the second time with no destinations.
module tb_controller;
  import ima_pkg::*;
  localparam int PR = 512, FR = 128;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [9:0] num_nodes = '0, num_edges = '0, dst_count = '0;
  logic [8:0] first_dst = '0;
  logic busy, done;
  ctl_state_e state;
  logic [8:0] rd_addr, prog_row, dst;
  logic cam_clr, prog_row_valid, edge_wr, rp_wr, agg_wr, fe_wr;
  logic dst_valid, dst_ready = 0, result_fire = 0;
  int checks = 0, failures = 0;

  controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int nn, input int ne, input int fd, input int cnt);
    int expect_row = 0, last_addr = -1, bad = 0, got = 0, fired = 0, cyc = 0;
    int pending = 0;
    @(negedge clk);
    check(!busy && state == CTL_IDLE, "idle before start");
    start = 1; num_nodes = 10'(nn); num_edges = 10'(ne); first_dst = 9'(fd); dst_count = 10'(cnt);
    #1 check(cam_clr, "CAMs cleared at start");
    @(negedge clk);
    start = 0;
    // programming walk
    while (state == CTL_PROGRAM && cyc < 2000) begin
      if (prog_row_valid) begin
        if (int'(prog_row) != expect_row || last_addr != expect_row) bad++;
        if (edge_wr != (expect_row < ne) || rp_wr != (expect_row < nn) || !agg_wr ||
            fe_wr != (expect_row < FR)) bad++;
        expect_row++;
      end else if (edge_wr || rp_wr || agg_wr || fe_wr) bad++;
      last_addr = int'(rd_addr);
      @(negedge clk); cyc++;
    end
    check(bad == 0 && expect_row == PR, $sformatf("programming walk: %0d bad, %0d rows", bad, expect_row));
    check(cyc == PR + 2, $sformatf("programming takes %0d cycles", cyc));
    // run
    while (!done && cyc < 5000) begin
      dst_ready = ($urandom_range(0, 2) == 0);
      #1;
      if (dst_valid && dst_ready) begin
        check(int'(dst) == fd + got, "destination order");
        got++; pending++;
      end
      result_fire = (pending > 0) && ($urandom_range(0, 3) == 0);
      if (result_fire) begin pending--; fired++; end
      check(!(done && fired < cnt), "no early done");
      @(negedge clk); cyc++;
      result_fire = 0;
    end
    dst_ready = 0;
    check(got == cnt && fired == cnt, $sformatf("issued %0d, returned %0d", got, fired));
    check(done || state == CTL_IDLE, "done");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(10, 20, 3, 5);
    run(512, 512, 0, 0);
    run(300, 400, 100, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
