// tb_cam_crossbar: self-checking test of the resistive CAM crossbar model.
// Programs the CI column of the sample graph (edge k holds its column node)
// and checks the search for node 5 against the two edges that end in v5;
// then fills random rows, some with don't-care bits, and checks random
// searches and compares against a reference model, the one-cycle result
// latency, that unprogrammed rows never match, and `clr`.
module tb_cam_crossbar;
  import ima_pkg::*;
  localparam int ROWS = 512, WIDTH = 32;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, clr = 0;
  logic [$clog2(ROWS)-1:0] wr_row = '0;
  logic [WIDTH-1:0] wr_value = '0, wr_care = '0, key = '0;
  cam_op_e op = CAM_NOP;
  logic [ROWS-1:0] match;
  logic any_match;
  int checks = 0, failures = 0;

  logic [WIDTH-1:0] ref_v [ROWS];
  logic [WIDTH-1:0] ref_c [ROWS];
  logic [ROWS-1:0]  ref_ok;

  cam_crossbar #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.*);

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

  task automatic write_row(input int r, input logic [WIDTH-1:0] v, input logic [WIDTH-1:0] c);
    @(negedge clk);
    wr_en = 1; wr_row = r[$clog2(ROWS)-1:0]; wr_value = v; wr_care = c;
    ref_v[r] = v; ref_c[r] = c; ref_ok[r] = 1'b1;
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic logic [ROWS-1:0] model(input cam_op_e o, input logic [WIDTH-1:0] k);
    for (int r = 0; r < ROWS; r++) begin
      if (o == CAM_SEARCH)       model[r] = ref_ok[r] && (((ref_v[r] ^ k) & ref_c[r]) == 0);
      else if (o == CAM_COMPARE) model[r] = ref_ok[r] && (ref_v[r] >= k);
      else                       model[r] = 1'b0;
    end
  endfunction

  task automatic do_op(input cam_op_e o, input logic [WIDTH-1:0] k, input string what);
    logic [ROWS-1:0] exp;
    exp = model(o, k);
    @(negedge clk);
    op = o; key = k;
    @(negedge clk);          // one clock edge later the result must be there
    op = CAM_NOP;
    check(match == exp, $sformatf("%s key=%0d", what, k));
    check(any_match == |exp, $sformatf("%s any key=%0d", what, k));
  endtask

  int ci [11] = '{1, 3, 4, 1, 5, 3, 1, 5, 7, 7, 8};

  initial begin
    ref_ok = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Sample graph: search data 5 must hit edges 5 and 8 (rows 4 and 7).
    for (int e = 0; e < 11; e++) write_row(e, WIDTH'(ci[e]), '1);
    @(negedge clk); op = CAM_SEARCH; key = 5;
    @(negedge clk); op = CAM_NOP;
    check(match[10:0] == 11'b000_1001_0000 && match[ROWS-1:11] == '0, "sample graph search 5");
    // Result holds while no operation is issued.
    @(negedge clk);
    check(match[4] && match[7], "match holds");
    // Sample graph compare: end pointers 2 3 3 5 6 7 9 11, key 5 -> rows 3..7.
    begin
      int rp [8] = '{2, 3, 3, 5, 6, 7, 9, 11};
      for (int n = 0; n < 8; n++) write_row(100 + n, WIDTH'(rp[n]), '1);
      @(negedge clk); op = CAM_COMPARE; key = 5;
      @(negedge clk); op = CAM_NOP;
      check(match[107:100] == 8'b1111_1000, "sample graph compare 5");
    end
    // Random rows, some with don't-care bits.
    for (int r = 200; r < 300; r++) begin
      logic [WIDTH-1:0] v, c;
      v = $urandom() & 32'h3f;
      c = ($urandom_range(0, 3) == 0) ? ~32'h3 : '1;
      write_row(r, v, c);
    end
    for (int t = 0; t < 60; t++) do_op(CAM_SEARCH, $urandom() & 32'h3f, "random search");
    for (int t = 0; t < 60; t++) do_op(CAM_COMPARE, $urandom() & 32'h3f, "random compare");
    do_op(CAM_COMPARE, 0, "compare 0 hits only programmed rows");
    check(match[ROWS-1:300] == '0, "unprogrammed rows silent");
    // clr empties the array.
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; ref_ok = '0;
    do_op(CAM_COMPARE, 0, "after clr");
    check(!any_match, "nothing after clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
