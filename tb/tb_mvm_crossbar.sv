// tb_mvm_crossbar: self-checking test of the MVM crossbar model at its full
// 512x512 size. Programs every row with random bits, applies random input
// bit vectors (including all-zero and all-one) and checks each source-line
// sum against a reference count, one cycle after `compute`, and that the
// outputs hold when no compute is issued.
module tb_mvm_crossbar;
  localparam int ROWS = 512, COLS = 512, AB = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, compute = 0;
  logic [$clog2(ROWS)-1:0] wr_row = '0;
  logic [COLS-1:0] wr_data = '0;
  logic [ROWS-1:0] in_bits = '0;
  logic [AB-1:0] colsum [COLS];
  logic colsum_valid;
  logic [COLS-1:0] ref_cell [ROWS];
  int checks = 0, failures = 0;

  mvm_crossbar #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

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

  task automatic run(input logic [ROWS-1:0] v, input string what);
    int bad;
    @(negedge clk); compute = 1; in_bits = v;
    @(negedge clk); compute = 0; in_bits = ~v;
    check(colsum_valid, {what, " valid"});
    bad = 0;
    for (int c = 0; c < COLS; c++) begin
      int s = 0;
      for (int r = 0; r < ROWS; r++) s += int'(v[r] & ref_cell[r][c]);
      if (int'(colsum[c]) != s) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d wrong columns", what, bad));
    @(negedge clk);
    check(!colsum_valid, {what, " valid drops"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] d;
      for (int w = 0; w < COLS / 32; w++) d[w*32 +: 32] = $urandom();
      if (r == 7) d = '1;
      @(negedge clk); wr_en = 1; wr_row = r[8:0]; wr_data = d; ref_cell[r] = d;
    end
    @(negedge clk); wr_en = 0;
    run('0, "zero input");
    run('1, "all-one input");
    begin
      logic [ROWS-1:0] one = '0; one[7] = 1'b1;
      run(one, "single row of ones");
    end
    for (int t = 0; t < 8; t++) begin
      logic [ROWS-1:0] v;
      for (int w = 0; w < ROWS / 32; w++) v[w*32 +: 32] = $urandom();
      run(v, $sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
