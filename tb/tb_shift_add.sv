// tb_shift_add: self-checking test of the shift & add unit. One instance at
// the default size with unsigned weights and one small instance with signed
// weights receive the same random column sums for IN_BITS input bits; the
// accumulators are compared with
//   sum_b sum_s w_s * colsum[o*SLICES+s] * 2^(s+b)
// computed here, with w_s = -1 for the top slice of a signed weight.
module tb_shift_add;
  localparam int COLS = 512, SLICES = 4, AB = 10, IN_BITS = 4, ACC_W = 24;
  localparam int SCOLS = 16;
  logic clk = 0;
  logic start = 0, add = 0;
  logic [1:0] in_bit = '0;
  logic [AB-1:0] colsum [COLS];
  logic [AB-1:0] scolsum [SCOLS];
  logic signed [ACC_W-1:0] acc [COLS/SLICES];
  logic signed [ACC_W-1:0] sacc [SCOLS/SLICES];
  longint ref_u [COLS/SLICES];
  longint ref_s [SCOLS/SLICES];
  int checks = 0, failures = 0;

  shift_add dut_u (.clk, .start, .add, .in_bit, .colsum, .acc);
  shift_add #(.COLS(SCOLS), .SIGNED_W(1'b1)) dut_s (.clk, .start, .add, .in_bit,
                                                   .colsum(scolsum), .acc(sacc));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int job = 0; job < 6; job++) begin
      foreach (ref_u[o]) ref_u[o] = 0;
      foreach (ref_s[o]) ref_s[o] = 0;
      for (int b = 0; b < IN_BITS; b++) begin
        @(negedge clk);
        start = (b == 0); add = 1; in_bit = b[1:0];
        for (int c = 0; c < COLS; c++) begin
          colsum[c] = (job == 0) ? AB'(512) : AB'($urandom_range(0, 512));
          ref_u[c / SLICES] += longint'(colsum[c]) << (c % SLICES + b);
        end
        for (int c = 0; c < SCOLS; c++) begin
          scolsum[c] = AB'($urandom_range(0, 512));
          if (c % SLICES == SLICES - 1) ref_s[c / SLICES] -= longint'(scolsum[c]) << (c % SLICES + b);
          else                          ref_s[c / SLICES] += longint'(scolsum[c]) << (c % SLICES + b);
        end
        // an idle cycle in the middle must not change the accumulators
        if (b == 1) begin @(negedge clk); start = 0; add = 0; end
      end
      @(negedge clk); start = 0; add = 0;
      begin
        int bad;
        bad = 0;
        foreach (ref_u[o]) if (longint'(acc[o]) != ref_u[o]) bad++;
        check(bad == 0, $sformatf("job %0d unsigned: %0d wrong", job, bad));
        bad = 0;
        foreach (ref_s[o]) if (longint'(sacc[o]) != ref_s[o]) bad++;
        check(bad == 0, $sformatf("job %0d signed: %0d wrong", job, bad));
      end
    end
    // start without add clears
    @(negedge clk); start = 1; add = 0;
    @(negedge clk); start = 0;
    check(acc[0] == 0 && sacc[3] == 0, "start clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
