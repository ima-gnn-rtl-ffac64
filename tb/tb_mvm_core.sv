// tb_mvm_core: self-checking test of the MVM core in both of its roles:
// the aggregation configuration (512x512, unsigned stored values) and the
// feature-extraction configuration (128x128, signed stored values). Each
// crossbar is programmed with random 4-bit values; random input vectors are
// pushed through and the dot products compared with a reference. It also
// checks the latency (result IN_BITS+2 cycles after acceptance), the tag,
// and that a held result blocks the next job until it is taken.
module tb_mvm_core;
  localparam int S = 4, IB = 4, ACC_W = 24;
  localparam int AR = 512, AC = 512, AO = AC / S;
  localparam int FR = 128, FC = 128, FO = FC / S;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // aggregation configuration
  logic a_wr = 0; logic [8:0] a_row = '0; logic [AC-1:0] a_data = '0;
  logic a_iv = 0, a_ir, a_ov, a_or = 0, a_busy;
  logic [IB-1:0] a_vec [AR];
  logic [8:0] a_tag_in = '0, a_tag;
  logic signed [ACC_W-1:0] a_acc [AO];
  int a_w [AR][AO];

  // feature-extraction configuration
  logic f_wr = 0; logic [6:0] f_row = '0; logic [FC-1:0] f_data = '0;
  logic f_iv = 0, f_ir, f_ov, f_or = 0, f_busy;
  logic [IB-1:0] f_vec [FR];
  logic [8:0] f_tag_in = '0, f_tag;
  logic signed [ACC_W-1:0] f_acc [FO];
  int f_w [FR][FO];

  mvm_core u_a (.clk, .rst_n, .wr_en(a_wr), .wr_row(a_row), .wr_data(a_data),
    .in_valid(a_iv), .in_ready(a_ir), .in_vec(a_vec), .in_tag(a_tag_in),
    .out_valid(a_ov), .out_ready(a_or), .out_acc(a_acc), .out_tag(a_tag), .busy(a_busy));
  mvm_core #(.ROWS(FR), .COLS(FC), .SIGNED_W(1'b1)) u_f (.clk, .rst_n, .wr_en(f_wr),
    .wr_row(f_row), .wr_data(f_data), .in_valid(f_iv), .in_ready(f_ir), .in_vec(f_vec),
    .in_tag(f_tag_in), .out_valid(f_ov), .out_ready(f_or), .out_acc(f_acc), .out_tag(f_tag),
    .busy(f_busy));

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

  initial begin
    a_vec = '{default: '0};
    f_vec = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program both crossbars
    for (int r = 0; r < AR; r++) begin
      @(negedge clk);
      a_wr = 1; a_row = r[8:0];
      for (int o = 0; o < AO; o++) begin
        a_w[r][o] = $urandom_range(0, 15);
        a_data[o*S +: S] = S'(a_w[r][o]);
      end
      if (r < FR) begin
        f_wr = 1; f_row = r[6:0];
        for (int o = 0; o < FO; o++) begin
          f_w[r][o] = $urandom_range(0, 15) - 8;
          f_data[o*S +: S] = S'(f_w[r][o]);
        end
      end else f_wr = 0;
    end
    @(negedge clk); a_wr = 0; f_wr = 0;

    for (int job = 0; job < 4; job++) begin
      int a_exp [AO];
      int f_exp [FO];
      int lat, bad;
      foreach (a_exp[o]) a_exp[o] = 0;
      foreach (f_exp[o]) f_exp[o] = 0;
      for (int r = 0; r < AR; r++) begin
        a_vec[r] = ($urandom_range(0, 7) == 0 || job == 3) ? IB'($urandom_range(1, 15)) : '0;
        if (job == 3) a_vec[r] = 4'd15;
        for (int o = 0; o < AO; o++) a_exp[o] += int'(a_vec[r]) * a_w[r][o];
      end
      for (int r = 0; r < FR; r++) begin
        f_vec[r] = (job == 3) ? 4'd15 : IB'($urandom_range(0, 15));
        for (int o = 0; o < FO; o++) f_exp[o] += int'(f_vec[r]) * f_w[r][o];
      end
      @(negedge clk);
      check(a_ir && f_ir, "cores ready");
      a_iv = 1; f_iv = 1; a_tag_in = 9'(job + 100); f_tag_in = 9'(job + 200);
      @(negedge clk);
      a_iv = 0; f_iv = 0;
      a_vec = '{default: '0}; f_vec = '{default: '0};   // buffer must hold the job
      lat = 1;
      while (!a_ov && lat < 50) begin @(negedge clk); lat++; end
      check(lat == IB + 2, $sformatf("job %0d latency %0d", job, lat));
      check(f_ov, "fe done with agg");
      check(a_tag == 9'(job + 100) && f_tag == 9'(job + 200), "tags");
      bad = 0;
      foreach (a_exp[o]) if (int'(a_acc[o]) != a_exp[o]) bad++;
      check(bad == 0, $sformatf("job %0d aggregation: %0d wrong", job, bad));
      bad = 0;
      foreach (f_exp[o]) if (int'(f_acc[o]) != f_exp[o]) bad++;
      check(bad == 0, $sformatf("job %0d feature extraction: %0d wrong", job, bad));
      // hold the result for a few cycles: no new job may enter
      repeat (3) begin
        @(negedge clk);
        check(a_ov && !a_ir, "result held, input blocked");
      end
      a_or = 1; f_or = 1;
      @(negedge clk);
      a_or = 0; f_or = 0;
      check(!a_ov && a_ir && !a_busy, "released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
