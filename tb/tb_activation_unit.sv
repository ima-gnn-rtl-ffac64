// tb_activation_unit: self-checking test of the shared activation unit.
// Drives random accumulator vectors on both ports with random valid and
// consumer-ready patterns and checks: grants only to eligible ports,
// alternation when both are eligible, the result one cycle after the grant
// with the winner's tag and port, and ReLU / shift / saturation per lane.
module tb_activation_unit;
  localparam int LANES = 128, ACC_W = 24, FB = 4, TW = 9;
  logic clk = 0, rst_n = 0;
  logic [1:0] req_valid = '0, req_ready, dst_ready = '0;
  logic signed [ACC_W-1:0] req_acc [2][LANES];
  logic [TW-1:0] req_tag [2];
  logic [4:0] req_shift [2];
  logic out_valid, out_port, conflict;
  logic [FB-1:0] out_feat [LANES];
  logic [TW-1:0] out_tag;
  int checks = 0, failures = 0, ties = 0;

  activation_unit dut (.*);

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

  function automatic logic [FB-1:0] act(input int v, input int sh);
    int s = v >>> sh;
    if (s < 0) return '0;
    if (s > 15) return 4'd15;
    return FB'(s);
  endfunction

  initial begin
    logic [FB-1:0] exp_feat [LANES];
    logic exp_v = 0, exp_p = 0;
    logic [TW-1:0] exp_tag;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      // check what the previous grant produced
      check(out_valid == exp_v, $sformatf("cycle %0d out_valid", t));
      if (exp_v) begin
        int bad = 0;
        for (int l = 0; l < LANES; l++) if (out_feat[l] != exp_feat[l]) bad++;
        check(out_port == exp_p && out_tag == exp_tag && bad == 0,
              $sformatf("cycle %0d result port %0d, %0d lanes wrong", t, exp_p, bad));
      end
      // new stimulus
      for (int p = 0; p < 2; p++) begin
        req_tag[p] = TW'($urandom());
        req_shift[p] = 5'($urandom_range(0, 6));
        for (int l = 0; l < LANES; l++) req_acc[p][l] = ACC_W'($urandom_range(0, 2000) - 800);
      end
      req_valid = 2'($urandom());
      dst_ready = 2'($urandom());
      #1;
      begin
        logic [1:0] el;
        logic gp;
        el = req_valid & dst_ready;
        check(conflict == (&el), "conflict flag");
        check((req_ready & ~el) == 0 && $countones(req_ready) == (el != 0 ? 1 : 0), "grant legal");
        gp = req_ready[1];
        if (&el) ties++;
        exp_v = (el != 0);
        exp_p = gp;
        exp_tag = req_tag[gp];
        for (int l = 0; l < LANES; l++) exp_feat[l] = act(req_acc[gp][l], req_shift[gp]);
      end
    end
    // Two back-to-back ties must go to different ports.
    @(negedge clk);
    req_valid = 2'b11; dst_ready = 2'b11;
    #1;
    begin
      logic first;
      first = req_ready[1];
      @(negedge clk); #1;
      check(req_ready[1] != first, "round-robin alternates on ties");
    end
    check(ties > 10, "ties exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
