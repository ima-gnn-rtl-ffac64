// tb_vector_gen_sched: self-checking test of the vector generator &
// scheduler. Random destinations, each with 0..6 distinct source rows and
// random edge weights, are streamed in while the aggregation side takes
// vectors at random times. Every vector must equal the expected sparse
// vector (weight on each source row, zero elsewhere) with its destination tag,
// in order; the back-pressure (`stall`) case must occur; a finished vector
// must be offered the cycle after its last beat.
module tb_vector_gen_sched;
  localparam int ROWS = 512, EB = 4;
  logic clk = 0, rst_n = 0;
  logic ev_valid = 0, ev_ready, ev_last = 0, ev_none = 0;
  logic [8:0] ev_src = '0, ev_dst = '0;
  logic [EB-1:0] ev_w = '0;
  logic vec_valid, vec_ready = 0, stall;
  logic [EB-1:0] vec [ROWS];
  logic [8:0] vec_tag;
  int checks = 0, failures = 0, stalls = 0;

  vector_gen_sched dut (.*);

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

  typedef logic [EB-1:0] vec_t [ROWS];
  vec_t exp_q [$];
  int   tag_q [$];
  int   n_dst = 60, n_got = 0;

  // consumer
  always @(negedge clk) if (rst_n) begin
    vec_ready = (n_got < n_dst) && ($urandom_range(0, 3) == 0);
    if (vec_valid && vec_ready) begin
      vec_t e;
      int bad, et;
      bad = 0;
      e = exp_q.pop_front();
      et = tag_q.pop_front();
      for (int r = 0; r < ROWS; r++) if (vec[r] != e[r]) bad++;
      check(bad == 0 && int'(vec_tag) == et,
            $sformatf("vector %0d: %0d rows wrong, tag %0d expected %0d", n_got, bad, vec_tag, et));
      n_got++;
    end
    if (stall) stalls++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < n_dst; d++) begin
      vec_t e;
      int k = $urandom_range(0, 6);
      int srcs [$];
      for (int r = 0; r < ROWS; r++) e[r] = '0;
      while (srcs.size() < k) begin
        int s = $urandom_range(0, ROWS - 1);
        if (e[s] == 0) begin e[s] = EB'($urandom_range(1, 15)); srcs.push_back(s); end
      end
      exp_q.push_back(e); tag_q.push_back(d);
      if (k == 0) begin
        ev_valid = 1; ev_none = 1; ev_last = 1; ev_dst = 9'(d); ev_src = 9'($urandom());
        ev_w = 4'hf;
        #1; while (!ev_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end else begin
        for (int j = 0; j < k; j++) begin
          ev_valid = 1; ev_none = 0; ev_last = (j == k - 1); ev_dst = 9'(d);
          ev_src = 9'(srcs[j]); ev_w = e[srcs[j]];
          #1; while (!ev_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
      end
      ev_valid = 0;
      if ($urandom_range(0, 4) == 0) @(negedge clk);
    end
    while (n_got < n_dst) @(negedge clk);
    check(stalls > 0, "stall exercised");
    // latency: with the consumer idle, a one-edge vector is offered next cycle
    repeat (4) @(negedge clk);
    ev_valid = 1; ev_none = 0; ev_last = 1; ev_src = 9'd3; ev_w = 4'd5; ev_dst = 9'd77;
    @(negedge clk);
    ev_valid = 0;
    check(vec_valid && vec_tag == 9'd77 && vec[3] == 4'd5, "one-cycle hand-over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
