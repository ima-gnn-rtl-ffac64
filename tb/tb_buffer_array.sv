// tb_buffer_array: self-checking test of the double-buffered buffer array.
// Fills the shadow bank with random CI/E/RP/feature/weight rows, checks that
// the active bank does not change, swaps, reads every written row back with
// its one-cycle read latency, then writes a second data set into the new
// shadow bank while reading the first one (the double-buffering case) and
// checks both after another swap. Also checks the `host_overlap` flag.
module tb_buffer_array;
  import ima_pkg::*;
  localparam int N = 512, W = 32, EB = 4, FC = 512, WR = 128, WC = 128;
  logic clk = 0, rst_n = 0;
  logic hw_en = 0, swap = 0, dev_busy = 0;
  buf_sel_e hw_sel = SEL_CI;
  logic [8:0] hw_addr = '0, rd_addr = '0;
  logic [FC-1:0] hw_data = '0;
  logic active_bank, host_overlap;
  logic [W-1:0] rd_ci, rd_rp;
  logic [EB-1:0] rd_e;
  logic [FC-1:0] rd_feat;
  logic [WC-1:0] rd_wgt;
  int checks = 0, failures = 0;

  buffer_array dut (.*);

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

  typedef struct {
    logic [W-1:0]  ci   [N];
    logic [EB-1:0] e    [N];
    logic [W-1:0]  rp   [N];
    logic [FC-1:0] feat [N];
    logic [WC-1:0] wgt  [WR];
  } bank_t;
  bank_t ref_b [2];

  function automatic logic [FC-1:0] rnd_row();
    logic [FC-1:0] d;
    for (int i = 0; i < FC / 32; i++) d[i*32 +: 32] = $urandom();
    return d;
  endfunction

  task automatic fill(input int b);
    for (int a = 0; a < N; a++) begin
      for (int s = 0; s < 5; s++) begin
        logic [FC-1:0] d;
        if (s == 4 && a >= WR) continue;
        d = rnd_row();
        @(negedge clk);
        hw_en = 1; hw_sel = buf_sel_e'(s); hw_addr = 9'(a); hw_data = d;
        unique case (s)
          0: ref_b[b].ci[a]   = d[W-1:0];
          1: ref_b[b].e[a]    = d[EB-1:0];
          2: ref_b[b].rp[a]   = d[W-1:0];
          3: ref_b[b].feat[a] = d;
          default: ref_b[b].wgt[a] = d[WC-1:0];
        endcase
      end
    end
    @(negedge clk); hw_en = 0;
  endtask

  task automatic read_all(input int b, input string what);
    int bad = 0;
    for (int a = 0; a <= N; a++) begin
      @(negedge clk);
      if (a > 0) begin
        int p = a - 1;
        if (rd_ci != ref_b[b].ci[p] || rd_e != ref_b[b].e[p] || rd_rp != ref_b[b].rp[p] ||
            rd_feat != ref_b[b].feat[p]) bad++;
        if (p < WR && rd_wgt != ref_b[b].wgt[p]) bad++;
      end
      rd_addr = 9'(a);
    end
    check(bad == 0, $sformatf("%s: %0d rows wrong", what, bad));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(active_bank == 0, "bank 0 active after reset");
    fill(1);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check(active_bank == 1, "swap");
    read_all(1, "first set");
    // write the next set while the device is busy reading the first
    dev_busy = 1;
    @(negedge clk); hw_en = 1; hw_sel = SEL_E; hw_addr = 0; hw_data = '0;
    #1 check(host_overlap, "overlap flagged");
    hw_en = 0;
    fork
      fill(0);
      read_all(1, "active bank undisturbed during shadow writes");
    join
    dev_busy = 0;
    #1 check(!host_overlap, "no overlap when idle");
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    read_all(0, "second set");
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    read_all(1, "first set kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
