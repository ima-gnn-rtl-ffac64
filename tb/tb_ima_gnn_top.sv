// tb_ima_gnn_top: end-to-end test of the device at its full default size
// (512-row CAMs, 512x512 aggregation and 128x128 feature-extraction
// crossbars). Two random graphs are used:
//   A: 512 nodes, 512 edges (every CAM row in use), all 512 destinations;
//   B: 100 nodes, 300 edges, destinations 20..79.
// Graph A is written to the shadow bank and swapped in; while run A is in
// progress graph B is written to the other bank (double buffering), then
// swapped in and run. Every result is compared with a reference GNN layer
// computed here from the CSR arrays:
//   z = sum over in-edges (src -> d) of E * x_src,
//   a = sat4(relu(z >>> agg_shift)),  o = sat4(relu((W^T a) >>> fe_shift)).
// The test counts, and requires at least once each: a stall of the traversal
// core on a full vector scheduler, a core result waiting for the shared
// activation unit, the
// two MVM cores busy together, a host write during a run, a destination
// without incoming edges, a source row without edges, a bank swap.
module tb_ima_gnn_top;
  import ima_pkg::*;
  localparam int N = 512, AC = 512, FC = 128, S = 4;
  localparam int F = AC / S, O = FC / S;      // 128 features, 32 outputs
  logic clk = 0, rst_n = 0;
  logic hw_en = 0, swap = 0, start = 0;
  buf_sel_e hw_sel = SEL_CI;
  logic [8:0] hw_addr = '0, first_dst = '0;
  logic [AC-1:0] hw_data = '0;
  logic active_bank;
  logic [9:0] num_nodes = '0, num_edges = '0, dst_count = '0;
  logic [4:0] agg_shift = 5'd2, fe_shift = 5'd3;
  logic busy, done, res_valid;
  logic [8:0] res_node;
  logic [3:0] res_feat [O];
  logic ev_stall, ev_act_wait, ev_core_overlap, ev_host_overlap;
  int checks = 0, failures = 0;
  int n_stall = 0, n_tie = 0, n_overlap = 0, n_host = 0, n_nodst = 0, n_emptyrow = 0, n_swap = 0;

  ima_gnn_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
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
    int nn, ne;
    int ci [N];
    int ew [N];
    int rpe [N];
    int x [N][F];
    int w [F][O];
  } graph_t;
  graph_t ga, gb;
  int exp_out [N][O];
  bit seen [N];
  int n_res = 0, res_bad = 0, busy_cycles = 0;

  task automatic make_graph(ref graph_t g, input int nn, input int ne);
    int per [N];
    g.nn = nn; g.ne = ne;
    foreach (per[i]) per[i] = 0;
    for (int e = 0; e < ne; e++) begin
      int r;
      do r = $urandom_range(0, nn - 1); while (r % 11 == 5);   // some rows stay empty
      per[r]++;
    end
    begin
      int e = 0;
      for (int r = 0; r < nn; r++) begin
        for (int k = 0; k < per[r]; k++) begin
          bit dup;
          do begin                            // one matrix entry per (row, column)
            g.ci[e] = $urandom_range(0, nn - 1);
            dup = 0;
            for (int j = e - k; j < e; j++) if (g.ci[j] == g.ci[e]) dup = 1;
          end while (dup);
          g.ew[e] = $urandom_range(1, 3);
          e++;
        end
        g.rpe[r] = e;
      end
    end
    for (int n = 0; n < nn; n++) for (int f = 0; f < F; f++) g.x[n][f] = $urandom_range(0, 15);
    for (int f = 0; f < F; f++) for (int o = 0; o < O; o++) g.w[f][o] = $urandom_range(0, 15) - 8;
  endtask

  task automatic hw(input buf_sel_e sel, input int addr, input logic [AC-1:0] data);
    @(negedge clk);
    hw_en = 1; hw_sel = sel; hw_addr = 9'(addr); hw_data = data;
    @(negedge clk);
    hw_en = 0;
  endtask

  task automatic load(ref graph_t g);
    for (int e = 0; e < g.ne; e++) begin
      hw(SEL_CI, e, AC'(g.ci[e]));
      hw(SEL_E, e, AC'(g.ew[e]));
    end
    for (int n = 0; n < g.nn; n++) begin
      logic [AC-1:0] d;
      hw(SEL_RP, n, AC'(g.rpe[n]));
      for (int f = 0; f < F; f++) d[f*S +: S] = S'(g.x[n][f]);
      hw(SEL_FEAT, n, d);
    end
    for (int f = 0; f < F; f++) begin
      logic [AC-1:0] d = '0;
      for (int o = 0; o < O; o++) d[o*S +: S] = S'(g.w[f][o]);
      hw(SEL_WGT, f, d);
    end
  endtask

  function automatic int sat4(input longint v, input int sh);
    longint s = v >>> sh;
    if (s < 0) return 0;
    if (s > 15) return 15;
    return int'(s);
  endfunction

  task automatic reference(ref graph_t g, input int fd, input int cnt);
    for (int d = fd; d < fd + cnt; d++) begin
      longint z [F];
      int a [F];
      int deg = 0;
      foreach (z[f]) z[f] = 0;
      for (int e = 0; e < g.ne; e++) if (g.ci[e] == d) begin
        int s = 0;
        while (g.rpe[s] <= e) s++;
        deg++;
        for (int f = 0; f < F; f++) z[f] += longint'(g.ew[e]) * g.x[s][f];
      end
      if (deg == 0) n_nodst++;
      for (int f = 0; f < F; f++) a[f] = sat4(z[f], int'(agg_shift));
      for (int o = 0; o < O; o++) begin
        longint acc = 0;
        for (int f = 0; f < F; f++) acc += longint'(a[f]) * g.w[f][o];
        exp_out[d][o] = sat4(acc, int'(fe_shift));
      end
    end
    for (int r = 0; r < g.nn; r++) if (g.rpe[r] == (r == 0 ? 0 : g.rpe[r-1])) n_emptyrow++;
  endtask

  // result monitor and event counters
  always @(negedge clk) if (rst_n) begin
    if (res_valid) begin
      int bad;
      bad = 0;
      for (int o = 0; o < O; o++) if (int'(res_feat[o]) != exp_out[res_node][o]) begin
        bad++;
        if (res_bad < 3) $display("node %0d out %0d: got %0d expected %0d", res_node, o, res_feat[o], exp_out[res_node][o]);
      end
      if (bad != 0 || seen[res_node]) begin
        res_bad++;
        if (res_bad < 5) $display("node %0d: %0d outputs wrong (seen %0d)", res_node, bad, seen[res_node]);
      end
      seen[res_node] = 1'b1;
      n_res++;
    end
    busy_cycles += int'(busy);
    n_stall   += int'(ev_stall);
    n_tie     += int'(ev_act_wait);
    n_overlap += int'(ev_core_overlap);
    n_host    += int'(ev_host_overlap);
  end

  task automatic start_run(ref graph_t g, input int fd, input int cnt);
    foreach (seen[i]) seen[i] = 1'b0;
    n_res = 0; res_bad = 0;
    reference(g, fd, cnt);
    @(negedge clk);
    start = 1; num_nodes = 10'(g.nn); num_edges = 10'(g.ne); first_dst = 9'(fd); dst_count = 10'(cnt);
    @(negedge clk);
    start = 0;
  endtask

  task automatic finish_run(input int fd, input int cnt, input string what);
    int missing = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int d = fd; d < fd + cnt; d++) if (!seen[d]) missing++;
    check(res_bad == 0, $sformatf("%s: %0d wrong results", what, res_bad));
    check(n_res == cnt && missing == 0, $sformatf("%s: %0d results, %0d missing", what, n_res, missing));
    check(!busy, {what, ": idle after done"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_graph(ga, 512, 512);
    make_graph(gb, 100, 300);
    load(ga);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0; n_swap++;
    check(active_bank == 1'b1, "graph A active");
    busy_cycles = 0;
    start_run(ga, 0, 512);
    load(gb);                       // double buffering: next graph during run A
    finish_run(0, 512, "graph A");
    $display("graph A: %0d busy cycles for 512 nodes (514 of them programming)", busy_cycles);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0; n_swap++;
    start_run(gb, 20, 60);
    finish_run(20, 60, "graph B");
    $display("events: stall=%0d act_wait=%0d core_overlap=%0d host_write_during_run=%0d no_in_edge_dst=%0d empty_rows=%0d swaps=%0d",
             n_stall, n_tie, n_overlap, n_host, n_nodst, n_emptyrow, n_swap);
    check(n_stall > 0, "stall happened");
    check(n_tie > 0, "wait for the shared activation unit happened");
    check(n_overlap > 0, "aggregation / feature extraction overlap happened");
    check(n_host > 0, "host write during a run happened");
    check(n_nodst > 0, "destination without in-edges happened");
    check(n_emptyrow > 0, "empty CSR row happened");
    check(n_swap == 2, "bank swaps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
