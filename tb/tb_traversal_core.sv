// tb_traversal_core: self-checking test of the CAM-based traversal core.
// First the 8-node sample graph (adjacency matrix with 11 edges, node ids
// counted from 0) is loaded in CSR form and every destination's incoming
// edges are checked, in order, against the matrix. Then random graphs with
// empty rows and random back-pressure on the edge stream are checked the same
// way, against a reference traversal of the CSR arrays. The cycle count from
// acceptance to the first beat (3, or 2 for a node without edges) and between
// beats (2) is checked too.
module tb_traversal_core;
  localparam int ROWS = 512, W = 32, EB = 4;
  logic clk = 0, rst_n = 0;
  logic clr = 0, edge_wr = 0, rp_wr = 0;
  logic [8:0] edge_addr = '0, rp_addr = '0;
  logic [W-1:0] edge_ci = '0, rp_end = '0;
  logic [EB-1:0] edge_w = '0;
  logic dst_valid = 0, dst_ready;
  logic [8:0] dst = '0;
  logic ev_valid, ev_ready = 1, ev_last, ev_none, busy;
  logic [8:0] ev_src, ev_dst;
  logic [EB-1:0] ev_w;
  int checks = 0, failures = 0;
  bit random_ready = 0;

  traversal_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference CSR
  int n_nodes, n_edges;
  int ci [ROWS];
  int ew [ROWS];
  int rpe [ROWS];

  task automatic load();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int e = 0; e < n_edges; e++) begin
      @(negedge clk); edge_wr = 1; edge_addr = 9'(e); edge_ci = W'(ci[e]); edge_w = EB'(ew[e]);
    end
    @(negedge clk); edge_wr = 0;
    for (int n = 0; n < n_nodes; n++) begin
      @(negedge clk); rp_wr = 1; rp_addr = 9'(n); rp_end = W'(rpe[n]);
    end
    @(negedge clk); rp_wr = 0;
  endtask

  task automatic query(input int d, input string what);
    int exp_src [$];
    int exp_w [$];
    int got = 0, t = 0, t_first = -1, t_prev = -1, gaps_bad = 0;
    bit ok = 1, saw_last = 0;
    for (int e = 0; e < n_edges; e++) if (ci[e] == d) begin
      int s = 0;
      while (rpe[s] <= e) s++;
      exp_src.push_back(s); exp_w.push_back(ew[e]);
    end
    @(negedge clk);
    while (!dst_ready) @(negedge clk);
    dst_valid = 1; dst = 9'(d);
    @(negedge clk);
    dst_valid = 0;
    t = 1;
    while (!saw_last && t < 3000) begin
      if (ev_valid) begin
        if (ev_ready) begin
          if (t_first < 0) t_first = t;
          else if (t - t_prev != 2 && !random_ready) gaps_bad++;
          t_prev = t;
          if (exp_src.size() == 0) begin
            ok &= ev_none && ev_last && ev_dst == 9'(d);
          end else begin
            ok &= !ev_none && got < exp_src.size() && ev_dst == 9'(d);
            if (got < exp_src.size()) ok &= int'(ev_src) == exp_src[got] && int'(ev_w) == exp_w[got];
            ok &= ev_last == (got == exp_src.size() - 1);
          end
          got++;
          saw_last = ev_last;
        end
      end
      @(negedge clk);
      t++;
      if (random_ready) ev_ready = ($urandom_range(0, 2) != 0);
    end
    ev_ready = 1;
    check(ok && saw_last && got == (exp_src.size() == 0 ? 1 : exp_src.size()),
          $sformatf("%s dst %0d: %0d beats, expected %0d", what, d, got, exp_src.size()));
    if (!random_ready) begin
      check(t_first == (exp_src.size() == 0 ? 2 : 3), $sformatf("%s dst %0d first beat at %0d", what, d, t_first));
      check(gaps_bad == 0, $sformatf("%s dst %0d beat spacing", what, d));
    end
  endtask

  int g [8][8] = '{'{2,0,1,0,0,0,0,0}, '{0,0,0,2,0,0,0,0}, '{0,0,0,0,0,0,0,0},
                   '{1,0,0,0,2,0,0,0}, '{0,0,1,0,0,0,0,0}, '{1,0,0,0,0,0,0,0},
                   '{0,0,0,0,2,0,3,0}, '{0,0,0,0,0,0,1,1}};

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // sample graph from its adjacency matrix
    n_nodes = 8; n_edges = 0;
    for (int r = 0; r < 8; r++) begin
      for (int c = 0; c < 8; c++) if (g[r][c] != 0) begin
        ci[n_edges] = c; ew[n_edges] = g[r][c]; n_edges++;
      end
      rpe[r] = n_edges;
    end
    check(n_edges == 11 && rpe[2] == 3 && rpe[3] == 5, "sample CSR");
    load();
    for (int d = 0; d < 8; d++) query(d, "sample");
    // random graphs
    for (int gr = 0; gr < 3; gr++) begin
      n_nodes = (gr == 2) ? 512 : 40;
      n_edges = 0;
      for (int r = 0; r < n_nodes; r++) begin
        int k = (r % 7 == 3) ? 0 : $urandom_range(0, (gr == 2) ? 1 : 5);
        for (int j = 0; j < k && n_edges < ROWS; j++) begin
          ci[n_edges] = $urandom_range(0, n_nodes - 1);
          ew[n_edges] = $urandom_range(1, 15);
          n_edges++;
        end
        rpe[r] = n_edges;
      end
      load();
      random_ready = (gr == 1);
      for (int q = 0; q < 12; q++) query($urandom_range(0, n_nodes - 1), $sformatf("graph %0d", gr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
