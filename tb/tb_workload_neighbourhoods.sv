// tb_workload_neighbourhoods: runs the per-device (decentralized) workloads
// on the full-size device. In the distributed setting each device holds the
// neighbourhood of one node: the node itself (row 0) and its C_s neighbours
// (rows 1..C_s), with an edge from every neighbour to the node. The device
// computes the node's new embedding. The neighbourhood sizes are the average
// neighbour counts of four graph data sets:
//   LiveJournal C_s = 9,   1 feature;
//   Collab      C_s = 263, 496 features;
//   Cora        C_s = 4,   1433 features;
//   Citeseer    C_s = 2,   3703 features.
// One aggregation row holds 128 features of 4 bits, so data sets with more
// features are cut to their first 128 here; the neighbourhood itself fits.
// Feature values, edge weights and layer weights are random. Each run is
// checked against a reference GNN layer computed here from the CSR arrays,
// and the number of busy cycles per run is printed.
module tb_workload_neighbourhoods;
  import ima_pkg::*;
  localparam int AC = 512, FC = 128, S = 4;
  localparam int F = AC / S, O = FC / S;      // 128 features, 32 outputs
  localparam int NW = 4;
  logic clk = 0, rst_n = 0;
  logic hw_en = 0, swap = 0, start = 0;
  buf_sel_e hw_sel = SEL_CI;
  logic [8:0] hw_addr = '0, first_dst = '0;
  logic [AC-1:0] hw_data = '0;
  logic active_bank;
  logic [9:0] num_nodes = '0, num_edges = '0, dst_count = '0;
  logic [4:0] agg_shift = 5'd6, fe_shift = 5'd3;
  logic busy, done, res_valid;
  logic [8:0] res_node;
  logic [3:0] res_feat [O];
  logic ev_stall, ev_act_wait, ev_core_overlap, ev_host_overlap;
  int checks = 0, failures = 0;

  ima_gnn_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  string wl_name [NW] = '{"LiveJournal", "Collab", "Cora", "Citeseer"};
  int    wl_cs   [NW] = '{9, 263, 4, 2};
  int    wl_feat [NW] = '{1, 496, 1433, 3703};

  int x [512][F];
  int ew [512];
  int w [F][O];
  int exp_out [O];
  int got [O];
  int n_res, busy_cycles;
  bit node_ok;
  logic bank_before;

  task automatic hw(input buf_sel_e sel, input int addr, input logic [AC-1:0] data);
    @(negedge clk);
    hw_en = 1; hw_sel = sel; hw_addr = 9'(addr); hw_data = data;
    @(negedge clk);
    hw_en = 0;
  endtask

  function automatic int sat4(input longint v, input int sh);
    longint s = v >>> sh;
    if (s < 0) return 0;
    if (s > 15) return 15;
    return int'(s);
  endfunction

  always @(negedge clk) if (rst_n) begin
    busy_cycles += int'(busy);
    if (res_valid) begin
      n_res++;
      node_ok = (res_node == 9'd0);
      for (int o = 0; o < O; o++) got[o] = int'(res_feat[o]);
    end
  end

  task automatic run_workload(input int k);
    int cs, nf, nn, bad;
    longint z [F];
    int a [F];
    cs = wl_cs[k];
    nf = wl_feat[k] < F ? wl_feat[k] : F;
    nn = cs + 1;
    // data: node 0 is the device's own node, rows 1..cs its neighbours
    for (int n = 0; n < nn; n++)
      for (int f = 0; f < F; f++) x[n][f] = f < nf ? $urandom_range(0, 15) : 0;
    for (int e = 0; e < cs; e++) ew[e] = $urandom_range(1, 3);
    for (int f = 0; f < F; f++) for (int o = 0; o < O; o++) w[f][o] = $urandom_range(0, 15) - 8;
    // CSR: row 0 has no edges, row r (1..cs) has one edge r -> 0 at position r-1
    for (int e = 0; e < cs; e++) begin
      hw(SEL_CI, e, AC'(0));
      hw(SEL_E, e, AC'(ew[e]));
    end
    for (int n = 0; n < nn; n++) begin
      logic [AC-1:0] d;
      hw(SEL_RP, n, AC'(n));
      for (int f = 0; f < F; f++) d[f*S +: S] = S'(x[n][f]);
      hw(SEL_FEAT, n, d);
    end
    for (int f = 0; f < F; f++) begin
      logic [AC-1:0] d = '0;
      for (int o = 0; o < O; o++) d[o*S +: S] = S'(w[f][o]);
      hw(SEL_WGT, f, d);
    end
    bank_before = active_bank;
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check(active_bank != bank_before, $sformatf("%s: bank swapped", wl_name[k]));
    // reference layer for node 0
    for (int f = 0; f < F; f++) begin
      z[f] = 0;
      for (int e = 0; e < cs; e++) z[f] += longint'(ew[e]) * x[e + 1][f];
      a[f] = sat4(z[f], int'(agg_shift));
    end
    for (int o = 0; o < O; o++) begin
      longint acc = 0;
      for (int f = 0; f < F; f++) acc += longint'(a[f]) * w[f][o];
      exp_out[o] = sat4(acc, int'(fe_shift));
    end
    // run: destination node 0 only
    n_res = 0; busy_cycles = 0;
    @(negedge clk);
    start = 1; num_nodes = 10'(nn); num_edges = 10'(cs); first_dst = '0; dst_count = 10'd1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    bad = 0;
    for (int o = 0; o < O; o++) if (got[o] != exp_out[o]) bad++;
    check(n_res == 1 && node_ok, $sformatf("%s: %0d results, node id ok %0d", wl_name[k], n_res, node_ok));
    check(bad == 0, $sformatf("%s: %0d of %0d outputs wrong", wl_name[k], bad, O));
    $display("%s: %0d neighbours, %0d features used, %0d busy cycles",
             wl_name[k], cs, nf, busy_cycles);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NW; k++) run_workload(k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
