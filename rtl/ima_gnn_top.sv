// ima_gnn_top: one IMA-GNN device, an in-memory GNN inference accelerator.
//
// A graph is loaded by the host into the shadow bank of the buffer array in
// CSR form (CI, E, RP end pointers) together with the node features and the
// weights of one feature-extraction layer; `swap` makes it the active bank.
// `start` then runs one GNN layer for a range of destination nodes:
//   1 the controller programs the search/scan CAMs of the traversal core, the
//     aggregation crossbar (one row of FEAT features per node) and the
//     feature-extraction crossbar (one row of weights per input feature);
//   2 for each destination the traversal core finds its incoming edges and the
//     vector generator & scheduler renders them into a crossbar input vector;
//   3 the aggregation core computes  z = sum_src E(src,dst) * x_src  in memory;
//     the shared activation unit applies ReLU and re-quantises z;
//   4 the feature-extraction core computes  o = W^T z, which the activation
//     unit turns into the FE_OUTS output features of the node.
// Aggregation of one node overlaps feature extraction of the previous one.
// Each result leaves on `res_valid` for one cycle, with its node id.
// Host interface: `hw_*` write port of the buffer array (any time, including
// during a run: double buffering), `swap` (between runs), `start` with the
// run parameters, `busy`/`done`. The `ev_*` outputs pulse when a stall, a
// core result waiting for the shared activation unit, an overlap of the two MVM cores or a host
// write during a run happens.
// Structure and dataflow follow the paper's architecture figure; the widths,
// the handshakes and the run interface are this design's.
module ima_gnn_top #(
  parameter int unsigned ROWS      = ima_pkg::CAM_ROWS,   // nodes, edges, CAM rows
  parameter int unsigned CAM_WIDTH = ima_pkg::CAM_WIDTH,
  parameter int unsigned AGG_COLS  = ima_pkg::AGG_COLS,
  parameter int unsigned FE_COLS   = ima_pkg::FE_COLS,
  localparam int unsigned SLICES   = ima_pkg::SLICES,
  localparam int unsigned IN_BITS  = ima_pkg::IN_BITS,
  localparam int unsigned EW_BITS  = ima_pkg::EW_BITS,
  localparam int unsigned FEAT_BITS = ima_pkg::FEAT_BITS,
  localparam int unsigned ACC_W    = ima_pkg::ACC_W,
  localparam int unsigned FE_ROWS  = AGG_COLS / SLICES,
  localparam int unsigned AGG_OUTS = AGG_COLS / SLICES,
  localparam int unsigned FE_OUTS  = FE_COLS / SLICES,
  localparam int unsigned AW       = $clog2(ROWS),
  localparam int unsigned DW       = (AGG_COLS > FE_COLS) ? AGG_COLS : FE_COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host write port into the shadow bank
  input  logic                    hw_en,
  input  ima_pkg::buf_sel_e       hw_sel,
  input  logic [AW-1:0]           hw_addr,
  input  logic [DW-1:0]           hw_data,
  input  logic                    swap,
  output logic                    active_bank,
  // run control
  input  logic                    start,
  input  logic [AW:0]             num_nodes,
  input  logic [AW:0]             num_edges,
  input  logic [AW-1:0]           first_dst,
  input  logic [AW:0]             dst_count,
  input  logic [4:0]              agg_shift,
  input  logic [4:0]              fe_shift,
  output logic                    busy,
  output logic                    done,
  // results
  output logic                    res_valid,
  output logic [AW-1:0]           res_node,
  output logic [FEAT_BITS-1:0]    res_feat [FE_OUTS],
  // mechanism events
  output logic                    ev_stall,
  output logic                    ev_act_wait,
  output logic                    ev_core_overlap,
  output logic                    ev_host_overlap
);

  // ---------------- buffer array ----------------
  logic [AW-1:0]         rd_addr;
  logic [CAM_WIDTH-1:0]  rd_ci, rd_rp;
  logic [EW_BITS-1:0]    rd_e;
  logic [AGG_COLS-1:0]   rd_feat;
  logic [FE_COLS-1:0]    rd_wgt;

  buffer_array #(
    .NODES(ROWS), .EDGES(ROWS), .WIDTH(CAM_WIDTH), .EW_BITS(EW_BITS),
    .FEAT_COLS(AGG_COLS), .WGT_ROWS(FE_ROWS), .WGT_COLS(FE_COLS)
  ) u_buf (
    .clk, .rst_n, .hw_en, .hw_sel, .hw_addr, .hw_data, .swap,
    .dev_busy(busy), .active_bank, .host_overlap(ev_host_overlap),
    .rd_addr, .rd_ci, .rd_e, .rd_rp, .rd_feat, .rd_wgt
  );

  // ---------------- controller ----------------
  logic          cam_clr, edge_wr, rp_wr, agg_wr, fe_wr;
  logic [AW-1:0] prog_row;
  logic          dst_valid, dst_ready;
  logic [AW-1:0] dst;

  controller #(.PROG_ROWS(ROWS), .FE_ROWS(FE_ROWS)) u_ctl (
    .clk, .rst_n, .start, .num_nodes, .num_edges, .first_dst, .dst_count,
    .busy, .done, .state(), .rd_addr, .cam_clr, .prog_row_valid(), .prog_row,
    .edge_wr, .rp_wr, .agg_wr, .fe_wr, .dst_valid, .dst_ready, .dst,
    .result_fire(res_valid)
  );

  // ---------------- traversal core ----------------
  logic                ev_valid, ev_ready, ev_last, ev_none;
  logic [AW-1:0]       ev_src, ev_dst;
  logic [EW_BITS-1:0]  ev_w;

  traversal_core #(.ROWS(ROWS), .WIDTH(CAM_WIDTH), .EW_BITS(EW_BITS)) u_trav (
    .clk, .rst_n, .clr(cam_clr),
    .edge_wr, .edge_addr(prog_row), .edge_ci(rd_ci), .edge_w(rd_e),
    .rp_wr, .rp_addr(prog_row), .rp_end(rd_rp),
    .dst_valid, .dst_ready, .dst,
    .ev_valid, .ev_ready, .ev_src, .ev_w, .ev_dst, .ev_last, .ev_none, .busy()
  );

  // ---------------- vector generator & scheduler ----------------
  logic               vec_valid, vec_ready;
  logic [EW_BITS-1:0] vec [ROWS];
  logic [AW-1:0]      vec_tag;

  vector_gen_sched #(.ROWS(ROWS), .EW_BITS(EW_BITS)) u_vgs (
    .clk, .rst_n, .ev_valid, .ev_ready, .ev_src, .ev_w, .ev_dst, .ev_last, .ev_none,
    .vec_valid, .vec_ready, .vec, .vec_tag, .stall(ev_stall)
  );

  // ---------------- aggregation core ----------------
  logic                    agg_out_valid, agg_out_ready, agg_busy;
  logic signed [ACC_W-1:0] agg_acc [AGG_OUTS];
  logic [AW-1:0]           agg_tag;

  mvm_core #(
    .ROWS(ROWS), .COLS(AGG_COLS), .SLICES(SLICES), .IN_BITS(IN_BITS),
    .ACC_W(ACC_W), .TAG_W(AW), .SIGNED_W(1'b0)
  ) u_agg (
    .clk, .rst_n, .wr_en(agg_wr), .wr_row(prog_row), .wr_data(rd_feat),
    .in_valid(vec_valid), .in_ready(vec_ready), .in_vec(vec), .in_tag(vec_tag),
    .out_valid(agg_out_valid), .out_ready(agg_out_ready), .out_acc(agg_acc),
    .out_tag(agg_tag), .busy(agg_busy)
  );

  // ---------------- feature-extraction core ----------------
  logic [1:0]              req_valid, req_ready;
  logic signed [ACC_W-1:0] req_acc [2][AGG_OUTS];
  logic [AW-1:0]           req_tag [2];
  logic [4:0]              req_shift [2];
  logic                    act_valid, act_port;
  logic [FEAT_BITS-1:0]    act_feat [AGG_OUTS];
  logic [AW-1:0]           act_tag;
  logic                    fe_in_valid, fe_in_ready, fe_out_valid, fe_out_ready, fe_busy;
  logic [IN_BITS-1:0]      fe_in_vec [FE_ROWS];
  logic signed [ACC_W-1:0] fe_acc [FE_OUTS];
  logic [AW-1:0]           fe_tag;

  mvm_core #(
    .ROWS(FE_ROWS), .COLS(FE_COLS), .SLICES(SLICES), .IN_BITS(IN_BITS),
    .ACC_W(ACC_W), .TAG_W(AW), .SIGNED_W(1'b1)
  ) u_fe (
    .clk, .rst_n, .wr_en(fe_wr), .wr_row(prog_row[$clog2(FE_ROWS)-1:0]), .wr_data(rd_wgt),
    .in_valid(fe_in_valid), .in_ready(fe_in_ready), .in_vec(fe_in_vec), .in_tag(act_tag),
    .out_valid(fe_out_valid), .out_ready(fe_out_ready), .out_acc(fe_acc),
    .out_tag(fe_tag), .busy(fe_busy)
  );

  // ---------------- shared activation unit ----------------

  always_comb begin
    req_valid    = {fe_out_valid, agg_out_valid};
    req_tag[0]   = agg_tag;
    req_tag[1]   = fe_tag;
    req_shift[0] = agg_shift;
    req_shift[1] = fe_shift;
    for (int l = 0; l < AGG_OUTS; l++) begin
      req_acc[0][l] = agg_acc[l];
      req_acc[1][l] = (l < FE_OUTS) ? fe_acc[l] : '0;
    end
  end

  assign agg_out_ready = req_ready[0];
  assign fe_out_ready  = req_ready[1];

  activation_unit #(
    .LANES(AGG_OUTS), .ACC_W(ACC_W), .FEAT_BITS(FEAT_BITS), .TAG_W(AW)
  ) u_act (
    .clk, .rst_n, .req_valid, .req_ready, .req_acc, .req_tag, .req_shift,
    .dst_ready({1'b1, fe_in_ready}),
    .out_valid(act_valid), .out_port(act_port), .out_feat(act_feat),
    .out_tag(act_tag), .conflict()
  );

  assign fe_in_valid = act_valid && !act_port;
  always_comb begin
    for (int r = 0; r < FE_ROWS; r++) fe_in_vec[r] = act_feat[r];
  end

  assign res_valid = act_valid && act_port;
  assign res_node  = act_tag;
  always_comb begin
    for (int o = 0; o < FE_OUTS; o++) res_feat[o] = act_feat[o];
  end

  assign ev_core_overlap = agg_busy && fe_busy;
  assign ev_act_wait     = |(req_valid & ~req_ready);

  // An activated aggregation vector must find the feature-extraction core free.
  a_fe_free: assert property (@(posedge clk) disable iff (!rst_n)
    fe_in_valid |-> fe_in_ready);

endmodule
