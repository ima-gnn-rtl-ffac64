// traversal_core: graph traversal with two resistive CAM crossbars holding
// the graph in compressed sparse row (CSR) form.
//
//   search CAM  row e = CI[e], the destination (column) node of edge e
//   scan CAM    row n = RP[n+1], the end pointer of source (row) node n
//   E array     row e = E[e], the weight of edge e
// For a destination node d the core searches the CI CAM for d; the match
// lines give every edge position e that ends in d. The positions are taken
// lowest first; for each, the RP CAM is compared against e+1, and the first
// row whose end pointer is >= e+1 is the source node of edge e (rows of
// nodes without edges repeat the previous pointer and are skipped because a
// lower row matches first). Each edge leaves as one beat (src, weight, dst)
// on a valid/ready stream, the last with `ev_last`; a destination without
// incoming edges gives a single beat with `ev_none` and `ev_last`.
// Timing: search issue and match capture take 2 cycles, then each edge takes
// 2 cycles (compare issue, compare result), plus any stall on `ev_ready`.
// Programming: `edge_wr` writes CI and E of one edge, `rp_wr` one pointer,
// `clr` empties both CAMs. Search-then-compare is the paper's method; the
// end-pointer layout of the RP CAM and the timing are this design's.
module traversal_core #(
  parameter int unsigned ROWS    = 512,
  parameter int unsigned WIDTH   = 32,
  parameter int unsigned EW_BITS = 4,
  localparam int unsigned AW     = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // programming
  input  logic                clr,
  input  logic                edge_wr,
  input  logic [AW-1:0]       edge_addr,
  input  logic [WIDTH-1:0]    edge_ci,
  input  logic [EW_BITS-1:0]  edge_w,
  input  logic                rp_wr,
  input  logic [AW-1:0]       rp_addr,
  input  logic [WIDTH-1:0]    rp_end,
  // destination nodes in
  input  logic                dst_valid,
  output logic                dst_ready,
  input  logic [AW-1:0]       dst,
  // incoming edges out
  output logic                ev_valid,
  input  logic                ev_ready,
  output logic [AW-1:0]       ev_src,
  output logic [EW_BITS-1:0]  ev_w,
  output logic [AW-1:0]       ev_dst,
  output logic                ev_last,
  output logic                ev_none,
  output logic                busy
);
  import ima_pkg::cam_op_e;
  import ima_pkg::CAM_NOP;
  import ima_pkg::CAM_SEARCH;
  import ima_pkg::CAM_COMPARE;

  typedef enum logic [2:0] {T_IDLE, T_SEARCH, T_WALK, T_SCAN, T_NONE} tstate_e;

  tstate_e            state_q;
  logic [AW-1:0]      dst_q;
  logic [ROWS-1:0]    pending_q;
  logic [AW-1:0]      pos_q;
  logic [EW_BITS-1:0] e_q [ROWS];

  cam_op_e            s_op, r_op;
  logic [WIDTH-1:0]   s_key, r_key;
  logic [ROWS-1:0]    s_match, r_match;
  logic               s_any, r_any;
  logic [AW-1:0]      low_pos, src_row;

  function automatic logic [AW-1:0] first_set(input logic [ROWS-1:0] v);
    first_set = '0;
    for (int i = ROWS - 1; i >= 0; i--) if (v[i]) first_set = AW'(i);
  endfunction

  assign low_pos = first_set(pending_q);
  assign src_row = first_set(r_match);

  always_comb begin
    s_op  = CAM_NOP;
    s_key = WIDTH'(dst);
    r_op  = CAM_NOP;
    r_key = WIDTH'(low_pos) + WIDTH'(1);
    if (state_q == T_IDLE && dst_valid) s_op = CAM_SEARCH;
    if (state_q == T_WALK)              r_op = CAM_COMPARE;
  end

  cam_crossbar #(.ROWS(ROWS), .WIDTH(WIDTH)) u_search_cam (
    .clk, .rst_n, .wr_en(edge_wr), .wr_row(edge_addr), .wr_value(edge_ci),
    .wr_care('1), .clr, .op(s_op), .key(s_key), .match(s_match), .any_match(s_any)
  );

  cam_crossbar #(.ROWS(ROWS), .WIDTH(WIDTH)) u_scan_cam (
    .clk, .rst_n, .wr_en(rp_wr), .wr_row(rp_addr), .wr_value(rp_end),
    .wr_care('1), .clr, .op(r_op), .key(r_key), .match(r_match), .any_match(r_any)
  );

  always_ff @(posedge clk) begin
    if (edge_wr) e_q[edge_addr] <= edge_w;
  end

  assign dst_ready = (state_q == T_IDLE);
  assign busy      = (state_q != T_IDLE);
  assign ev_valid  = (state_q == T_SCAN) || (state_q == T_NONE);
  assign ev_none   = (state_q == T_NONE);
  assign ev_src    = src_row;
  assign ev_w      = e_q[pos_q];
  assign ev_dst    = dst_q;
  assign ev_last   = (state_q == T_NONE) || (pending_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= T_IDLE;
      dst_q     <= '0;
      pending_q <= '0;
      pos_q     <= '0;
    end else begin
      unique case (state_q)
        T_IDLE: if (dst_valid) begin
          dst_q   <= dst;
          state_q <= T_SEARCH;
        end
        T_SEARCH: begin
          pending_q <= s_match;
          state_q   <= s_any ? T_WALK : T_NONE;
        end
        T_WALK: begin
          pos_q                <= low_pos;
          pending_q[low_pos]   <= 1'b0;
          state_q              <= T_SCAN;
        end
        T_SCAN: if (ev_ready) state_q <= (pending_q == '0) ? T_IDLE : T_WALK;
        T_NONE: if (ev_ready) state_q <= T_IDLE;
        default: state_q <= T_IDLE;
      endcase
    end
  end

  // Every edge of a CSR graph belongs to some source row.
  a_src_found: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == T_SCAN |-> r_any);

endmodule
