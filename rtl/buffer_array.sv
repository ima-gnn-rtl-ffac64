// buffer_array: double-buffered on-chip store of graph and feature data.
//
// Each of the two banks holds one complete problem in CSR form plus the
// stored matrices of the two MVM cores:
//   CI[EDGES] (WIDTH bits), E[EDGES] (EW_BITS), RP end pointers[NODES]
//   (WIDTH), node features[NODES] (FEAT_COLS bits, one aggregation crossbar
//   row each) and layer weights[WGT_ROWS] (WGT_COLS bits, one
//   feature-extraction crossbar row each).
// The host writes only the shadow bank (`hw_*`, selected by `hw_sel`); the
// controller reads only the active bank, one row of every array per cycle at
// `rd_addr`, with the data registered one cycle later. `swap` exchanges the
// banks, so the next graph can be written while the crossbars are programmed
// from, and the cores work on, the current one. `host_overlap` flags a host
// write made while the device is busy.
// Double buffering of graph and feature data is stated in the paper; the bank
// organisation, the ports and the one-row-per-cycle read are this design's.
module buffer_array #(
  parameter int unsigned NODES     = 512,
  parameter int unsigned EDGES     = 512,
  parameter int unsigned WIDTH     = 32,
  parameter int unsigned EW_BITS   = 4,
  parameter int unsigned FEAT_COLS = 512,
  parameter int unsigned WGT_ROWS  = 128,
  parameter int unsigned WGT_COLS  = 128,
  localparam int unsigned AW       = $clog2((NODES > EDGES) ? NODES : EDGES),
  localparam int unsigned WAW      = $clog2(WGT_ROWS),
  localparam int unsigned DW       = (FEAT_COLS > WGT_COLS) ? FEAT_COLS : WGT_COLS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host write port (shadow bank)
  input  logic                  hw_en,
  input  ima_pkg::buf_sel_e     hw_sel,
  input  logic [AW-1:0]         hw_addr,
  input  logic [DW-1:0]         hw_data,
  input  logic                  swap,
  input  logic                  dev_busy,
  output logic                  active_bank,
  output logic                  host_overlap,
  // controller read port (active bank)
  input  logic [AW-1:0]         rd_addr,
  output logic [WIDTH-1:0]      rd_ci,
  output logic [EW_BITS-1:0]    rd_e,
  output logic [WIDTH-1:0]      rd_rp,
  output logic [FEAT_COLS-1:0]  rd_feat,
  output logic [WGT_COLS-1:0]   rd_wgt
);
  import ima_pkg::SEL_CI;
  import ima_pkg::SEL_E;
  import ima_pkg::SEL_RP;
  import ima_pkg::SEL_FEAT;
  import ima_pkg::SEL_WGT;

  logic [WIDTH-1:0]     ci_q   [2][EDGES];
  logic [EW_BITS-1:0]   e_q    [2][EDGES];
  logic [WIDTH-1:0]     rp_q   [2][NODES];
  logic [FEAT_COLS-1:0] feat_q [2][NODES];
  logic [WGT_COLS-1:0]  wgt_q  [2][WGT_ROWS];
  logic                 act_q;
  logic                 sh;

  assign active_bank  = act_q;
  assign sh           = !act_q;
  assign host_overlap = hw_en && dev_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    act_q <= 1'b0;
    else if (swap) act_q <= !act_q;
  end

  always_ff @(posedge clk) begin
    if (hw_en) begin
      unique case (hw_sel)
        SEL_CI:   if (32'(hw_addr) < EDGES)    ci_q[sh][hw_addr]   <= hw_data[WIDTH-1:0];
        SEL_E:    if (32'(hw_addr) < EDGES)    e_q[sh][hw_addr]    <= hw_data[EW_BITS-1:0];
        SEL_RP:   if (32'(hw_addr) < NODES)    rp_q[sh][hw_addr]   <= hw_data[WIDTH-1:0];
        SEL_FEAT: if (32'(hw_addr) < NODES)    feat_q[sh][hw_addr] <= hw_data[FEAT_COLS-1:0];
        SEL_WGT:  if (32'(hw_addr) < WGT_ROWS) wgt_q[sh][hw_addr[WAW-1:0]]  <= hw_data[WGT_COLS-1:0];
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    rd_ci   <= (32'(rd_addr) < EDGES)    ? ci_q[act_q][rd_addr]   : '0;
    rd_e    <= (32'(rd_addr) < EDGES)    ? e_q[act_q][rd_addr]    : '0;
    rd_rp   <= (32'(rd_addr) < NODES)    ? rp_q[act_q][rd_addr]   : '0;
    rd_feat <= (32'(rd_addr) < NODES)    ? feat_q[act_q][rd_addr] : '0;
    rd_wgt  <= (32'(rd_addr) < WGT_ROWS) ? wgt_q[act_q][rd_addr[WAW-1:0]]  : '0;
  end

endmodule
