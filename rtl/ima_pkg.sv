// ima_pkg: sizes, types and encodings shared by the IMA-GNN accelerator RTL.
//
// The crossbar geometries are those of one accelerator device: one resistive
// CAM crossbar of 512 rows x 32 bits for each of the search and scan CAMs, one
// 512x512 MVM crossbar for aggregation and one 128x128 MVM crossbar for
// feature extraction. The bit widths of features, weights and edge weights
// (4 bits each, one crossbar column per bit) are this design's own choice:
// with them a 512-column aggregation row holds exactly the 128 features that
// the 128 rows of the feature-extraction crossbar take as input.
package ima_pkg;

  // Traversal core: resistive CAM crossbars (ML0..ML511, BL0..BL31).
  localparam int unsigned CAM_ROWS  = 512;
  localparam int unsigned CAM_WIDTH = 32;

  // Aggregation core crossbar: one row per source node, 512 columns.
  localparam int unsigned AGG_ROWS  = 512;
  localparam int unsigned AGG_COLS  = 512;
  // Feature-extraction core crossbar: one row per input feature.
  localparam int unsigned FE_ROWS   = 128;
  localparam int unsigned FE_COLS   = 128;

  // Number of 1-bit RRAM cells (crossbar columns) that hold one stored value.
  localparam int unsigned SLICES    = 4;
  // Width of a value applied bit-serially to the crossbar through 1-bit DACs.
  localparam int unsigned IN_BITS   = 4;
  // Width of a node feature after the activation unit.
  localparam int unsigned FEAT_BITS = 4;
  // Width of a CSR edge weight (array E).
  localparam int unsigned EW_BITS   = 4;
  // Shift-and-add accumulator width.
  localparam int unsigned ACC_W     = 24;

  localparam int unsigned AGG_OUTS  = AGG_COLS / SLICES;   // 128 features
  localparam int unsigned FE_OUTS   = FE_COLS / SLICES;    // 32 outputs
  localparam int unsigned NODE_W    = $clog2(CAM_ROWS);    // 9-bit node id
  localparam int unsigned EDGE_W    = $clog2(CAM_ROWS);    // 9-bit edge index

  // Target of a host write into the buffer array.
  typedef enum logic [2:0] {
    SEL_CI   = 3'd0,   // column index array CI   (one entry per edge)
    SEL_E    = 3'd1,   // edge weight array E     (one entry per edge)
    SEL_RP   = 3'd2,   // row end pointers RP[r+1] (one entry per node)
    SEL_FEAT = 3'd3,   // node feature row        (AGG_COLS bits)
    SEL_WGT  = 3'd4    // feature-extraction weight row (FE_COLS bits)
  } buf_sel_e;

  // Operation of a resistive CAM crossbar.
  typedef enum logic [1:0] {
    CAM_NOP     = 2'd0,
    CAM_SEARCH  = 2'd1,   // ternary XNOR match of every row against the key
    CAM_COMPARE = 2'd2    // magnitude compare: row matches if stored >= key
  } cam_op_e;

  // Controller state.
  typedef enum logic [1:0] {
    CTL_IDLE    = 2'd0,
    CTL_PROGRAM = 2'd1,   // copy the active buffer bank into the crossbars
    CTL_RUN     = 2'd2,   // stream destination nodes through the cores
    CTL_DRAIN   = 2'd3    // wait for the last outputs
  } ctl_state_e;

endpackage
