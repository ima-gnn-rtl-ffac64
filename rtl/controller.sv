// controller: run sequencer of the device.
//
// On `start` (accepted in IDLE) it captures the problem size and the range
// of destination nodes, then:
//   PROGRAM - empties both CAMs and walks rows 0..PROG_ROWS-1 of the active
//             buffer bank, one per cycle: the read address goes out at cycle
//             i, the row comes back at cycle i+1 and is written into the
//             search CAM and edge-weight array (rows < num_edges), the scan
//             CAM (rows < num_nodes), the aggregation crossbar and, for the
//             first FE_ROWS rows, the feature-extraction crossbar.
//   RUN     - offers destination nodes first_dst .. first_dst+dst_count-1 to
//             the traversal core on a valid/ready stream.
//   DRAIN   - waits until dst_count results have left the device
//             (`result_fire`), then pulses `done` and returns to IDLE.
// `busy` is high outside IDLE. The paper names the controller and the order
// of the steps (program the CAMs, traverse, aggregate, extract); the states
// and the interface are this design's.
module controller #(
  parameter int unsigned PROG_ROWS = 512,
  parameter int unsigned FE_ROWS   = 128,
  localparam int unsigned AW       = $clog2(PROG_ROWS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [AW:0]    num_nodes,
  input  logic [AW:0]    num_edges,
  input  logic [AW-1:0]  first_dst,
  input  logic [AW:0]    dst_count,
  output logic           busy,
  output logic           done,
  output ima_pkg::ctl_state_e state,
  // buffer array read
  output logic [AW-1:0]  rd_addr,
  // crossbar programming
  output logic           cam_clr,
  output logic           prog_row_valid,
  output logic [AW-1:0]  prog_row,
  output logic           edge_wr,
  output logic           rp_wr,
  output logic           agg_wr,
  output logic           fe_wr,
  // destination stream
  output logic           dst_valid,
  input  logic           dst_ready,
  output logic [AW-1:0]  dst,
  input  logic           result_fire
);
  import ima_pkg::ctl_state_e;
  import ima_pkg::CTL_IDLE;
  import ima_pkg::CTL_PROGRAM;
  import ima_pkg::CTL_RUN;
  import ima_pkg::CTL_DRAIN;

  ctl_state_e    state_q;
  logic [AW:0]   nodes_q, edges_q, count_q;
  logic [AW-1:0] first_q;
  logic [AW:0]   prog_cnt_q;    // next row address to read
  logic          pv_q;          // read data valid this cycle
  logic [AW-1:0] prow_q;        // row the read data belongs to
  logic [AW:0]   issued_q, done_cnt_q;

  assign state          = state_q;
  assign busy           = (state_q != CTL_IDLE);
  assign rd_addr        = prog_cnt_q[AW-1:0];
  assign cam_clr        = (state_q == CTL_IDLE) && start;
  assign prog_row_valid = pv_q;
  assign prog_row       = prow_q;
  assign edge_wr        = pv_q && ({1'b0, prow_q} < edges_q);
  assign rp_wr          = pv_q && ({1'b0, prow_q} < nodes_q);
  assign agg_wr         = pv_q;
  assign fe_wr          = pv_q && (32'(prow_q) < FE_ROWS);
  assign dst_valid      = (state_q == CTL_RUN) && (issued_q < count_q);
  assign dst            = first_q + issued_q[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= CTL_IDLE;
      nodes_q    <= '0;
      edges_q    <= '0;
      count_q    <= '0;
      first_q    <= '0;
      prog_cnt_q <= '0;
      pv_q       <= 1'b0;
      prow_q     <= '0;
      issued_q   <= '0;
      done_cnt_q <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      pv_q <= 1'b0;
      if (result_fire && state_q != CTL_IDLE) done_cnt_q <= done_cnt_q + 1'b1;
      unique case (state_q)
        CTL_IDLE: if (start) begin
          nodes_q    <= num_nodes;
          edges_q    <= num_edges;
          count_q    <= dst_count;
          first_q    <= first_dst;
          prog_cnt_q <= '0;
          issued_q   <= '0;
          done_cnt_q <= '0;
          state_q    <= CTL_PROGRAM;
        end
        CTL_PROGRAM: begin
          if (32'(prog_cnt_q) < PROG_ROWS) begin
            pv_q       <= 1'b1;
            prow_q     <= prog_cnt_q[AW-1:0];
            prog_cnt_q <= prog_cnt_q + 1'b1;
          end else if (!pv_q) begin
            state_q <= CTL_RUN;
          end
        end
        CTL_RUN: begin
          if (dst_valid && dst_ready) issued_q <= issued_q + 1'b1;
          if (issued_q == count_q) state_q <= CTL_DRAIN;
        end
        CTL_DRAIN: if (done_cnt_q == count_q) begin
          state_q <= CTL_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= CTL_IDLE;
      endcase
    end
  end

  a_no_extra_results: assert property (@(posedge clk) disable iff (!rst_n)
    state_q != CTL_IDLE |-> done_cnt_q <= count_q);

endmodule
