// vector_gen_sched: vector generator & scheduler between the traversal core
// and the aggregation core.
//
// The traversal core delivers the incoming edges of one destination node as
// (source, edge weight) beats. This unit renders them into the input control
// vector of the aggregation crossbar: entry `src` carries the edge weight, all
// other rows carry 0, so only the rows of the source nodes are driven. Two
// vector slots are used in turn: while one finished vector waits for, or is
// taken by, the aggregation core, the next destination is gathered into the
// other. The first beat of a destination clears its slot; the beat with
// `ev_last` closes it. A destination without edges (`ev_none`) gives an
// all-zero vector.
// Timing: one beat accepted per cycle while a slot is free; a closed vector
// is offered on `vec_valid` from the next cycle. `stall` is high when a beat
// is refused because both slots are full.
// The paper gives the unit's role; the two slots are this design's choice.
module vector_gen_sched #(
  parameter int unsigned ROWS    = 512,
  parameter int unsigned EW_BITS = 4,
  localparam int unsigned AW     = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // edges from the traversal core
  input  logic                ev_valid,
  output logic                ev_ready,
  input  logic [AW-1:0]       ev_src,
  input  logic [EW_BITS-1:0]  ev_w,
  input  logic [AW-1:0]       ev_dst,
  input  logic                ev_last,
  input  logic                ev_none,
  // vectors to the aggregation core
  output logic                vec_valid,
  input  logic                vec_ready,
  output logic [EW_BITS-1:0]  vec [ROWS],
  output logic [AW-1:0]       vec_tag,
  output logic                stall
);

  logic [EW_BITS-1:0] slot_q [2][ROWS];
  logic [AW-1:0]      tag_q  [2];
  logic [1:0]         full_q;
  logic               wr_q, rd_q;
  logic               building_q;

  assign ev_ready  = !full_q[wr_q];
  assign stall     = ev_valid && !ev_ready;
  assign vec_valid = full_q[rd_q];
  assign vec       = slot_q[rd_q];
  assign vec_tag   = tag_q[rd_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q     <= '0;
      wr_q       <= 1'b0;
      rd_q       <= 1'b0;
      building_q <= 1'b0;
      tag_q      <= '{default: '0};
    end else begin
      if (ev_valid && ev_ready) begin
        building_q <= !ev_last;
        if (ev_last) begin
          full_q[wr_q] <= 1'b1;
          tag_q[wr_q]  <= ev_dst;
          wr_q         <= !wr_q;
        end
      end
      if (vec_valid && vec_ready) begin
        full_q[rd_q] <= 1'b0;
        rd_q         <= !rd_q;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ev_valid && ev_ready) begin
      if (!building_q) slot_q[wr_q] <= '{default: '0};
      if (!ev_none)    slot_q[wr_q][ev_src] <= ev_w;
    end
  end

endmodule
