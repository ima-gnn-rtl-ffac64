// activation_unit: activation unit shared by the aggregation core (port 0)
// and the feature-extraction core (port 1).
//
// Each port offers a vector of LANES signed accumulator values with a tag and
// a right-shift amount. A request is granted only when the consumer of that
// port's results can take one (`dst_ready`); when both ports are eligible in
// the same cycle the grant alternates (round-robin), so neither core starves.
// The granted vector is passed through ReLU, shifted right by its port's
// shift amount (re-quantisation) and saturated to FEAT_BITS unsigned bits.
// Timing: one vector per cycle; the result (`out_valid`, `out_port`,
// `out_feat`, `out_tag`) is registered and valid for exactly one cycle, the
// cycle after the grant, and must be taken by the consumer then.
// The paper only states that the MVM crossbars share an activation unit;
// ReLU, shift, saturation and the arbitration are this design's choices.
module activation_unit #(
  parameter int unsigned LANES     = 128,
  parameter int unsigned ACC_W     = 24,
  parameter int unsigned FEAT_BITS = 4,
  parameter int unsigned TAG_W     = 9
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [1:0]               req_valid,
  output logic [1:0]               req_ready,
  input  logic signed [ACC_W-1:0]  req_acc   [2][LANES],
  input  logic [TAG_W-1:0]         req_tag   [2],
  input  logic [4:0]               req_shift [2],
  input  logic [1:0]               dst_ready,
  output logic                     out_valid,
  output logic                     out_port,
  output logic [FEAT_BITS-1:0]     out_feat  [LANES],
  output logic [TAG_W-1:0]         out_tag,
  output logic                     conflict   // both ports eligible in one cycle
);

  localparam logic [ACC_W-1:0] FMAX = ACC_W'((1 << FEAT_BITS) - 1);

  logic [1:0] eligible;
  logic       prio_q;      // port that wins the next tie
  logic       grant_any;
  logic       grant_port;
  logic [FEAT_BITS-1:0] act [LANES];

  assign eligible  = req_valid & dst_ready;
  assign grant_any = |eligible;
  assign conflict  = &eligible;

  always_comb begin
    if (&eligible)        grant_port = prio_q;
    else if (eligible[1]) grant_port = 1'b1;
    else                  grant_port = 1'b0;
    req_ready = '0;
    if (grant_any) req_ready[grant_port] = 1'b1;
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] shifted;
      shifted = req_acc[grant_port][l] >>> req_shift[grant_port];
      if (shifted < 0)                           act[l] = '0;
      else if ($unsigned(shifted) > FMAX)        act[l] = FMAX[FEAT_BITS-1:0];
      else                                       act[l] = shifted[FEAT_BITS-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_port  <= 1'b0;
      prio_q    <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= grant_any;
      if (grant_any) begin
        out_port <= grant_port;
        out_tag  <= req_tag[grant_port];
        prio_q   <= ~grant_port;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (grant_any) out_feat <= act;
  end

endmodule
