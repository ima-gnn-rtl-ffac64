// mvm_core: one in-memory matrix-vector core (aggregation or feature
// extraction): input buffer, resistive MVM crossbar and shift & add.
//
// The crossbar is first programmed row by row with the stored matrix (node
// features for the aggregation core, layer weights for the feature-extraction
// core), SLICES one-bit columns per stored value. A job is an input vector of
// ROWS values of IN_BITS bits with a tag (the destination node id). It is
// accepted into the input buffer when `in_ready` is high, applied to the
// crossbar one bit per cycle (LSB first) and accumulated by shift_add into
// OUTS = COLS/SLICES dot products  out_acc[o] = sum_r in_vec[r] * W[r][o].
// Timing: after the accepting cycle the core spends IN_BITS compute cycles;
// out_valid rises IN_BITS+2 cycles after acceptance and the result holds
// until `out_ready`; the next job is accepted in the cycle after that.
// Both cores of the device are this one module with different sizes, as the
// paper describes the feature-extraction crossbar as similar to the
// aggregation one but of another size.
module mvm_core #(
  parameter int unsigned ROWS     = 512,
  parameter int unsigned COLS     = 512,
  parameter int unsigned SLICES   = 4,
  parameter int unsigned IN_BITS  = 4,
  parameter int unsigned ACC_W    = 24,
  parameter int unsigned TAG_W    = 9,
  parameter bit          SIGNED_W = 1'b0,
  localparam int unsigned OUTS    = COLS / SLICES,
  localparam int unsigned ADC_BITS = $clog2(ROWS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // programming
  input  logic                     wr_en,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  logic [COLS-1:0]          wr_data,
  // job input
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [IN_BITS-1:0]       in_vec [ROWS],
  input  logic [TAG_W-1:0]         in_tag,
  // result
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [ACC_W-1:0]  out_acc [OUTS],
  output logic [TAG_W-1:0]         out_tag,
  output logic                     busy
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  localparam int unsigned BW = (IN_BITS > 1) ? $clog2(IN_BITS) : 1;

  state_e                 state_q;
  logic [IN_BITS-1:0]     buf_q [ROWS];     // input buffer ("Buf")
  logic [TAG_W-1:0]       tag_q;
  logic [BW-1:0]          issue_bit_q;       // bit on the DACs this cycle
  logic [BW-1:0]          add_bit_q;         // bit whose column sums arrive
  logic                   compute;
  logic [ROWS-1:0]        in_bits;
  logic [ADC_BITS-1:0]    colsum [COLS];
  logic                   colsum_valid;
  logic                   last_add;
  logic                   last_issued_q;     // all input bits applied

  assign in_ready  = (state_q == S_IDLE);
  assign out_valid = (state_q == S_DONE);
  assign out_tag   = tag_q;
  assign busy      = (state_q != S_IDLE);
  assign compute   = (state_q == S_RUN) && !last_issued_q;


  always_comb begin
    for (int r = 0; r < ROWS; r++) in_bits[r] = buf_q[r][issue_bit_q];
  end

  assign last_add = colsum_valid && (add_bit_q == BW'(IN_BITS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      issue_bit_q   <= '0;
      add_bit_q     <= '0;
      last_issued_q <= 1'b0;
      tag_q         <= '0;
    end else begin
      if (colsum_valid) add_bit_q <= add_bit_q + 1'b1;
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          state_q       <= S_RUN;
          tag_q         <= in_tag;
          issue_bit_q   <= '0;
          add_bit_q     <= '0;
          last_issued_q <= 1'b0;
        end
        S_RUN: begin
          if (compute) begin
            if (issue_bit_q == BW'(IN_BITS - 1)) last_issued_q <= 1'b1;
            else                                 issue_bit_q   <= issue_bit_q + 1'b1;
          end
          if (last_add) state_q <= S_DONE;
        end
        S_DONE: if (out_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buf_q <= in_vec;
  end

  mvm_crossbar #(.ROWS(ROWS), .COLS(COLS), .ADC_BITS(ADC_BITS)) u_xbar (
    .clk, .rst_n, .wr_en, .wr_row, .wr_data,
    .compute, .in_bits, .colsum, .colsum_valid
  );

  shift_add #(
    .COLS(COLS), .SLICES(SLICES), .ADC_BITS(ADC_BITS), .IN_BITS(IN_BITS),
    .ACC_W(ACC_W), .SIGNED_W(SIGNED_W)
  ) u_sa (
    .clk,
    .start  (colsum_valid && add_bit_q == '0),
    .add    (colsum_valid),
    .in_bit (add_bit_q),
    .colsum,
    .acc    (out_acc)
  );

  // A job must not be programmed over while it runs.
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_RUN |-> !wr_en);

endmodule
