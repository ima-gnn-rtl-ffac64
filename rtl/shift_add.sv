// shift_add: Shift & Add unit behind an MVM crossbar.
//
// A stored value occupies SLICES neighbouring columns, least significant
// slice first; the input vector is applied one bit per cycle, LSB first. For
// each group o of SLICES columns the unit accumulates
//     acc[o] += sum_s  w_s * colsum[o*SLICES + s] << (s + in_bit)
// where w_s is +1, except for the top slice of a signed weight
// (SIGNED_W = 1), where it is -1 (two's complement). `start` clears the
// accumulators in the same cycle that it may also add the first partial sum
// (`add`), so a job of IN_BITS input bits takes IN_BITS `add` cycles; `acc`
// is registered. The paper names the unit and its role; the bit-slice
// arrangement and the signed top slice are this design's choices.
module shift_add #(
  parameter int unsigned COLS     = 512,
  parameter int unsigned SLICES   = 4,
  parameter int unsigned ADC_BITS = 10,
  parameter int unsigned IN_BITS  = 4,
  parameter int unsigned ACC_W    = 24,
  parameter bit          SIGNED_W = 1'b0,
  localparam int unsigned OUTS    = COLS / SLICES
) (
  input  logic                        clk,
  input  logic                        start,
  input  logic                        add,
  input  logic [$clog2(IN_BITS)-1:0]  in_bit,
  input  logic [ADC_BITS-1:0]         colsum [COLS],
  output logic signed [ACC_W-1:0]     acc [OUTS]
);

  logic signed [ACC_W-1:0] partial [OUTS];

  always_comb begin
    for (int o = 0; o < OUTS; o++) begin
      partial[o] = '0;
      for (int s = 0; s < SLICES; s++) begin
        if (SIGNED_W && s == SLICES - 1)
          partial[o] = partial[o] - (ACC_W'(colsum[o*SLICES+s]) <<< s);
        else
          partial[o] = partial[o] + (ACC_W'(colsum[o*SLICES+s]) <<< s);
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < OUTS; o++) begin
      if (start && add)  acc[o] <= partial[o] <<< in_bit;
      else if (start)    acc[o] <= '0;
      else if (add)      acc[o] <= acc[o] + (partial[o] <<< in_bit);
    end
  end

endmodule
