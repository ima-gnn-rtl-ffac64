// mvm_crossbar: digital equivalent of one 1T1R resistive MVM crossbar with
// its bit-line DACs, source-line sample & hold and ADCs.
//
// The array has ROWS word-lines/bit-lines and COLS source-lines; every cell
// stores one bit as a high or low resistance. In a compute cycle the 1-bit
// DACs put one bit of each row's input (`in_bits[r]`) on the bit-lines; each
// source-line collects the current of the cells whose input bit and stored bit
// are both 1, i.e. the column sum  sum_r in_bits[r] & cell[r][c]. The sample &
// hold and the ADC turn that sum into ADC_BITS bits; the ADC is modelled as
// ideal and lossless (ADC_BITS = clog2(ROWS+1)). Multi-bit weights are spread
// over neighbouring columns and combined later by shift_add.
// Timing: `colsum` is registered and valid one cycle after `compute`
// (`colsum_valid`). Programming writes one whole row (`wr_row`, `wr_data`) per
// cycle through the row decoder; a row being written is not computed on in
// the same cycle.
module mvm_crossbar #(
  parameter int unsigned ROWS     = 512,
  parameter int unsigned COLS     = 512,
  parameter int unsigned ADC_BITS = $clog2(ROWS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // programming port (row decoder)
  input  logic                     wr_en,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  logic [COLS-1:0]          wr_data,
  // compute port (DACs)
  input  logic                     compute,
  input  logic [ROWS-1:0]          in_bits,
  // ADC outputs, one per source-line
  output logic [ADC_BITS-1:0]      colsum [COLS],
  output logic                     colsum_valid
);

  logic [COLS-1:0]     cell_q [ROWS];
  logic [ADC_BITS-1:0] sl_sum [COLS];

  always_ff @(posedge clk) begin
    if (wr_en) cell_q[wr_row] <= wr_data;
  end

  // Source-line current summation.
  always_comb begin
    for (int c = 0; c < COLS; c++) sl_sum[c] = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (in_bits[r]) begin
        for (int c = 0; c < COLS; c++) sl_sum[c] = sl_sum[c] + ADC_BITS'(cell_q[r][c]);
      end
    end
  end

  // Sample & hold + ADC.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) colsum_valid <= 1'b0;
    else        colsum_valid <= compute;
  end

  always_ff @(posedge clk) begin
    if (compute) colsum <= sl_sum;
  end

endmodule
