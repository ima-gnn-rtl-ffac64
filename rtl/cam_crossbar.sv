// cam_crossbar: digital equivalent of one resistive ternary CAM crossbar.
//
// Each of the ROWS rows (match-lines ML0..ML{ROWS-1}) holds a WIDTH-bit word
// in 2T2R ternary cells: a value bit and a care bit per position. Two
// operations are issued through `op` with a `key` driven onto the bit-lines by
// the search data driver:
//   CAM_SEARCH  - XNOR match: row r matches when every cared-for bit equals
//                 the key bit (the paper's search operation).
//   CAM_COMPARE - magnitude compare: row r matches when its stored value,
//                 care bits ignored, is >= key. The paper realises compare by
//                 grounding BL and ramping BL-bar from LSB to MSB; the >=
//                 direction is this design's choice.
// Only rows that have been programmed since reset take part (`row_valid`).
// The match-line sense amplifiers are modelled as an ideal registered match
// vector: `match` and `any_match` are valid the cycle after `op` is issued
// and hold until the next operation. Programming writes one row per cycle
// (`wr_en`, `wr_row`, `wr_value`, `wr_care`); `clr` invalidates every row.
module cam_crossbar #(
  parameter int unsigned ROWS  = 512,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // programming port
  input  logic                     wr_en,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  logic [WIDTH-1:0]         wr_value,
  input  logic [WIDTH-1:0]         wr_care,
  input  logic                     clr,
  // search / compare
  input  ima_pkg::cam_op_e         op,
  input  logic [WIDTH-1:0]         key,
  output logic [ROWS-1:0]          match,
  output logic                     any_match
);
  import ima_pkg::CAM_SEARCH;
  import ima_pkg::CAM_COMPARE;
  import ima_pkg::CAM_NOP;

  logic [WIDTH-1:0] value_q [ROWS];
  logic [WIDTH-1:0] care_q  [ROWS];
  logic [ROWS-1:0]  row_valid;
  logic [ROWS-1:0]  ml;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      value_q[wr_row] <= wr_value;
      care_q[wr_row]  <= wr_care;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     row_valid <= '0;
    else if (clr)   row_valid <= '0;
    else if (wr_en) row_valid[wr_row] <= 1'b1;
  end

  // Match-line evaluation of every row in parallel.
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      unique case (op)
        CAM_SEARCH:  ml[r] = row_valid[r] && (((value_q[r] ^ key) & care_q[r]) == '0);
        CAM_COMPARE: ml[r] = row_valid[r] && (value_q[r] >= key);
        default:     ml[r] = 1'b0;
      endcase
    end
  end

  // Match-line sense amplifiers: sample on every issued operation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      match     <= '0;
      any_match <= 1'b0;
    end else if (op != CAM_NOP) begin
      match     <= ml;
      any_match <= |ml;
    end
  end

endmodule
