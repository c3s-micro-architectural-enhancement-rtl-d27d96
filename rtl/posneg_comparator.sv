// posneg_comparator: one positive/negative comparator pair of the pos-neg
// spike encoder.
//
// The pixel inVal is compared with a fixed threshold. The positive output is
// 1 when the pixel is brighter than the threshold; the negative output is 1
// when it is darker. Both compare one input against the same constant, so the
// block is two magnitude comparators and nothing else.
//
// Interface: inVal (PIXEL_W bits) in, posVal and negVal out. Purely
// combinational, no clock.
//
// Follows the published description: 8-bit pixels, threshold 127, positive =
// greater, negative = less. Own choice: a pixel equal to the threshold (a case
// the description leaves open) gives posVal = 0, negVal = 1, so the two
// outputs are always complementary.
module posneg_comparator #(
  parameter int unsigned PIXEL_W   = c3s_pkg::PIXEL_W_DEF,
  parameter int unsigned THRESHOLD = c3s_pkg::THRESHOLD_DEF
) (
  input  logic [PIXEL_W-1:0] inVal,
  output logic               posVal,
  output logic               negVal
);

  localparam logic [PIXEL_W-1:0] TH = PIXEL_W'(THRESHOLD);

  always_comb begin
    posVal = (inVal > TH);
    negVal = (inVal <= TH);
  end

endmodule
