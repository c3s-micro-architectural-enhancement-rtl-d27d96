// comparator_parallel_units: NCMP pos-neg comparator pairs side by side.
//
// Each clock the data encoder hands this array one sample of NCMP pixels
// (49 = a 7x7 patch by default); every pixel goes to its own
// posneg_comparator, and the NCMP positive and NCMP negative bits come back
// as posout and negout. Bit k of each output belongs to pixel k of the sample,
// which sits in bits [k*PIXEL_W +: PIXEL_W] of pix_in.
//
// Interface: pix_in (NCMP*PIXEL_W bits) in; posout, negout (NCMP bits) out.
// Combinational; the registers are in data_encoder.
//
// Follows the published structure (49 parallel comparators). The input is
// called pix_in because the published name, "in", is a reserved word.
module comparator_parallel_units #(
  parameter int unsigned NCMP      = c3s_pkg::NCMP_DEF,
  parameter int unsigned PIXEL_W   = c3s_pkg::PIXEL_W_DEF,
  parameter int unsigned THRESHOLD = c3s_pkg::THRESHOLD_DEF
) (
  input  logic [NCMP*PIXEL_W-1:0] pix_in,
  output logic [NCMP-1:0]         posout,
  output logic [NCMP-1:0]         negout
);

  for (genvar k = 0; k < NCMP; k++) begin : g_cmp
    posneg_comparator #(
      .PIXEL_W  (PIXEL_W),
      .THRESHOLD(THRESHOLD)
    ) u_cmp (
      .inVal (pix_in[k*PIXEL_W +: PIXEL_W]),
      .posVal(posout[k]),
      .negVal(negout[k])
    );
  end

endmodule
