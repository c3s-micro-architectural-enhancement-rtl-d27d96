// comparator_parallel_units_tb: the 49-comparator array with random samples.
//
// Each sample holds 49 random pixels, with values around the threshold (126,
// 127, 128) mixed in on purpose. Expected bits come from the pixel's top bit
// (above 127 exactly when bit 7 is set). Every lane is checked, so a swapped
// or dead lane shows.
module comparator_parallel_units_tb;
  localparam int NCMP = 49;
  logic [NCMP*8-1:0] pix_in;
  logic [NCMP-1:0]   posout, negout;
  int                checks = 0, failures = 0;

  comparator_parallel_units dut (.pix_in(pix_in), .posout(posout), .negout(negout));

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < NCMP; k++) begin
        logic [7:0] p;
        case ($urandom_range(0, 3))
          0:       p = 8'd126 + 8'($urandom_range(0, 2));
          default: p = 8'($urandom);
        endcase
        pix_in[k*8 +: 8] = p;
      end
      #1;
      for (int k = 0; k < NCMP; k++) begin
        checks += 2;
        if (posout[k] !== pix_in[k*8+7] || negout[k] !== !pix_in[k*8+7]) begin
          failures++;
          if (failures < 10)
            $display("FAIL lane %0d pixel %0d: pos=%b neg=%b", k, pix_in[k*8 +: 8], posout[k], negout[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
