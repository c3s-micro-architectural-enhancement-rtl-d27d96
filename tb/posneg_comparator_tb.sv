// posneg_comparator_tb: exhaustive test of one pos-neg comparator pair.
//
// Every 8-bit pixel value is applied. With the threshold 127 the expected
// result is read straight off the top bit: a pixel is above 127 exactly when
// bit 7 is set, so posVal must equal bit 7 and negVal its inverse.
module posneg_comparator_tb;
  logic [7:0] inVal;
  logic       posVal, negVal;
  int         checks = 0, failures = 0;

  posneg_comparator dut (.inVal(inVal), .posVal(posVal), .negVal(negVal));

  initial begin
    for (int v = 0; v < 256; v++) begin
      inVal = 8'(v);
      #1;
      checks += 2;
      if (posVal !== inVal[7]) begin
        failures++;
        $display("FAIL pixel %0d: posVal=%b expected %b", v, posVal, inVal[7]);
      end
      if (negVal !== ~inVal[7]) begin
        failures++;
        $display("FAIL pixel %0d: negVal=%b expected %b", v, negVal, ~inVal[7]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
