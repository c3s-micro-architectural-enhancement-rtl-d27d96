// stdp_incdec_tb: exhaustive test of the weight increment / decrement logic.
//
// All five one-hot cases against all 128 combinations of the seven random
// bits. Expected: nothing unless a stabilisation bit (fout_brv or min_brv) is
// set; then capture, search and the no-spike case increment when their own
// random bit is set, minus and backoff decrement when theirs is.
module stdp_incdec_tb;
  import c3s_pkg::*;

  logic [4:0] stdp_cases;
  stdp_brv_t  brv;
  logic       inc, dec;
  int         checks = 0, failures = 0;

  stdp_incdec dut (.stdp_cases(stdp_cases), .brv(brv), .inc(inc), .dec(dec));

  initial begin
    for (int k = 0; k < 5; k++)
      for (int b = 0; b < 128; b++) begin
        bit stab, own, e_inc, e_dec;
        stdp_cases = 5'b1 << k;
        brv        = stdp_brv_t'(b);
        stab = brv.fout_brv || brv.min_brv;
        case (k)
          0: own = brv.capture_brv;
          1: own = brv.minus_brv;
          2: own = brv.search_brv;
          3: own = brv.backoff_brv;
          default: own = brv.inf_brv;
        endcase
        e_inc = stab && own && (k == 0 || k == 2 || k == 4);
        e_dec = stab && own && (k == 1 || k == 3);
        #1 checks += 2;
        if (inc !== e_inc || dec !== e_dec) begin
          failures++;
          $display("FAIL case %0d brv=%b inc=%b dec=%b expected %b %b", k, b, inc, dec, e_inc, e_dec);
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
