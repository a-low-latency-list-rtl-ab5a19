// tb_llr_pe: exhaustive test of the processing element.
// Every pair of LLRs in [-31, 31], both partial-sum values and both
// functions are applied; the result is compared with the min-sum f and the
// saturating g worked out here with integer arithmetic.
module tb_llr_pe;
  localparam int Q = 6;
  logic is_g, s;
  logic signed [Q-1:0] a, b, y;
  int checks = 0, failures = 0;

  llr_pe #(.Q(Q)) dut (.is_g (is_g), .s (s), .a (a), .b (b), .y (y));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = -31; ia <= 31; ia++)
      for (int ib = -31; ib <= 31; ib++)
        for (int m = 0; m < 4; m++) begin
          int exp_v, ma, mb;
          is_g = m[0]; s = m[1];
          a = Q'(ia); b = Q'(ib);
          #1;
          ma = (ia < 0) ? -ia : ia;
          mb = (ib < 0) ? -ib : ib;
          if (!is_g) exp_v = ((ia < 0) != (ib < 0)) ? -((ma < mb) ? ma : mb) : ((ma < mb) ? ma : mb);
          else begin
            exp_v = s ? ib - ia : ib + ia;
            if (exp_v > 31) exp_v = 31;
            if (exp_v < -31) exp_v = -31;
          end
          checks++;
          if (int'(y) != exp_v) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d g=%0d s=%0d y=%0d exp=%0d", ia, ib, is_g, s, y, exp_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
