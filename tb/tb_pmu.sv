// tb_pmu: exhaustive test of the path-metric update over all LLR pairs
// (Q = 6) with random and saturating metrics, against the update rules
// written out with plain integers.
module tb_pmu;
  localparam int L = 4, Q = 6, PMW = 8;
  logic [PMW-1:0] pm [L];
  logic signed [Q-1:0] y0 [L], y1 [L];
  logic [PMW-1:0] pmo [L], pm_frz [L], pm_c2 [L], pm_c4 [L];
  logic [L-1:0] hd, u0_c1, u1_c1, u1_c2;
  int checks = 0, failures = 0;

  pmu #(.L(L), .Q(Q), .PMW(PMW)) dut (.pm (pm), .y0 (y0), .y1 (y1), .pmo (pmo), .hd (hd),
    .pm_frz (pm_frz), .pm_c2 (pm_c2), .pm_c4 (pm_c4), .u0_c1 (u0_c1), .u1_c1 (u1_c1), .u1_c2 (u1_c2));

  function automatic int sat(input int v);
    return (v > 255) ? 255 : v;
  endfunction

  task automatic chk(input bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -32; a < 32; a++) begin
      for (int b = -32; b < 32; b++) begin
        for (int l = 0; l < L; l++) begin
          y0[l] = Q'(a); y1[l] = Q'(b);
          pm[l] = (l == 3) ? PMW'(250 + $urandom_range(5, 0)) : PMW'($urandom_range(200, 0));
        end
        #1;
        for (int l = 0; l < L; l++) begin
          int g, m0, m1, t0, t1, s;
          g = int'(pm[l]); m0 = (a < 0) ? -a : a; m1 = (b < 0) ? -b : b;
          t0 = (a < 0); t1 = (b < 0); s = a + b;
          chk(hd[l] == t0);
          chk(int'(pmo[l]) == sat(g + m0));
          chk(int'(pm_frz[l]) == (t0 ? sat(g + m0) : g));
          chk(int'(pm_c2[l]) == ((t0 != t1) ? sat(g + ((m0 < m1) ? m0 : m1)) : g));
          chk(int'(pm_c4[l]) == sat(g + t0 * m0 + t1 * m1));
          chk(u0_c1[l] == (t0 ^ t1));
          chk(u1_c1[l] == t1);
          chk(u1_c2[l] == (s < 0));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
