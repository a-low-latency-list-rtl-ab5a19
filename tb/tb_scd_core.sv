// tb_scd_core: random test of one semi-parallel SCD (M = 8).
// For output stages 0 .. 4 (below, at and above log2 M) random operand
// words, partial sums and f/g types are applied; each PE output is compared
// with L[j] / L[j+2^t] taken from the operand words as the memory layout
// places them and combined with the f or g rule.
module tb_scd_core;
  localparam int M = 8, Q = 6;
  logic is_g;
  logic [3:0] stage;
  logic signed [Q-1:0] rd_a [M], rd_b [M], y [M];
  logic [M-1:0] ps;
  int checks = 0, failures = 0;

  scd_core #(.M(M), .Q(Q)) dut (.is_g (is_g), .stage (stage), .rd_a (rd_a), .rd_b (rd_b), .ps (ps), .y (y));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fg(input bit g, input bit s, input int a, input int b);
    int ma, mb, v;
    ma = (a < 0) ? -a : a; mb = (b < 0) ? -b : b;
    if (!g) return ((a < 0) != (b < 0)) ? -((ma < mb) ? ma : mb) : ((ma < mb) ? ma : mb);
    v = s ? b - a : b + a;
    return (v > 31) ? 31 : (v < -31) ? -31 : v;
  endfunction

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int t, va [M], vb [M];
      t = $urandom_range(4, 0);
      stage = 4'(t); is_g = 1'($urandom_range(1, 0)); ps = M'($urandom);
      for (int j = 0; j < M; j++) begin
        va[j] = $urandom_range(62, 0) - 31; vb[j] = $urandom_range(62, 0) - 31;
        rd_a[j] = Q'(va[j]); rd_b[j] = Q'(vb[j]);
      end
      #1;
      for (int j = 0; j < M; j++) begin
        int e;
        if ((1 << t) >= M) e = fg(is_g, ps[j], va[j], vb[j]);
        else if (j < (1 << t)) e = fg(is_g, ps[j], va[j], va[j + (1 << t)]);
        else e = 0;
        checks++;
        if (int'(y[j]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d j=%0d y=%0d exp=%0d", t, j, y[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
