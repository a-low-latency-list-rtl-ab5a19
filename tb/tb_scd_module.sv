// tb_scd_module: random test of the L lockstep SCDs (L = 4, M = 4).
// Each path gets its own random operands and partial sums; every output of
// every SCD is compared with the f/g rule applied to that path's operands.
module tb_scd_module;
  localparam int L = 4, M = 4, Q = 6;
  logic is_g;
  logic [3:0] stage;
  logic signed [Q-1:0] rd_a [L][M], rd_b [L][M], y [L][M];
  logic [M-1:0] ps [L];
  int checks = 0, failures = 0;

  scd_module #(.L(L), .M(M), .Q(Q)) dut (.is_g (is_g), .stage (stage), .rd_a (rd_a), .rd_b (rd_b), .ps (ps), .y (y));

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
    for (int it = 0; it < 1000; it++) begin
      int t;
      t = $urandom_range(3, 0);
      stage = 4'(t); is_g = 1'($urandom_range(1, 0));
      for (int l = 0; l < L; l++) begin
        ps[l] = M'($urandom);
        for (int j = 0; j < M; j++) begin
          rd_a[l][j] = Q'($urandom_range(62, 0) - 31); rd_b[l][j] = Q'($urandom_range(62, 0) - 31);
        end
      end
      #1;
      for (int l = 0; l < L; l++)
        for (int j = 0; j < M; j++) begin
          int e;
          if ((1 << t) >= M) e = fg(is_g, ps[l][j], int'(rd_a[l][j]), int'(rd_b[l][j]));
          else if (j < (1 << t)) e = fg(is_g, ps[l][j], int'(rd_a[l][j]), int'(rd_a[l][j + (1 << t)]));
          else e = 0;
          checks++;
          if (int'(y[l][j]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL l=%0d j=%0d y=%0d exp=%0d", l, j, y[l][j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
