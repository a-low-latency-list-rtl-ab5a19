// tb_partial_sum_memory: random decoding-order test of the partial-sum
// memory (N = 32, L = 4, M = 4).
// Bits are committed in decoding order with random values, as pairs or as
// single bits, with random pruning (parents) before single bits. The
// reference keeps each path's full decided-bit history (copied on pruning).
// After every commit, for every stage t whose partial sums a g node could
// need next, every read word is compared with the re-encoding
// u[b .. b+2^t-1] F^(x)t of the last completed left subtree.
module tb_partial_sum_memory;
  import lscd_pkg::*;
  localparam int N = 32, L = 4, M = 4, LOGN = 5, LW = 2;
  logic clk = 0, start = 0;
  logic [3:0] rd_stage = '0;
  logic [15:0] rd_word = '0;
  logic [M-1:0] rd_ps [L];
  bit hist [L][N];
  int checks = 0, failures = 0;

  commit_if #(.L(L)) cm ();
  partial_sum_memory #(.N(N), .L(L), .M(M)) dut (.clk (clk), .start (start), .cm (cm),
    .rd_stage (rd_stage), .rd_word (rd_word), .rd_ps (rd_ps));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic verify(input int p);    // p bits decided so far
    for (int t = 0; t < LOGN; t++) begin
      if (((p >> t) & 1) == 1) begin
        int base, w;
        bit v [N];
        w = 1 << t;
        base = (p >> (t + 1)) << (t + 1);
        for (int l = 0; l < L; l++) begin
          for (int a = 0; a < w; a++) v[a] = hist[l][base + a];
          for (int h = 1; h < w; h = h * 2)
            for (int a = 0; a < w; a++) if ((a & h) == 0) v[a] = v[a] ^ v[a + h];
          for (int q = 0; q < ((w >= M) ? w / M : 1); q++) begin
            rd_stage = 4'(t); rd_word = 16'(q);
            #1;
            for (int j = 0; j < M && q * M + j < w; j++) begin
              checks++;
              if (rd_ps[l][j] != v[q * M + j]) failures++;
            end
          end
        end
      end
    end
  endtask

  task automatic commit(input commit_mode_e mode, input int c, input bit lc);
    bit nh [L][N];
    @(negedge clk);
    cm.en = 1; cm.mode = mode; cm.couple = 16'(c); cm.lc = lc;
    cm.info0 = 1; cm.info1 = 1; cm.pos = '0;
    for (int l = 0; l < L; l++) begin
      cm.parent[l] = lc ? LW'($urandom_range(L - 1, 0)) : LW'(l);
      cm.u0[l] = 1'($urandom_range(1, 0));
      cm.u1[l] = 1'($urandom_range(1, 0));
    end
    for (int l = 0; l < L; l++) begin
      nh[l] = hist[cm.parent[l]];
      if (mode != CM_ODD) nh[l][2 * c] = cm.u0[l];
      if (mode != CM_EVEN) nh[l][2 * c + 1] = cm.u1[l];
    end
    @(negedge clk);
    cm.en = 0;
    hist = nh;
  endtask

  initial begin
    cm.en = 0; cm.lc = 0; cm.mode = CM_EVEN; cm.couple = '0; cm.info0 = 0; cm.info1 = 0; cm.pos = '0;
    cm.u0 = '0; cm.u1 = '0;
    for (int l = 0; l < L; l++) cm.parent[l] = LW'(l);
    for (int rep = 0; rep < 6; rep++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) hist[l][i] = 0;
      for (int c = 0; c < N / 2; c++) begin
        if ($urandom_range(2, 0) == 0) begin
          commit(CM_PAIR, c, 1'b0);
        end else begin
          commit(CM_EVEN, c, 1'($urandom_range(1, 0)));
          verify(2 * c + 1);
          commit(CM_ODD, c, 1'($urandom_range(1, 0)));
        end
        verify(2 * c + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
