// tb_path_memory: random test of the path memory (K = 12, L = 4).
// Random commits (pairs and single bits, information or frozen, with and
// without pruning to random parents) are applied at an advancing bit
// position; the reference keeps full rows and copies them on pruning. Every
// row is read back through the sel port after every commit.
module tb_path_memory;
  import lscd_pkg::*;
  localparam int K = 12, L = 4, LW = 2;
  logic clk = 0, start = 0;
  logic [LW-1:0] sel = '0;
  logic [K-1:0] rd_bits;
  bit rows [L][K];
  int checks = 0, failures = 0;

  commit_if #(.L(L)) cm ();
  path_memory #(.K(K), .L(L)) dut (.clk (clk), .start (start), .cm (cm), .sel (sel), .rd_bits (rd_bits));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cm.en = 0; cm.lc = 0; cm.mode = CM_EVEN; cm.couple = '0; cm.info0 = 0; cm.info1 = 0; cm.pos = '0;
    cm.u0 = '0; cm.u1 = '0;
    for (int l = 0; l < L; l++) cm.parent[l] = LW'(l);
    for (int rep = 0; rep < 30; rep++) begin
      int pos;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int l = 0; l < L; l++) for (int k = 0; k < K; k++) rows[l][k] = 0;
      pos = 0;
      while (pos < K) begin
        bit nr [L][K];
        int p;
        @(negedge clk);
        cm.en = 1; cm.lc = 1'($urandom_range(1, 0));
        cm.mode = commit_mode_e'($urandom_range(2, 0));
        cm.info0 = 1'($urandom_range(1, 0)); cm.info1 = 1'($urandom_range(1, 0));
        cm.pos = 16'(pos);
        for (int l = 0; l < L; l++) begin
          cm.parent[l] = cm.lc ? LW'($urandom_range(L - 1, 0)) : LW'(l);
          cm.u0[l] = 1'($urandom_range(1, 0)); cm.u1[l] = 1'($urandom_range(1, 0));
        end
        for (int l = 0; l < L; l++) begin
          nr[l] = rows[cm.parent[l]];
          p = pos;
          if (cm.mode != CM_ODD && cm.info0) begin if (p < K) nr[l][p] = cm.u0[l]; p++; end
          if (cm.mode != CM_EVEN && cm.info1) begin if (p < K) nr[l][p] = cm.u1[l]; p++; end
        end
        pos = p;
        @(negedge clk);
        cm.en = 0;
        rows = nr;
        for (int l = 0; l < L; l++) begin
          sel = LW'(l);
          #1;
          for (int k = 0; k < K; k++) begin checks++; if (rd_bits[k] != rows[l][k]) failures++; end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
