// tb_crc_check: test of the per-path CRC registers and the output choice
// (L = 4, R = 16, messages of 24 bits plus CRC).
// The CRC of each message is computed here by polynomial long division
// (message times x^16 modulo x^16+x^12+x^5+1). Some paths receive the
// correct message and CRC, some a corrupted copy; bits arrive in random
// single / pair steps, and one pruning step copies random parents. At the
// end the pass flags and the chosen path (smallest metric among those that
// pass, else smallest metric) are compared with the expected ones.
module tb_crc_check;
  import lscd_pkg::*;
  localparam int L = 4, R = 16, PMW = 8, LW = 2, MSG = 24, KB = MSG + R;
  logic clk = 0, start = 0;
  logic [PMW-1:0] pm [L];
  logic [L-1:0] pass;
  logic [LW-1:0] sel;
  logic sel_pass;
  bit words [L][KB];
  int checks = 0, failures = 0;

  commit_if #(.L(L)) cm ();
  crc_check #(.L(L), .R(R), .PMW(PMW)) dut (.clk (clk), .start (start), .cm (cm), .pm (pm),
    .pass (pass), .sel (sel), .sel_pass (sel_pass));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remainder of m(x) x^16 divided by the CCITT polynomial, by long division
  task automatic make_word(output bit w [KB]);
    bit d [KB];
    for (int k = 0; k < MSG; k++) begin w[k] = 1'($urandom_range(1, 0)); d[k] = w[k]; end
    for (int k = MSG; k < KB; k++) d[k] = 0;
    for (int k = 0; k < MSG; k++)
      if (d[k]) begin
        d[k] = 0; d[k + 4] ^= 1; d[k + 11] ^= 1; d[k + 16] ^= 1;   // x^16 + x^12 + x^5 + 1
      end
    for (int k = MSG; k < KB; k++) w[k] = d[k];
  endtask

  initial begin
    cm.en = 0; cm.lc = 0; cm.mode = CM_EVEN; cm.couple = '0; cm.info0 = 0; cm.info1 = 0; cm.pos = '0;
    cm.u0 = '0; cm.u1 = '0;
    for (int l = 0; l < L; l++) begin cm.parent[l] = LW'(l); pm[l] = '0; end
    for (int rep = 0; rep < 200; rep++) begin
      bit good [L];
      int pos, exp_sel, best;
      bit any;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int l = 0; l < L; l++) begin
        make_word(words[l]);
        good[l] = ($urandom_range(2, 0) != 0);
        if (!good[l]) begin int e; e = $urandom_range(KB - 1, 0); words[l][e] = !words[l][e]; end
        pm[l] = PMW'($urandom_range(20, 0));
      end
      // the first bit with a pruning step that gives each path its own word
      pos = 0;
      while (pos < KB) begin
        bit two;
        two = (pos + 1 < KB) && ($urandom_range(1, 0) == 1);
        @(negedge clk);
        cm.en = 1; cm.lc = 0; cm.mode = two ? CM_PAIR : CM_EVEN; cm.info0 = 1; cm.info1 = two;
        for (int l = 0; l < L; l++) begin
          cm.u0[l] = words[l][pos];
          cm.u1[l] = two ? words[l][pos + 1] : 1'b0;
        end
        pos += two ? 2 : 1;
        if (pos == KB && rep % 2 == 1) begin
          // last step with pruning: path l continues path perm[l]
          bit tmp [L][KB];
          cm.lc = 1;
          for (int l = 0; l < L; l++) cm.parent[l] = LW'($urandom_range(L - 1, 0));
          for (int l = 0; l < L; l++) begin
            tmp[l] = words[cm.parent[l]];
            cm.u0[l] = tmp[l][pos - (two ? 2 : 1)];
            if (two) cm.u1[l] = tmp[l][pos - 1];
          end
          for (int l = 0; l < L; l++) begin
            bit e;
            e = 1;
            for (int k = 0; k < KB; k++) if (tmp[l][k] != words[l][k]) e = 0;
            words[l] = tmp[l];
          end
        end
        @(negedge clk);
        cm.en = 0; cm.lc = 0;
        for (int l = 0; l < L; l++) cm.parent[l] = LW'(l);
      end
      // expected flags: recompute from the words each path now holds
      any = 0; exp_sel = 0; best = 0;
      for (int l = 0; l < L; l++) begin
        bit w [KB], ok;
        bit d [KB];
        d = words[l];
        for (int k = 0; k < MSG; k++)
          if (d[k]) begin d[k] = 0; d[k + 4] ^= 1; d[k + 11] ^= 1; d[k + 16] ^= 1; end
        ok = 1;
        for (int k = MSG; k < KB; k++) if (d[k]) ok = 0;
        checks++;
        if (pass[l] != ok) failures++;
        if (ok && (!any || int'(pm[l]) < best)) begin any = 1; best = int'(pm[l]); exp_sel = l; end
      end
      if (!any) begin
        exp_sel = 0; best = int'(pm[0]);
        for (int l = 1; l < L; l++) if (int'(pm[l]) < best) begin best = int'(pm[l]); exp_sel = l; end
      end
      checks += 2;
      if (int'(sel) != exp_sel) failures++;
      if (sel_pass != any) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
