// tb_lm_module: list-management test (L = 8, Q = 6, PMW = 8).
// Random operation streams (fused couples of cases I, II, IV, plain node
// cycles, frozen / reliable / unreliable leaves, each unreliable leaf
// followed by its pruning cycle) with random LLRs on y0 / y1. A reference
// holds the path metrics, applies the update rules, and for pruning cycles
// rebuilds the threshold-tracking order (two stable half sorts, the
// compare-and-swap array, a sort of the lower half) from the metrics of the
// previous cycle, then applies DTS-Advance. Every cycle the commit outputs
// and the metrics are compared with the reference.
module tb_lm_module;
  import lscd_pkg::*;
  localparam int L = 8, Q = 6, PMW = 8, H = L / 2, RT_IDX = 3 * L / 4 - 1, LW = 3;
  logic clk = 0, start = 0;
  ctrl_t ctrl;
  logic signed [Q-1:0] y0 [L], y1 [L];
  logic [PMW-1:0] pm [L];
  logic dts_fire;
  logic [LW:0] dts_k, lc_moved;
  int checks = 0, failures = 0;
  int rpm [L], rprev [L], rpmo [L], rhd [L];
  int pruned = 0;

  commit_if #(.L(L)) cm ();
  lm_module #(.L(L), .Q(Q), .PMW(PMW)) dut (.clk (clk), .start (start), .ctrl (ctrl), .y0 (y0),
    .y1 (y1), .cm (cm), .pm (pm), .dts_fire (dts_fire), .dts_k (dts_k), .lc_moved (lc_moved));

  always #5 clk = ~clk;

  task automatic chk(input bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  function automatic int sat(input int v);
    return (v > 255) ? 255 : v;
  endfunction

  // stable sort of (val, tag) by val, ties by position
  task automatic ssort(inout int v [H], inout int t [H]);
    for (int i = 1; i < H; i++)
      for (int j = i; j > 0 && v[j-1] > v[j]; j--) begin
        int a, b;
        a = v[j]; v[j] = v[j-1]; v[j-1] = a;
        b = t[j]; t[j] = t[j-1]; t[j-1] = b;
      end
  endtask

  task automatic ref_order(input int m [L], output int ord [L], output int rt);
    int v0 [H], t0 [H], v1 [H], t1 [H], lv [H], lt [H];
    int ov [L];
    for (int j = 0; j < H; j++) begin v0[j] = m[j]; t0[j] = j; v1[j] = m[j+H]; t1[j] = j + H; end
    ssort(v0, t0); ssort(v1, t1);
    for (int j = 0; j < H; j++) begin
      if (v0[j] <= v1[H-1-j]) begin
        ov[j] = v0[j]; ord[j] = t0[j]; lv[H-1-j] = v1[H-1-j]; lt[H-1-j] = t1[H-1-j];
      end else begin
        ov[j] = v1[H-1-j]; ord[j] = t1[H-1-j]; lv[H-1-j] = v0[j]; lt[H-1-j] = t0[j];
      end
    end
    ssort(lv, lt);
    for (int j = 0; j < H; j++) begin ov[H+j] = lv[j]; ord[H+j] = lt[j]; end
    rt = ov[RT_IDX];
  endtask

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ctrl = '0;
    for (int l = 0; l < L; l++) begin y0[l] = '0; y1[l] = '0; end
    for (int rep = 0; rep < 40; rep++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int l = 0; l < L; l++) begin rpm[l] = (l == 0) ? 0 : 255; rprev[l] = rpm[l]; end
      for (int step = 0; step < 300; step++) begin
        int sel;
        bit want_dts;
        ctrl_t c;
        sel = $urandom_range(9, 0);
        c = '0;
        c.couple = 16'($urandom_range(500, 0));
        c.info_pos = 16'($urandom_range(500, 0));
        want_dts = 0;
        if (sel <= 2) begin
          c.op = OP_NODE; c.stage = 4'd1; c.fuse = 1;
          unique case (sel)
            0: begin c.kind0 = KIND_RELIABLE; c.kind1 = KIND_RELIABLE; end
            1: begin c.kind0 = KIND_FROZEN;   c.kind1 = KIND_RELIABLE; end
            default: begin c.kind0 = KIND_FROZEN; c.kind1 = KIND_FROZEN; end
          endcase
        end else if (sel == 3) begin
          c.op = OP_NODE; c.stage = 4'($urandom_range(5, 1)); c.is_g = 1'($urandom_range(1, 0));
        end else begin
          c.op = ($urandom_range(1, 0)) ? OP_LEAF0 : OP_LEAF1;
          c.is_g = (c.op == OP_LEAF1);
          c.kind0 = bit_kind_e'($urandom_range(2, 0)); c.kind1 = bit_kind_e'($urandom_range(2, 0));
          if (sel >= 7) begin
            if (c.op == OP_LEAF0) c.kind0 = KIND_UNRELIABLE; else c.kind1 = KIND_UNRELIABLE;
          end
          want_dts = ((c.op == OP_LEAF0) ? c.kind0 : c.kind1) == KIND_UNRELIABLE;
        end
        for (int cyc = 0; cyc < (want_dts ? 2 : 1); cyc++) begin
          int nxt [L];
          int m0, m1, t0, t1;
          if (cyc == 1) begin c.op = OP_DTS; c.second = (c.is_g); c.is_g = 0; end
          ctrl = c;
          for (int l = 0; l < L; l++) begin
            y0[l] = Q'($urandom_range(63, 0)); y1[l] = Q'($urandom_range(63, 0));
          end
          #1;
          nxt = rpm;
          chk(dts_fire == (c.op == OP_DTS));
          for (int l = 0; l < L; l++) chk(int'(pm[l]) == rpm[l]);
          if (c.op == OP_NODE && c.fuse) begin
            chk(cm.en && !cm.lc && cm.mode == CM_PAIR);
            chk(cm.info0 == (c.kind0 != KIND_FROZEN) && cm.info1 == (c.kind1 != KIND_FROZEN));
            for (int l = 0; l < L; l++) begin
              int a, b;
              a = int'(y0[l]); b = int'(y1[l]);
              m0 = (a < 0) ? -a : a; m1 = (b < 0) ? -b : b; t0 = (a < 0); t1 = (b < 0);
              chk(int'(cm.parent[l]) == l);
              if (sel == 0) begin
                chk(cm.u0[l] == (t0 ^ t1) && cm.u1[l] == t1);
              end else if (sel == 1) begin
                chk(cm.u0[l] == 0 && cm.u1[l] == (a + b < 0));
                if (t0 != t1) nxt[l] = sat(rpm[l] + ((m0 < m1) ? m0 : m1));
              end else begin
                chk(cm.u0[l] == 0 && cm.u1[l] == 0);
                nxt[l] = sat(rpm[l] + t0 * m0 + t1 * m1);
              end
            end
          end else if (c.op == OP_NODE) begin
            chk(!cm.en);
          end else if (c.op == OP_LEAF0 || c.op == OP_LEAF1) begin
            bit_kind_e k;
            k = (c.op == OP_LEAF0) ? c.kind0 : c.kind1;
            chk(cm.en == (k != KIND_UNRELIABLE) && !cm.lc);
            chk(cm.mode == ((c.op == OP_LEAF0) ? CM_EVEN : CM_ODD));
            for (int l = 0; l < L; l++) begin
              int a;
              a = int'(y0[l]); m0 = (a < 0) ? -a : a; t0 = (a < 0);
              rpmo[l] = sat(rpm[l] + m0); rhd[l] = t0;
              if (k == KIND_RELIABLE) chk(cm.u0[l] == t0 && cm.info0 && cm.info1);
              if (k == KIND_FROZEN) begin
                chk(!cm.info0 && !cm.info1);
                if (t0) nxt[l] = sat(rpm[l] + m0);
              end
            end
          end else begin
            int ord [L], rt, kk, k;
            int fl [$];
            ref_order(rprev, ord, rt);
            fl.delete();
            for (int r = 0; r < L; r++) if (rpmo[ord[r]] <= rt) fl.push_back(ord[r]);
            k = fl.size(); kk = (k > H) ? H : k;
            chk(cm.en && cm.lc && cm.info0 && cm.info1);
            chk(cm.mode == (c.second ? CM_ODD : CM_EVEN));
            chk(int'(dts_k) == k);
            for (int l = 0; l < L; l++) begin
              int p, od;
              if (l >= L - kk) begin p = fl[l - (L - kk)]; od = 1; nxt[l] = rpmo[p]; end
              else begin p = ord[l]; od = 0; nxt[l] = rpm[p]; end
              chk(int'(cm.parent[l]) == p);
              chk(cm.u0[l] == (rhd[p] ^ od));
            end
            pruned++;
          end
          chk(cm.pos == c.info_pos);
          @(negedge clk);
          rprev = rpm;
          rpm = nxt;
        end
      end
    end
    checks++;
    if (pruned < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
