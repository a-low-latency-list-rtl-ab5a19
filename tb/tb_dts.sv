// tb_dts: random test of the DTS-Advance pruning (L = 16).
// The order input is either a random permutation or the order produced by a
// tta instance on the same metrics; RT is random or the tta threshold. The
// survivors are compared slot by slot with a reference written from the
// algorithm steps (first L/2 of the order always kept as even extensions,
// the last min(k, L/2) slots replaced by the first flagged odd extensions,
// in order). Also checked: k equals the number of odd extensions <= RT, and
// no parent appears twice with the same extension.
module tb_dts;
  localparam int L = 16, PMW = 8, H = L / 2;
  logic [PMW-1:0] pm [L], pmo [L], pm_new [L], rt, rt_t, at_t, ov_t [L];
  logic [3:0] ord_idx [L], ord_t [L], surv_par [L];
  logic [L-1:0] surv_odd;
  logic [4:0] k_count;
  int checks = 0, failures = 0;

  tta #(.L(L), .PMW(PMW)) u_tta (.pm (pm), .ord_idx (ord_t), .ord_val (ov_t), .at (at_t), .rt (rt_t));
  dts #(.L(L), .PMW(PMW)) dut (.pm (pm), .pmo (pmo), .ord_idx (ord_idx), .rt (rt),
    .surv_par (surv_par), .surv_odd (surv_odd), .pm_new (pm_new), .k_count (k_count));

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
    for (int rep = 0; rep < 4000; rep++) begin
      int perm [L];
      int fl [$];
      int k, kk;
      int epar [L], eodd [L], epm [L];
      int used [L][2];
      for (int i = 0; i < L; i++) begin
        pm[i]  = PMW'($urandom_range((rep % 2) ? 30 : 200, 0));
        pmo[i] = PMW'((int'(pm[i]) + $urandom_range(31, 0) > 255) ? 255 : int'(pm[i]) + $urandom_range(31, 0));
        perm[i] = i;
      end
      perm.shuffle();
      #1;
      for (int i = 0; i < L; i++) ord_idx[i] = (rep % 4 < 2) ? ord_t[i] : 4'(perm[i]);
      rt = (rep % 3 != 0) ? rt_t : PMW'($urandom_range(255, 0));
      #1;
      fl.delete();
      for (int r = 0; r < L; r++) if (pmo[ord_idx[r]] <= rt) fl.push_back(int'(ord_idx[r]));
      k = fl.size();
      kk = (k > H) ? H : k;
      for (int l = 0; l < L; l++) begin
        epar[l] = int'(ord_idx[l]); eodd[l] = 0; epm[l] = int'(pm[ord_idx[l]]);
      end
      for (int q = 0; q < kk; q++) begin
        int l;
        l = L - kk + q;
        epar[l] = fl[q]; eodd[l] = 1; epm[l] = int'(pmo[fl[q]]);
      end
      chk(int'(k_count) == k);
      for (int l = 0; l < L; l++) begin used[l][0] = 0; used[l][1] = 0; end
      for (int l = 0; l < L; l++) begin
        chk(int'(surv_par[l]) == epar[l]);
        chk(int'(surv_odd[l]) == eodd[l]);
        chk(int'(pm_new[l]) == epm[l]);
        used[surv_par[l]][surv_odd[l]]++;
      end
      for (int l = 0; l < L; l++) begin chk(used[l][0] <= 1); chk(used[l][1] <= 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
