// tb_tta: random test of the threshold-tracking architecture (L = 16).
// For random metric vectors (with many ties) it checks that ord_idx is a
// permutation with ord_val[r] = pm[ord_idx[r]], that the lower half holds
// exactly the L/2 largest metrics in ascending order (so its values equal
// the fully sorted list there), that every upper value is <= every lower
// value, and that AT and RT are the sorted metrics at ranks L/2 and 3L/4-1.
module tb_tta;
  localparam int L = 16, PMW = 8, H = L / 2, RT_IDX = 3 * L / 4 - 1;
  logic [PMW-1:0] pm [L], ord_val [L], at, rt;
  logic [3:0] ord_idx [L];
  int checks = 0, failures = 0;

  tta #(.L(L), .PMW(PMW), .RT_IDX(RT_IDX)) dut (.pm (pm), .ord_idx (ord_idx), .ord_val (ord_val),
    .at (at), .rt (rt));

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
    for (int rep = 0; rep < 3000; rep++) begin
      int srt [L];
      int seen [L];
      int range;
      range = (rep % 3 == 0) ? 4 : (rep % 3 == 1) ? 40 : 255;
      for (int i = 0; i < L; i++) begin
        pm[i] = PMW'($urandom_range(range, 0));
        srt[i] = int'(pm[i]);
        seen[i] = 0;
      end
      srt.sort();
      #1;
      for (int r = 0; r < L; r++) begin
        seen[ord_idx[r]]++;
        chk(ord_val[r] == pm[ord_idx[r]]);
      end
      for (int i = 0; i < L; i++) chk(seen[i] == 1);
      for (int r = H; r < L; r++) chk(int'(ord_val[r]) == srt[r]);
      for (int u = 0; u < H; u++) for (int v = H; v < L; v++) chk(ord_val[u] <= ord_val[v]);
      chk(int'(at) == srt[H]);
      chk(int'(rt) == srt[RT_IDX]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
