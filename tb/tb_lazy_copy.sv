// tb_lazy_copy: random test of the lazy-copy command generation (L = 16):
// parent pass-through, new bit = parent decision xor odd flag, and the count
// of paths that continue another path.
module tb_lazy_copy;
  localparam int L = 16;
  logic [3:0] surv_par [L], parent [L];
  logic [L-1:0] surv_odd, hd, ubit;
  logic [4:0] moved;
  int checks = 0, failures = 0;

  lazy_copy #(.L(L)) dut (.surv_par (surv_par), .surv_odd (surv_odd), .hd (hd), .parent (parent),
    .ubit (ubit), .moved (moved));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 5000; rep++) begin
      int mv;
      mv = 0;
      for (int l = 0; l < L; l++) begin
        surv_par[l] = ($urandom_range(2, 0) == 0) ? 4'(l) : 4'($urandom_range(L - 1, 0));
        if (int'(surv_par[l]) != l) mv++;
      end
      surv_odd = L'($urandom());
      hd = L'($urandom());
      #1;
      for (int l = 0; l < L; l++) begin
        checks += 2;
        if (parent[l] != surv_par[l]) failures++;
        if (ubit[l] != (hd[surv_par[l]] ^ surv_odd[l])) failures++;
      end
      checks++;
      if (int'(moved) != mv) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
