// tb_control_unit: schedule test of the control unit (N = 64, M = 8).
// For random kind tables the expected operation stream is built here from
// the scheduling rules (nodes of stages s .. 1 per couple with
// max(1, 2^t/M) words each, fused stage-1 node for cases I, II, IV, else
// LEAF0 [DTS] LEAF1 [DTS]) and compared cycle by cycle with ctrl, including
// the information-bit position. Tables made of the six paper cases only are
// also checked against the latency formula
//   D = 3N + (N/M) log2(N/4M) - 4 (N_I + N_II + N_IV) - (N_III + N_V).
module tb_control_unit;
  import lscd_pkg::*;
  localparam int N = 64, M = 8, LOGN = 6, LOGM = 3, NC = N / 2;
  logic clk = 0, rst_n = 0, start = 0;
  bit_kind_e kind0, kind1;
  logic [4:0] couple;
  ctrl_t ctrl;
  logic busy, done;
  bit_kind_e tab [N];
  int checks = 0, failures = 0;

  control_unit #(.N(N), .M(M)) dut (.clk (clk), .rst_n (rst_n), .start (start), .kind0 (kind0),
    .kind1 (kind1), .couple (couple), .ctrl (ctrl), .busy (busy), .done (done));

  assign kind0 = tab[2 * couple];
  assign kind1 = tab[2 * couple + 1];

  always #5 clk = ~clk;

  task automatic chk(input bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 300; rep++) begin
      ctrl_t exp [$];
      int pos, nfuse, n35, paper_only;
      paper_only = (rep % 2 == 0);
      for (int c = 0; c < NC; c++) begin
        if (paper_only) begin
          couple_case_e cc;
          cc = couple_case_e'($urandom_range(6, 1));
          unique case (cc)
            CASE_I:   begin tab[2*c] = KIND_RELIABLE;   tab[2*c+1] = KIND_RELIABLE;   end
            CASE_II:  begin tab[2*c] = KIND_FROZEN;     tab[2*c+1] = KIND_RELIABLE;   end
            CASE_III: begin tab[2*c] = KIND_UNRELIABLE; tab[2*c+1] = KIND_RELIABLE;   end
            CASE_IV:  begin tab[2*c] = KIND_FROZEN;     tab[2*c+1] = KIND_FROZEN;     end
            CASE_V:   begin tab[2*c] = KIND_FROZEN;     tab[2*c+1] = KIND_UNRELIABLE; end
            default:  begin tab[2*c] = KIND_UNRELIABLE; tab[2*c+1] = KIND_UNRELIABLE; end
          endcase
        end else begin
          tab[2*c] = bit_kind_e'($urandom_range(2, 0)); tab[2*c+1] = bit_kind_e'($urandom_range(2, 0));
        end
      end
      // expected stream
      exp.delete(); pos = 0; nfuse = 0; n35 = 0;
      for (int c = 0; c < NC; c++) begin
        int s;
        bit_kind_e k0, k1;
        bit fz;
        couple_case_e cc;
        k0 = tab[2*c]; k1 = tab[2*c+1];
        cc = classify(k0, k1);
        fz = (cc == CASE_I || cc == CASE_II || cc == CASE_IV);
        if (fz) nfuse++;
        if (cc == CASE_III || cc == CASE_V) n35++;
        if (c == 0) s = LOGN - 1;
        else begin s = 1; while (((c >> (s - 1)) & 1) == 0) s++; end
        for (int t = s; t >= 1; t--) begin
          int nw;
          nw = (t >= LOGM) ? (1 << (t - LOGM)) : 1;
          for (int w = 0; w < nw; w++) begin
            ctrl_t e;
            e = '0; e.op = OP_NODE; e.is_g = (c > 0 && t == s); e.stage = 4'(t); e.word = 16'(w);
            e.couple = 16'(c); e.kind0 = k0; e.kind1 = k1; e.info_pos = 16'(pos);
            e.fuse = (t == 1) && fz;
            exp.push_back(e);
          end
        end
        if (fz) pos += (k0 != KIND_FROZEN) + (k1 != KIND_FROZEN);
        else begin
          ctrl_t e;
          e = '0; e.couple = 16'(c); e.kind0 = k0; e.kind1 = k1;
          e.op = OP_LEAF0; e.info_pos = 16'(pos); exp.push_back(e);
          if (k0 == KIND_RELIABLE) pos++;
          if (k0 == KIND_UNRELIABLE) begin e.op = OP_DTS; e.info_pos = 16'(pos); exp.push_back(e); pos++; end
          e.op = OP_LEAF1; e.is_g = 1; e.info_pos = 16'(pos); exp.push_back(e);
          e.is_g = 0;
          if (k1 == KIND_RELIABLE) pos++;
          if (k1 == KIND_UNRELIABLE) begin e.op = OP_DTS; e.second = 1; e.info_pos = 16'(pos); exp.push_back(e); pos++; end
        end
      end
      if (paper_only) chk(exp.size() == 3 * N + (N / M) * 1 - 4 * nfuse - n35);
      // run
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      foreach (exp[i]) begin
        chk(busy && !done);
        chk(ctrl == exp[i]);
        @(negedge clk);
      end
      chk(!busy && done);
      repeat ($urandom_range(3, 0)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
