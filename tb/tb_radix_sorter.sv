// tb_radix_sorter: random test of the 8-input sorter. Values are drawn from
// small and full ranges (many ties); the output must be ascending, each tag
// must appear once with its own value, and equal values must keep their
// input order.
module tb_radix_sorter;
  localparam int NS = 8, PMW = 8, TW = 4;
  logic [PMW-1:0] in_val [NS], out_val [NS];
  logic [TW-1:0]  in_tag [NS], out_tag [NS];
  int checks = 0, failures = 0;

  radix_sorter #(.NS(NS), .PMW(PMW), .TW(TW)) dut (.in_val (in_val), .in_tag (in_tag),
    .out_val (out_val), .out_tag (out_tag));

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
      int seen [NS];
      int range;
      range = (rep % 3 == 0) ? 3 : (rep % 3 == 1) ? 20 : 255;
      for (int i = 0; i < NS; i++) begin
        in_val[i] = PMW'($urandom_range(range, 0));
        in_tag[i] = TW'(i + 5);
        seen[i] = 0;
      end
      #1;
      for (int r = 0; r < NS; r++) begin
        int i;
        i = int'(out_tag[r]) - 5;
        chk(i >= 0 && i < NS);
        if (i >= 0 && i < NS) begin
          seen[i]++;
          chk(out_val[r] == in_val[i]);
        end
        if (r > 0) begin
          chk(out_val[r-1] <= out_val[r]);
          if (out_val[r-1] == out_val[r]) chk(out_tag[r-1] < out_tag[r]);
        end
      end
      for (int i = 0; i < NS; i++) chk(seen[i] == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
