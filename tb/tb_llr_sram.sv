// tb_llr_sram: random write/read test of one LLR bank (M = 4, DEPTH = 5).
// Random writes go to a shadow array kept here; both read ports are read at
// random written addresses every cycle and compared with the shadow.
module tb_llr_sram;
  localparam int M = 4, Q = 6, DEPTH = 5, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, ra = '0, rb = '0;
  logic signed [Q-1:0] wdata [M], qa [M], qb [M];
  int shadow [DEPTH][M];
  bit valid [DEPTH];
  int checks = 0, failures = 0;

  llr_sram #(.M(M), .Q(Q), .DEPTH(DEPTH)) dut (.clk (clk), .we (we), .waddr (waddr), .wdata (wdata),
    .raddr_a (ra), .raddr_b (rb), .rdata_a (qa), .rdata_b (qb));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) valid[a] = 0;
    for (int j = 0; j < M; j++) wdata[j] = '0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // check reads of the current contents
      ra = AW'($urandom_range(DEPTH - 1, 0));
      rb = AW'($urandom_range(DEPTH - 1, 0));
      #1;
      for (int j = 0; j < M; j++) begin
        if (valid[ra]) begin checks++; if (int'(qa[j]) != shadow[ra][j]) failures++; end
        if (valid[rb]) begin checks++; if (int'(qb[j]) != shadow[rb][j]) failures++; end
      end
      we = 1'($urandom_range(1, 0));
      waddr = AW'($urandom_range(DEPTH - 1, 0));
      for (int j = 0; j < M; j++) wdata[j] = Q'($urandom_range(62, 0) - 31);
      @(posedge clk);
      #1;
      if (we) begin
        valid[waddr] = 1;
        for (int j = 0; j < M; j++) shadow[waddr][j] = int'(wdata[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
