// tb_flag_rom: writes random kinds into the 2N-bit table (N = 64) and reads
// every couple back, checking both kinds against the values written.
module tb_flag_rom;
  import lscd_pkg::*;
  localparam int N = 64;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0;
  bit_kind_e wkind = KIND_FROZEN, kind0, kind1;
  logic [4:0] couple = '0;
  bit_kind_e shadow [N];
  int checks = 0, failures = 0;

  flag_rom #(.N(N)) dut (.clk (clk), .we (we), .waddr (waddr), .wkind (wkind), .couple (couple),
    .kind0 (kind0), .kind1 (kind1));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 5; rep++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        we = 1; waddr = 6'(i); wkind = bit_kind_e'($urandom_range(2, 0)); shadow[i] = wkind;
      end
      @(negedge clk); we = 0;
      for (int c = 0; c < N / 2; c++) begin
        couple = 5'(c);
        #1;
        checks += 2;
        if (kind0 != shadow[2*c]) failures++;
        if (kind1 != shadow[2*c+1]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
