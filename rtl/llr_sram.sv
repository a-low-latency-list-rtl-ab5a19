// llr_sram: one bank of the LLR memory.
//
// DEPTH words of M Q-bit LLRs. Two read ports share no address logic with the
// write port, matching the paper's need of two operand words read and one
// result word written per cycle. The write is clocked; the reads are
// combinational (a register-file style bank), so a node word is read,
// computed and written back in the same cycle. A synchronous SRAM macro would
// add a pipeline stage; the paper does not describe the read timing.
module llr_sram #(
  parameter int M     = 64,
  parameter int Q     = 6,
  parameter int DEPTH = 20
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic signed [Q-1:0]       wdata [M],
  input  logic [$clog2(DEPTH)-1:0]  raddr_a,
  input  logic [$clog2(DEPTH)-1:0]  raddr_b,
  output logic signed [Q-1:0]       rdata_a [M],
  output logic signed [Q-1:0]       rdata_b [M]
);
  logic [M*Q-1:0] mem [DEPTH];
  logic [M*Q-1:0] wflat;

  always_comb begin
    for (int j = 0; j < M; j++) wflat[j*Q +: Q] = wdata[j];
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wflat;
  end

  always_comb begin
    for (int j = 0; j < M; j++) begin
      rdata_a[j] = mem[raddr_a][j*Q +: Q];
      rdata_b[j] = mem[raddr_b][j*Q +: Q];
    end
  end
endmodule
