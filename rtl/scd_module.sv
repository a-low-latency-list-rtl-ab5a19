// scd_module: the L semi-parallel SCDs of the list decoder.
//
// L copies of scd_core run in lockstep on the same node (same stage, word and
// f/g type), each on the operands of its own decoding path, as the paper's
// SCD module does. Path l receives its operand words through the LLR-memory
// crossbar and its partial sums from the partial-sum memory. Combinational.
module scd_module #(
  parameter int L = 16,
  parameter int M = 64,
  parameter int Q = 6
) (
  input  logic                is_g,
  input  logic [3:0]          stage,
  input  logic signed [Q-1:0] rd_a [L][M],
  input  logic signed [Q-1:0] rd_b [L][M],
  input  logic [M-1:0]        ps   [L],
  output logic signed [Q-1:0] y    [L][M]
);
  for (genvar l = 0; l < L; l++) begin : g_scd
    scd_core #(.M(M), .Q(Q)) u_scd (
      .is_g  (is_g),
      .stage (stage),
      .rd_a  (rd_a[l]),
      .rd_b  (rd_b[l]),
      .ps    (ps[l]),
      .y     (y[l])
    );
  end
endmodule
