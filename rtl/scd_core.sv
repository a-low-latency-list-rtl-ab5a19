// scd_core: one semi-parallel successive-cancellation decoder (SCD).
//
// Holds the M processing elements of one decoding path. In each cycle it
// evaluates one word (up to M functions) of a scheduling-tree node at output
// stage t, reading the stage t+1 operands delivered by the LLR-memory crossbar:
//   2^t >= M: operand word A holds L[qM .. qM+M-1] and word B holds
//             L[qM+2^t .. qM+2^t+M-1]; PE j uses (A[j], B[j]).
//   2^t <  M: the whole stage t+1 (2^(t+1) <= M values) sits in word A and
//             PE j (j < 2^t) uses (A[j], A[j + 2^t]); the other PEs are idle
//             and output 0.
// The leaf nodes (t = 0) use PE 0. Combinational; the paper gives the PE count
// and the f/g functions, the operand alignment is this design's choice.
module scd_core #(
  parameter int M = 64,
  parameter int Q = 6
) (
  input  logic                    is_g,
  input  logic [3:0]              stage,
  input  logic signed [Q-1:0]     rd_a [M],   // operand word A
  input  logic signed [Q-1:0]     rd_b [M],   // operand word B
  input  logic [M-1:0]            ps,         // partial sums of this word
  output logic signed [Q-1:0]     y    [M]    // node outputs
);
  localparam int LOGM = $clog2(M);

  logic signed [Q-1:0] op_a [M];
  logic signed [Q-1:0] op_b [M];

  always_comb begin
    for (int j = 0; j < M; j++) begin
      op_a[j] = rd_a[j];
      op_b[j] = '0;
      if (int'(stage) >= LOGM) begin
        op_b[j] = rd_b[j];
      end else begin
        if (j < (1 << stage)) begin
          op_b[j] = rd_a[j + (1 << stage)];
        end else begin
          op_a[j] = '0;
        end
      end
    end
  end

  for (genvar j = 0; j < M; j++) begin : g_pe
    llr_pe #(.Q(Q)) u_pe (
      .is_g (is_g),
      .s    (ps[j]),
      .a    (op_a[j]),
      .b    (op_b[j]),
      .y    (y[j])
    );
  end
endmodule
