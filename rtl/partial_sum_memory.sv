// partial_sum_memory: partial-sum registers of the L paths.
//
// For every path the memory keeps, for each stage t = 0 .. n-1, the 2^t-bit
// re-encoded codeword of the most recent completed left subtree at that
// stage (s = u~ F^{(x)t}, the paper's partial-sum equation), i.e. the s_j the
// g nodes at stage t need. Storage is sum 2^t = N-1 bits per path; the paper
// quotes N/2 bits, with a partial-sum network whose inside it takes from
// earlier work, so this layout is this design's own.
//
// Update, when the bit(s) of couple c are committed (commit_if):
//   bit 2c alone    : s[0] = u0
//   bit 2c+1 / pair : x = [s[0]^u1, u1] or [u0^u1, u1] at stage 1, then for
//                     t = 1, 2, ... while bit t of 2c+1 is 1 the subtree is a
//                     right child: x = [s[t] ^ x, x]; at the first t whose bit
//                     is 0 the subtree is a left child and s[t] = x.
// With lc = 1, path l first takes the partial sums of parent[l] (the paper's
// L x L partial-sum crossbar). The read port returns the M partial sums of
// word q of a g node at stage t. Reads are combinational, updates clocked.
module partial_sum_memory #(
  parameter int N = 1024,
  parameter int L = 16,
  parameter int M = 64
) (
  input  logic          clk,
  input  logic          start,
  commit_if.dst         cm,
  input  logic [3:0]    rd_stage,
  input  logic [15:0]   rd_word,
  output logic [M-1:0]  rd_ps [L]
);
  import lscd_pkg::*;
  localparam int LOGN = $clog2(N);

  logic [N-2:0] ps     [L];
  logic [N-2:0] ps_nxt [L];

  always_comb begin
    logic [N-2:0] src;
    logic [N-1:0] cur;
    logic         stop;
    logic [15:0]  idx;
    for (int l = 0; l < L; l++) begin
      src  = cm.lc ? ps[cm.parent[l]] : ps[l];
      idx  = {cm.couple[14:0], 1'b1};
      cur  = '0;
      stop = 1'b0;
      if (cm.mode == CM_EVEN) begin
        src[0] = cm.u0[l];
      end else begin
        cur[0] = (cm.mode == CM_PAIR) ? (cm.u0[l] ^ cm.u1[l]) : (src[0] ^ cm.u1[l]);
        cur[1] = cm.u1[l];
        for (int t = 1; t < LOGN; t++) begin
          if (!stop) begin
            if (!idx[t]) begin
              for (int j = 0; j < (1 << t); j++) src[(1 << t) - 1 + j] = cur[j];
              stop = 1'b1;
            end else begin
              for (int j = 0; j < (1 << t); j++) begin
                cur[j + (1 << t)] = cur[j];
                cur[j]            = cur[j] ^ src[(1 << t) - 1 + j];
              end
            end
          end
        end
      end
      ps_nxt[l] = src;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int l = 0; l < L; l++) ps[l] <= '0;
    end else if (cm.en) begin
      ps <= ps_nxt;
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++) begin
      for (int j = 0; j < M; j++) begin
        if (int'(rd_word) * M + j < (1 << rd_stage))
          rd_ps[l][j] = ps[l][(1 << rd_stage) - 1 + int'(rd_word) * M + j];
        else
          rd_ps[l][j] = 1'b0;
      end
    end
  end
endmodule
