// path_memory: the K decided information bits of each of the L paths.
//
// Registers organised as L rows of K bits, the size the paper gives
// (frozen bits are known and not stored). A commit (commit_if) writes the
// information bit(s) of the current couple at positions pos and pos+1;
// with lc = 1 row l is first replaced by row parent[l] through the L x L
// crossbar. Row sel is read out combinationally as the decoded word. Writes
// are clocked; start clears all rows.
module path_memory #(
  parameter int K = 528,
  parameter int L = 16
) (
  input  logic                  clk,
  input  logic                  start,
  commit_if.dst                 cm,
  input  logic [$clog2(L)-1:0]  sel,
  output logic [K-1:0]          rd_bits
);
  import lscd_pkg::*;

  logic [K-1:0] row     [L];
  logic [K-1:0] row_nxt [L];

  always_comb begin
    logic [K-1:0] r;
    int           p;
    for (int l = 0; l < L; l++) begin
      r = cm.lc ? row[cm.parent[l]] : row[l];
      p = int'(cm.pos);
      if (cm.mode != CM_ODD && cm.info0) begin
        if (p < K) r[p] = cm.u0[l];
        p = p + 1;
      end
      if (cm.mode != CM_EVEN && cm.info1) begin
        if (p < K) r[p] = cm.u1[l];
      end
      row_nxt[l] = r;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int l = 0; l < L; l++) row[l] <= '0;
    end else if (cm.en) begin
      row <= row_nxt;
    end
  end

  assign rd_bits = row[sel];
endmodule
