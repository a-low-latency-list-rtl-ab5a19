// lazy_copy: lazy-copy (LC) control of the list-management module.
//
// Turns the survivor list of the pruning step into the copy commands for
// the state memory: new path l continues parent path surv_par[l], and its new
// bit is the parent's hard decision Theta(Lambda) for the even extension or
// its complement for the odd one. parent[] drives the pointer-memory update
// of the LLR memory (no LLR word moves) and the L x L crossbars of the
// partial-sum memory, path memory and CRC registers. moved counts the paths
// whose parent is another path (a real copy), for observation.
// Combinational.
module lazy_copy #(
  parameter int L = 16
) (
  input  logic [$clog2(L)-1:0] surv_par [L],
  input  logic [L-1:0]         surv_odd,
  input  logic [L-1:0]         hd,          // Theta(Lambda_p) of every path p
  output logic [$clog2(L)-1:0] parent   [L],
  output logic [L-1:0]         ubit,
  output logic [$clog2(L):0]   moved
);
  always_comb begin
    moved = '0;
    for (int l = 0; l < L; l++) begin
      parent[l] = surv_par[l];
      ubit[l]   = hd[surv_par[l]] ^ surv_odd[l];
      if (int'(surv_par[l]) != l) moved = moved + 1'b1;
    end
  end
endmodule
