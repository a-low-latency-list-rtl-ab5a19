// dts: double-thresholding list pruning (the paper's DTS-Advance, Fig. 9).
//
// Chooses L survivors among the 2L extensions of the L paths without a full
// sort. Inputs: the current metrics gamma_l (the even extensions, PME), the
// odd extensions gamma_l + |Lambda_l| (PMO), the partial order of the paths
// from the threshold-tracking architecture and its rejection threshold RT.
//   1. Two permutation networks put PME and PMO into the TTA order:
//      pme_p[r] = gamma[ord[r]], pmo_p[r] = PMO[ord[r]].
//   2. pme_p[0 .. L/2-1] lie below AT and always survive (slots 0 .. L/2-1).
//   3. pme_p[L/2 .. L-1] are accepted for now. L comparators flag the PMO
//      elements with pmo_p[r] <= RT, and an accumulator counts them (k).
//   4. The MUX array replaces the last kk = min(k, L/2) of pme_p[L/2 .. L-1]
//      (the largest, since that half is exactly sorted) by the first kk
//      flagged PMO elements, in order.
// Survivor slot l is then described by its parent path surv_par[l], whether it
// is the odd (complemented-decision) extension surv_odd[l], and its metric
// pm_new[l]. Combinational. The assignment of the kk PMO elements to the
// replaced slots, in order, is this design's choice.
module dts #(
  parameter int L   = 16,
  parameter int PMW = 8
) (
  input  logic [PMW-1:0]        pm       [L],
  input  logic [PMW-1:0]        pmo      [L],
  input  logic [$clog2(L)-1:0]  ord_idx  [L],
  input  logic [PMW-1:0]        rt,
  output logic [$clog2(L)-1:0]  surv_par [L],
  output logic [L-1:0]          surv_odd,
  output logic [PMW-1:0]        pm_new   [L],
  output logic [$clog2(L):0]    k_count
);
  localparam int H  = L / 2;
  localparam int CW = $clog2(L) + 1;

  logic [PMW-1:0] pme_p [L];
  logic [PMW-1:0] pmo_p [L];
  logic [L-1:0]   flag;
  logic [CW-1:0]  n_ahead [L];   // flagged PMO elements ahead of position r
  logic [CW-1:0]  kk;

  // permutation networks and comparators
  always_comb begin
    for (int r = 0; r < L; r++) begin
      pme_p[r] = pm[ord_idx[r]];
      pmo_p[r] = pmo[ord_idx[r]];
      flag[r]  = (pmo_p[r] <= rt);
    end
  end

  // accumulator (prefix counts of the flags, n_ahead)
  always_comb begin
    logic [CW-1:0] acc;
    acc = '0;
    for (int r = 0; r < L; r++) begin
      n_ahead[r] = acc;
      acc       = acc + CW'(flag[r]);
    end
    k_count = acc;
    kk      = (acc > CW'(H)) ? CW'(H) : acc;
  end

  // MUX array
  always_comb begin
    for (int l = 0; l < L; l++) begin
      surv_par[l] = ord_idx[l];
      surv_odd[l] = 1'b0;
      pm_new[l]   = pme_p[l];
      if (l >= H && l >= L - int'(kk)) begin
        // slot takes the q-th flagged PMO element
        for (int r = 0; r < L; r++) begin
          if (flag[r] && int'(n_ahead[r]) == l - (L - int'(kk))) begin
            surv_par[l] = ord_idx[r];
            surv_odd[l] = 1'b1;
            pm_new[l]   = pmo_p[r];
          end
        end
      end
    end
  end
endmodule
