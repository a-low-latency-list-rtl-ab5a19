// pmu: path-metric update (PMU) block of the list-management module.
//
// For the L paths it evaluates, combinationally, every metric update the
// schedule can ask for (the paper's approximated PMU and its combined forms):
//   unreliable leaf : PME = gamma (unchanged, decision Theta(Lambda)),
//                     PMO = gamma + |Lambda| (the L adders of the paper)
//   frozen leaf     : gamma + Theta(Lambda) * |Lambda|   (u = 0)
//   case II couple  : gamma + min(|L0|,|L1|) if Theta(L0) != Theta(L1),
//                     decisions (0, Theta(L0 + L1))
//   case IV couple  : gamma + Theta(L0)|L0| + Theta(L1)|L1|, decisions (0, 0)
//   case I couple   : no update, decisions [Theta(L0), Theta(L1)] F
//                   = (Theta(L0) xor Theta(L1), Theta(L1))
// where Theta(x) = 1 for x < 0, Lambda = y0 (leaf cycles) and L0 = y0,
// L1 = y1 are the two stage-1 LLRs (couple cycles). Metrics are PMW-bit
// unsigned and saturate at all ones; saturation is this design's choice.
module pmu #(
  parameter int L   = 16,
  parameter int Q   = 6,
  parameter int PMW = 8
) (
  input  logic [PMW-1:0]      pm      [L],
  input  logic signed [Q-1:0] y0      [L],
  input  logic signed [Q-1:0] y1      [L],
  output logic [PMW-1:0]      pmo     [L],  // odd extension, unreliable leaf
  output logic [L-1:0]        hd,           // Theta(y0)
  output logic [PMW-1:0]      pm_frz  [L],  // frozen leaf
  output logic [PMW-1:0]      pm_c2   [L],  // case II couple
  output logic [PMW-1:0]      pm_c4   [L],  // case IV couple
  output logic [L-1:0]        u0_c1,        // case I decisions
  output logic [L-1:0]        u1_c1,
  output logic [L-1:0]        u1_c2         // case II decision of bit 2c+1
);
  function automatic logic [PMW-1:0] sat_add(input logic [PMW-1:0] a, input logic [PMW:0] b);
    logic [PMW+1:0] s;
    s = (PMW+2)'(a) + (PMW+2)'(b);
    return (s > (PMW+2)'({PMW{1'b1}})) ? {PMW{1'b1}} : s[PMW-1:0];
  endfunction

  function automatic logic [Q-1:0] mag(input logic signed [Q-1:0] x);
    return x[Q-1] ? Q'(-x) : Q'(x);
  endfunction

  always_comb begin
    logic [Q-1:0]      m0, m1, mmin;
    logic signed [Q:0] s01;
    for (int l = 0; l < L; l++) begin
      m0   = mag(y0[l]);
      m1   = mag(y1[l]);
      mmin = (m0 < m1) ? m0 : m1;
      s01  = (Q+1)'(y0[l]) + (Q+1)'(y1[l]);
      hd[l]     = y0[l][Q-1];
      pmo[l]    = sat_add(pm[l], (PMW+1)'(m0));
      pm_frz[l] = y0[l][Q-1] ? sat_add(pm[l], (PMW+1)'(m0)) : pm[l];
      pm_c2[l]  = (y0[l][Q-1] != y1[l][Q-1]) ? sat_add(pm[l], (PMW+1)'(mmin)) : pm[l];
      pm_c4[l]  = sat_add(pm[l], (PMW+1)'(y0[l][Q-1] ? m0 : '0) + (PMW+1)'(y1[l][Q-1] ? m1 : '0));
      u0_c1[l]  = y0[l][Q-1] ^ y1[l][Q-1];
      u1_c1[l]  = y1[l][Q-1];
      u1_c2[l]  = s01[Q];
    end
  end
endmodule
