// tta: threshold-tracking architecture of the list-management module.
//
// From the L surviving path metrics it produces a partial order of the paths
// and the two thresholds of the double thresholding scheme, as in the paper:
//   1. the metrics of paths 0 .. L/2-1 and of paths L/2 .. L-1 are each
//      sorted by a radix-L/2 sorter, giving d0[0..L/2-1] and d1[0..L/2-1];
//   2. L/2 compare-and-swap elements take (d0[j], d1[L/2-1-j]); the smaller
//      goes to upper output j, the larger to lower output L/2-1-j, so every
//      upper output is <= every lower output;
//   3. a third radix-L/2 sorter sorts the lower half exactly.
// Outputs: ord_idx[r] is the path at position r of this order and ord_val[r]
// its metric; AT = ord_val[L/2] and RT = ord_val[RT_IDX] (the paper's
// implementation uses gamma_11 for L = 16). Combinational; ties in a C&S
// keep the upper value on top (this design's choice).
module tta #(
  parameter int L      = 16,
  parameter int PMW    = 8,
  parameter int RT_IDX = 3 * L / 4 - 1
) (
  input  logic [PMW-1:0]          pm      [L],
  output logic [$clog2(L)-1:0]    ord_idx [L],
  output logic [PMW-1:0]          ord_val [L],
  output logic [PMW-1:0]          at,
  output logic [PMW-1:0]          rt
);
  localparam int H  = L / 2;
  localparam int TW = $clog2(L);

  logic [PMW-1:0] g0_v [H], g1_v [H], d0_v [H], d1_v [H], lo_v [H], so_v [H], up_v [H];
  logic [TW-1:0]  g0_t [H], g1_t [H], d0_t [H], d1_t [H], lo_t [H], so_t [H], up_t [H];

  always_comb begin
    for (int j = 0; j < H; j++) begin
      g0_v[j] = pm[j];
      g0_t[j] = TW'(j);
      g1_v[j] = pm[j + H];
      g1_t[j] = TW'(j + H);
    end
  end

  radix_sorter #(.NS(H), .PMW(PMW), .TW(TW)) u_sort0 (
    .in_val (g0_v), .in_tag (g0_t), .out_val (d0_v), .out_tag (d0_t));
  radix_sorter #(.NS(H), .PMW(PMW), .TW(TW)) u_sort1 (
    .in_val (g1_v), .in_tag (g1_t), .out_val (d1_v), .out_tag (d1_t));

  // compare-and-swap array
  always_comb begin
    for (int j = 0; j < H; j++) begin
      if (d0_v[j] <= d1_v[H-1-j]) begin
        up_v[j]        = d0_v[j];      up_t[j]        = d0_t[j];
        lo_v[H-1-j]    = d1_v[H-1-j];  lo_t[H-1-j]    = d1_t[H-1-j];
      end else begin
        up_v[j]        = d1_v[H-1-j];  up_t[j]        = d1_t[H-1-j];
        lo_v[H-1-j]    = d0_v[j];      lo_t[H-1-j]    = d0_t[j];
      end
    end
  end

  always_comb begin
    for (int j = 0; j < H; j++) begin
      ord_val[j]     = up_v[j];
      ord_idx[j]     = up_t[j];
      ord_val[H + j] = so_v[j];
      ord_idx[H + j] = so_t[j];
    end
  end

  radix_sorter #(.NS(H), .PMW(PMW), .TW(TW)) u_sort2 (
    .in_val (lo_v), .in_tag (lo_t), .out_val (so_v), .out_tag (so_t));

  assign at = ord_val[H];
  assign rt = ord_val[RT_IDX];
endmodule
