// radix_sorter: exact parallel sorter of NS path metrics.
//
// Sorts NS (value, tag) pairs into ascending order of value in one
// combinational step: every pair of inputs is compared at once, the rank of
// input i is the number of inputs that are smaller (ties broken by input
// position), and input i is routed to output rank(i). The paper uses a
// "radix-L/2 sorter" from earlier work without describing it; this
// all-pairs-compare-and-rank structure is the one chosen here.
module radix_sorter #(
  parameter int NS  = 8,
  parameter int PMW = 8,
  parameter int TW  = 4
) (
  input  logic [PMW-1:0] in_val [NS],
  input  logic [TW-1:0]  in_tag [NS],
  output logic [PMW-1:0] out_val [NS],
  output logic [TW-1:0]  out_tag [NS]
);
  localparam int RW = $clog2(NS) + 1;

  logic [RW-1:0] rank [NS];

  always_comb begin
    for (int i = 0; i < NS; i++) begin
      rank[i] = '0;
      for (int j = 0; j < NS; j++) begin
        if (in_val[j] < in_val[i] || (in_val[j] == in_val[i] && j < i))
          rank[i] = rank[i] + RW'(1);
      end
    end
    for (int r = 0; r < NS; r++) begin
      out_val[r] = '0;
      out_tag[r] = '0;
      for (int i = 0; i < NS; i++) begin
        if (int'(rank[i]) == r) begin
          out_val[r] = in_val[i];
          out_tag[r] = in_tag[i];
        end
      end
    end
  end
endmodule
