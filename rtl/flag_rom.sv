// flag_rom: the 2N-bit bit-kind table of the decoder.
//
// Two bits per source bit say whether it is frozen, a reliable information
// bit or an unreliable information bit (lscd_pkg::bit_kind_e), the 2N bits
// the paper gives the control unit. The paper calls it a ROM; the frozen and
// reliable sets depend on the code and on the chosen degradation bound and are
// computed offline, so here the table is a register array with a write port
// that is loaded before decoding. The read port returns the kinds of the two
// bits of couple c combinationally.
module flag_rom #(
  parameter int N = 1024
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(N)-1:0]       waddr,
  input  lscd_pkg::bit_kind_e        wkind,
  input  logic [$clog2(N)-2:0]       couple,
  output lscd_pkg::bit_kind_e        kind0,
  output lscd_pkg::bit_kind_e        kind1
);
  import lscd_pkg::*;

  bit_kind_e table_q [N];

  always_ff @(posedge clk) begin
    if (we) table_q[waddr] <= wkind;
  end

  assign kind0 = table_q[{couple, 1'b0}];
  assign kind1 = table_q[{couple, 1'b1}];
endmodule
