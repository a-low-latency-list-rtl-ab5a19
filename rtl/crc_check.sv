// crc_check: CRC check unit, one bit-serial CRC register per path.
//
// Each path's information bits enter its CRC register in decoding order as
// they are decided (one bit per step; a couple of two reliable information
// bits takes two chained steps in one cycle), so the check is finished when
// the last bit is decided and adds no latency, as the paper states. The
// register is shifted MSB first with zero initial value:
//   crc <= {crc[R-2:0], 1'b0} ^ ((crc[R-1] ^ bit) ? POLY : 0)
// so a path whose K bits are the message followed by its R-bit CRC ends
// with crc == 0. With lc = 1 a path first takes its parent's register.
// The output choice, the path with the smallest metric among those that pass
// (or the smallest metric overall if none passes), is this design's rule:
// the paper only says the candidate passing the check is output. The
// polynomial (CRC-16-CCITT, 0x1021) is not given in the paper.
module crc_check #(
  parameter int          L    = 16,
  parameter int          R    = 16,
  parameter int          PMW  = 8,
  parameter logic [R-1:0] POLY = 16'h1021
) (
  input  logic                  clk,
  input  logic                  start,
  commit_if.dst                 cm,
  input  logic [PMW-1:0]        pm [L],
  output logic [L-1:0]          pass,
  output logic [$clog2(L)-1:0]  sel,
  output logic                  sel_pass
);
  import lscd_pkg::*;

  logic [R-1:0] crc     [L];
  logic [R-1:0] crc_nxt [L];

  function automatic logic [R-1:0] step(input logic [R-1:0] c, input logic b);
    return {c[R-2:0], 1'b0} ^ ((c[R-1] ^ b) ? POLY : '0);
  endfunction

  always_comb begin
    logic [R-1:0] c;
    for (int l = 0; l < L; l++) begin
      c = cm.lc ? crc[cm.parent[l]] : crc[l];
      if (cm.mode != CM_ODD  && cm.info0) c = step(c, cm.u0[l]);
      if (cm.mode != CM_EVEN && cm.info1) c = step(c, cm.u1[l]);
      crc_nxt[l] = c;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int l = 0; l < L; l++) crc[l] <= '0;
    end else if (cm.en) begin
      crc <= crc_nxt;
    end
  end

  always_comb begin
    logic [PMW-1:0] best;
    logic           found;
    for (int l = 0; l < L; l++) pass[l] = (crc[l] == '0);
    sel   = '0;
    best  = '1;
    found = 1'b0;
    for (int l = 0; l < L; l++) begin
      if (pass[l] && (!found || pm[l] < best)) begin
        sel = $clog2(L)'(l); best = pm[l]; found = 1'b1;
      end
    end
    if (!found) begin
      best = pm[0];
      sel  = '0;
      for (int l = 1; l < L; l++) begin
        if (pm[l] < best) begin
          sel = $clog2(L)'(l); best = pm[l];
        end
      end
    end
    sel_pass = found;
  end
endmodule
