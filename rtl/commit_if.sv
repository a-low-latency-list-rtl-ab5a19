// commit_if: decision bundle from the list-management module to the three
// per-path state stores (partial-sum memory, path memory, CRC check unit).
//
// In a cycle with en = 1 every path l first optionally takes over the state
// of path parent[l] (lc = 1, list pruning with copy through the L x L
// crossbars), then appends its decided bit(s): u0[l] for bit 2c and/or u1[l]
// for bit 2c+1, as selected by mode. info0 / info1 tell whether those bits are
// information bits (stored in the path memory and fed to the CRC); pos is the
// number of information bits decided before them.
interface commit_if #(
  parameter int L = 16
);
  import lscd_pkg::*;

  logic                 en;
  logic                 lc;
  commit_mode_e         mode;
  logic [15:0]          couple;
  logic                 info0;
  logic                 info1;
  logic [15:0]          pos;
  logic [$clog2(L)-1:0] parent [L];
  logic [L-1:0]         u0;
  logic [L-1:0]         u1;

  modport src (output en, lc, mode, couple, info0, info1, pos, parent, u0, u1);
  modport dst (input  en, lc, mode, couple, info0, info1, pos, parent, u0, u1);
endinterface
