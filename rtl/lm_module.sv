// lm_module: list-management (LM) module of the decoder (paper Figs. 6, 7).
//
// Holds the L path metrics and decides every source bit:
//   * PMU (pmu): in a leaf cycle of an unreliable bit the odd extensions
//     gamma_l + |Lambda_l| and the hard decisions are computed with the leaf
//     node and registered; frozen and reliable leaves and the combined
//     case II / IV couple updates are applied directly;
//   * TTA (tta): sorts the current metrics every cycle into a partial order
//     and RT; the result is registered, so it is ready, one cycle later, for
//     the pruning cycle and stays off the critical path, as the paper intends;
//   * DTS (dts) and LC (lazy_copy): in the pruning cycle choose the L
//     survivors and emit parent pointers and new bits, in one cycle.
// The decisions go out on the commit interface to the partial-sum memory,
// path memory and CRC unit, and parent[] also to the pointer memory.
//
// Start state: path 0 has metric 0 and paths 1 .. L-1 the largest metric, so
// the list fills up through ordinary pruning while it holds fewer than L real
// paths (the paper assumes a full list and does not describe the fill-up).
// Inputs y0/y1 are PE outputs 0 and 1 of every SCD: the leaf LLR in leaf
// cycles, the two stage-1 LLRs in couple (fused) cycles.
module lm_module #(
  parameter int L      = 16,
  parameter int Q      = 6,
  parameter int PMW    = 8,
  parameter int RT_IDX = 3 * L / 4 - 1
) (
  input  logic                  clk,
  input  logic                  start,
  input  lscd_pkg::ctrl_t       ctrl,
  input  logic signed [Q-1:0]   y0 [L],
  input  logic signed [Q-1:0]   y1 [L],
  commit_if.src                 cm,
  output logic [PMW-1:0]        pm [L],
  output logic                  dts_fire,    // a pruning step happens this cycle
  output logic [$clog2(L):0]    dts_k,       // its PMO count k
  output logic [$clog2(L):0]    lc_moved     // its number of copied paths
);
  import lscd_pkg::*;
  localparam int LW = $clog2(L);

  // ------------------------------------------------------------ PMU
  logic [PMW-1:0] pmo [L], pm_frz [L], pm_c2 [L], pm_c4 [L];
  logic [L-1:0]   hd, u0_c1, u1_c1, u1_c2;

  pmu #(.L(L), .Q(Q), .PMW(PMW)) u_pmu (
    .pm (pm), .y0 (y0), .y1 (y1), .pmo (pmo), .hd (hd), .pm_frz (pm_frz),
    .pm_c2 (pm_c2), .pm_c4 (pm_c4), .u0_c1 (u0_c1), .u1_c1 (u1_c1), .u1_c2 (u1_c2));

  logic [PMW-1:0] pmo_r [L];
  logic [L-1:0]   hd_r;

  // ------------------------------------------------------------ TTA
  logic [LW-1:0]  ord_idx [L], ord_idx_r [L];
  logic [PMW-1:0] ord_val [L];
  logic [PMW-1:0] at, rt, rt_r;

  tta #(.L(L), .PMW(PMW), .RT_IDX(RT_IDX)) u_tta (
    .pm (pm), .ord_idx (ord_idx), .ord_val (ord_val), .at (at), .rt (rt));

  // ------------------------------------------------------------ DTS + LC
  logic [LW-1:0]  surv_par [L];
  logic [L-1:0]   surv_odd;
  logic [PMW-1:0] pm_new [L];
  logic [LW-1:0]  parent [L];
  logic [L-1:0]   ubit;

  dts #(.L(L), .PMW(PMW)) u_dts (
    .pm (pm), .pmo (pmo_r), .ord_idx (ord_idx_r), .rt (rt_r),
    .surv_par (surv_par), .surv_odd (surv_odd), .pm_new (pm_new), .k_count (dts_k));

  lazy_copy #(.L(L)) u_lc (
    .surv_par (surv_par), .surv_odd (surv_odd), .hd (hd_r),
    .parent (parent), .ubit (ubit), .moved (lc_moved));

  assign dts_fire = (ctrl.op == OP_DTS);

  // ------------------------------------------------------------ decisions
  logic [PMW-1:0] pm_nxt [L];
  couple_case_e   ccase;

  always_comb begin
    bit_kind_e k;
    k         = (ctrl.op == OP_LEAF0) ? ctrl.kind0 : ctrl.kind1;
    ccase     = classify(ctrl.kind0, ctrl.kind1);
    pm_nxt    = pm;
    cm.en     = 1'b0;
    cm.lc     = 1'b0;
    cm.mode   = CM_EVEN;
    cm.couple = ctrl.couple;
    cm.pos    = ctrl.info_pos;
    cm.info0  = 1'b0;
    cm.info1  = 1'b0;
    cm.u0     = '0;
    cm.u1     = '0;
    for (int l = 0; l < L; l++) cm.parent[l] = LW'(l);
    unique case (ctrl.op)
      OP_NODE: if (ctrl.fuse) begin
        cm.en    = 1'b1;
        cm.mode  = CM_PAIR;
        cm.info0 = (ctrl.kind0 != KIND_FROZEN);
        cm.info1 = (ctrl.kind1 != KIND_FROZEN);
        if (ccase == CASE_I) begin
          cm.u0 = u0_c1;
          cm.u1 = u1_c1;
        end else if (ccase == CASE_II) begin
          cm.u1  = u1_c2;
          pm_nxt = pm_c2;
        end else begin
          pm_nxt = pm_c4;
        end
      end
      OP_LEAF0, OP_LEAF1: begin
        cm.mode  = (ctrl.op == OP_LEAF0) ? CM_EVEN : CM_ODD;
        cm.en    = (k != KIND_UNRELIABLE);
        cm.info0 = (k == KIND_RELIABLE);
        cm.info1 = (k == KIND_RELIABLE);
        if (k == KIND_RELIABLE) begin
          cm.u0 = hd;
          cm.u1 = hd;
        end else if (k == KIND_FROZEN) begin
          pm_nxt = pm_frz;
        end
      end
      OP_DTS: begin
        cm.en     = 1'b1;
        cm.lc     = 1'b1;
        cm.mode   = ctrl.second ? CM_ODD : CM_EVEN;
        cm.info0  = 1'b1;
        cm.info1  = 1'b1;
        cm.u0     = ubit;
        cm.u1     = ubit;
        cm.parent = parent;
        pm_nxt    = pm_new;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int l = 0; l < L; l++) pm[l] <= (l == 0) ? '0 : '1;
    end else begin
      pm <= pm_nxt;
    end
    if (ctrl.op == OP_LEAF0 || ctrl.op == OP_LEAF1) begin
      pmo_r <= pmo;
      hd_r  <= hd;
    end
    ord_idx_r <= ord_idx;
    rt_r      <= rt;
  end
endmodule
