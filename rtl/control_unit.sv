// control_unit: schedule of the low-latency list decoder.
//
// Walks the scheduling tree depth first, one source-bit couple (u[2c],
// u[2c+1]) at a time, and issues one operation per clock cycle (ctrl_t):
//   1. the nodes of stages s .. 1 above the couple, s = n-1 for c = 0 (all f
//      nodes) and s = ctz(2c) otherwise (a g node at s, f nodes below);
//      a node at stage t takes max(1, 2^t/M) cycles, one word of M
//      functions per cycle (semi-parallel SCD);
//   2. depending on the couple case (kinds of the two bits, flag ROM):
//      cases I, II, IV: nothing more, the couple is decided in the stage-1
//                       node's cycle (ctrl.fuse = 1);
//      otherwise      : LEAF0 (f leaf of bit 2c, with PMU), DTS0 if bit 2c is
//                       unreliable, LEAF1 (g leaf of bit 2c+1, with PMU),
//                       DTS1 if bit 2c+1 is unreliable.
// This gives the paper's latency D = 3N + (N/M) log2(N/4M) minus 4 cycles per
// case I, II, IV couple and 1 per case III, V couple (Tables I and II). The
// decomposition into operations and the FSM itself are this design's own.
//
// Interface: start (one cycle, while idle or done) begins a decoding; busy is
// high for exactly the D_LSCD processing cycles; done is high from the cycle
// after the last one until the next start. info_pos counts the information
// bits decided so far, for the path memory.
module control_unit #(
  parameter int N = 1024,
  parameter int M = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  lscd_pkg::bit_kind_e  kind0,      // kinds of the couple ctrl.couple
  input  lscd_pkg::bit_kind_e  kind1,
  output logic [$clog2(N)-2:0] couple,     // couple whose kinds are wanted
  output lscd_pkg::ctrl_t      ctrl,
  output logic                 busy,
  output logic                 done
);
  import lscd_pkg::*;
  localparam int LOGN = $clog2(N);
  localparam int LOGM = $clog2(M);
  localparam int NC   = N / 2;

  typedef enum logic [2:0] {
    PH_IDLE, PH_NODE, PH_LEAF0, PH_DTS0, PH_LEAF1, PH_DTS1, PH_DONE
  } phase_e;

  phase_e      phase;
  logic [15:0] c_q;
  logic [3:0]  t_q;
  logic [15:0] w_q;
  logic        g_q;
  logic [15:0] pos_q;

  function automatic logic [15:0] words_of(input logic [3:0] t);
    return (int'(t) >= LOGM) ? 16'(1 << (int'(t) - LOGM)) : 16'd1;
  endfunction

  // stage of the first (g) node of couple c > 0: ctz(2c) = 1 + ctz(c)
  function automatic logic [3:0] top_stage(input logic [15:0] c);
    logic [3:0] s;
    logic       hit;
    s   = 4'(LOGN - 1);
    hit = 1'b0;
    for (int b = 0; b < LOGN - 1; b++) begin
      if (!hit && c[b]) begin
        s   = 4'(b + 1);
        hit = 1'b1;
      end
    end
    return s;
  endfunction

  logic fused, last_couple;
  logic [1:0] n_info;

  assign couple      = c_q[LOGN-2:0];
  assign fused       = is_fused(kind0, kind1);
  assign last_couple = (c_q == 16'(NC - 1));

  always_comb begin
    ctrl          = '0;
    ctrl.couple   = c_q;
    ctrl.kind0    = kind0;
    ctrl.kind1    = kind1;
    ctrl.info_pos = pos_q;
    n_info        = 2'd0;
    unique case (phase)
      PH_NODE: begin
        ctrl.op    = OP_NODE;
        ctrl.is_g  = g_q;
        ctrl.stage = t_q;
        ctrl.word  = w_q;
        ctrl.fuse  = (t_q == 4'd1) && fused;
        if (ctrl.fuse)
          n_info = 2'((kind0 != KIND_FROZEN) ? 1 : 0) + 2'((kind1 != KIND_FROZEN) ? 1 : 0);
      end
      PH_LEAF0: begin
        ctrl.op = OP_LEAF0;
        if (kind0 == KIND_RELIABLE) n_info = 2'd1;
      end
      PH_DTS0: begin
        ctrl.op = OP_DTS;
        n_info  = 2'd1;
      end
      PH_LEAF1: begin
        ctrl.op   = OP_LEAF1;
        ctrl.is_g = 1'b1;
        if (kind1 == KIND_RELIABLE) n_info = 2'd1;
      end
      PH_DTS1: begin
        ctrl.op     = OP_DTS;
        ctrl.second = 1'b1;
        n_info      = 2'd1;
      end
      PH_DONE: ctrl.op = OP_DONE;
      default: ctrl.op = OP_IDLE;
    endcase
  end

  assign busy = (phase != PH_IDLE) && (phase != PH_DONE);
  assign done = (phase == PH_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      c_q   <= '0;
      t_q   <= '0;
      w_q   <= '0;
      g_q   <= 1'b0;
      pos_q <= '0;
    end else begin
      pos_q <= pos_q + 16'(n_info);
      unique case (phase)
        PH_IDLE, PH_DONE: begin
          if (start) begin
            phase <= PH_NODE;
            c_q   <= '0;
            t_q   <= 4'(LOGN - 1);
            w_q   <= '0;
            g_q   <= 1'b0;
            pos_q <= '0;
          end
        end
        PH_NODE: begin
          if (w_q + 16'd1 < words_of(t_q)) begin
            w_q <= w_q + 16'd1;
          end else if (t_q > 4'd1) begin
            t_q <= t_q - 4'd1;
            w_q <= '0;
            g_q <= 1'b0;
          end else if (fused) begin
            if (last_couple) phase <= PH_DONE;
            else begin
              c_q <= c_q + 16'd1;
              t_q <= top_stage(c_q + 16'd1);
              w_q <= '0;
              g_q <= 1'b1;
            end
          end else begin
            phase <= PH_LEAF0;
          end
        end
        PH_LEAF0: phase <= (kind0 == KIND_UNRELIABLE) ? PH_DTS0 : PH_LEAF1;
        PH_DTS0:  phase <= PH_LEAF1;
        PH_LEAF1, PH_DTS1: begin
          if (phase == PH_LEAF1 && kind1 == KIND_UNRELIABLE) begin
            phase <= PH_DTS1;
          end else if (last_couple) begin
            phase <= PH_DONE;
          end else begin
            phase <= PH_NODE;
            c_q   <= c_q + 16'd1;
            t_q   <= top_stage(c_q + 16'd1);
            w_q   <= '0;
            g_q   <= 1'b1;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end
endmodule
