// lscd_top: low-latency list successive-cancellation decoder for polar codes.
//
// Decodes one length-N polar codeword with a list of L paths, combining
// selective expansion (reliable information bits are decided by hard
// decision and never expanded) with double-thresholding list pruning. The
// blocks and their connections follow the paper's top-level architecture:
//   control_unit + flag_rom   : schedule, 2 bits per source bit
//   scd_module                : L semi-parallel SCDs with M PEs each
//   llr_memory                : channel + intermediate LLRs, pointer memory,
//                               L x L crossbar (lazy copy)
//   partial_sum_memory        : per-path partial sums, L x L crossbar
//   path_memory               : per-path K information bits, L x L crossbar
//   lm_module                 : path metrics, PMU, TTA, DTS, LC
//   crc_check                 : per-path bit-serial CRC and output choice
//
// Use: write the kind of every source bit (flag_we/flag_addr/flag_kind),
// write the N channel LLRs, M per cycle, word w holding LLRs wM .. wM+M-1
// (chan_we/chan_addr/chan_data; Q-bit two's complement, positive favours 0,
// magnitude at most 2^(Q-1)-1), then pulse start. busy is high for the
// D_LSCD decoding cycles; then done rises and dec_bits holds the K decoded
// information bits (bit 0 first decided) of the chosen path, crc_ok whether
// it passed the CRC. Loading and the result interface are this design's own.
module lscd_top #(
  parameter int N   = 1024,
  parameter int K   = 528,
  parameter int L   = 16,
  parameter int M   = 64,
  parameter int Q   = 6,
  parameter int PMW = 8,
  parameter int R   = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flag_we,
  input  logic [$clog2(N)-1:0]       flag_addr,
  input  lscd_pkg::bit_kind_e        flag_kind,
  input  logic                       chan_we,
  input  logic [$clog2(N/M)-1:0]     chan_addr,
  input  logic signed [Q-1:0]        chan_data [M],
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic [K-1:0]               dec_bits,
  output logic                       crc_ok
);
  import lscd_pkg::*;
  localparam int LOGN = $clog2(N);

  ctrl_t               ctrl;
  logic [LOGN-2:0]     couple;
  bit_kind_e           kind0, kind1;
  logic                go;

  assign go = start && !busy;

  control_unit #(.N(N), .M(M)) u_ctrl (
    .clk (clk), .rst_n (rst_n), .start (start), .kind0 (kind0), .kind1 (kind1),
    .couple (couple), .ctrl (ctrl), .busy (busy), .done (done));

  flag_rom #(.N(N)) u_flags (
    .clk (clk), .we (flag_we), .waddr (flag_addr), .wkind (flag_kind),
    .couple (couple), .kind0 (kind0), .kind1 (kind1));

  // ------------------------------------------------------------ SCDs and LLR memory
  logic signed [Q-1:0] rd_a [L][M];
  logic signed [Q-1:0] rd_b [L][M];
  logic signed [Q-1:0] pe_y [L][M];
  logic [M-1:0]        ps   [L];
  logic signed [Q-1:0] y0   [L];
  logic signed [Q-1:0] y1   [L];

  commit_if #(.L(L)) cm ();

  llr_memory #(.N(N), .L(L), .M(M), .Q(Q)) u_llr (
    .clk (clk), .start (go),
    .chan_we (chan_we), .chan_addr (chan_addr), .chan_data (chan_data),
    .node_stage (ctrl.stage), .node_word (ctrl.word),
    .wr_en (ctrl.op == OP_NODE), .wr_data (pe_y),
    .lc_en (cm.en && cm.lc), .parent (cm.parent),
    .rd_a (rd_a), .rd_b (rd_b));

  partial_sum_memory #(.N(N), .L(L), .M(M)) u_ps (
    .clk (clk), .start (go), .cm (cm),
    .rd_stage (ctrl.stage), .rd_word (ctrl.word), .rd_ps (ps));

  scd_module #(.L(L), .M(M), .Q(Q)) u_scd (
    .is_g (ctrl.is_g), .stage (ctrl.stage), .rd_a (rd_a), .rd_b (rd_b),
    .ps (ps), .y (pe_y));

  always_comb begin
    for (int l = 0; l < L; l++) begin
      y0[l] = pe_y[l][0];
      y1[l] = pe_y[l][1];
    end
  end

  // ------------------------------------------------------------ list management
  logic [PMW-1:0]       pm [L];
  logic                 dts_fire;
  logic [$clog2(L):0]   dts_k, lc_moved;

  lm_module #(.L(L), .Q(Q), .PMW(PMW)) u_lm (
    .clk (clk), .start (go), .ctrl (ctrl), .y0 (y0), .y1 (y1), .cm (cm),
    .pm (pm), .dts_fire (dts_fire), .dts_k (dts_k), .lc_moved (lc_moved));

  // ------------------------------------------------------------ paths and CRC
  logic [$clog2(L)-1:0] sel;
  logic [L-1:0]         pass;

  path_memory #(.K(K), .L(L)) u_path (
    .clk (clk), .start (go), .cm (cm), .sel (sel), .rd_bits (dec_bits));

  crc_check #(.L(L), .R(R), .PMW(PMW)) u_crc (
    .clk (clk), .start (go), .cm (cm), .pm (pm),
    .pass (pass), .sel (sel), .sel_pass (crc_ok));
endmodule
