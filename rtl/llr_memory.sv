// llr_memory: LLR memory of the state memory module, with lazy copy.
//
// Holds the channel LLRs (stage n, N values, shared by all paths) and, per
// path l, one bank (llr_sram) with the intermediate LLRs of stages n-1 .. 1.
// Stage t occupies max(1, 2^t/M) words of M LLRs; stages below log2(M) use
// one partly filled word. Stage 0 (the leaf LLR) is consumed directly and not
// stored.
//
// Lazy copy: a pointer memory ptr[l][t] (L x (n-1) entries of log2(L) bits,
// the size the paper gives) names the bank that holds path l's stage-t LLRs.
// All paths compute a node in lockstep and path l always writes its own bank
// l, setting ptr[l][t] = l. After list pruning, a surviving path l that
// descends from parent p takes over p's pointers (ptr[l][*] <= ptr[p][*]),
// so no LLR word moves. The L x L read crossbar then sends to SCD l the two
// operand words (2MQ bits) of the stage it reads from bank ptr[l][t+1], or
// from the channel memory when t+1 = n.
//
// Timing: reads are combinational, writes and pointer updates take effect at
// the clock edge. start resets ptr[l][t] = l. The channel memory is written
// through a load port, one word of M LLRs per cycle, before decoding starts
// (the paper does not describe the input interface).
module llr_memory #(
  parameter int N = 1024,
  parameter int L = 16,
  parameter int M = 64,
  parameter int Q = 6
) (
  input  logic                      clk,
  input  logic                      start,
  // channel LLR load port
  input  logic                      chan_we,
  input  logic [$clog2(N/M)-1:0]    chan_addr,
  input  logic signed [Q-1:0]       chan_data [M],
  // node being computed: output stage t and word q
  input  logic [3:0]                node_stage,
  input  logic [15:0]               node_word,
  input  logic                      wr_en,       // store the node outputs (t >= 1)
  input  logic signed [Q-1:0]       wr_data [L][M],
  // lazy copy
  input  logic                      lc_en,
  input  logic [$clog2(L)-1:0]      parent [L],
  // operands for the L SCDs
  output logic signed [Q-1:0]       rd_a [L][M],
  output logic signed [Q-1:0]       rd_b [L][M]
);
  localparam int LOGN  = $clog2(N);
  localparam int LOGM  = $clog2(M);
  localparam int LW    = $clog2(L);
  localparam int CHW   = N / M;

  function automatic int words_of(input int t);
    return ((1 << t) >= M) ? ((1 << t) / M) : 1;
  endfunction

  function automatic int offset_of(input int t);
    int o;
    o = 0;
    for (int s = 1; s < LOGN; s++) if (s < t) o += words_of(s);
    return o;
  endfunction

  localparam int DEPTH = offset_of(LOGN);
  localparam int AW    = $clog2(DEPTH);

  // ---------------------------------------------------------------- pointers
  logic [LW-1:0] ptr [L][LOGN-1];   // entry t-1 holds the pointer of stage t

  always_ff @(posedge clk) begin
    if (start) begin
      for (int l = 0; l < L; l++)
        for (int t = 0; t < LOGN - 1; t++) ptr[l][t] <= LW'(l);
    end else if (lc_en) begin
      for (int l = 0; l < L; l++)
        for (int t = 0; t < LOGN - 1; t++) ptr[l][t] <= ptr[parent[l]][t];
    end else if (wr_en && node_stage != 0) begin
      for (int l = 0; l < L; l++) ptr[l][int'(node_stage) - 1] <= LW'(l);
    end
  end

  // ---------------------------------------------------------------- addresses
  logic [4:0]  rd_stage;
  logic [15:0] word_a, word_b;
  logic [AW-1:0] bank_ra, bank_rb, bank_wa;

  always_comb begin
    rd_stage = 5'(node_stage) + 5'd1;
    if (int'(node_stage) >= LOGM) begin
      word_a = node_word;
      word_b = node_word + 16'(words_of(int'(node_stage)));
    end else begin
      word_a = '0;
      word_b = '0;
    end
    bank_ra = AW'(offset_of(int'(rd_stage)) + int'(word_a));
    bank_rb = AW'(offset_of(int'(rd_stage)) + int'(word_b));
    bank_wa = AW'(offset_of(int'(node_stage)) + int'(node_word));
  end

  // ---------------------------------------------------------------- channel memory
  logic [M*Q-1:0] chan_mem [CHW];
  logic [M*Q-1:0] chan_flat;
  logic signed [Q-1:0] ch_a [M];
  logic signed [Q-1:0] ch_b [M];

  always_comb begin
    for (int j = 0; j < M; j++) chan_flat[j*Q +: Q] = chan_data[j];
  end

  always_ff @(posedge clk) begin
    if (chan_we) chan_mem[chan_addr] <= chan_flat;
  end

  always_comb begin
    for (int j = 0; j < M; j++) begin
      ch_a[j] = chan_mem[word_a[$clog2(CHW)-1:0]][j*Q +: Q];
      ch_b[j] = chan_mem[word_b[$clog2(CHW)-1:0]][j*Q +: Q];
    end
  end

  // ---------------------------------------------------------------- banks
  logic signed [Q-1:0] bk_a [L][M];
  logic signed [Q-1:0] bk_b [L][M];

  for (genvar l = 0; l < L; l++) begin : g_bank
    llr_sram #(.M(M), .Q(Q), .DEPTH(DEPTH)) u_bank (
      .clk     (clk),
      .we      (wr_en && node_stage != 0),
      .waddr   (bank_wa),
      .wdata   (wr_data[l]),
      .raddr_a (bank_ra),
      .raddr_b (bank_rb),
      .rdata_a (bk_a[l]),
      .rdata_b (bk_b[l])
    );
  end

  // ---------------------------------------------------------------- crossbar
  always_comb begin
    for (int l = 0; l < L; l++) begin
      if (int'(rd_stage) == LOGN) begin
        rd_a[l] = ch_a;
        rd_b[l] = ch_b;
      end else begin
        rd_a[l] = bk_a[ptr[l][4'(rd_stage - 5'd1)]];
        rd_b[l] = bk_b[ptr[l][4'(rd_stage - 5'd1)]];
      end
    end
  end
endmodule
