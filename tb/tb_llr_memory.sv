// tb_llr_memory: protocol-level random test of the LLR memory with lazy copy
// (N = 32, L = 4, M = 4, so stages 1 .. 4 and a channel of 8 words).
// The reference here keeps a full private copy of every path's stages and
// copies it on pruning, as a decoder without lazy copy would. Following the
// decoder's rules (a stage is written completely by all paths before it is
// read; pruning happens between complete stages), random sequences of stage
// writes, pruning with random parents and reads are applied; every operand
// word delivered to every SCD is compared with the reference, which checks
// the pointer memory, the crossbar and the address layout together.
module tb_llr_memory;
  localparam int N = 32, L = 4, M = 4, Q = 6, LOGN = 5, LOGM = 2, LW = 2;
  logic clk = 0, start = 0, chan_we = 0, wr_en = 0, lc_en = 0;
  logic [$clog2(N/M)-1:0] chan_addr = '0;
  logic signed [Q-1:0] chan_data [M];
  logic [3:0] node_stage = '0;
  logic [15:0] node_word = '0;
  logic signed [Q-1:0] wr_data [L][M];
  logic [LW-1:0] parent [L];
  logic signed [Q-1:0] rd_a [L][M], rd_b [L][M];
  int ref_v [L][LOGN][8][M];     // [path][stage][word][j], stages 1..4
  int ch [N/M][M];
  bit written [LOGN];
  int checks = 0, failures = 0;

  llr_memory #(.N(N), .L(L), .M(M), .Q(Q)) dut (.clk (clk), .start (start), .chan_we (chan_we),
    .chan_addr (chan_addr), .chan_data (chan_data), .node_stage (node_stage), .node_word (node_word),
    .wr_en (wr_en), .wr_data (wr_data), .lc_en (lc_en), .parent (parent), .rd_a (rd_a), .rd_b (rd_b));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int words(input int t);
    return ((1 << t) >= M) ? (1 << t) / M : 1;
  endfunction

  task automatic check_read(input int s);   // operands of a node at stage s-1
    int t;
    t = s - 1;
    for (int q = 0; q < words(t); q++) begin
      int wa, wb;
      node_stage = 4'(t); node_word = 16'(q);
      wa = (t >= LOGM) ? q : 0;
      wb = (t >= LOGM) ? q + words(t) : 0;
      #1;
      for (int l = 0; l < L; l++)
        for (int j = 0; j < M; j++) begin
          int ea, eb;
          ea = (s == LOGN) ? ch[wa][j] : ref_v[l][s][wa][j];
          eb = (s == LOGN) ? ch[wb][j] : ref_v[l][s][wb][j];
          checks += 2;
          if (int'(rd_a[l][j]) != ea) failures++;
          if (int'(rd_b[l][j]) != eb) failures++;
        end
    end
  endtask

  initial begin
    for (int j = 0; j < M; j++) chan_data[j] = '0;
    for (int l = 0; l < L; l++) begin parent[l] = LW'(l); for (int j = 0; j < M; j++) wr_data[l][j] = '0; end
    for (int s = 0; s < LOGN; s++) written[s] = 0;
    // channel
    for (int w = 0; w < N / M; w++) begin
      @(negedge clk);
      chan_we = 1; chan_addr = 3'(w);
      for (int j = 0; j < M; j++) begin ch[w][j] = $urandom_range(62, 0) - 31; chan_data[j] = Q'(ch[w][j]); end
    end
    @(negedge clk); chan_we = 0; start = 1;
    @(negedge clk); start = 0;
    for (int it = 0; it < 400; it++) begin
      int op;
      op = $urandom_range(2, 0);
      @(negedge clk);
      if (op == 0) begin            // write a complete stage
        int t;
        t = $urandom_range(LOGN - 1, 1);
        for (int q = 0; q < words(t); q++) begin
          wr_en = 1; node_stage = 4'(t); node_word = 16'(q);
          for (int l = 0; l < L; l++)
            for (int j = 0; j < M; j++) begin
              int v;
              v = $urandom_range(62, 0) - 31;
              wr_data[l][j] = Q'(v);
              ref_v[l][t][q][j] = v;
            end
          @(negedge clk);
        end
        wr_en = 0;
        written[t] = 1;
      end else if (op == 1) begin   // pruning: random parents
        int nv [L][LOGN][8][M];
        for (int l = 0; l < L; l++) parent[l] = LW'($urandom_range(L - 1, 0));
        lc_en = 1;
        for (int l = 0; l < L; l++) nv[l] = ref_v[parent[l]];
        @(negedge clk);
        lc_en = 0;
        ref_v = nv;
      end else begin                // read a stage that holds data
        int s;
        s = $urandom_range(LOGN, 2);
        if (s == LOGN || written[s]) check_read(s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
