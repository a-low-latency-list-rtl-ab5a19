// llr_pe: processing element of the successive-cancellation decoder.
//
// Evaluates one function of a scheduling-tree node on two LLRs a = L[j] and
// b = L[j + 2^t] of the stage above:
//   f (is_g = 0): min-sum approximation, sign(a) xor sign(b) times min(|a|,|b|)
//   g (is_g = 1): b + a when the partial sum s = 0, b - a when s = 1
// Both equations follow the paper. LLRs are Q-bit two's complement; the
// saturation of g to +/-(2^(Q-1)-1), which keeps the range symmetric so that
// a magnitude always fits in Q-1 bits, is this design's choice.
// Purely combinational.
module llr_pe #(
  parameter int Q = 6
) (
  input  logic                is_g,
  input  logic                s,      // partial sum for g
  input  logic signed [Q-1:0] a,      // L^{t+1}_j
  input  logic signed [Q-1:0] b,      // L^{t+1}_{j+2^t}
  output logic signed [Q-1:0] y
);
  localparam logic signed [Q:0] MAXV = (1 <<< (Q - 1)) - 1;

  logic [Q-1:0]       mag_a, mag_b, mag_min;
  logic signed [Q:0]  sum;

  always_comb begin
    mag_a   = a[Q-1] ? Q'(-a) : Q'(a);
    mag_b   = b[Q-1] ? Q'(-b) : Q'(b);
    mag_min = (mag_a < mag_b) ? mag_a : mag_b;
    sum     = s ? ((Q+1)'(b) - (Q+1)'(a)) : ((Q+1)'(b) + (Q+1)'(a));
    if (!is_g) begin
      y = (a[Q-1] ^ b[Q-1]) ? Q'(-mag_min) : Q'(mag_min);
    end else if (sum > MAXV) begin
      y = Q'(MAXV);
    end else if (sum < -MAXV) begin
      y = Q'(-MAXV);
    end else begin
      y = Q'(sum);
    end
  end
endmodule
