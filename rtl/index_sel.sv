// index_sel: the index selector.
//
// The coefficient matrices are stored with a 1-bit direct index per
// coefficient *row* (1 = the row has a non-zero coefficient), and the input
// buffer marks every stored input row that is all zero. A PE line only needs
// the (coefficient row, input row) pairs where both are non-zero: the rest
// would contribute nothing, so neither the input row read nor the computation
// is done. For each of the N lines and each of its S candidate jobs this block
// ANDs the weight index, the inverted input zero flag and the job-valid bit.
// It also counts, per call, the jobs dropped for each reason (for statistics).
// Combinational.
// The selection of non-zero vector pairs is from the source; the per-line
// job organisation and the counts are this design's.
module index_sel #(
  parameter int unsigned N = 16,
  parameter int unsigned S = 3
) (
  input  logic [N-1:0][S-1:0] job_valid,
  input  logic [N-1:0][S-1:0] w_idx,      // 1 = coefficient row non-zero
  input  logic [N-1:0][S-1:0] in_zero,    // 1 = input row all zero
  output logic [N-1:0][S-1:0] sel,
  output logic [$clog2(N*S+1)-1:0] n_skip_w,   // dropped: zero coefficient row
  output logic [$clog2(N*S+1)-1:0] n_skip_in   // dropped: zero input row only
);
  always_comb begin
    n_skip_w  = '0;
    n_skip_in = '0;
    for (int c = 0; c < N; c++)
      for (int j = 0; j < S; j++) begin
        sel[c][j] = job_valid[c][j] & w_idx[c][j] & ~in_zero[c][j];
        if (job_valid[c][j] && !w_idx[c][j]) n_skip_w = n_skip_w + 1'b1;
        else if (job_valid[c][j] && in_zero[c][j]) n_skip_in = n_skip_in + 1'b1;
      end
  end
endmodule
