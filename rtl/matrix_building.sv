// matrix_building: supplies the Toeplitz submatrix for each 80-bit raw beat.
//
// An m x n Toeplitz matrix is fixed by its m+n-1 seed bits s[]: every descending
// diagonal is constant. This design uses T[i][j] = s[i - j + N - 1], so column 0
// uses s[N-1 .. M+N-2] and column N-1 uses s[0 .. M-1]. The hash is computed K
// columns per clock, so beat b (b = 0 .. N/K-1) needs the submatrix
// T[i][b*K + c] = s[i - c + N - 1 - b*K], i < M, c < K.
//
// How it works: a working register `work` starts each hash as a copy of the seed
// and shifts up by K bit positions each time a beat is consumed. The submatrix is
// then always read from the same fixed window, submatrix[i][c] = work[N - 1 + i - c],
// which is pure wiring (an M x K view of the top M+K-1 register bits). A beat counter marks
// the first and last beat of each hash; after the last beat `work` is reloaded.
//
// Seed refresh: seed_load captures `seed` into a holding register. The new seed takes
// effect at the next hash boundary: from the first beat of the next hash (or at once
// if the block is idle between hashes), so one hash never mixes two matrices. In that
// first beat the window is read straight from the holding register. seed_pending is
// high while a captured seed waits. Reset clears all seeds to zero.
//
// Interface/timing: `adv` is high in a clock where the consumer takes the current
// submatrix; submatrix/first/last then describe the next beat from the next clock on.
// The matrix indexing, the shift-register window and the refresh rule are this
// implementation's choices; the published design states only that the matrix is
// built from m+n-1 refreshable seed bits and delivered as m x k submatrices.
module matrix_building #(
  parameter int unsigned M = qrng_pkg::TOEP_M,
  parameter int unsigned N = qrng_pkg::TOEP_N,
  parameter int unsigned K = qrng_pkg::TOEP_K,
  localparam int unsigned L      = M + N - 1,
  localparam int unsigned BLOCKS = N / K,
  localparam int unsigned BW     = (BLOCKS > 1) ? $clog2(BLOCKS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [L-1:0]          seed,
  input  logic                  seed_load,
  input  logic                  adv,
  output logic [M-1:0][K-1:0]   submatrix,
  output logic                  first,
  output logic                  last,
  output logic                  seed_pending
);
  logic [L-1:0]  active_seed;   // seed of the hash in progress
  logic [L-1:0]  next_seed;     // captured by seed_load, waits for a boundary
  logic [L-1:0]  work;          // active seed shifted up by b*K
  logic [BW-1:0] blk;           // beat index within the hash

  assign first = (blk == '0);
  assign last  = (blk == BW'(BLOCKS - 1));

  // A waiting seed is taken over in any clock that sits at the start of a hash; the
  // submatrix of that clock is already read from the new seed.
  logic          commit;
  logic [M+K-2:0] window;      // seed bits N-K .. M+N-2 of the current beat
  assign commit = first && seed_pending;
  assign window = commit ? next_seed[L-1:N-K] : work[L-1:N-K];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_seed  <= '0;
      next_seed    <= '0;
      work         <= '0;
      blk          <= '0;
      seed_pending <= 1'b0;
    end else begin
      if (adv) blk <= last ? '0 : blk + 1'b1;

      if (commit) begin
        active_seed <= next_seed;
        work        <= adv ? (next_seed << K) : next_seed;
      end else if (adv) begin
        work <= last ? active_seed : (work << K);
      end

      // A load in the same clock as a commit is kept for the following hash.
      if (seed_load) begin
        next_seed    <= seed;
        seed_pending <= 1'b1;
      end else if (commit) begin
        seed_pending <= 1'b0;
      end
    end
  end

  // Row i holds window[i+K-1] down to window[i]: a bit-reversed K-bit slice.
  for (genvar i = 0; i < M; i++) begin : g_row
    assign submatrix[i] = {<<{window[i +: K]}};
  end

  if (N % K != 0) begin : g_bad_k
    $error("matrix_building: N must be a multiple of K");
  end
endmodule
