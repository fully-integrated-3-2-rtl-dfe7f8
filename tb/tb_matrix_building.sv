// tb_matrix_building: self-checking test of matrix_building at the default sizes
// (m = 1024, n = 1520, k = 80, 19 beats per hash).
// Checks, for every beat of several hashes, all m x k entries of the submatrix
// against the Toeplitz definition T[i][j] = s[i - j + n - 1] evaluated directly on
// the seed, plus the first/last beat markers. Beats arrive with random idle gaps.
// A seed loaded in the middle of a hash must leave the rest of that hash on the old
// seed (seed_pending high) and take effect from the next hash.
module tb_matrix_building;
  localparam int M = 1024, N = 1520, K = 80, L = M + N - 1, BLOCKS = N / K;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0] seed = '0, s_old, s_new;
  logic seed_load = 1'b0, adv = 1'b0;
  logic [M-1:0][K-1:0] submatrix;
  logic first, last, seed_pending;
  int checks = 0, failures = 0;
  int refresh_seen = 0;

  matrix_building dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [L-1:0] rand_seed();
    logic [L-1:0] v;
    for (int i = 0; i < L; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  // compare the presented submatrix with beat b of the matrix built from s
  task automatic check_beat(input logic [L-1:0] s, input int b);
    int bad = 0;
    for (int i = 0; i < M; i++)
      for (int c = 0; c < K; c++)
        if (submatrix[i][c] !== s[i - (b*K + c) + N - 1]) bad++;
    checks++;
    if (bad != 0 || first !== (b == 0) || last !== (b == BLOCKS - 1)) begin
      failures++;
      if (failures < 5) $display("beat %0d: %0d wrong entries, first=%b last=%b", b, bad, first, last);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    s_old = rand_seed();
    @(negedge clk); seed = s_old; seed_load = 1'b1;
    @(negedge clk); seed_load = 1'b0;
    for (int h = 0; h < 4; h++) begin
      for (int b = 0; b < BLOCKS; b++) begin
        while ($urandom_range(0, 3) == 0) @(negedge clk);   // idle gap
        #1 check_beat(s_old, b);
        if (h == 1 && b == 7) begin                          // refresh mid-hash
          s_new = rand_seed();
          seed = s_new; seed_load = 1'b1;
        end
        adv = 1'b1;
        @(negedge clk);
        adv = 1'b0; seed_load = 1'b0;
        if (h == 1 && b >= 7 && b < BLOCKS - 1) begin
          checks++;
          if (!seed_pending) failures++;
          else refresh_seen++;
        end
      end
      if (h == 1) s_old = s_new;
      if (h == 2) begin
        checks++;
        if (seed_pending) failures++;
      end
    end
    checks++;
    if (refresh_seen == 0) begin
      failures++;
      $display("seed refresh never pending");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
