// tb_toeplitz_extractor: end-to-end test of the Toeplitz extractor at the default
// sizes (m = 1024, n = 1520, k = 80).
// A reference model computes y[i] = XOR_j ( s[i - j + n - 1] AND x[j] ) directly from
// the seed s and the 1520 raw bits x of each hash (raw bit j = bit j%80 of beat j/80).
// Hashes are streamed back to back (one beat per clock) and also with idle gaps; a
// seed refresh is issued in the middle of a hash. Checked: every output block, that a
// block appears exactly 2 clocks after the last beat of its hash, that back-to-back
// hashes produce one block per 19 clocks, and that the refresh takes effect at the
// next hash.
module tb_toeplitz_extractor;
  localparam int M = 1024, N = 1520, K = 80, L = M + N - 1, BLOCKS = N / K;
  localparam int HASHES = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0] seed = '0;
  logic seed_load = 1'b0, seed_pending;
  logic raw_valid = 1'b0;
  logic [K-1:0] raw_bits = '0;
  logic out_valid;
  logic [M-1:0] final_bits;
  int checks = 0, failures = 0;

  toeplitz_extractor dut (.*);

  always #5 clk = ~clk;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [M-1:0] exp_q[$];
  longint       due_q[$];     // cycle at which each block is due
  longint       last_out = -1;
  int           outs = 0, back_to_back = 0;

  function automatic logic [M-1:0] toeplitz(input logic [L-1:0] s, input logic [N-1:0] x);
    logic [M-1:0] y = '0;
    for (int i = 0; i < M; i++) begin
      logic acc = 1'b0;
      for (int j = 0; j < N; j++) acc ^= s[i - j + N - 1] & x[j];
      y[i] = acc;
    end
    return y;
  endfunction

  function automatic logic [L-1:0] rand_seed();
    logic [L-1:0] v;
    for (int i = 0; i < L; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected output at cycle %0d", cycle);
    end else begin
      automatic logic [M-1:0] e = exp_q.pop_front();
      automatic longint due = due_q.pop_front();
      if (final_bits !== e) begin
        failures++;
        $display("block %0d wrong", outs);
      end
      checks++;
      if (cycle != due) begin
        failures++;
        $display("block %0d at cycle %0d, due %0d", outs, cycle, due);
      end
      if (last_out >= 0 && cycle - last_out == longint'(BLOCKS)) back_to_back++;
    end
    last_out = cycle;
    outs++;
  end

  initial begin
    logic [L-1:0] s_cur, s_next;
    logic [N-1:0] x;
    logic gaps;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    s_cur = rand_seed();
    @(negedge clk); seed = s_cur; seed_load = 1'b1;
    @(negedge clk); seed_load = 1'b0;
    s_next = s_cur;
    for (int h = 0; h < HASHES; h++) begin
      gaps = (h >= 5);
      for (int j = 0; j < N; j++) x[j] = 1'($urandom);
      exp_q.push_back(toeplitz(s_cur, x));
      for (int b = 0; b < BLOCKS; b++) begin
        if (gaps) while ($urandom_range(0, 2) == 0) begin raw_valid = 1'b0; @(negedge clk); end
        raw_valid = 1'b1;
        raw_bits  = x[b*K +: K];
        if (h == 3 && b == 9) begin
          s_next = rand_seed();
          seed = s_next; seed_load = 1'b1;
        end
        // sampled at the coming posedge (cycle value before it increments)
        if (b == BLOCKS - 1) due_q.push_back(cycle + 2);
        @(negedge clk);
        seed_load = 1'b0;
      end
      s_cur = s_next;
    end
    raw_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (outs != HASHES || exp_q.size() != 0) begin
      failures++;
      $display("%0d outputs for %0d hashes", outs, HASHES);
    end
    checks++;
    if (back_to_back < 4) begin
      failures++;
      $display("only %0d back-to-back blocks at the 19-clock interval", back_to_back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
