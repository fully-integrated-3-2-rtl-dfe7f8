// tb_link_rates: runs qrng_top at its default sizes against receivers that take data
// at the three link rates of the reference system: 3.2 Gbps (optical SFP link),
// 968.7 Mbps (Gigabit Ethernet, measured) and 259.5 Mbps (USB 2.0, measured).
// tx_ready is raised on a fixed fraction of the 62.5 MHz clocks (rate / 4 Gbps, the
// capacity of the 64-bit port) with a fractional accumulator. For each phase the
// delivered bit rate is measured after a warm-up and must be within 1% of the
// receiver's rate, and the fraction of dropped blocks must match 1 - rate/3.368 Gbps
// within 2 points. Every delivered block is compared with a reference Toeplitz hash
// of the ADC samples, skipping dropped blocks, and the number of blocks missing from
// the output must equal drop_count.
module tb_link_rates;
  localparam int M = 1024, N = 1520, K = 80, L = M + N - 1, BLOCKS = N / K;
  localparam int SAMPLES = 16, W = 64, WORDS = M / W;
  localparam int PHASE_HASHES = 240, WARM_HASHES = 20;
  localparam real F_CLK = 62.5e6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic adc_valid = 1'b0;
  logic [SAMPLES-1:0][7:0] adc_samples = '0;
  logic [L-1:0] seed = '0;
  logic seed_load = 1'b0, seed_pending;
  logic tx_valid, tx_ready = 1'b0;
  logic [W-1:0] tx_data;
  logic [31:0] drop_count;
  logic stab_clk = 1'b0, stab_rst_n = 1'b0, pm_valid = 1'b0;
  logic [11:0] pm_data = '0, setpoint = '0;
  logic signed [15:0] kp = '0, ki = '0, kd = '0;
  logic dac_valid;
  logic [15:0] dac_data;
  int checks = 0, failures = 0;

  qrng_top dut (.*);

  always #8 clk = ~clk;

  initial begin
    repeat (20 * PHASE_HASHES * BLOCKS * 3) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M-1:0] toeplitz(input logic [L-1:0] s, input logic [N-1:0] x);
    logic [M-1:0] y = '0;
    for (int i = 0; i < M; i++) begin
      logic acc = 1'b0;
      for (int j = 0; j < N; j++) acc ^= s[i - j + N - 1] & x[j];
      y[i] = acc;
    end
    return y;
  endfunction

  // receiver: ready on rate_num out of every rate_den clocks, spread evenly
  int rate_num = 0, rate_den = 1, racc = 0;
  always @(negedge clk) begin
    racc += rate_num;
    if (racc >= rate_den) begin
      racc -= rate_den;
      tx_ready <= 1'b1;
    end else tx_ready <= 1'b0;
  end

  // output monitor
  logic [M-1:0] exp_q[$];
  logic [M-1:0] rx_block;
  int rx_words = 0, skipped = 0, matched = 0;
  longint words_taken = 0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    words_taken++;
    rx_block[rx_words*W +: W] = tx_data;
    rx_words++;
    if (rx_words == WORDS) begin
      rx_words = 0;
      checks++;
      while (exp_q.size() != 0 && exp_q[0] !== rx_block) begin
        void'(exp_q.pop_front());
        skipped++;
      end
      if (exp_q.size() == 0) begin
        failures++;
        $display("received block matches no expected block");
      end else begin
        void'(exp_q.pop_front());
        matched++;
      end
    end
  end

  task automatic run_phase(input string name, input real gbps, input logic [L-1:0] s);
    logic [N-1:0] x;
    logic [7:0] smp;
    longint w0 = 0, c0 = 0, d0 = 0, cycles;
    real delivered, drop_frac, exp_drop;
    rate_num = int'(gbps * 1000.0);
    rate_den = 4000;          // port capacity: 64 bits x 62.5 MHz = 4 Gbps
    for (int h = 0; h < PHASE_HASHES; h++) begin
      if (h == WARM_HASHES) begin
        w0 = words_taken; d0 = longint'(drop_count); c0 = 0;
      end
      for (int b = 0; b < BLOCKS; b++) begin
        adc_valid = 1'b1;
        for (int q = 0; q < SAMPLES; q++) begin
          smp = 8'($urandom);
          adc_samples[q] = smp;
          for (int t = 0; t < 5; t++) x[b*K + 5*q + t] = 1'((smp >> (t + 1)) & 8'd1);
        end
        @(negedge clk);
        c0++;
      end
      exp_q.push_back(toeplitz(s, x));
    end
    cycles    = c0;
    delivered = real'(words_taken - w0) * W * F_CLK / real'(cycles) / 1.0e9;
    drop_frac = real'(longint'(drop_count) - d0) / real'(PHASE_HASHES - WARM_HASHES);
    exp_drop  = 1.0 - gbps / (real'(M) * F_CLK / real'(BLOCKS) / 1.0e9);
    $display("%s: receiver %.4f Gbps, delivered %.4f Gbps, dropped %.3f of blocks (expected %.3f)",
             name, gbps, delivered, drop_frac, exp_drop);
    checks++;
    if (delivered < gbps * 0.99 || delivered > gbps * 1.01) begin
      failures++;
      $display("%s: delivered rate off", name);
    end
    checks++;
    if (drop_frac < exp_drop - 0.02 || drop_frac > exp_drop + 0.02) begin
      failures++;
      $display("%s: drop fraction off", name);
    end
  endtask

  initial begin
    logic [L-1:0] s;
    for (int i = 0; i < L; i++) s[i] = 1'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); seed = s; seed_load = 1'b1;
    @(negedge clk); seed_load = 1'b0;
    run_phase("SFP 3.2 Gbps", 3.2, s);
    run_phase("Ethernet 968.7 Mbps", 0.9687, s);
    run_phase("USB 2.0 259.5 Mbps", 0.2595, s);
    adc_valid = 1'b0;
    rate_num = 4000;
    repeat (200) @(negedge clk);
    checks++;
    // blocks dropped after the last delivered one are still queued here
    if (rx_words != 0 || drop_count != 32'(skipped + exp_q.size())) begin
      failures++;
      $display("%0d undelivered, drop_count %0d vs %0d skipped", exp_q.size(), drop_count, skipped);
    end
    $display("blocks delivered %0d, dropped %0d", matched, drop_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
