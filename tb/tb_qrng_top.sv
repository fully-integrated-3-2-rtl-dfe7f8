// tb_qrng_top: end-to-end test of qrng_top with every parameter at its default
// (m = 1024, n = 1520, k = 80, 16 samples of 8 bits per 62.5 MHz clock, 64-bit words).
//
// Random 8-bit ADC samples are streamed in. A reference model built here takes bits
// [5:1] of each sample (by shifting the sample value), forms the 1520 raw bits of each
// hash, multiplies them by the Toeplitz matrix T[i][j] = s[i-j+1519] of the seed in
// force and splits the 1024 result bits into 16 words. Words leaving on tx_* are
// collected into blocks and matched in order against the expected blocks; a block
// the design dropped is skipped, and the number skipped must equal drop_count.
// The run has three phases: (A) input and receiver at full speed, no drop allowed,
// first block exactly 4 clocks after the last beat of the first hash; (B) a seed
// refresh in the middle of a hash, which must apply from the next hash; (C) a slow
// receiver (tx_ready about half of the time) and idle gaps in the ADC stream, which
// must cause stalls and dropped blocks. Meanwhile the phase-stabilization PID runs
// on its own clock against a simple model of the interferometer drift and must
// bring the power reading to its set point. Each of these events is counted, and a
// failure is counted for any that never happened.
module tb_qrng_top;
  localparam int M = 1024, N = 1520, K = 80, L = M + N - 1, BLOCKS = N / K;
  localparam int SAMPLES = 16, W = 64, WORDS = M / W;
  localparam int HASHES = 36;

  logic clk = 1'b0, rst_n = 1'b0;
  logic adc_valid = 1'b0;
  logic [SAMPLES-1:0][7:0] adc_samples = '0;
  logic [L-1:0] seed = '0;
  logic seed_load = 1'b0, seed_pending;
  logic tx_valid, tx_ready = 1'b1;
  logic [W-1:0] tx_data;
  logic [31:0] drop_count;
  logic stab_clk = 1'b0, stab_rst_n = 1'b0;
  logic pm_valid = 1'b0;
  logic [11:0] pm_data = '0, setpoint = 12'd2600;
  logic signed [15:0] kp = 16'sd512, ki = 16'sd64, kd = 16'sd16;
  logic dac_valid;
  logic [15:0] dac_data;

  int checks = 0, failures = 0;
  int n_stall = 0, n_gap = 0, n_refresh = 0, n_pid = 0, n_fullspeed = 0;

  qrng_top dut (.*);

  always #8  clk = ~clk;        // 62.5 MHz
  always #20 stab_clk = ~stab_clk;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic [M-1:0] exp_q[$];
  int           skipped = 0, matched = 0;
  longint       last_beat_cycle0 = -1, first_word_cycle = -1;
  logic         slow_rx = 1'b0;
  logic         pid_done = 1'b0;

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

  // ---------------- output monitor ----------------
  logic [M-1:0] rx_block = '0;
  int           rx_words = 0;
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && !tx_ready) n_stall++;
    if (tx_valid && tx_ready) begin
      if (first_word_cycle < 0) first_word_cycle = cycle;
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
          $display("received block %0d matches no expected block", matched + 1);
        end else begin
          void'(exp_q.pop_front());
          matched++;
        end
      end
    end
  end

  // ---------------- receiver ----------------
  always @(negedge clk) tx_ready <= slow_rx ? ($urandom_range(0, 99) < 50) : 1'b1;

  // ---------------- ADC stream ----------------
  initial begin
    logic [L-1:0] s_cur, s_next;
    logic [N-1:0] x;
    logic [7:0] smp;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    s_cur = rand_seed();
    s_next = s_cur;
    @(negedge clk); seed = s_cur; seed_load = 1'b1;
    @(negedge clk); seed_load = 1'b0;
    for (int h = 0; h < HASHES; h++) begin
      slow_rx = (h >= 20);
      for (int b = 0; b < BLOCKS; b++) begin
        if (h >= 24) while ($urandom_range(0, 5) == 0) begin
          adc_valid = 1'b0;
          n_gap++;
          @(negedge clk);
        end
        adc_valid = 1'b1;
        for (int s = 0; s < SAMPLES; s++) begin
          smp = 8'($urandom);
          adc_samples[s] = smp;
          for (int t = 0; t < 5; t++) x[b*K + 5*s + t] = 1'((smp >> (t + 1)) & 8'd1);
        end
        if (h == 10 && b == 11) begin
          s_next = rand_seed();
          seed = s_next; seed_load = 1'b1;
        end
        if (h == 0 && b == BLOCKS - 1) last_beat_cycle0 = cycle;
        @(negedge clk);
        seed_load = 1'b0;
        if (h == 10 && b >= 11 && seed_pending) n_refresh++;
      end
      exp_q.push_back(toeplitz(s_cur, x));
      s_cur = s_next;
      if (h == 19) begin
        checks++;
        if (drop_count != 0) begin
          failures++;
          $display("%0d blocks dropped at full receiver speed", drop_count);
        end else n_fullspeed = 20;
      end
    end
    adc_valid = 1'b0;
    slow_rx = 1'b0;
    repeat (200) @(negedge clk);
    wait (pid_done);

    checks++;
    if (exp_q.size() != 0 || rx_words != 0) begin
      failures++;
      $display("%0d blocks never delivered, %0d words pending", exp_q.size(), rx_words);
    end
    checks++;
    if (drop_count != 32'(skipped)) begin
      failures++;
      $display("drop_count %0d but %0d blocks missing from the output", drop_count, skipped);
    end
    checks++;
    if (first_word_cycle - last_beat_cycle0 != 4) begin
      failures++;
      $display("first word %0d clocks after the last beat", first_word_cycle - last_beat_cycle0);
    end
    $display("blocks delivered %0d, dropped %0d; stalls %0d, ADC gaps %0d, refresh %0d, PID updates %0d",
             matched, drop_count, n_stall, n_gap, n_refresh, n_pid);
    checks++; if (n_fullspeed == 0) begin failures++; $display("no full-speed phase"); end
    checks++; if (n_stall == 0)     begin failures++; $display("no receiver stall");  end
    checks++; if (drop_count == 0)  begin failures++; $display("no overflow drop");   end
    checks++; if (n_gap == 0)       begin failures++; $display("no ADC gap");         end
    checks++; if (n_refresh == 0)   begin failures++; $display("no seed refresh");    end
    checks++; if (n_pid == 0)       begin failures++; $display("no PID update");      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- phase stabilization loop ----------------
  initial begin
    int pm;
    int drift;
    repeat (2) @(posedge stab_clk);
    stab_rst_n = 1'b1;
    pm = 2048;
    for (int t = 0; t < 400; t++) begin
      drift = 1500 + t / 2;
      @(negedge stab_clk);
      pm_data = 12'(pm);
      pm_valid = 1'b1;
      @(negedge stab_clk);
      pm_valid = 1'b0;
      if (dac_valid) n_pid++;
      pm = 2048 + (int'(dac_data) - 32768 - drift) / 8;
      if (pm < 0) pm = 0;
      if (pm > 4095) pm = 4095;
    end
    checks++;
    if (pm < 2596 || pm > 2604) begin
      failures++;
      $display("phase loop did not settle: reading %0d", pm);
    end
    pid_done = 1'b1;
  end
endmodule
