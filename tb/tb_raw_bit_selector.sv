// tb_raw_bit_selector: self-checking test of raw_bit_selector at its default size
// (16 samples of 8 bits per beat). Random samples are applied with random gaps in
// in_valid; one clock later raw_bits must hold bits [5:1] of every sample, sample s
// in bits [5s+4:5s], and out_valid must follow in_valid. The expected word is built
// with shifts and masks on the sample values, not with the module's part-selects.
module tb_raw_bit_selector;
  localparam int SAMPLES = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  logic [SAMPLES-1:0][7:0] samples = '0;
  logic [SAMPLES*5-1:0] raw_bits, expected;
  logic exp_valid;
  int checks = 0, failures = 0;

  raw_bit_selector dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expected = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int beat = 0; beat < 500; beat++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int s = 0; s < SAMPLES; s++) samples[s] = 8'($urandom);
      exp_valid = in_valid;
      if (in_valid)
        for (int s = 0; s < SAMPLES; s++)
          for (int b = 0; b < 5; b++)
            expected[5*s + b] = (32'(samples[s]) >> (b + 1)) & 1;
      @(negedge clk);
      checks++;
      if (out_valid !== exp_valid || raw_bits !== expected) begin
        failures++;
        if (failures < 5) $display("beat %0d: got %h exp %h", beat, raw_bits, expected);
      end
      in_valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
