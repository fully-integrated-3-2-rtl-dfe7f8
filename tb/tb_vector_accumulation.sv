// tb_vector_accumulation: self-checking test of vector_accumulation at m = 1024.
// Hashes of 19 random temporary vectors (first/last marked) are fed with random idle
// gaps; after the last vector the module must pulse out_valid once with the XOR of
// the 19 vectors of that hash (computed here one bit at a time), and out_valid must
// stay low at all other times.
module tb_vector_accumulation;
  localparam int M = 1024, BLOCKS = 19;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [M-1:0] temp = '0, final_bits, expected;
  logic out_valid;
  int checks = 0, failures = 0;

  vector_accumulation dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int h = 0; h < 40; h++) begin
      expected = '0;
      for (int b = 0; b < BLOCKS; b++) begin
        @(negedge clk);
        while ($urandom_range(0, 4) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
          checks++;
          if (out_valid) failures++;
        end
        for (int i = 0; i < M; i++) begin
          temp[i] = 1'($urandom);
          expected[i] = expected[i] != temp[i];
        end
        in_valid = 1'b1;
        in_first = (b == 0);
        in_last  = (b == BLOCKS - 1);
        if (b > 0) begin
          checks++;
          if (out_valid) failures++;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || final_bits !== expected) begin
        failures++;
        if (failures < 5) $display("hash %0d wrong", h);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
