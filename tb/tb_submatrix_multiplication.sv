// tb_submatrix_multiplication: self-checking test of submatrix_multiplication at the
// default size (1024 x 80). Random submatrices and raw words are applied; one clock
// later each output bit must equal the parity of the number of positions where both
// the matrix row and the raw word hold a 1 (counted with an integer loop), and the
// first/last markers must be delayed with the data.
module tb_submatrix_multiplication;
  localparam int M = 1024, K = 80;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [M-1:0][K-1:0] submatrix = '0;
  logic [K-1:0] raw_bits = '0;
  logic out_valid, out_first, out_last;
  logic [M-1:0] temp, expected;
  int checks = 0, failures = 0;

  submatrix_multiplication dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      for (int i = 0; i < M; i++)
        for (int c = 0; c < K; c++) submatrix[i][c] = 1'($urandom);
      for (int c = 0; c < K; c++) raw_bits[c] = (t < 3) ? 1'b1 : 1'($urandom);
      in_valid = 1'b1;
      in_first = 1'($urandom);
      in_last  = 1'($urandom);
      for (int i = 0; i < M; i++) begin
        automatic int ones = 0;
        for (int c = 0; c < K; c++) if (submatrix[i][c] == 1'b1 && raw_bits[c] == 1'b1) ones++;
        expected[i] = 1'(ones % 2);
      end
      @(negedge clk);
      checks++;
      if (!out_valid || temp !== expected || out_first !== in_first || out_last !== in_last) begin
        failures++;
        if (failures < 5) $display("t=%0d mismatch", t);
      end
      in_valid = 1'b0;
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
