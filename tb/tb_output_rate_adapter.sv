// tb_output_rate_adapter: self-checking test of output_rate_adapter at reduced size
// (256-bit blocks, 32-bit words, 2-block buffer) so that overflow happens quickly.
// Blocks arrive every 6 to 12 clocks while the receiver takes words with a changing
// probability. A mirror of the buffer kept here decides which blocks must be dropped
// (a block arriving while 2 blocks are still not fully read); every word taken is
// compared with the expected word, drop_count with the mirror's count, and it is
// checked that a word offered but not taken stays unchanged. The test requires that
// both overflow drops and receiver stalls happened.
module tb_output_rate_adapter;
  localparam int M = 256, W = 32, DEPTH = 2, WORDS = M / W;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid, out_ready = 1'b0;
  logic [M-1:0] in_bits = '0;
  logic [W-1:0] out_data;
  logic [31:0] drop_count;
  int checks = 0, failures = 0;
  int drops = 0, stalls = 0, delivered = 0;

  output_rate_adapter #(.M(M), .OUT_W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [M-1:0] q[$];       // blocks held by the adapter, head being read
  int           widx = 0;   // next word of the head block
  logic         held = 1'b0;
  logic [W-1:0] held_data;

  // mirror, updated with the values sampled at each rising edge
  always @(posedge clk) if (rst_n) begin
    automatic logic full = (q.size() == DEPTH);
    automatic logic taken = out_valid && out_ready;
    checks++;
    if (out_valid !== (q.size() != 0)) begin
      failures++;
      $display("out_valid %b with %0d blocks held", out_valid, q.size());
    end
    if (held) begin
      checks++;
      if (!out_valid || out_data !== held_data) failures++;
    end
    held = out_valid && !out_ready;
    held_data = out_data;
    if (out_valid && !out_ready) stalls++;
    if (taken && q.size() != 0) begin
      checks++;
      if (out_data !== q[0][widx*W +: W]) begin
        failures++;
        $display("word %0d of block mismatch", widx);
      end
      if (widx == WORDS - 1) begin
        void'(q.pop_front());
        widx = 0;
        delivered++;
      end else widx++;
    end
    if (in_valid) begin
      if (full) drops++;
      else q.push_back(in_bits);
    end
  end

  initial begin
    int gap;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < 400; blk++) begin
      gap = $urandom_range(6, 12);
      for (int g = 0; g < gap; g++) begin
        @(negedge clk);
        in_valid = 1'b0;
        // receiver speed changes every 100 blocks
        out_ready = ($urandom_range(0, 99) < ((blk / 100) % 2 == 0 ? 95 : 55));
      end
      for (int i = 0; i < M / 32; i++) in_bits[32*i +: 32] = $urandom;
      in_valid = 1'b1;
    end
    @(negedge clk);
    in_valid = 1'b0;
    out_ready = 1'b1;
    repeat (40) @(negedge clk);
    checks++;
    if (drop_count != 32'(drops)) begin
      failures++;
      $display("drop_count %0d, expected %0d", drop_count, drops);
    end
    checks++;
    if (drops == 0 || stalls == 0 || q.size() != 0) begin
      failures++;
      $display("drops=%0d stalls=%0d left=%0d", drops, stalls, q.size());
    end
    $display("delivered %0d blocks, dropped %0d, %0d stalled cycles", delivered, drops, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
