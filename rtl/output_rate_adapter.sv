// output_rate_adapter: matches the extractor's output to the transmit interface.
//
// The extractor delivers an M-bit block every N/K clocks (3.37 Gbps at the default
// sizes), a little more than the transmit link takes (3.2 Gbps over the SFP, less
// over Ethernet or USB). This block buffers up to DEPTH complete blocks and hands
// them out as OUT_W-bit words under a valid/ready handshake, at whatever pace the
// interface accepts. A block arriving while all DEPTH slots are occupied is dropped
// whole and counted in drop_count; dropping complete extracted blocks leaves the
// delivered stream uniformly random, and the delivered rate settles at the rate
// the interface consumes.
//
// Interface: in_valid pulses with in_bits (no back-pressure towards the extractor).
// Words of a block leave in order from bit 0 upwards: word w = in_bits[w*OUT_W +: OUT_W].
// out_data is held stable while out_valid is high and out_ready is low.
// Timing: a block written into an empty buffer is visible on out_valid one clock later.
// The published design says only that the rate is tuned to the interface; the buffer,
// the drop policy, the word width and the handshake are this implementation's choices.
module output_rate_adapter #(
  parameter int unsigned M     = qrng_pkg::TOEP_M,
  parameter int unsigned OUT_W = qrng_pkg::TX_W,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned WORDS = M / OUT_W,
  localparam int unsigned WW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned PW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [M-1:0]      in_bits,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  input  logic              out_ready,
  output logic [31:0]       drop_count
);
  logic [M-1:0]  mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [PW:0]   count;
  logic [WW-1:0] word_idx;

  logic full, push, pop_block, word_taken;
  assign full       = (count == (PW+1)'(DEPTH));
  assign push       = in_valid && !full;
  assign out_valid  = (count != '0);
  assign word_taken = out_valid && out_ready;
  assign pop_block  = word_taken && (word_idx == WW'(WORDS - 1));
  assign out_data   = mem[rd_ptr][word_idx*OUT_W +: OUT_W];

  function automatic logic [PW-1:0] ptr_inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_bits;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      word_idx   <= '0;
      drop_count <= '0;
    end else begin
      if (push) wr_ptr <= ptr_inc(wr_ptr);
      if (in_valid && full) drop_count <= drop_count + 1'b1;
      if (word_taken) word_idx <= pop_block ? '0 : word_idx + 1'b1;
      if (pop_block) rd_ptr <= ptr_inc(rd_ptr);
      case ({push, pop_block})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // Handshake rule: a word offered and not taken stays on the bus unchanged.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));

  if (M % OUT_W != 0) begin : g_bad_w
    $error("output_rate_adapter: M must be a multiple of OUT_W");
  end
endmodule
