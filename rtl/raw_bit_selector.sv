// raw_bit_selector: turns a beat of ADC samples into the raw bits that feed the
// Toeplitz extractor.
//
// The sampled photodetector signal carries about 6.5 bits of min-entropy per 8-bit
// sample, but the extractor only handles 5 Gbps. Three bits of each sample are
// therefore thrown away: the least significant bit (DROP_LSB) and the two most
// significant bits (DROP_MSB), leaving bits [5:1] of every sample. Sixteen samples
// arrive per 62.5 MHz clock, so a beat yields 16 x 5 = 80 raw bits, exactly the k
// columns the extractor consumes per clock.
//
// Interface: samples[s] is sample s of the beat, s = 0 the earliest. The kept bits of
// sample s land in raw_bits[KEEP*s +: KEEP] with their order unchanged.
// Timing: one register stage; out_valid/raw_bits follow in_valid/samples by one clock.
//
// Which bits are dropped follows the published design. The number of samples per
// clock, the packing order and the output register are this implementation's choices.
module raw_bit_selector #(
  parameter int unsigned SAMPLES  = qrng_pkg::SAMPLES_PER_BEAT,
  parameter int unsigned ADC_W    = qrng_pkg::ADC_W,
  parameter int unsigned DROP_LSB = qrng_pkg::DROP_LSB,
  parameter int unsigned DROP_MSB = qrng_pkg::DROP_MSB,
  localparam int unsigned KEEP    = ADC_W - DROP_LSB - DROP_MSB
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic [SAMPLES-1:0][ADC_W-1:0]    samples,
  output logic                             out_valid,
  output logic [SAMPLES*KEEP-1:0]          raw_bits
);
  logic [SAMPLES*KEEP-1:0] packed_bits;

  always_comb begin
    for (int s = 0; s < SAMPLES; s++)
      packed_bits[KEEP*s +: KEEP] = samples[s][DROP_LSB +: KEEP];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      raw_bits  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) raw_bits <= packed_bits;
    end
  end
endmodule
