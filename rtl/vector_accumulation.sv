// vector_accumulation: adds up the temporary vectors of one hash.
//
// Binary addition is XOR, so the M final random bits of a hash are the XOR of the
// N/K temporary vectors produced by submatrix_multiplication. The accumulator is
// loaded (not XORed) on the vector marked in_first, and the vector marked in_last
// completes the hash: the final bits are registered and out_valid pulses for one
// clock. Nothing is emitted for a hash whose last vector has not arrived.
//
// Timing: final_bits/out_valid appear one clock after the in_last vector. With one
// vector per clock a new result is ready every N/K clocks (19 at the default sizes).
// The XOR accumulation is the published method; the first/last markers and the
// output register are this implementation's choices.
module vector_accumulation #(
  parameter int unsigned M = qrng_pkg::TOEP_M
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [M-1:0]  temp,
  input  logic          in_first,
  input  logic          in_last,
  output logic          out_valid,
  output logic [M-1:0]  final_bits
);
  logic [M-1:0] acc;
  logic [M-1:0] acc_next;

  assign acc_next = in_first ? temp : (acc ^ temp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      out_valid  <= 1'b0;
      final_bits <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc <= acc_next;
        if (in_last) final_bits <= acc_next;
      end
    end
  end
endmodule
