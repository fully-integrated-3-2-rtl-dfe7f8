// toeplitz_extractor: real-time Toeplitz-hashing randomness extractor.
//
// Computes y = T x over GF(2) for every N raw bits x, with T the M x N Toeplitz
// matrix defined by the M+N-1 seed bits (see matrix_building). Instead of one huge
// matrix product it runs three pipelined stages on one clock (62.5 MHz in the
// published module):
//   matrix_building          -> M x K submatrix of the current beat
//   submatrix_multiplication -> M-bit temporary vector = submatrix * K raw bits
//   vector_accumulation      -> XOR of the N/K temporary vectors = M final bits
// Raw bit j of a hash is bit c of beat b with j = b*K + c.
//
// Interface: raw_valid/raw_bits deliver one K-bit beat per clock when valid; there is
// no back-pressure, the extractor always keeps up. seed/seed_load refresh the matrix
// at the next hash boundary. out_valid pulses with the M final bits.
// Timing: the result of a hash appears two clocks after its last beat; with a beat
// every clock the output rate is M bits per N/K clocks (1024 bits / 19 clocks,
// 3.37 Gbps at 62.5 MHz). The stage split follows the published design; the pipeline
// registers and handshake are this implementation's choices.
module toeplitz_extractor #(
  parameter int unsigned M = qrng_pkg::TOEP_M,
  parameter int unsigned N = qrng_pkg::TOEP_N,
  parameter int unsigned K = qrng_pkg::TOEP_K
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [M+N-2:0]     seed,
  input  logic               seed_load,
  output logic               seed_pending,
  input  logic               raw_valid,
  input  logic [K-1:0]       raw_bits,
  output logic               out_valid,
  output logic [M-1:0]       final_bits
);
  logic [M-1:0][K-1:0] submatrix;
  logic                first, last;
  logic                t_valid, t_first, t_last;
  logic [M-1:0]        temp;

  matrix_building #(.M(M), .N(N), .K(K)) u_build (
    .clk, .rst_n, .seed, .seed_load,
    .adv          (raw_valid),
    .submatrix,
    .first, .last,
    .seed_pending
  );

  submatrix_multiplication #(.M(M), .K(K)) u_mult (
    .clk, .rst_n,
    .in_valid  (raw_valid),
    .submatrix,
    .raw_bits,
    .in_first  (first),
    .in_last   (last),
    .out_valid (t_valid),
    .temp,
    .out_first (t_first),
    .out_last  (t_last)
  );

  vector_accumulation #(.M(M)) u_acc (
    .clk, .rst_n,
    .in_valid  (t_valid),
    .temp,
    .in_first  (t_first),
    .in_last   (t_last),
    .out_valid,
    .final_bits
  );
endmodule
