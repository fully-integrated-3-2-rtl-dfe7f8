// submatrix_multiplication: one clock's share of the Toeplitz hash.
//
// Multiplies the M x K submatrix from matrix_building by the K raw bits of the
// current beat over GF(2): each of the M output bits is the XOR of the K products
// submatrix[i][c] AND raw_bits[c]. The result is one "temporary" M-bit column
// vector per clock; N/K of them are XORed together by vector_accumulation.
//
// Interface/timing: in_valid/in_first/in_last qualify the beat; the vector and the
// delayed markers appear one clock later on out_valid/temp/out_first/out_last.
// The AND/XOR arithmetic is the published method; the single output register is
// this implementation's choice of pipeline depth.
module submatrix_multiplication #(
  parameter int unsigned M = qrng_pkg::TOEP_M,
  parameter int unsigned K = qrng_pkg::TOEP_K
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [M-1:0][K-1:0]  submatrix,
  input  logic [K-1:0]         raw_bits,
  input  logic                 in_first,
  input  logic                 in_last,
  output logic                 out_valid,
  output logic [M-1:0]         temp,
  output logic                 out_first,
  output logic                 out_last
);
  logic [M-1:0] product;

  for (genvar i = 0; i < M; i++) begin : g_row
    assign product[i] = ^(submatrix[i] & raw_bits);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      temp      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        temp      <= product;
        out_first <= in_first;
        out_last  <= in_last;
      end
    end
  end
endmodule
