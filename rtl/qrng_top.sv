// qrng_top: digital logic of a laser-phase-noise quantum random number generator.
//
// Two independent parts, one per clock domain (in the published module they sit in
// two FPGAs on two boards; here they share a top but no signals):
//
//  Post-processing (clk, 62.5 MHz): 16 samples of the 8-bit, 1 GSa/s photodetector ADC
//  arrive per clock (adc_samples, already deserialised). raw_bit_selector keeps bits
//  [5:1] of each sample -> 80 raw bits per clock (5 Gbps). toeplitz_extractor hashes
//  every 1520 raw bits into 1024 final bits with a seed-defined Toeplitz matrix,
//  80 columns per clock -> one 1024-bit block per 19 clocks (3.37 Gbps).
//  output_rate_adapter buffers blocks and delivers 64-bit words to the transmit
//  interface (tx_*) at the rate it accepts, dropping whole blocks when it falls behind.
//  seed/seed_load refresh the 2543 Toeplitz seed bits between hashes.
//
//  Phase stabilization (stab_clk): pid_controller turns power-meter readings (pm_*) into
//  DAC codes (dac_*) that steer the interferometer's phase shifter.
//
// Ports towards the sampling ADC, the transmitter, the power meter and the DAC are
// plain signals; those parts are analog or vendor hardware outside this RTL.
// Latency: final bits of a hash reach tx_data 4 clocks after the hash's last ADC beat
// (selector, multiplier, accumulator, buffer write) when the buffer is empty.
// The block split and sizes follow the published design; the sample deserialisation
// width, handshakes, buffering and the PID details are this implementation's choices.
module qrng_top #(
  parameter int unsigned M      = qrng_pkg::TOEP_M,
  parameter int unsigned N      = qrng_pkg::TOEP_N,
  parameter int unsigned K      = qrng_pkg::TOEP_K,
  parameter int unsigned OUT_W  = qrng_pkg::TX_W,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned PM_W   = 12,
  parameter int unsigned DAC_W  = 16,
  parameter int unsigned COEF_W = 16,
  localparam int unsigned KEEP    = qrng_pkg::KEEP_W,
  localparam int unsigned SAMPLES = K / KEEP,
  localparam int unsigned ADC_W   = qrng_pkg::ADC_W
) (
  // post-processing domain
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          adc_valid,
  input  logic [SAMPLES-1:0][ADC_W-1:0] adc_samples,
  input  logic [M+N-2:0]                seed,
  input  logic                          seed_load,
  output logic                          seed_pending,
  output logic                          tx_valid,
  output logic [OUT_W-1:0]              tx_data,
  input  logic                          tx_ready,
  output logic [31:0]                   drop_count,
  // phase-stabilization domain
  input  logic                          stab_clk,
  input  logic                          stab_rst_n,
  input  logic                          pm_valid,
  input  logic [PM_W-1:0]               pm_data,
  input  logic [PM_W-1:0]               setpoint,
  input  logic signed [COEF_W-1:0]      kp,
  input  logic signed [COEF_W-1:0]      ki,
  input  logic signed [COEF_W-1:0]      kd,
  output logic                          dac_valid,
  output logic [DAC_W-1:0]              dac_data
);
  logic         raw_valid;
  logic [K-1:0] raw_bits;
  logic         fin_valid;
  logic [M-1:0] fin_bits;

  raw_bit_selector #(.SAMPLES(SAMPLES), .ADC_W(ADC_W)) u_select (
    .clk, .rst_n,
    .in_valid  (adc_valid),
    .samples   (adc_samples),
    .out_valid (raw_valid),
    .raw_bits
  );

  toeplitz_extractor #(.M(M), .N(N), .K(K)) u_extract (
    .clk, .rst_n,
    .seed, .seed_load, .seed_pending,
    .raw_valid, .raw_bits,
    .out_valid  (fin_valid),
    .final_bits (fin_bits)
  );

  output_rate_adapter #(.M(M), .OUT_W(OUT_W), .DEPTH(DEPTH)) u_rate (
    .clk, .rst_n,
    .in_valid  (fin_valid),
    .in_bits   (fin_bits),
    .out_valid (tx_valid),
    .out_data  (tx_data),
    .out_ready (tx_ready),
    .drop_count
  );

  pid_controller #(.PM_W(PM_W), .DAC_W(DAC_W), .COEF_W(COEF_W)) u_pid (
    .clk   (stab_clk),
    .rst_n (stab_rst_n),
    .pm_valid, .pm_data, .setpoint, .kp, .ki, .kd,
    .dac_valid, .dac_data
  );

  if (K % KEEP != 0) begin : g_bad_k
    $error("qrng_top: K must be a multiple of the kept bits per sample");
  end
endmodule
