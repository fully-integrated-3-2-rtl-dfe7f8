// qrng_pkg: constants shared by the QRNG post-processing blocks.
//
// The random-number pipeline takes 8-bit samples of an interferometer photodetector
// at 1 GSa/s, keeps 5 bits of each sample and hashes the resulting 5 Gbps raw stream
// with an m x n binary Toeplitz matrix (m = 1024 output bits per n = 1520 input bits).
// The matrix is applied k = 80 columns at a time, one 80-bit beat per 62.5 MHz clock.
// These numbers are the design's published configuration; SAMPLES_PER_BEAT (16) is
// derived from them (1 GSa/s / 62.5 MHz) rather than stated.
package qrng_pkg;
  localparam int unsigned ADC_W            = 8;     // sampling ADC resolution
  localparam int unsigned DROP_LSB         = 1;     // low bits discarded per sample
  localparam int unsigned DROP_MSB         = 2;     // high bits discarded per sample
  localparam int unsigned KEEP_W           = ADC_W - DROP_LSB - DROP_MSB; // 5
  localparam int unsigned SAMPLES_PER_BEAT = 16;    // 1 GSa/s at a 62.5 MHz clock
  localparam int unsigned TOEP_M           = 1024;  // output bits per hash
  localparam int unsigned TOEP_N           = 1520;  // input bits per hash
  localparam int unsigned TOEP_K           = 80;    // input bits per clock
  localparam int unsigned TX_W             = 64;    // word width towards the transmitter
endpackage
