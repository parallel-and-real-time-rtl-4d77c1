// toeplitz_extractor: one channel's Toeplitz-hashing randomness extractor.
//
// Hashes every block of n raw bits (n/k ADC samples of k bits) into m
// output bits with an m x n binary Toeplitz matrix, using the three-stage
// pipeline of the publication:
//   toeplitz_matgen  builds the m x k sub-matrix of the current step,
//   toeplitz_submul  multiplies it by the k-bit sample (AND + XOR cascade),
//   toeplitz_accum   XORs the n/k partial products of the block.
// One sample is taken per clock (when in_valid is high), so the extractor
// keeps pace with an ADC running on the same clock.  out_valid pulses once
// per n/k accepted samples, two clocks after the edge that takes the last
// sample of the block (three register stages); out_hash then holds
// a_m..a_1 of the matrix product (bit 0 is the bottom row, whose seed bits
// are s_1..s_n) until the next block ends.
// Throughput: m bits per n/k clocks (581/48 bits per clock at the default).
module toeplitz_extractor #(
  parameter int unsigned M  = qrng_pkg::M_CH2,
  parameter int unsigned N  = qrng_pkg::N_DEF,
  parameter int unsigned K  = qrng_pkg::K_DEF,
  parameter int unsigned AW = $clog2(qrng_pkg::seed_words(M, N, K))
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          seed_we,
  input  logic [AW-1:0] seed_addr,
  input  logic [K-1:0]  seed_wdata,
  input  logic          in_valid,
  input  logic [K-1:0]  in_data,
  output logic          out_valid,
  output logic [M-1:0]  out_hash
);

  logic           s1_valid, s1_first, s1_last;
  logic [M+K-2:0] s1_window;
  logic [K-1:0]   s1_data;

  logic           s2_valid, s2_first, s2_last;
  logic [M-1:0]   s2_sum;

  toeplitz_matgen #(.M(M), .N(N), .K(K), .AW(AW)) u_matgen (
    .clk        (clk),
    .rst_n      (rst_n),
    .seed_we    (seed_we),
    .seed_addr  (seed_addr),
    .seed_wdata (seed_wdata),
    .in_valid   (in_valid),
    .in_data    (in_data),
    .out_valid  (s1_valid),
    .out_window (s1_window),
    .out_data   (s1_data),
    .out_first  (s1_first),
    .out_last   (s1_last)
  );

  toeplitz_submul #(.M(M), .K(K)) u_submul (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s1_valid),
    .in_window (s1_window),
    .in_data   (s1_data),
    .in_first  (s1_first),
    .in_last   (s1_last),
    .out_valid (s2_valid),
    .sum_reg   (s2_sum),
    .out_first (s2_first),
    .out_last  (s2_last)
  );

  toeplitz_accum #(.M(M)) u_accum (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s2_valid),
    .in_vec    (s2_sum),
    .in_first  (s2_first),
    .in_last   (s2_last),
    .out_valid (out_valid),
    .out_hash  (out_hash)
  );

endmodule
