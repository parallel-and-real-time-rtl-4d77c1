// toeplitz_submul: sub-matrix multiplication stage (stage 2 of 3) of one
// Toeplitz-hashing extractor.
//
// Computes the GF(2) product of one m x k Toeplitz sub-matrix and the k raw
// bits of one sample, as the publication describes: for every column j a
// generate loop assigns either the sub-matrix column window[j +: m] or zero
// to temp[j], depending on raw bit d[j] (an AND gate per matrix element),
// and a cascade of XOR gates adds the k column vectors bit by bit.  The
// result is stored in the register sum_reg, one clock after the inputs.
// Bit b of sum_reg is the matrix row b counted from the bottom row.  The
// first/last flags of the step travel alongside.  The placement of sum_reg
// in this stage follows the block diagram of the extractor pipeline.
module toeplitz_submul #(
  parameter int unsigned M = qrng_pkg::M_CH2,
  parameter int unsigned K = qrng_pkg::K_DEF
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [M+K-2:0] in_window,
  input  logic [K-1:0]   in_data,
  input  logic           in_first,
  input  logic           in_last,
  output logic           out_valid,
  output logic [M-1:0]   sum_reg,
  output logic           out_first,
  output logic           out_last
);

  logic [M-1:0] temp      [K];  // selected columns
  logic [M-1:0] xor_chain [K];  // cascaded XOR of the columns

  for (genvar j = 0; j < K; j++) begin : g_col
    assign temp[j] = in_data[j] ? in_window[j +: M] : '0;
    if (j == 0) begin : g_head
      assign xor_chain[j] = temp[j];
    end else begin : g_tail
      assign xor_chain[j] = xor_chain[j-1] ^ temp[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum_reg   <= '0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        sum_reg   <= xor_chain[K-1];
        out_first <= in_first;
        out_last  <= in_last;
      end
    end
  end

endmodule
