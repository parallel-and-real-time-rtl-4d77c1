// toeplitz_accum: vector accumulation stage (stage 3 of 3) of one
// Toeplitz-hashing extractor.
//
// The publication XORs the n/k partial products sum_reg of a block into the
// m-bit hash result.  Here this is done as a running XOR: the partial
// product flagged first starts the accumulator, each further one is XORed
// in, and the one flagged last completes the result, which is registered to
// out_hash with a one-clock out_valid pulse.  The running form gives the
// same result as storing all n/k vectors and XORing them at the end, with
// one m-bit register instead of n/k; that is this design's choice.
// out_hash holds its value until the next block completes, so a consumer
// has n/k clocks to take it.
module toeplitz_accum #(
  parameter int unsigned M = qrng_pkg::M_CH2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [M-1:0] in_vec,
  input  logic         in_first,
  input  logic         in_last,
  output logic         out_valid,
  output logic [M-1:0] out_hash
);

  logic [M-1:0] acc_q;
  logic [M-1:0] acc_next;

  assign acc_next = in_first ? in_vec : (acc_q ^ in_vec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_hash  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc_q <= acc_next;
        if (in_last)
          out_hash <= acc_next;
      end
    end
  end

endmodule
