// toeplitz_matgen: matrix construction stage (stage 1 of 3) of one
// Toeplitz-hashing extractor.
//
// An m x n Toeplitz matrix is fixed by its m+n-1 seed bits s_1..s_{m+n-1}
// (seed[0] holds s_1).  Column c of the matrix, read from the bottom row up,
// is s_c .. s_{c+m-1}.  The matrix is processed as n/k sub-matrices of
// m x k; sub-matrix i (0-based) uses seed bits i*k .. i*k+m+k-2, and its
// column j is the slice window[j +: m].  Following the publication, the
// window is produced by a shift register with feedback: a copy of the seed
// that is rotated right by k bits on every accepted sample, so the lowest
// m+k-1 bits of the copy are always the current window.  At the first step
// of a block the window is taken straight from the seed store and the copy
// is reloaded from it, so every block starts from the stored seed.
//
// The seed store is written by the host, k bits per write, at word address
// seed_addr (bits seed_addr*k .. seed_addr*k+k-1; bits past m+n-1 are
// dropped).  How the seed reaches the chip is not described in the
// publication; this port, the zero reset value of the seed and the in_valid
// qualifier are this design's choices.  A seed should be written while no
// block is in progress; a write during a block takes effect at the next
// block boundary for the window, but may mix old and new bits in the
// rotating copy of the running block.
//
// Timing: one sample per clock when in_valid is high.  The window, the
// sample and the first/last flags of that step appear registered one clock
// later with out_valid.  Raw bit d_{i*k+j+1} of the matrix product is bit j
// of the i-th sample of a block (LSB first).
module toeplitz_matgen #(
  parameter int unsigned M  = qrng_pkg::M_CH2,
  parameter int unsigned N  = qrng_pkg::N_DEF,
  parameter int unsigned K  = qrng_pkg::K_DEF,
  parameter int unsigned AW = $clog2(qrng_pkg::seed_words(M, N, K))
) (
  input  logic             clk,
  input  logic             rst_n,
  // seed store write port
  input  logic             seed_we,
  input  logic [AW-1:0]    seed_addr,
  input  logic [K-1:0]     seed_wdata,
  // raw samples from the ADC
  input  logic             in_valid,
  input  logic [K-1:0]     in_data,
  // current sub-matrix (registered)
  output logic             out_valid,
  output logic [M+K-2:0]   out_window,
  output logic [K-1:0]     out_data,
  output logic             out_first,
  output logic             out_last
);

  localparam int unsigned L     = M + N - 1;  // seed length
  localparam int unsigned STEPS = N / K;      // sub-matrices per block
  localparam int unsigned SW    = (STEPS > 1) ? $clog2(STEPS) : 1;

  initial begin
    assert (N % K == 0) else $error("N must be a multiple of K");
  end

  logic [L-1:0]  seed_q;   // stored seed
  logic [L-1:0]  rot_q;    // rotating copy (shift register with feedback)
  logic [SW-1:0] step_q;   // index i of the current sub-matrix

  logic          first_step, last_step;
  logic [L-1:0]  rot_src;

  assign first_step = (step_q == '0);
  assign last_step  = (step_q == SW'(STEPS - 1));
  assign rot_src    = first_step ? seed_q : rot_q;

  // seed store
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seed_q <= '0;
    end else if (seed_we) begin
      for (int unsigned b = 0; b < K; b++) begin
        if (int'(seed_addr) * K + b < L)
          seed_q[int'(seed_addr) * K + b] <= seed_wdata[b];
      end
    end
  end

  // step counter and rotating register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q <= '0;
      rot_q  <= '0;
    end else if (in_valid) begin
      step_q <= last_step ? '0 : step_q + 1'b1;
      rot_q  <= {rot_src[K-1:0], rot_src[L-1:K]};
    end
  end

  // stage-1 output registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_window <= '0;
      out_data   <= '0;
      out_first  <= 1'b0;
      out_last   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_window <= rot_src[M+K-2:0];
        out_data   <= in_data;
        out_first  <= first_step;
        out_last   <= last_step;
      end
    end
  end

endmodule
