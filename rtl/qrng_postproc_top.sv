// qrng_postproc_top: real-time tri-channel Toeplitz post-processor for a
// parallel continuous-variable quantum random number generator.
//
// Three quantum sideband modes of one homodyne detector are digitised by
// three 16-bit ADCs running on the same 240 MHz clock as this logic.  The
// outer parallel layer gives every mode its own Toeplitz-hashing extractor
// (toeplitz_extractor), sized to that mode's min-entropy: 519x768,
// 548x768 and 581x768 by default.  The inner layer is each extractor's
// three-stage pipeline, which consumes one 16-bit sample per clock by
// processing the 768-column matrix as 48 sub-matrices of m x 16.  Every 48
// samples a channel yields m bits, 1648 bits per 48 clocks for all three,
// i.e. 8.24 Gbit/s at 240 MHz.  Each channel's results are packed into
// W-bit words (rng_packer) and the three word streams are mixed
// alternately (rng_mixer) into one stream for the host link.
//
// Interface:
//   adc_valid/adc_data  one k-bit raw sample per channel and clock.
//   seed_*              host write port of the seed stores: seed_ch picks
//                       the channel, seed_addr the k-bit word of its seed.
//   out_*               mixed output words with their channel number,
//                       valid/ready handshake, towards the PCI-E core.
//   drop/overflow       per channel: a hash result was lost because the
//                       host did not take words fast enough.
// The ADC interface logic, the PCI-E core and the global clock buffers of
// the original FPGA build are vendor or board parts outside this RTL; their
// signals are the ports above and the single clock.  The seed port, the
// packing and the mixing order are this design's choices.
module qrng_postproc_top #(
  parameter int unsigned K  = qrng_pkg::K_DEF,
  parameter int unsigned N  = qrng_pkg::N_DEF,
  parameter int unsigned M0 = qrng_pkg::M_CH0,
  parameter int unsigned M1 = qrng_pkg::M_CH1,
  parameter int unsigned M2 = qrng_pkg::M_CH2,
  parameter int unsigned W  = qrng_pkg::W_DEF,
  parameter int unsigned AW = $clog2(qrng_pkg::seed_words(
                               (M0 > M1 ? (M0 > M2 ? M0 : M2) : (M1 > M2 ? M1 : M2)), N, K))
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // raw samples from the three ADCs
  input  logic [qrng_pkg::NCH-1:0]         adc_valid,
  input  logic [qrng_pkg::NCH-1:0][K-1:0]  adc_data,
  // seed write port
  input  logic                             seed_we,
  input  qrng_pkg::ch_id_t                 seed_ch,
  input  logic [AW-1:0]                    seed_addr,
  input  logic [K-1:0]                     seed_wdata,
  // mixed output stream
  output logic                             out_valid,
  output logic [W-1:0]                     out_data,
  output qrng_pkg::ch_id_t                 out_ch,
  input  logic                             out_ready,
  // per-channel loss indication
  output logic [qrng_pkg::NCH-1:0]         drop,
  output logic [qrng_pkg::NCH-1:0]         overflow
);

  localparam int unsigned NCH = qrng_pkg::NCH;

  logic [NCH-1:0]        pk_valid, pk_ready;
  logic [NCH-1:0][W-1:0] pk_data;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    localparam int unsigned MC = (c == 0) ? M0 : (c == 1) ? M1 : M2;

    logic          hash_valid;
    logic [MC-1:0] hash;

    toeplitz_extractor #(.M(MC), .N(N), .K(K), .AW(AW)) u_ext (
      .clk        (clk),
      .rst_n      (rst_n),
      .seed_we    (seed_we && (seed_ch == qrng_pkg::ch_id_t'(c))),
      .seed_addr  (seed_addr),
      .seed_wdata (seed_wdata),
      .in_valid   (adc_valid[c]),
      .in_data    (adc_data[c]),
      .out_valid  (hash_valid),
      .out_hash   (hash)
    );

    rng_packer #(.M(MC), .W(W)) u_pack (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (hash_valid),
      .in_hash   (hash),
      .out_valid (pk_valid[c]),
      .out_data  (pk_data[c]),
      .out_ready (pk_ready[c]),
      .drop      (drop[c]),
      .overflow  (overflow[c])
    );
  end

  rng_mixer #(.NCH(NCH), .W(W)) u_mix (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (pk_valid),
    .in_data   (pk_data),
    .in_ready  (pk_ready),
    .out_valid (out_valid),
    .out_data  (out_data),
    .out_ch    (out_ch),
    .out_ready (out_ready)
  );

endmodule
