// rng_packer: turns one channel's m-bit hash results into a stream of
// W-bit words for the host link.
//
// The publication sends the extracted bits of the three channels to the
// host computer but does not describe the packing; this block is this
// design's simplest way to do it.  Each result is appended, bit 0 first, to
// a bit buffer of m+W bits; whenever W or more bits are buffered the lowest
// W form out_data with out_valid high.  The stream of one channel is thus
// the concatenation of its hash results with no gaps, and bits left over
// from one result continue in the next word.
//
// Handshake: a word is taken when out_valid && out_ready; out_data does not
// change while out_valid is high and out_ready low.  A result is accepted in
// the clock its in_valid pulse arrives if it fits in the buffer (after the
// word leaving in the same clock); otherwise it is dropped, drop pulses for
// one clock and the sticky overflow flag is set until reset.  With the host
// taking a word at least every few clocks a result is never dropped: the
// extractor delivers m bits only once every n/k clocks.
module rng_packer #(
  parameter int unsigned M = qrng_pkg::M_CH2,
  parameter int unsigned W = qrng_pkg::W_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [M-1:0] in_hash,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready,
  output logic         drop,
  output logic         overflow
);

  localparam int unsigned BUFW = M + W;
  localparam int unsigned CW   = $clog2(BUFW + 1);

  logic [BUFW-1:0] buf_q, buf_pop, buf_next;
  logic [CW-1:0]   cnt_q, cnt_pop, cnt_next;
  logic            pop, accept;

  assign out_valid = (cnt_q >= CW'(W));
  assign out_data  = buf_q[W-1:0];
  assign pop       = out_valid && out_ready;

  always_comb begin
    buf_pop = pop ? (buf_q >> W) : buf_q;
    cnt_pop = pop ? (cnt_q - CW'(W)) : cnt_q;
    accept  = in_valid && ((32'(cnt_pop) + M) <= BUFW);
    buf_next = buf_pop;
    cnt_next = cnt_pop;
    if (accept) begin
      buf_next = buf_pop | ({{W{1'b0}}, in_hash} << cnt_pop);
      cnt_next = cnt_pop + CW'(M);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q    <= '0;
      cnt_q    <= '0;
      drop     <= 1'b0;
      overflow <= 1'b0;
    end else begin
      buf_q <= buf_next;
      cnt_q <= cnt_next;
      drop  <= in_valid && !accept;
      if (in_valid && !accept)
        overflow <= 1'b1;
    end
  end

  // A word offered to the host stays put until it is taken.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
