// rng_mixer: mixes the word streams of the parallel channels into the one
// stream that goes to the host link.
//
// The publication states that the random numbers of the three channels are
// alternately mixed and transmitted to the host; the arbitration is not
// described.  This block alternates with a round-robin arbiter: of the
// channels offering a word, the first one after the channel served last is
// taken, so with all channels busy the words come out in the order
// 0, 1, 2, 0, 1, 2, ...  The chosen word is held in an output register
// together with its channel number (out_ch).
//
// Handshake on both sides: a word moves when valid && ready.  The output
// register is refilled in the clock its word is taken, so the mixer passes
// one word per clock; a word offered at an input leaves the output one
// clock after it is accepted.
module rng_mixer #(
  parameter int unsigned NCH = qrng_pkg::NCH,
  parameter int unsigned W   = qrng_pkg::W_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NCH-1:0]          in_valid,
  input  logic [NCH-1:0][W-1:0]   in_data,
  output logic [NCH-1:0]          in_ready,
  output logic                    out_valid,
  output logic [W-1:0]            out_data,
  output qrng_pkg::ch_id_t        out_ch,
  input  logic                    out_ready
);

  localparam int unsigned IW = $bits(qrng_pkg::ch_id_t);

  logic [IW-1:0] last_q;   // channel served last
  logic [IW-1:0] grant;
  logic          grant_valid;
  logic          load;

  // round-robin choice, starting after the channel served last
  always_comb begin
    grant       = '0;
    grant_valid = 1'b0;
    for (int unsigned o = 1; o <= NCH; o++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(last_q) + o) % NCH);
      if (!grant_valid && in_valid[idx]) begin
        grant       = IW'(idx);
        grant_valid = 1'b1;
      end
    end
  end

  assign load = !out_valid || out_ready;

  always_comb begin
    in_ready = '0;
    if (load && grant_valid)
      in_ready[grant] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q    <= IW'(NCH - 1);
      out_valid <= 1'b0;
      out_data  <= '0;
      out_ch    <= '0;
    end else if (load) begin
      out_valid <= grant_valid;
      if (grant_valid) begin
        out_data <= in_data[grant];
        out_ch   <= grant;
        last_q   <= grant;
      end
    end
  end

  // At most one input is served per clock.
  a_onehot : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(in_ready));
  // A word offered to the host stays put until it is taken.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_ch));

endmodule
