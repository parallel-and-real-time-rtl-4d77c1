// tb_qrng_postproc_top: end-to-end test of the tri-channel post-processor
// with every parameter at its default (519/548/581 x 768, k = 16, 64-bit
// output words).
//
// The testbench writes a random seed into each channel, streams random
// 16-bit samples into the three ADC inputs and rebuilds, from the mixed
// output stream, the bit stream of each channel (words tagged with their
// channel, bits taken LSB first).  Each channel's bits must equal its
// Toeplitz hashes, worked out here from the definition of the matrix
// product, in order and without gaps.
//   Phase A: samples on every clock, host always ready.  Checks that each
//            channel yields one hash every 48 clocks (8.24 Gbit/s at
//            240 MHz for the three channels together).
//   Phase B: random gaps on every ADC input and random host back-pressure.
//   Phase C: the host stops taking words; the channels must drop results
//            and raise their overflow flags.
// Mechanisms counted (each must occur): seed writes, hashes per channel,
// ADC gaps, host stalls, channel alternation in the mixed stream, drops.
module tb_qrng_postproc_top;
  import qrng_pkg::*;

  localparam int unsigned K     = K_DEF;
  localparam int unsigned N     = N_DEF;
  localparam int unsigned W     = W_DEF;
  localparam int unsigned STEPS = N / K;
  localparam int unsigned MMAX  = M_CH2;
  localparam int unsigned LMAX  = MMAX + N - 1;
  localparam int unsigned NWMAX = (LMAX + K - 1) / K;
  localparam int unsigned AW    = $clog2(NWMAX);
  localparam int unsigned M_C [NCH] = '{M_CH0, M_CH1, M_CH2};

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic [NCH-1:0] adc_valid = '0;
  logic [NCH-1:0][K-1:0] adc_data = '0;
  logic seed_we = 1'b0;
  ch_id_t seed_ch = '0;
  logic [AW-1:0] seed_addr = '0;
  logic [K-1:0] seed_wdata = '0;
  logic out_valid, out_ready = 1'b0;
  logic [W-1:0] out_data;
  ch_id_t out_ch;
  logic [NCH-1:0] drop, overflow;

  int checks = 0, failures = 0;

  qrng_postproc_top dut (.*);

  always #5 clk = ~clk;  // one clock = 10 time units (240 MHz in the original)

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NWMAX*K-1:0] seed_tb [NCH];
  bit expbits [NCH][$];
  bit compare = 1'b1;

  // mechanism counters
  int n_seed_wr = 0, n_adc_gap = 0, n_host_stall = 0, n_switch = 0, n_drop = 0;
  int n_hash [NCH];
  int n_bits [NCH];
  int prev_ch = -1;

  function automatic void ref_hash(int c, logic [N-1:0] d);
    bit r;
    for (int b = 0; b < int'(M_C[c]); b++) begin
      r = 1'b0;
      for (int i = 0; i < N; i++) r ^= d[i] & seed_tb[c][i+b];
      expbits[c].push_back(r);
    end
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) n_host_stall++;
      for (int c = 0; c < NCH; c++) if (drop[c]) n_drop++;
      if (out_valid && out_ready) begin
        int c;
        c = int'(out_ch);
        if (prev_ch >= 0 && c != prev_ch) n_switch++;
        prev_ch = c;
        n_bits[c] += W;
        if (compare) begin
          checks++;
          if (c >= NCH || expbits[c].size() < W) begin
            failures++; $display("word for channel %0d that has no pending bits", c);
          end else begin
            logic [W-1:0] e;
            for (int b = 0; b < W; b++) e[b] = expbits[c].pop_front();
            if (out_data !== e) begin
              failures++;
              if (failures < 6) $display("channel %0d word mismatch: %h vs %h", c, out_data, e);
            end
          end
        end
      end
    end
  end

  // rate check inside each channel: one hash per 48 clocks in phase A
  bit phase_a = 1'b0;
  for (genvar c = 0; c < NCH; c++) begin : g_mon
    int last = -1, cyc = 0;
    always @(posedge clk) begin
      cyc++;
      if (dut.g_ch[c].hash_valid) begin
        n_hash[c]++;
        if (phase_a && last >= 0) begin
          checks++;
          if (cyc - last != STEPS) begin
            failures++; $display("channel %0d: hash period %0d, expected %0d", c, cyc - last, STEPS);
          end
        end
        last = cyc;
      end
    end
  end

  task automatic write_seeds();
    for (int c = 0; c < NCH; c++) begin
      int nw = (int'(M_C[c]) + N - 1 + K - 1) / K;
      for (int w = 0; w < NWMAX; w++) seed_tb[c][w*K +: K] = K'($urandom);
      for (int w = nw * K; w < NWMAX * K; w++) seed_tb[c][w] = 1'b0;
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        seed_we = 1'b1; seed_ch = ch_id_t'(c); seed_addr = AW'(w);
        seed_wdata = seed_tb[c][w*K +: K];
        n_seed_wr++;
      end
    end
    @(negedge clk);
    seed_we = 1'b0;
  endtask

  // one channel's sample stream: nblk blocks, with or without gaps
  task automatic stream(int c, int nblk, bit gaps);
    logic [N-1:0] d;
    for (int b = 0; b < nblk; b++) begin
      for (int i = 0; i < STEPS; i++) begin
        if (gaps) begin
          while ($urandom_range(0, 4) == 0) begin
            @(negedge clk); adc_valid[c] = 1'b0; n_adc_gap++;
          end
        end
        @(negedge clk);
        adc_valid[c]  = 1'b1;
        adc_data[c]   = K'($urandom);
        d[i*K +: K]   = adc_data[c];
      end
      if (compare) ref_hash(c, d);
    end
    @(negedge clk);
    adc_valid[c] = 1'b0;
  endtask

  bit host_random = 1'b0;
  always @(negedge clk) begin
    if (host_random) out_ready = ($urandom_range(0, 3) != 0);
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin n_hash[c] = 0; n_bits[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_seeds();
    out_ready = 1'b1;

    // phase A: full rate
    phase_a = 1'b1;
    fork
      stream(0, 6, 1'b0);
      stream(1, 6, 1'b0);
      stream(2, 6, 1'b0);
    join
    phase_a = 1'b0;
    repeat (60) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (n_hash[c] != 6 || n_bits[c] != (6 * int'(M_C[c])) / W * W) begin
        failures++;
        $display("phase A channel %0d: %0d hashes, %0d bits out", c, n_hash[c], n_bits[c]);
      end
    end

    // phase B: ADC gaps, host back-pressure, new seeds
    write_seeds();
    host_random = 1'b1;
    fork
      stream(0, 5, 1'b1);
      stream(1, 5, 1'b1);
      stream(2, 5, 1'b1);
    join
    repeat (40) @(negedge clk);
    host_random = 1'b0;
    out_ready = 1'b1;
    repeat (20) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (expbits[c].size() >= W || overflow[c]) begin
        failures++;
        $display("channel %0d: %0d bits undelivered, overflow %b", c, expbits[c].size(), overflow[c]);
      end
    end

    // phase C: host stops, results must be dropped
    compare = 1'b0;
    out_ready = 1'b0;
    fork
      stream(0, 3, 1'b0);
      stream(1, 3, 1'b0);
      stream(2, 3, 1'b0);
    join
    repeat (5) @(negedge clk);
    checks++;
    if (overflow != '1) begin
      failures++; $display("overflow flags %b, expected all set", overflow);
    end
    out_ready = 1'b1;
    repeat (40) @(negedge clk);

    $display("mechanisms: seed writes %0d, hashes %0d/%0d/%0d, ADC gaps %0d, host stalls %0d, channel switches %0d, drops %0d",
             n_seed_wr, n_hash[0], n_hash[1], n_hash[2], n_adc_gap, n_host_stall, n_switch, n_drop);
    checks++;
    if (n_seed_wr == 0 || n_hash[0] == 0 || n_hash[1] == 0 || n_hash[2] == 0 ||
        n_adc_gap == 0 || n_host_stall == 0 || n_switch == 0 || n_drop == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
