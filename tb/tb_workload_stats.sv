// tb_workload_stats: longer streaming run of the tri-channel post-processor
// at its default sizes, with input shaped like the real entropy source.
//
// Each ADC input carries 16-bit samples of a Gaussian (sum of 12 uniform
// variables) centred at mid-scale with a spread chosen so that the most
// likely value has probability about 2^-13, i.e. a min-entropy close to
// the 12.9 / 13.5 / 14.2 bits per sample quoted for the three sideband
// modes.  All three channels run at full rate for NBLK blocks.  Checked:
//   - every output bit equals the Toeplitz hash worked out in the
//     testbench (as a XOR of shifted seeds: a column c with d[c] = 1
//     contributes seed >> c);
//   - the extracted bits of each channel, and the mixed stream in the
//     order it leaves the chip, pass the NIST SP 800-22 frequency
//     (monobit) test and runs test at significance 0.01;
//   - the total output equals 1648 bits per 48 clocks.
module tb_workload_stats;
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
  localparam int unsigned NBLK  = 250;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic [NCH-1:0] adc_valid = '0;
  logic [NCH-1:0][K-1:0] adc_data = '0;
  logic seed_we = 1'b0;
  ch_id_t seed_ch = '0;
  logic [AW-1:0] seed_addr = '0;
  logic [K-1:0] seed_wdata = '0;
  logic out_valid, out_ready = 1'b1;
  logic [W-1:0] out_data;
  ch_id_t out_ch;
  logic [NCH-1:0] drop, overflow;

  int checks = 0, failures = 0;

  qrng_postproc_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NBLK * STEPS + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NWMAX*K-1:0] seed_tb [NCH];
  bit expbits [NCH][$];
  bit got [NCH][$];
  bit mixed [$];

  // output collection and comparison
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int c;
      c = int'(out_ch);
      for (int b = 0; b < W; b++) begin
        got[c].push_back(out_data[b]);
        mixed.push_back(out_data[b]);
      end
      checks++;
      if (expbits[c].size() < W) begin
        failures++; $display("channel %0d: word without pending bits", c);
      end else begin
        logic [W-1:0] e;
        for (int b = 0; b < W; b++) e[b] = expbits[c].pop_front();
        if (e !== out_data) begin
          failures++;
          if (failures < 6) $display("channel %0d: word mismatch", c);
        end
      end
    end
  end

  function automatic int gauss_sample();
    longint s = 0;
    longint x;
    for (int i = 0; i < 12; i++) s += $urandom_range(0, 65535);
    // sum of 12 uniforms on [0,65535]: mean 393210, standard deviation
    // about 65536; scale to a standard deviation of 3270 codes
    x = 32768 + ((s - 393210) * 3270) / 65536;
    if (x < 0) x = 0;
    if (x > 65535) x = 65535;
    return int'(x);
  endfunction

  task automatic stream(int c);
    logic [N-1:0]     d;
    logic [LMAX-1:0]  s;
    logic [MMAX-1:0]  r;
    s = seed_tb[c][LMAX-1:0];
    for (int b = 0; b < NBLK; b++) begin
      for (int i = 0; i < STEPS; i++) begin
        @(negedge clk);
        adc_valid[c] = 1'b1;
        adc_data[c]  = K'(gauss_sample());
        d[i*K +: K]  = adc_data[c];
      end
      r = '0;
      for (int i = 0; i < N; i++) if (d[i]) r ^= MMAX'(s >> i);
      for (int i = 0; i < int'(M_C[c]); i++) expbits[c].push_back(r[i]);
    end
    @(negedge clk);
    adc_valid[c] = 1'b0;
  endtask

  // NIST SP 800-22 frequency (monobit) test: P >= 0.01 exactly when
  // |#ones - #zeros| / sqrt(n) <= 2.5758
  function automatic bit monobit_ok(ref bit q[$], output real stat);
    longint sum = 0;
    foreach (q[i]) sum += q[i] ? 1 : -1;
    stat = ((sum < 0) ? -sum : sum) / $sqrt(real'(q.size()));
    return stat <= 2.5758;
  endfunction

  // NIST SP 800-22 runs test: P = erfc(stat) >= 0.01 exactly when
  // stat <= 1.8214, with stat = |V - 2 n p (1-p)| / (2 sqrt(2n) p (1-p))
  function automatic bit runs_ok(ref bit q[$], output real stat);
    longint ones = 0, v = 1;
    real n, p;
    foreach (q[i]) begin
      ones += q[i];
      if (i > 0 && q[i] != q[i-1]) v++;
    end
    n = real'(q.size());
    p = real'(ones) / n;
    stat = (real'(v) - 2.0 * n * p * (1.0 - p));
    if (stat < 0) stat = -stat;
    stat = stat / (2.0 * $sqrt(2.0 * n) * p * (1.0 - p));
    return stat <= 1.8214;
  endfunction

  initial begin
    int t0, t1;
    real st;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCH; c++) begin
      int nw;
      nw = (int'(M_C[c]) + N - 1 + K - 1) / K;
      for (int w = 0; w < NWMAX; w++) seed_tb[c][w*K +: K] = K'($urandom);
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        seed_we = 1'b1; seed_ch = ch_id_t'(c); seed_addr = AW'(w);
        seed_wdata = seed_tb[c][w*K +: K];
      end
    end
    @(negedge clk);
    seed_we = 1'b0;
    t0 = $time;
    fork
      stream(0);
      stream(1);
      stream(2);
    join
    t1 = $time;
    repeat (60) @(negedge clk);

    // throughput: all bits produced in NBLK * 48 clocks
    checks++;
    begin
      int total = 0;
      for (int c = 0; c < NCH; c++) total += got[c].size() + expbits[c].size();
      if (total != NBLK * int'(M_CH0 + M_CH1 + M_CH2) || (t1 - t0) / 10 != NBLK * STEPS + 1) begin
        failures++; $display("throughput: %0d bits in %0d clocks", total, (t1 - t0) / 10);
      end
      $display("%0d bits in %0d clocks = %0.3f bits/clock (%0.2f Gbit/s at 240 MHz)",
               total, NBLK * STEPS, real'(total) / (NBLK * STEPS),
               real'(total) / (NBLK * STEPS) * 0.240);
    end

    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (!monobit_ok(got[c], st)) begin failures++; $display("channel %0d fails frequency test", c); end
      $display("channel %0d: %0d bits, frequency statistic %0.3f", c, got[c].size(), st);
      checks++;
      if (!runs_ok(got[c], st)) begin failures++; $display("channel %0d fails runs test", c); end
      $display("channel %0d: runs statistic %0.3f", c, st);
    end
    checks++;
    if (!monobit_ok(mixed, st)) begin failures++; $display("mixed stream fails frequency test"); end
    $display("mixed: %0d bits, frequency statistic %0.3f", mixed.size(), st);
    checks++;
    if (!runs_ok(mixed, st)) begin failures++; $display("mixed stream fails runs test"); end
    $display("mixed: runs statistic %0.3f", st);
    checks++;
    if (overflow != '0) begin failures++; $display("overflow at full rate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
