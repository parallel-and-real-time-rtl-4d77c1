// tb_workload_sweep: the post-processor built at the sub-matrix sizes of
// the original resource and timing study, 192 x 16, 384 x 16 and 576 x 16
// (n = 768), with all three channels of each build at the same size.
//
// Three instances of the top, one per size, receive the same seed prefix
// and the same samples.  Each runs six blocks at full rate, and the bit
// stream of each channel, rebuilt from the mixed output, is compared with
// the Toeplitz hash worked out in the testbench.  All three builds are
// compared with the lowest 192, 384 or 576 bits of one 576-row reference
// hash per block: the bottom rows of a taller Toeplitz matrix form the
// shorter matrix, so passing also shows that a build with more rows can
// stand in for one with fewer.  The rate of one hash per 48 clocks per
// channel is checked for every build.
module tb_workload_sweep;
  import qrng_pkg::*;

  localparam int unsigned K     = K_DEF;
  localparam int unsigned N     = N_DEF;
  localparam int unsigned W     = W_DEF;
  localparam int unsigned STEPS = N / K;
  localparam int unsigned NCFG  = 3;
  localparam int unsigned MS [NCFG] = '{192, 384, 576};
  localparam int unsigned MMAX  = 576;
  localparam int unsigned LMAX  = MMAX + N - 1;
  localparam int unsigned NWMAX = (LMAX + K - 1) / K;
  localparam int unsigned NBLK  = 6;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic [NCH-1:0] adc_valid = '0;
  logic [NCH-1:0][K-1:0] adc_data = '0;
  logic seed_we = 1'b0;
  ch_id_t seed_ch = '0;
  logic [6:0] seed_addr = '0;
  logic [K-1:0] seed_wdata = '0;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NWMAX*K-1:0] seed_tb [NCH];
  bit expbits [NCFG][NCH][$];
  int n_words [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int unsigned M  = MS[g];
    localparam int unsigned NW = (M + N - 1 + K - 1) / K;
    localparam int unsigned AW = $clog2(NW);

    logic out_valid;
    logic [W-1:0] out_data;
    ch_id_t out_ch;
    logic [NCH-1:0] drop, overflow;

    qrng_postproc_top #(.M0(M), .M1(M), .M2(M)) dut (
      .clk        (clk),
      .rst_n      (rst_n),
      .adc_valid  (adc_valid),
      .adc_data   (adc_data),
      .seed_we    (seed_we && (int'(seed_addr) < NW)),
      .seed_ch    (seed_ch),
      .seed_addr  (seed_addr[AW-1:0]),
      .seed_wdata (seed_wdata),
      .out_valid  (out_valid),
      .out_data   (out_data),
      .out_ch     (out_ch),
      .out_ready  (1'b1),
      .drop       (drop),
      .overflow   (overflow)
    );

    always @(posedge clk) begin
      if (rst_n && out_valid) begin
        int c;
        logic [W-1:0] e;
        c = int'(out_ch);
        n_words[g]++;
        checks++;
        if (expbits[g][c].size() < W) begin
          failures++; $display("m=%0d channel %0d: word without pending bits", M, c);
        end else begin
          for (int b = 0; b < W; b++) e[b] = expbits[g][c].pop_front();
          if (e !== out_data) begin
            failures++;
            if (failures < 6) $display("m=%0d channel %0d: word mismatch", M, c);
          end
        end
      end
    end

    // rate: one hash per 48 clocks per channel while streaming
    for (genvar c = 0; c < NCH; c++) begin : g_rate
      int last = -1, cyc = 0;
      always @(posedge clk) begin
        cyc++;
        if (dut.g_ch[c].hash_valid) begin
          if (last >= 0) begin
            checks++;
            if (cyc - last != STEPS) begin
              failures++; $display("m=%0d channel %0d: hash period %0d", M, c, cyc - last);
            end
          end
          last = cyc;
        end
      end
    end
  end

  task automatic stream(int c);
    logic [N-1:0]    d;
    logic [LMAX-1:0] s;
    logic [MMAX-1:0] r;
    s = seed_tb[c][LMAX-1:0];
    for (int b = 0; b < NBLK; b++) begin
      for (int i = 0; i < STEPS; i++) begin
        @(negedge clk);
        adc_valid[c] = 1'b1;
        adc_data[c]  = K'($urandom);
        d[i*K +: K]  = adc_data[c];
      end
      r = '0;
      for (int i = 0; i < N; i++) if (d[i]) r ^= MMAX'(s >> i);
      for (int g = 0; g < NCFG; g++)
        for (int i = 0; i < int'(MS[g]); i++) expbits[g][c].push_back(r[i]);
    end
    @(negedge clk);
    adc_valid[c] = 1'b0;
  endtask

  initial begin
    for (int g = 0; g < NCFG; g++) n_words[g] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCH; c++) begin
      for (int w = 0; w < NWMAX; w++) seed_tb[c][w*K +: K] = K'($urandom);
      for (int w = 0; w < NWMAX; w++) begin
        @(negedge clk);
        seed_we = 1'b1; seed_ch = ch_id_t'(c); seed_addr = 7'(w);
        seed_wdata = seed_tb[c][w*K +: K];
      end
    end
    @(negedge clk);
    seed_we = 1'b0;
    fork
      stream(0);
      stream(1);
      stream(2);
    join
    repeat (60) @(negedge clk);
    for (int g = 0; g < NCFG; g++) begin
      checks++;
      if (n_words[g] != NCH * ((NBLK * int'(MS[g])) / W)) begin
        failures++; $display("m=%0d: %0d words out", MS[g], n_words[g]);
      end
    end
    $display("words out for m = 192/384/576: %0d/%0d/%0d", n_words[0], n_words[1], n_words[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
