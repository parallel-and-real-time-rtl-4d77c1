// tb_toeplitz_extractor: self-checking test of one complete extractor at
// the publication's largest channel size (581 x 768, k = 16).
//
// Loads a random seed, streams blocks of 48 random 16-bit samples and
// compares every hash with a reference worked out in the testbench straight
// from the definition of the Toeplitz product: output bit b (row b counted
// from the bottom) = XOR over columns c of d[c] AND seed[c+b], where d[c]
// is bit c%16 of sample c/16.  With samples on every clock it also checks
// the rate (one hash every 48 clocks) and the latency (out_valid two clocks
// after the edge that takes the last sample); further blocks run with gaps
// in in_valid and with a new seed.
module tb_toeplitz_extractor;
  localparam int unsigned M     = 581;
  localparam int unsigned N     = 768;
  localparam int unsigned K     = 16;
  localparam int unsigned L     = M + N - 1;
  localparam int unsigned NW    = (L + K - 1) / K;
  localparam int unsigned AW    = $clog2(NW);
  localparam int unsigned STEPS = N / K;
  localparam int unsigned NBLK  = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic seed_we = 1'b0;
  logic [AW-1:0] seed_addr = '0;
  logic [K-1:0] seed_wdata = '0;
  logic in_valid = 1'b0;
  logic [K-1:0] in_data = '0;
  logic out_valid;
  logic [M-1:0] out_hash;

  int checks = 0, failures = 0;

  toeplitz_extractor #(.M(M), .N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NW*K-1:0] seed_tb;
  logic [M-1:0]    expq[$];
  int              last_cyc[$];
  int              cyc = 0;
  int              prev_out = -1;
  int              got = 0;
  bit              continuous;

  always @(posedge clk) cyc++;

  function automatic logic [M-1:0] ref_hash(logic [NW*K-1:0] s, logic [N-1:0] d);
    logic [M-1:0] r = '0;
    for (int b = 0; b < M; b++)
      for (int c = 0; c < N; c++)
        r[b] ^= d[c] & s[c+b];
    return r;
  endfunction

  task automatic write_seed();
    for (int unsigned w = 0; w < NW; w++) seed_tb[w*K +: K] = K'($urandom);
    for (int unsigned w = 0; w < NW; w++) begin
      @(negedge clk);
      seed_we = 1'b1; seed_addr = AW'(w); seed_wdata = seed_tb[w*K +: K];
    end
    @(negedge clk);
    seed_we = 1'b0;
  endtask

  task automatic run_block(input bit gaps);
    logic [N-1:0] d;
    for (int unsigned i = 0; i < STEPS; i++) begin
      if (gaps) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk); in_valid = 1'b0;
        end
      end
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = K'($urandom);
      d[i*K +: K] = in_data;
    end
    expq.push_back(ref_hash(seed_tb, d));
    last_cyc.push_back(cyc + 1);  // edge that takes the last sample
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      logic [M-1:0] e;
      int lc;
      checks++;
      got++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected hash");
      end else begin
        e  = expq.pop_front();
        lc = last_cyc.pop_front();
        if (out_hash !== e) begin
          failures++; $display("hash %0d mismatch", got);
        end
        checks++;
        if (cyc - lc != 2) begin
          failures++; $display("latency %0d clocks, expected 2", cyc - lc);
        end
        if (continuous && prev_out >= 0) begin
          checks++;
          if (cyc - prev_out != STEPS) begin
            failures++; $display("hash period %0d clocks, expected %0d", cyc - prev_out, STEPS);
          end
        end
      end
      prev_out = cyc;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_seed();
    continuous = 1'b1;
    for (int b = 0; b < NBLK/2; b++) run_block(1'b0);
    @(negedge clk); in_valid = 1'b0;
    repeat (5) @(negedge clk);
    continuous = 1'b0;
    write_seed();
    for (int b = 0; b < NBLK/2; b++) run_block(1'b1);
    @(negedge clk); in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (got != NBLK || expq.size() != 0) begin
      failures++; $display("%0d hashes seen, %0d expected", got, NBLK);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
