// tb_toeplitz_matgen: self-checking test of the matrix construction stage.
//
// Writes a random seed through the k-bit write port, then streams samples
// with random gaps in in_valid.  For every accepted sample the expected
// window is computed directly from the seed held in the testbench
// (bits i*k .. i*k+m+k-2 for step i of the block), together with the
// sample and the first/last flags, and compared one clock later.  A second
// seed is written between blocks to check that the next block uses it.
module tb_toeplitz_matgen;
  localparam int unsigned M     = 581;
  localparam int unsigned N     = 768;
  localparam int unsigned K     = 16;
  localparam int unsigned L     = M + N - 1;
  localparam int unsigned NW    = (L + K - 1) / K;
  localparam int unsigned AW    = $clog2(NW);
  localparam int unsigned STEPS = N / K;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic seed_we = 1'b0;
  logic [AW-1:0] seed_addr = '0;
  logic [K-1:0] seed_wdata = '0;
  logic in_valid = 1'b0;
  logic [K-1:0] in_data = '0;
  logic out_valid, out_first, out_last;
  logic [M+K-2:0] out_window;
  logic [K-1:0] out_data;

  int checks = 0, failures = 0;

  toeplitz_matgen #(.M(M), .N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NW*K-1:0] seed_tb;

  typedef struct {
    logic [M+K-2:0] win;
    logic [K-1:0]   d;
    logic           first, last;
  } exp_t;
  exp_t expq[$];

  task automatic write_seed();
    for (int unsigned w = 0; w < NW; w++) seed_tb[w*K +: K] = K'($urandom);
    for (int unsigned w = 0; w < NW; w++) begin
      @(negedge clk);
      seed_we = 1'b1; seed_addr = AW'(w); seed_wdata = seed_tb[w*K +: K];
    end
    @(negedge clk);
    seed_we = 1'b0;
  endtask

  // checker: one clock after each accepted sample
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected out_valid");
      end else begin
        e = expq.pop_front();
        if (out_window !== e.win || out_data !== e.d || out_first !== e.first || out_last !== e.last) begin
          failures++;
          $display("mismatch: first=%b/%b last=%b/%b data=%h/%h", out_first, e.first, out_last, e.last, out_data, e.d);
        end
      end
    end
  end

  task automatic run_block(input bit gaps);
    for (int unsigned i = 0; i < STEPS; i++) begin
      exp_t e;
      if (gaps) begin
        while ($urandom_range(0, 2) == 0) begin
          @(negedge clk); in_valid = 1'b0;
        end
      end
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = K'($urandom);
      e.win   = (M+K-1)'(seed_tb >> (i*K));
      e.d     = in_data;
      e.first = (i == 0);
      e.last  = (i == STEPS - 1);
      expq.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_seed();
    run_block(1'b0);
    run_block(1'b1);
    write_seed();
    run_block(1'b0);
    run_block(1'b1);
    repeat (4) @(negedge clk);
    if (expq.size() != 0) begin
      failures++; $display("%0d expected windows never appeared", expq.size());
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
