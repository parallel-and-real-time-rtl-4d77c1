// tb_toeplitz_accum: self-checking test of the vector accumulation stage.
//
// Feeds blocks of random m-bit partial products with first/last flags, of
// several lengths and with gaps in in_valid, and checks that out_valid
// pulses exactly once per block, one clock after the last vector, with
// out_hash equal to the XOR of the block's vectors, and that out_hash holds
// between blocks.
module tb_toeplitz_accum;
  localparam int unsigned M = 581;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [M-1:0] in_vec = '0;
  logic out_valid;
  logic [M-1:0] out_hash;

  int checks = 0, failures = 0;

  toeplitz_accum #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [M-1:0] exp_hash = '0;
  logic exp_valid = 1'b0;
  int blocks = 0;

  // compare every clock
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== exp_valid || out_hash !== exp_hash) begin
        failures++;
        $display("mismatch at block %0d: valid %b/%b", blocks, out_valid, exp_valid);
      end
    end
  end

  // expected result: the XOR of the vectors of each block, recorded when
  // the last vector is driven and due one clock edge later
  logic [M-1:0] acc_tb = '0;
  always @(posedge clk) begin
    if (rst_n) begin
      exp_valid <= in_valid && in_last;
      if (in_valid && in_last) exp_hash <= acc_tb;
    end
  end

  initial begin
    int len, gap;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 40; b++) begin
      len = (b % 4 == 0) ? 1 : (b % 4 == 1) ? 48 : $urandom_range(2, 20);
      for (int i = 0; i < len; i++) begin
        gap = (b % 3 == 2) ? $urandom_range(0, 2) : 0;
        for (int g = 0; g < gap; g++) begin
          @(negedge clk); #1;
          in_valid = 1'b0;
        end
        @(negedge clk); #1;
        in_valid = 1'b1;
        for (int w = 0; w < M; w += 32) in_vec[w +: 32] = $urandom;
        in_first = (i == 0);
        in_last  = (i == len - 1);
        acc_tb   = in_first ? in_vec : (acc_tb ^ in_vec);
      end
      blocks++;
    end
    @(negedge clk); #1;
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    if (blocks != 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
