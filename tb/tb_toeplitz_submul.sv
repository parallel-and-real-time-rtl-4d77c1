// tb_toeplitz_submul: self-checking test of the sub-matrix multiplication.
//
// Drives random windows and samples, one per clock with random gaps, and
// compares sum_reg one clock later with the GF(2) product worked out bit by
// bit: row b = XOR over j of d[j] AND window[j+b].  Also checks that the
// first/last flags travel with the data and that sum_reg holds while no
// valid input arrives.  Corner cases: all-zero and all-one samples.
module tb_toeplitz_submul;
  localparam int unsigned M = 581;
  localparam int unsigned K = 16;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [M+K-2:0] in_window = '0;
  logic [K-1:0] in_data = '0;
  logic out_valid, out_first, out_last;
  logic [M-1:0] sum_reg;

  int checks = 0, failures = 0;

  toeplitz_submul #(.M(M), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M-1:0] ref_mul(logic [M+K-2:0] w, logic [K-1:0] d);
    logic [M-1:0] r = '0;
    for (int b = 0; b < M; b++)
      for (int j = 0; j < K; j++)
        r[b] ^= d[j] & w[j+b];
    return r;
  endfunction

  logic [M-1:0] exp_sum;
  logic exp_first, exp_last, pending = 1'b0;

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pending) begin
        failures++; $display("out_valid %b expected %b", out_valid, pending);
      end
      if (sum_reg !== exp_sum || (pending && (out_first !== exp_first || out_last !== exp_last))) begin
        failures++; $display("sum_reg mismatch");
      end
    end
  end

  initial begin
    exp_sum = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      @(posedge clk);
      #1;
      pending = in_valid;
      if (in_valid) begin
        exp_sum   = ref_mul(in_window, in_data);
        exp_first = in_first;
        exp_last  = in_last;
      end
      @(negedge clk);
      #1;
      in_valid = ($urandom_range(0, 3) != 0);
      for (int w = 0; w < M+K-1; w += 32) in_window[w +: 32] = $urandom;
      case (t % 50)
        0:       in_data = '0;
        1:       in_data = '1;
        default: in_data = K'($urandom);
      endcase
      in_first = $urandom_range(0, 1);
      in_last  = $urandom_range(0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
