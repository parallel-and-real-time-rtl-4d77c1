// tb_rng_packer: self-checking test of the word packer.
//
// Phase 1 offers a random 581-bit result every 48 clocks (the extractor's
// rate) while the consumer takes words with a random ready pattern; the
// words must form exactly the concatenation of the results, bit 0 first,
// and nothing may be dropped.  Phase 1b offers a result every 10 clocks
// with ready high, so words leave while new results arrive.  Phase 2 holds ready low so that the buffer
// fills: the result that does not fit must be dropped, with a drop pulse
// and the overflow flag set, and the words that then drain must contain
// only the results that were kept.
module tb_rng_packer;
  localparam int unsigned M = 581;
  localparam int unsigned W = 64;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic in_valid = 1'b0;
  logic [M-1:0] in_hash = '0;
  logic out_valid, out_ready = 1'b0, drop, overflow;
  logic [W-1:0] out_data;

  int checks = 0, failures = 0;
  int drops = 0;

  rng_packer #(.M(M), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit expbits[$];   // bits the words should carry, in order
  int words = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      words++;
      for (int b = 0; b < W; b++) begin
        checks++;
        if (expbits.size() == 0) begin
          failures++;
        end else if (out_data[b] !== expbits.pop_front()) begin
          failures++;
          if (failures < 5) $display("word %0d bit %0d wrong", words, b);
        end
      end
    end
    if (rst_n && drop) drops++;
  end

  task automatic offer(input bit keep);
    @(negedge clk);
    in_valid = 1'b1;
    for (int w = 0; w < M; w += 32) in_hash[w +: 32] = $urandom;
    if (keep) for (int b = 0; b < M; b++) expbits.push_back(in_hash[b]);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int r = 0; r < 30; r++) begin
          offer(1'b1);
          repeat (46) @(negedge clk);
        end
      end
      begin
        repeat (30 * 48 + 40) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join
    @(negedge clk); out_ready = 1'b1;
    repeat (20) @(negedge clk);
    // phase 1b: results close together, so that a result arrives while the
    // previous one is still leaving (word out and result in, same clock)
    for (int r = 0; r < 40; r++) begin
      offer(1'b1);
      repeat (8) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (drops != 0 || overflow) begin
      failures++; $display("dropped data at normal rate");
    end
    // phase 2: consumer stalls
    out_ready = 1'b0;
    offer(1'b1);           // fits: 581 + leftover bits
    repeat (3) @(negedge clk);
    offer(1'b0);           // does not fit: must be dropped
    repeat (3) @(negedge clk);
    checks++;
    if (drops != 1 || !overflow) begin
      failures++; $display("overflow not reported: drops=%0d overflow=%b", drops, overflow);
    end
    out_ready = 1'b1;
    repeat (20) @(negedge clk);
    offer(1'b1);           // accepted again after draining
    repeat (20) @(negedge clk);
    checks++;
    if (drops != 1 || expbits.size() >= W) begin
      failures++; $display("after overflow: drops=%0d, %0d bits left", drops, expbits.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
