// tb_rng_mixer: self-checking test of the round-robin channel mixer.
//
// Each of the three inputs offers numbered words {channel, sequence}
// following a valid/ready handshake, with random valid and output ready
// patterns.  Checked: every word leaves once, in order within its
// channel, tagged with its channel; with all inputs valid and the output
// always ready the channels alternate 0, 1, 2, 0, ...; the output word is
// steady while it waits for ready.
module tb_rng_mixer;
  localparam int unsigned NCH = 3;
  localparam int unsigned W   = 64;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge triggers the asynchronous reset
  logic [NCH-1:0] in_valid = '0;
  logic [NCH-1:0][W-1:0] in_data;
  logic [NCH-1:0] in_ready;
  logic out_valid, out_ready = 1'b0;
  logic [W-1:0] out_data;
  qrng_pkg::ch_id_t out_ch;

  int checks = 0, failures = 0;

  rng_mixer #(.NCH(NCH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [NCH];
  int rcvd [NCH];
  bit all_busy = 1'b0;
  int prev_ch = -1;
  int total = 0;

  for (genvar c = 0; c < NCH; c++) begin : g_in
    assign in_data[c] = {W'(c) << 32} | W'(sent[c]);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCH; c++)
        if (in_valid[c] && in_ready[c]) sent[c] <= sent[c] + 1;
      if (out_valid && out_ready) begin
        int c;
        c = int'(out_ch);
        checks++;
        total++;
        if (out_data !== ((W'(c) << 32) | W'(rcvd[c]))) begin
          failures++; $display("ch %0d: got %h, expected sequence %0d", c, out_data, rcvd[c]);
        end
        rcvd[c]++;
        if (all_busy && prev_ch >= 0) begin
          checks++;
          if (c != (prev_ch + 1) % NCH) begin
            failures++; $display("round robin broken: %0d after %0d", c, prev_ch);
          end
        end
        prev_ch = c;
      end
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin sent[c] = 0; rcvd[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // random traffic
    repeat (2000) begin
      @(negedge clk);
      for (int c = 0; c < NCH; c++)
        if (!in_valid[c] || in_ready[c]) in_valid[c] = ($urandom_range(0, 1) == 1);
      out_ready = ($urandom_range(0, 3) != 0);
    end
    // all channels busy, output always ready
    @(negedge clk);
    in_valid = '1;
    out_ready = 1'b1;
    repeat (3) @(negedge clk);
    all_busy = 1'b1;
    prev_ch = -1;
    repeat (60) @(negedge clk);
    all_busy = 1'b0;
    in_valid = '0;
    repeat (5) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (rcvd[c] != sent[c] || sent[c] < 50) begin
        failures++; $display("ch %0d: sent %0d received %0d", c, sent[c], rcvd[c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
