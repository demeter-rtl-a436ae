// Self-checking test of the bundler: random groups of N-grams are summed in
// the testbench and thresholded; the output must appear one clock after the
// closing N-gram, and counters must restart for the next group.  A final
// group of all-ones N-grams checks counter saturation with a 4-bit counter.
module tb_bundler;
  localparam int unsigned D = 48, CNT_W = 4;

  logic clk = 0, rst_n = 0;
  logic ng_valid = 0, ng_fin = 0;
  logic [D-1:0] ng_vec = '0;
  logic [CNT_W-1:0] threshold = '0;
  logic hv_valid;
  logic [D-1:0] hv;
  int checks = 0, failures = 0;

  bundler #(.D(D), .CNT_W(CNT_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic group(int m, int t, bit ones);
    int cnt [D];
    logic [D-1:0] exp_v;
    for (int b = 0; b < D; b++) cnt[b] = 0;
    threshold = CNT_W'(t);
    for (int i = 0; i < m; i++) begin
      logic [D-1:0] g;
      for (int b = 0; b < D; b++) g[b] = ones ? 1'b1 : 1'($urandom);
      for (int b = 0; b < D; b++) cnt[b] += g[b];
      @(negedge clk);
      if ($urandom_range(4) == 0) begin ng_valid = 0; @(negedge clk); end
      ng_valid = 1; ng_vec = g; ng_fin = (i == m - 1);
      checks++;
      if (hv_valid) begin failures++; $display("spurious hv_valid"); end
    end
    for (int b = 0; b < D; b++) begin
      int c = cnt[b] > 15 ? 15 : cnt[b];
      exp_v[b] = (c > t);
    end
    @(negedge clk); ng_valid = 0; ng_fin = 0;
    checks++;
    if (!hv_valid || hv !== exp_v) begin
      failures++; $display("group m=%0d t=%0d mismatch valid=%0b", m, t, hv_valid);
    end
    @(negedge clk);
    checks++;
    if (hv_valid || hv !== exp_v) begin failures++; $display("hv not held"); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int m = $urandom_range(1, 15);
      group(m, m / 2, 0);
    end
    group(7, 2, 0);
    group(15, 0, 0);
    group(20, 14, 1);   // saturates at 15 > 14
    group(3, 1, 0);     // counters cleared after saturation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
