// Self-checking test of the encoder (binder + bundler): random sequences are
// streamed as sliding-window N-grams, closed every M N-grams or at the end;
// each HD vector must match the reference model and appear two clocks after
// the last atomic vector of its closing N-gram.
module tb_encoder;
  import hd_model_pkg::*;
  localparam int unsigned D = 128, CNT_W = 8;
  typedef hd_model #(D) m_t;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_fin = 0;
  logic [D-1:0] in_vec = '0;
  logic [CNT_W-1:0] threshold = '0;
  logic hv_valid;
  logic [D-1:0] hv;
  int checks = 0, failures = 0;

  encoder #(.D(D), .CNT_W(CNT_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  m_t::vec_t atom [4];
  m_t::seq_t sq;
  m_t::vec_t exp_q[$];
  int lat = -1, since_fin = -1;

  // checker: every hv_valid must match the next expected vector
  always @(posedge clk) if (rst_n) begin
    if (since_fin >= 0) since_fin++;
    if (hv_valid) begin
      checks++;
      if (exp_q.size() == 0 || hv !== exp_q[0]) begin
        failures++; $display("HD vector mismatch");
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      checks++;
      if (since_fin != 2) begin failures++; $display("latency %0d", since_fin); end
      since_fin = -1;
    end
    if (in_valid && in_fin) since_fin = 0;
  end

  initial begin
    for (int s = 0; s < 4; s++) atom[s] = m_t::rand_vec();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      automatic int unsigned n = $urandom_range(2, 8);
      automatic int unsigned l = $urandom_range(n, 40);
      automatic int unsigned m = $urandom_range(1, 20);
      automatic int unsigned t = $urandom_range(0, 6);
      automatic int unsigned k = 0;
      sq.delete();
      for (int i = 0; i < l; i++) sq.push_back(2'($urandom));
      m_t::encode(atom, sq, n, m, t, exp_q);
      threshold = CNT_W'(t);
      for (int unsigned s = 0; s + n <= l; s++) begin
        bit close;
        k++;
        close = (k == m) || (s + n == l);
        if (close) k = 0;
        for (int unsigned i = 0; i < n; i++) begin
          @(negedge clk);
          in_valid = 1; in_vec = atom[sq[s + i]];
          in_first = (i == 0); in_last = (i == n - 1); in_fin = in_last && close;
        end
      end
      @(negedge clk); in_valid = 0; in_first = 0; in_last = 0; in_fin = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d vectors missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
