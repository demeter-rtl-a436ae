// Self-checking test of the binder: random bases and N-gram sizes; each
// N-gram is compared with the closed form XOR_i B(c_i) >> (N-1-i) and must
// appear exactly one clock after its last base, with ng_fin passed on.
module tb_binder;
  import hd_model_pkg::*;
  localparam int unsigned D = 96;
  typedef hd_model #(D) m_t;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_fin = 0;
  logic [D-1:0] in_vec = '0;
  logic ng_valid, ng_fin;
  logic [D-1:0] ng_vec;
  int checks = 0, failures = 0;

  binder #(.D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  m_t::vec_t atom [4];
  m_t::seq_t sq;

  initial begin
    for (int s = 0; s < 4; s++) atom[s] = m_t::rand_vec();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int unsigned n = $urandom_range(1, 12);
      automatic bit fin = 1'($urandom);
      m_t::vec_t exp_v;
      sq.delete();
      for (int i = 0; i < n; i++) sq.push_back(2'($urandom));
      exp_v = m_t::ngram(atom, sq, 0, n);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        // occasional idle cycle inside the N-gram
        if ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_vec = atom[sq[i]];
        in_first = (i == 0); in_last = (i == n - 1); in_fin = in_last && fin;
        checks++;
        if (ng_valid && i != 0) begin failures++; $display("early ng_valid"); end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0; in_fin = 0;
      checks++;
      if (!ng_valid || ng_vec !== exp_v || ng_fin !== fin) begin
        failures++;
        $display("N-gram %0d (n=%0d) mismatch valid=%0b", t, n, ng_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
