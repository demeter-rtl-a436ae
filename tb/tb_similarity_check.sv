// Self-checking test of the similarity check: random ADC code pairs for
// prototypes of several chunks are summed in the testbench; each score must
// appear one clock after the last chunk, and nothing may move while adv is
// low.
module tb_similarity_check;
  localparam int unsigned ADC_BITS = 9, SCORE_W = 16, PROTO_W = 5, TAG_W = 8;

  logic clk = 0, rst_n = 0, adv = 1;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [ADC_BITS-1:0] adc_p = '0, adc_n = '0;
  logic [PROTO_W-1:0] in_proto = '0;
  logic [TAG_W-1:0] in_tag = '0;
  logic res_valid;
  logic [PROTO_W-1:0] res_proto;
  logic [TAG_W-1:0] res_tag;
  logic [SCORE_W-1:0] res_score;
  int checks = 0, failures = 0;

  similarity_check #(.ADC_BITS(ADC_BITS), .SCORE_W(SCORE_W), .PROTO_W(PROTO_W),
                     .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      automatic int nch = $urandom_range(1, 79);
      automatic int sum = 0;
      automatic int p = $urandom_range(31);
      for (int k = 0; k < nch; k++) begin
        automatic int a = $urandom_range(511);
        automatic int b = $urandom_range(512 - a);
        sum += a + b;
        @(negedge clk);
        in_valid = 1; adc_p = ADC_BITS'(a); adc_n = ADC_BITS'(b);
        in_first = (k == 0); in_last = (k == nch - 1);
        in_proto = PROTO_W'(p); in_tag = TAG_W'(t);
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      checks++;
      if (!res_valid || res_score != SCORE_W'(sum) || res_proto != PROTO_W'(p) ||
          res_tag != TAG_W'(t)) begin
        failures++;
        $display("result %0d: got %0d want %0d", t, res_score, sum);
      end
      if (t % 5 == 0) begin
        // stall: result must be held, new input ignored
        adv = 0; in_valid = 1; in_first = 1; in_last = 1; adc_p = 9'd7; adc_n = 9'd7;
        repeat (3) @(negedge clk);
        checks++;
        if (!res_valid || res_score != SCORE_W'(sum)) begin failures++; $display("stall lost result"); end
        adv = 1; in_valid = 0; in_first = 0; in_last = 0;
      end
      @(negedge clk);
      checks++;
      if (res_valid) begin failures++; $display("res_valid not a pulse"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
