// Self-checking test of the associative memory: random prototypes are
// written column by column (chunk k of prototype p into column p*NCHUNK+k,
// spanning two tiles), then for random queries every column is read and the
// two ADC codes are compared with counts worked out in the testbench,
// including rows past D that must not count and ADC saturation.
module tb_assoc_memory;
  import demeter_pkg::*;
  localparam int unsigned D = 100, ROWS = 16, COLS = 32, NUM_PROTO = 5, ADC_BITS = 4;
  localparam int unsigned NCHUNK = cdiv(D, ROWS);                 // 7
  localparam int unsigned NCOL = cdiv(NUM_PROTO * NCHUNK, COLS) * COLS;
  localparam int unsigned COL_W = $clog2(NCOL);
  localparam int unsigned CHUNK_W = $clog2(NCHUNK);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, q_load = 0, adv = 1, rd_en = 0, adc_valid;
  logic [COL_W-1:0] wr_col = '0, rd_col = '0;
  logic [ROWS-1:0] wr_data = '0;
  logic [D-1:0] q_vec = '0;
  logic [CHUNK_W-1:0] rd_chunk = '0;
  logic [ADC_BITS-1:0] adc_p, adc_n;
  logic [D-1:0] proto [NUM_PROTO];
  int checks = 0, failures = 0;

  assoc_memory #(.D(D), .ROWS(ROWS), .COLS(COLS), .NUM_PROTO(NUM_PROTO),
                 .ADC_BITS(ADC_BITS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int n);
    return n > 15 ? 15 : n;
  endfunction

  task automatic read_col(int p, int k, logic [D-1:0] q);
    int e1 = 0, e0 = 0;
    for (int r = 0; r < ROWS; r++) begin
      int b = k * ROWS + r;
      if (b < D) begin
        if (q[b] && proto[p][b]) e1++;
        if (!q[b] && !proto[p][b]) e0++;
      end
    end
    @(negedge clk);
    rd_en = 1; rd_col = COL_W'(p * NCHUNK + k); rd_chunk = CHUNK_W'(k);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (!adc_valid || adc_p != ADC_BITS'(sat(e1)) || adc_n != ADC_BITS'(sat(e0))) begin
      failures++;
      $display("p=%0d k=%0d: got %0d/%0d want %0d/%0d", p, k, adc_p, adc_n, sat(e1), sat(e0));
    end
  endtask

  initial begin
    for (int p = 0; p < NUM_PROTO; p++)
      for (int b = 0; b < D; b++) proto[p][b] = 1'($urandom);
    proto[1] = '1;   // all ones: saturates the ADC of full chunks
    proto[2] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < NUM_PROTO; p++)
      for (int k = 0; k < NCHUNK; k++) begin
        automatic logic [NCHUNK*ROWS-1:0] pad = '0;
        pad[D-1:0] = proto[p];
        @(negedge clk);
        wr_en = 1; wr_col = COL_W'(p * NCHUNK + k); wr_data = pad[k*ROWS +: ROWS];
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 6; t++) begin
      logic [D-1:0] q;
      for (int b = 0; b < D; b++) q[b] = 1'($urandom);
      if (t == 0) q = '1;
      if (t == 1) q = '0;
      @(negedge clk); q_load = 1; q_vec = q;
      @(negedge clk); q_load = 0; q_vec = '0;
      for (int p = 0; p < NUM_PROTO; p++)
        for (int k = 0; k < NCHUNK; k++) read_col(p, k, q);
    end
    // the output register holds while adv is low
    @(negedge clk); rd_en = 1; rd_col = '0; rd_chunk = '0;
    @(negedge clk); rd_en = 1; rd_col = COL_W'(NCHUNK); adv = 0;
    begin
      logic [ADC_BITS-1:0] hp, hn;
      hp = adc_p; hn = adc_n;
      @(negedge clk);
      checks++;
      if (adc_p != hp || adc_n != hn || !adc_valid) begin failures++; $display("hold failed"); end
    end
    adv = 1; rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
