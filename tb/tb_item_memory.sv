// Self-checking test of the item memory: programs four random atomic vectors
// through column writes, reads every row back and checks data and the
// one-clock read latency; then rewrites single columns and re-checks.
module tb_item_memory;
  import demeter_pkg::*;
  localparam int unsigned D = 2500, IM_COLS = 1024;
  localparam int unsigned COL_W = $clog2(cdiv(D, IM_COLS) * IM_COLS);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [COL_W-1:0] wr_col = '0;
  logic [3:0] wr_data = '0;
  base_e rd_sym = BASE_A;
  logic [D-1:0] rd_data;
  logic [D-1:0] ref_v [4];
  int checks = 0, failures = 0;

  item_memory #(.D(D), .IM_COLS(IM_COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(int s);
    @(negedge clk); rd_en = 1; rd_sym = base_e'(s);
    @(negedge clk); rd_en = 0;
    checks++;
    if (!rd_valid || rd_data !== ref_v[s]) begin
      failures++;
      $display("row %0d mismatch (valid=%0b)", s, rd_valid);
    end
    @(negedge clk);
    checks++;
    if (rd_valid) begin failures++; $display("rd_valid not a pulse"); end
  endtask

  initial begin
    for (int s = 0; s < 4; s++)
      for (int b = 0; b < D; b++) ref_v[s][b] = 1'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < D; b++) begin
      @(negedge clk);
      wr_en = 1; wr_col = COL_W'(b);
      wr_data = {ref_v[3][b], ref_v[2][b], ref_v[1][b], ref_v[0][b]};
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 4; s++) read_check(s);
    // column rewrites in different arrays
    for (int r = 0; r < 20; r++) begin
      automatic int b = $urandom_range(D - 1);
      automatic logic [3:0] d = 4'($urandom);
      @(negedge clk); wr_en = 1; wr_col = COL_W'(b); wr_data = d;
      for (int s = 0; s < 4; s++) ref_v[s][b] = d[s];
      @(negedge clk); wr_en = 0;
      read_check($urandom_range(3));
    end
    for (int s = 0; s < 4; s++) read_check(s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
