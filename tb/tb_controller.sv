// Self-checking test of the controller on its own.  The testbench stands in
// for the host memory, the item memory/encoder (an HD vector, random, two
// clocks after each closing N-gram) and the AM/similarity pipeline (one
// register stage each, gated by adv).  It checks: the base addresses and
// N-gram framing of sliding windows with vector splits; in BUILD the column
// address and chunk of every AM write; in QUERY the query load, the column
// sweep with its chunk index and the framing handed to the similarity
// check, under random back-pressure; and the done pulse.
module tb_controller;
  import demeter_pkg::*;
  localparam int unsigned D = 40, ROWS = 8, COLS = 16, NUM_PROTO = 4;
  localparam int unsigned NCHUNK = cdiv(D, ROWS);
  localparam int unsigned COL_W = $clog2(cdiv(NUM_PROTO * NCHUNK, COLS) * COLS);
  localparam int unsigned CHUNK_W = $clog2(NCHUNK);
  localparam int unsigned PROTO_W = $clog2(NUM_PROTO);

  logic clk = 0, rst_n = 0, start = 0;
  cmd_t cmd = '0;
  logic busy, done, mem_en, im_rd_en;
  logic [ADDR_W-1:0] mem_addr;
  base_e mem_base = BASE_A, im_rd_sym;
  logic enc_first, enc_last, enc_fin;
  logic [CNT_W_DEF-1:0] enc_threshold;
  logic hv_valid = 0;
  logic [D-1:0] hv = '0;
  logic am_wr_en, am_q_load, adv, am_rd_en, am_adc_valid = 0;
  logic [COL_W-1:0] am_wr_col, am_rd_col;
  logic [ROWS-1:0] am_wr_data;
  logic [CHUNK_W-1:0] am_rd_chunk;
  logic sc_first, sc_last;
  logic [PROTO_W-1:0] sc_proto;
  logic [LEN_W-1:0] sc_tag;
  logic res_valid = 0, res_ready = 1;
  logic stat_fin_stall, stat_split, stat_overlap;

  controller #(.D(D), .ROWS(ROWS), .COLS(COLS), .NUM_PROTO(NUM_PROTO)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected stream of {addr, first, last, fin}
  typedef struct { int addr; bit first, last, fin; } iss_t;
  iss_t iss_q[$];
  int   addr_q[$];
  // environment
  logic [2:0] v;            // mem_en delayed
  logic [1:0] fin_d;        // closing N-gram seen by the "encoder"
  logic [D-1:0] vecs[$];    // vectors produced, oldest first
  logic [D-1:0] cur;        // vector being handed over
  int wr_k = 0, n_vec = 0, n_res = 0, exp_col = 0, n_split = 0, n_hold = 0;
  bit bp_on = 0;

  always_ff @(posedge clk) res_ready <= bp_on ? 1'($urandom_range(1)) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    // issue side
    if (mem_en) begin
      checks++;
      if (addr_q.size() == 0 || int'(mem_addr) != addr_q[0]) begin
        failures++; $display("address %0d unexpected", mem_addr);
      end
      if (addr_q.size() != 0) void'(addr_q.pop_front());
    end
    v <= {v[1:0], mem_en};
    // framing reaches the encoder two clocks after the address
    if (v[1]) begin
      iss_t e;
      e = iss_q.pop_front();
      checks++;
      if ({enc_first, enc_last, enc_fin} != {e.first, e.last, e.fin}) begin
        failures++; $display("framing %b want %b", {enc_first, enc_last, enc_fin}, {e.first, e.last, e.fin});
      end
    end
    fin_d <= {fin_d[0], v[1] && enc_fin};
    hv_valid <= fin_d[1];
    if (fin_d[1]) begin
      logic [D-1:0] r;
      for (int b = 0; b < D; b++) r[b] = 1'($urandom);
      hv <= r; vecs.push_back(r);
    end
    if (stat_split) n_split++;
    if (stat_fin_stall) n_hold++;
    // build writes
    if (am_wr_en) begin
      logic [NCHUNK*ROWS-1:0] pad;
      pad = '0; pad[D-1:0] = vecs[0];
      checks++;
      if (int'(am_wr_col) != (cmd.proto_base + n_vec) * NCHUNK + wr_k ||
          am_wr_data != pad[wr_k*ROWS +: ROWS]) begin
        failures++; $display("AM write col %0d", am_wr_col);
      end
      if (wr_k == NCHUNK - 1) begin wr_k = 0; n_vec++; void'(vecs.pop_front()); end
      else wr_k++;
    end
    // query
    if (am_q_load) begin
      checks++;
      if (hv !== vecs[0]) begin failures++; $display("query load of wrong vector"); end
      void'(vecs.pop_front());
      exp_col = 0;
    end
    if (am_rd_en) begin
      checks++;
      if (int'(am_rd_col) != exp_col || int'(am_rd_chunk) != exp_col % NCHUNK) begin
        failures++; $display("sweep col %0d chunk %0d, want %0d", am_rd_col, am_rd_chunk, exp_col);
      end
      exp_col++;
    end
    if (adv) begin
      am_adc_valid <= am_rd_en;
      res_valid <= am_adc_valid && sc_last;
      if (am_adc_valid && sc_last) begin
        checks++;
        if (int'(sc_proto) != n_res % cmd.num_protos || int'(sc_tag) != n_res / cmd.num_protos) begin
          failures++; $display("framing proto %0d tag %0d at result %0d", sc_proto, sc_tag, n_res);
        end
        n_res++;
      end
    end
  end

  task automatic job(op_e mode, int base, int nseq, int len, int n, int m, int pbase, int np);
    int nv = 0;
    iss_q.delete();
    addr_q.delete();
    for (int q = 0; q < nseq; q++) begin
      int k = 0;
      for (int s = 0; s + n <= len; s++) begin
        bit close;
        k++;
        close = (k == m) || (s + n == len);
        if (close) begin k = 0; nv++; end
        for (int i = 0; i < n; i++) begin
          iss_t e;
          e.addr = base + q * len + s + i; e.first = (i == 0);
          e.last = (i == n - 1); e.fin = (i == n - 1) && close;
          iss_q.push_back(e);
          addr_q.push_back(e.addr);
        end
      end
    end
    n_vec = 0; n_res = 0; wr_k = 0;
    @(negedge clk);
    cmd.mode = mode; cmd.seq_base = ADDR_W'(base); cmd.num_seqs = LEN_W'(nseq);
    cmd.seq_len = LEN_W'(len); cmd.ngram_n = NG_W'(n); cmd.max_ngrams = LEN_W'(m);
    cmd.threshold = CNT_W_DEF'(3); cmd.proto_base = 8'(pbase); cmd.num_protos = 8'(np);
    start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy || enc_threshold != CNT_W_DEF'(3)) begin failures++; $display("busy/threshold"); end
    while (!done) @(negedge clk);
    checks++;
    if (iss_q.size() != 0) begin failures++; $display("%0d issues missing", iss_q.size()); end
    checks++;
    if (mode == OP_BUILD ? (n_vec != nv) : (n_res != nv * np)) begin
      failures++; $display("job produced %0d/%0d, want %0d vectors", n_vec, n_res, nv);
    end
  endtask

  initial begin
    v = '0; fin_d = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    job(OP_BUILD, 100, 2, 9, 3, 4, 0, 0);     // 7 N-grams per sequence: 4 + 3
    job(OP_QUERY, 500, 3, 12, 4, 100, 0, 4);
    bp_on = 1;
    job(OP_QUERY, 700, 4, 3, 2, 100, 0, 3);   // short reads: encoder held
    bp_on = 0;
    checks++;
    if (n_split == 0 || n_hold == 0) begin failures++; $display("split %0d hold %0d", n_split, n_hold); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
