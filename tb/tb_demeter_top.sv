// End-to-end test of the accelerator at reduced size.
//
// The testbench plays the host: it programs random atomic vectors into the
// item memory, runs two BUILD jobs (three references, then one long
// reference that the M limit splits into three prototype slots), and two
// QUERY jobs (long reads, whose encoding overlaps the AM sweep, and very
// short reads, which finish faster than a sweep and hold the encoder).  The
// host memory is a behavioural one-clock-latency array.  Every score is
// compared with the reference model (encode, then matching bits per chunk);
// res_ready is dropped at random to stall the result stream.  Each
// mechanism (build, query, vector split, overlap, encoder hold,
// back-pressure) must occur at least once.
module tb_demeter_top;
  import demeter_pkg::*;
  import hd_model_pkg::*;
  localparam int unsigned D = 256, IM_COLS = 64, ROWS = 32, COLS = 64,
                          NUM_PROTO = 6, ADC_BITS = 9, SCORE_W = 16;
  localparam int unsigned IM_COL_W = $clog2(cdiv(D, IM_COLS) * IM_COLS);
  localparam int unsigned PROTO_W = $clog2(NUM_PROTO);
  localparam int unsigned WATCHDOG = 200000;
  typedef hd_model #(D) m_t;

  logic clk = 0, rst_n = 0;
  logic im_wr_en = 0;
  logic [IM_COL_W-1:0] im_wr_col = '0;
  logic [3:0] im_wr_data = '0;
  logic start = 0;
  cmd_t cmd = '0;
  logic busy, done, mem_en, res_valid, res_ready;
  logic [ADDR_W-1:0] mem_addr;
  base_e mem_base;
  logic [LEN_W-1:0] res_tag;
  logic [PROTO_W-1:0] res_proto;
  logic [SCORE_W-1:0] res_score;
  logic stat_fin_stall, stat_split, stat_overlap;

  demeter_top #(.D(D), .IM_COLS(IM_COLS), .ROWS(ROWS), .COLS(COLS),
                .NUM_PROTO(NUM_PROTO), .ADC_BITS(ADC_BITS), .SCORE_W(SCORE_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_build = 0, n_query = 0, n_split = 0, n_overlap = 0, n_hold = 0, n_bp = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host memory: one base per address, data one clock after mem_en
  bit [1:0] mem [8192];
  always_ff @(posedge clk) if (mem_en) mem_base <= base_e'(mem[mem_addr[12:0]]);

  // random back-pressure on results
  bit bp_on = 0;
  always_ff @(posedge clk) res_ready <= bp_on ? 1'($urandom_range(2) != 0) : 1'b1;

  // expected results and monitor
  typedef struct { int tag; int proto; int score; } res_t;
  res_t exp_q[$];
  always @(posedge clk) if (rst_n) begin
    if (stat_split)     n_split++;
    if (stat_overlap)   n_overlap++;
    if (stat_fin_stall) n_hold++;
    if (res_valid && !res_ready) n_bp++;
    if (res_valid && res_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected result");
      end else begin
        res_t e;
        e = exp_q.pop_front();
        if (int'(res_tag) != e.tag || int'(res_proto) != e.proto || int'(res_score) != e.score) begin
          failures++;
          $display("result tag %0d proto %0d score %0d, want %0d/%0d/%0d",
                   res_tag, res_proto, res_score, e.tag, e.proto, e.score);
        end
      end
    end
  end

  m_t::vec_t atom [4];
  m_t::vec_t protos[$];

  task automatic fill(int addr, int nseq, int len, ref m_t::seq_t seqs[$]);
    for (int q = 0; q < nseq; q++) begin
      m_t::seq_t sq;
      for (int i = 0; i < len; i++) begin
        sq.push_back(2'($urandom));
        mem[addr + q * len + i] = sq[i];
      end
      seqs.push_back(sq);
    end
  endtask

  task automatic run(op_e mode, int addr, int nseq, int len, int n, int m, int t,
                     int pbase, int nprot);
    @(negedge clk);
    cmd.mode = mode; cmd.seq_base = ADDR_W'(addr); cmd.num_seqs = LEN_W'(nseq);
    cmd.seq_len = LEN_W'(len); cmd.ngram_n = NG_W'(n); cmd.max_ngrams = LEN_W'(m);
    cmd.threshold = CNT_W_DEF'(t); cmd.proto_base = 8'(pbase); cmd.num_protos = 8'(nprot);
    start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("busy not raised"); end
    while (!done) @(negedge clk);
    if (mode == OP_BUILD) n_build++; else n_query++;
  endtask

  task automatic build(int addr, int nseq, int len, int n, int m, int t);
    int pbase = protos.size();
    m_t::seq_t seqs[$];
    fill(addr, nseq, len, seqs);
    foreach (seqs[q]) m_t::encode(atom, seqs[q], n, m, t, protos);
    run(OP_BUILD, addr, nseq, len, n, m, t, pbase, 0);
  endtask

  task automatic query(int addr, int nseq, int len, int n, int m, int t);
    m_t::seq_t seqs[$];
    m_t::vec_t qv[$];
    fill(addr, nseq, len, seqs);
    foreach (seqs[q]) m_t::encode(atom, seqs[q], n, m, t, qv);
    foreach (qv[v])
      foreach (protos[p]) begin
        res_t e;
        e.tag = v; e.proto = p;
        e.score = int'(m_t::score(qv[v], protos[p], ROWS, ADC_BITS));
        exp_q.push_back(e);
      end
    run(OP_QUERY, addr, nseq, len, n, m, t, 0, protos.size());
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
  endtask

  initial begin

    for (int s = 0; s < 4; s++) atom[s] = m_t::rand_vec();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program the item memory column by column
    for (int b = 0; b < D; b++) begin
      @(negedge clk);
      im_wr_en = 1; im_wr_col = IM_COL_W'(b);
      im_wr_data = {atom[3][b], atom[2][b], atom[1][b], atom[0][b]};
    end
    @(negedge clk); im_wr_en = 0;

    // BUILD: slots 0..2, then one long reference split into slots 3..5
    build(0, 3, 30, 4, 100, 13);
    build(200, 1, 30, 4, 12, 5);
    checks++;
    if (protos.size() != NUM_PROTO) begin failures++; $display("model built %0d", protos.size()); end

    // QUERY: long reads (overlap), then short reads under back-pressure
    query(1000, 4, 24, 4, 100, 10);
    bp_on = 1;
    query(2000, 5, 5, 4, 100, 0);
    bp_on = 0;

    $display("build=%0d query=%0d split=%0d overlap=%0d hold=%0d backpressure=%0d",
             n_build, n_query, n_split, n_overlap, n_hold, n_bp);
    checks++; if (n_build == 0)   begin failures++; $display("no build");   end
    checks++; if (n_query == 0)   begin failures++; $display("no query");   end
    checks++; if (n_split == 0)   begin failures++; $display("no split");   end
    checks++; if (n_overlap == 0) begin failures++; $display("no overlap"); end
    checks++; if (n_hold == 0)    begin failures++; $display("no hold");    end
    checks++; if (n_bp == 0)      begin failures++; $display("no back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
