// In-memory HDC food-profiling accelerator, top level.
//
// Reads of a food sample (and, once, the reference genomes) are turned into
// binary hyperdimensional vectors and compared against one prototype vector
// per reference species inside PCM crossbars.  Five units:
//   item memory (IM)   - four atomic vectors, one per DNA base, row-major;
//   encoder            - binder (XOR + neighbour shift into flip-flops,
//                        one N-gram) and bundler (per-bit counters and a
//                        threshold, one HD vector);
//   associative memory - prototypes column-major in a true and a
//                        complement crossbar, read as two vector-matrix
//                        products through ADCs;
//   similarity check   - adds the two ADC codes of a column and sums the
//                        chunks into one score per prototype;
//   controller         - FSM sequencing the job.
// The host programs the IM (column writes), issues BUILD jobs that encode
// reference sequences into AM prototype slots, then QUERY jobs whose scores
// (matching bits out of D, per read and prototype) stream out on res_*.
// Thresholding the scores and abundance estimation stay on the host.
//
// Ports are plain signals: the IM column write port, the command and
// start/busy/done, a read port into host memory with a fixed one-clock
// latency, the result stream with valid/ready, and three status pulses.
module demeter_top
  import demeter_pkg::*;
#(
  parameter int unsigned D         = D_DEF,
  parameter int unsigned IM_COLS   = IM_COLS_DEF,
  parameter int unsigned ROWS      = AM_ROWS_DEF,
  parameter int unsigned COLS      = AM_COLS_DEF,
  parameter int unsigned NUM_PROTO = NUM_PROTO_DEF,
  parameter int unsigned ADC_BITS  = ADC_BITS_DEF,
  parameter int unsigned SCORE_W   = SCORE_W_DEF,
  localparam int unsigned IM_COL_W = $clog2(cdiv(D, IM_COLS) * IM_COLS),
  localparam int unsigned PROTO_W  = (NUM_PROTO > 1) ? $clog2(NUM_PROTO) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // IM programming by the host (one column = one bit of all four vectors)
  input  logic                   im_wr_en,
  input  logic [IM_COL_W-1:0]    im_wr_col,
  input  logic [NUM_SYMBOLS-1:0] im_wr_data,
  // command
  input  logic                   start,
  input  cmd_t                   cmd,
  output logic                   busy,
  output logic                   done,
  // host memory
  output logic                   mem_en,
  output logic [ADDR_W-1:0]      mem_addr,
  input  base_e                  mem_base,
  // results to the host
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic [LEN_W-1:0]       res_tag,
  output logic [PROTO_W-1:0]     res_proto,
  output logic [SCORE_W-1:0]     res_score,
  // observation
  output logic                   stat_fin_stall,
  output logic                   stat_split,
  output logic                   stat_overlap
);

  localparam int unsigned NCHUNK  = cdiv(D, ROWS);
  localparam int unsigned TILES   = cdiv(NUM_PROTO * NCHUNK, COLS);
  localparam int unsigned COL_W   = $clog2(TILES * COLS);
  localparam int unsigned CHUNK_W = (NCHUNK > 1) ? $clog2(NCHUNK) : 1;

  logic               im_rd_en, im_rd_valid;
  base_e              im_rd_sym;
  logic [D-1:0]       im_rd_data;
  logic               enc_first, enc_last, enc_fin;
  logic [CNT_W_DEF-1:0] enc_threshold;
  logic               hv_valid;
  logic [D-1:0]       hv;
  logic               am_wr_en, am_q_load, adv, am_rd_en, adc_valid;
  logic [COL_W-1:0]   am_wr_col, am_rd_col;
  logic [ROWS-1:0]    am_wr_data;
  logic [CHUNK_W-1:0] am_rd_chunk;
  logic [ADC_BITS-1:0] adc_p, adc_n;
  logic               sc_first, sc_last;
  logic [PROTO_W-1:0] sc_proto;
  logic [LEN_W-1:0]   sc_tag;

  item_memory #(.D(D), .IM_COLS(IM_COLS)) u_im (
    .clk, .rst_n,
    .wr_en(im_wr_en), .wr_col(im_wr_col), .wr_data(im_wr_data),
    .rd_en(im_rd_en), .rd_sym(im_rd_sym),
    .rd_valid(im_rd_valid), .rd_data(im_rd_data)
  );

  encoder #(.D(D), .CNT_W(CNT_W_DEF)) u_enc (
    .clk, .rst_n,
    .in_valid(im_rd_valid), .in_vec(im_rd_data),
    .in_first(enc_first), .in_last(enc_last), .in_fin(enc_fin),
    .threshold(enc_threshold), .hv_valid, .hv
  );

  assoc_memory #(.D(D), .ROWS(ROWS), .COLS(COLS), .NUM_PROTO(NUM_PROTO),
                 .ADC_BITS(ADC_BITS)) u_am (
    .clk, .rst_n,
    .wr_en(am_wr_en), .wr_col(am_wr_col), .wr_data(am_wr_data),
    .q_load(am_q_load), .q_vec(hv),
    .adv, .rd_en(am_rd_en), .rd_col(am_rd_col), .rd_chunk(am_rd_chunk),
    .adc_valid, .adc_p, .adc_n
  );

  similarity_check #(.ADC_BITS(ADC_BITS), .SCORE_W(SCORE_W),
                     .PROTO_W(PROTO_W), .TAG_W(LEN_W)) u_sim (
    .clk, .rst_n, .adv,
    .in_valid(adc_valid), .adc_p, .adc_n,
    .in_first(sc_first), .in_last(sc_last), .in_proto(sc_proto), .in_tag(sc_tag),
    .res_valid, .res_proto, .res_tag, .res_score
  );

  controller #(.D(D), .ROWS(ROWS), .COLS(COLS), .NUM_PROTO(NUM_PROTO)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .mem_en, .mem_addr, .mem_base,
    .im_rd_en, .im_rd_sym,
    .enc_first, .enc_last, .enc_fin, .enc_threshold, .hv_valid, .hv,
    .am_wr_en, .am_wr_col, .am_wr_data, .am_q_load, .adv,
    .am_rd_en, .am_rd_col, .am_rd_chunk, .am_adc_valid(adc_valid),
    .sc_first, .sc_last, .sc_proto, .sc_tag,
    .res_valid, .res_ready,
    .stat_fin_stall, .stat_split, .stat_overlap
  );

endmodule
