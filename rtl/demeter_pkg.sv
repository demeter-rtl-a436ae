// Shared constants and types of the in-memory HDC food-profiling accelerator.
//
// The default sizes are those of the design point described for the
// accelerator: 40,000-bit binary HD vectors, a DNA alphabet of four bases,
// 512 x 2048 PCM crossbars, 9-bit ADCs and up to 31 prototype vectors (the
// 31-genome food reference set).  Base encoding and the widths of counters,
// scores and addresses are this implementation's own choices.
package demeter_pkg;

  // HD space
  localparam int unsigned D_DEF        = 40000; // HD vector dimension
  localparam int unsigned NUM_SYMBOLS  = 4;     // atomic vectors (A, C, G, T)

  // Item memory: a vector is cut into chunks of the largest power of two
  // below the 2048 columns of a crossbar, each chunk in its own array.
  localparam int unsigned IM_COLS_DEF  = 1024;

  // Associative memory crossbars
  localparam int unsigned AM_ROWS_DEF  = 512;
  localparam int unsigned AM_COLS_DEF  = 2048;
  localparam int unsigned NUM_PROTO_DEF = 31;
  localparam int unsigned ADC_BITS_DEF = 9;

  // Widths chosen here
  localparam int unsigned CNT_W_DEF    = 36;   // bundler counter (a whole genome)
  localparam int unsigned SCORE_W_DEF  = 16;   // similarity score
  localparam int unsigned ADDR_W       = 40;   // host physical base address
  localparam int unsigned LEN_W        = 36;   // sequence length / counts
  localparam int unsigned NG_W         = 8;    // N-gram size

  typedef enum logic [1:0] {BASE_A = 2'd0, BASE_C = 2'd1,
                            BASE_G = 2'd2, BASE_T = 2'd3} base_e;

  // Operation requested by the host
  typedef enum logic {OP_BUILD = 1'b0,   // encode references into the AM
                      OP_QUERY = 1'b1}   // encode reads and score them
                      op_e;

  // Command sampled by the controller on start
  typedef struct packed {
    op_e                mode;
    logic [ADDR_W-1:0]  seq_base;    // address of the first base
    logic [LEN_W-1:0]   num_seqs;    // sequences, stored back to back
    logic [LEN_W-1:0]   seq_len;     // bases per sequence
    logic [NG_W-1:0]    ngram_n;     // N
    logic [LEN_W-1:0]   max_ngrams;  // M: N-grams per HD vector at most
    logic [CNT_W_DEF-1:0] threshold; // T of the bundler
    logic [7:0]         proto_base;  // build: first prototype slot
    logic [7:0]         num_protos;  // query: prototypes to compare against
  } cmd_t;

  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
