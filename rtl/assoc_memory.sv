// Associative memory (AM): prototype HD vectors in two PCM crossbar banks,
// read as vector-matrix products so that a column read yields a partial
// Hamming similarity without any digital pop-count tree.
//
// Data layout (column-major): a prototype vector is cut into NCHUNK chunks
// of ROWS bits.  Chunk k of prototype p is written into global column
// p*NCHUNK+k of the "true" bank; the same column of the "complement" bank
// receives the inverted chunk.  Columns 0..COLS-1 form tile 0, the next COLS
// tile 1, and so on (TILES tiles per bank).  The crossbars only accept
// column writes, which is exactly what a freshly encoded prototype needs.
//
// Search: the query is latched in q_reg.  For a read of column c with chunk
// k, chunk k of the query drives the rows of the true bank and its
// complement drives the rows of the complement bank.  The current summed on
// the enabled bit line of each bank is digitised by its ADC:
//   adc_p = #rows with Q=1 and P=1,  adc_n = #rows with Q=0 and P=0,
// so adc_p + adc_n is the XNOR pop-count of the chunk.  Rows past D in the
// last chunk are not driven.  The ADC has ADC_BITS bits and saturates at
// 2^ADC_BITS-1 (a 512-row column with all 512 ones reads 511).
//
// Interface and timing: wr_en/wr_col/wr_data write one column pair per
// clock.  q_load latches q_vec.  rd_en/rd_col/rd_chunk select a column; the
// two ADC results appear on adc_p/adc_n with adc_valid one clock later.
// When adv is low the output register holds (the downstream pipeline is
// stalled) and no new read may be issued.
//
// The crossbars and ADCs are ideal digital models (no conductance
// variation); one ADC conversion per bank per clock is this design's choice.
module assoc_memory
  import demeter_pkg::*;
#(
  parameter int unsigned D         = D_DEF,
  parameter int unsigned ROWS      = AM_ROWS_DEF,
  parameter int unsigned COLS      = AM_COLS_DEF,
  parameter int unsigned NUM_PROTO = NUM_PROTO_DEF,
  parameter int unsigned ADC_BITS  = ADC_BITS_DEF,
  localparam int unsigned NCHUNK   = cdiv(D, ROWS),
  localparam int unsigned TILES    = cdiv(NUM_PROTO * NCHUNK, COLS),
  localparam int unsigned NCOL     = TILES * COLS,
  localparam int unsigned COL_W    = $clog2(NCOL),
  localparam int unsigned CHUNK_W  = (NCHUNK > 1) ? $clog2(NCHUNK) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // column write
  input  logic                wr_en,
  input  logic [COL_W-1:0]    wr_col,
  input  logic [ROWS-1:0]     wr_data,
  // query register
  input  logic                q_load,
  input  logic [D-1:0]        q_vec,
  // column read
  input  logic                adv,
  input  logic                rd_en,
  input  logic [COL_W-1:0]    rd_col,
  input  logic [CHUNK_W-1:0]  rd_chunk,
  output logic                adc_valid,
  output logic [ADC_BITS-1:0] adc_p,
  output logic [ADC_BITS-1:0] adc_n
);

  localparam int unsigned PAD = NCHUNK * ROWS;
  localparam int unsigned ADC_MAX = (1 << ADC_BITS) - 1;

  logic [ROWS-1:0] xbar_p [NCOL];   // prototype chunks
  logic [ROWS-1:0] xbar_n [NCOL];   // their complements
  logic [D-1:0]    q_reg;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      xbar_p[wr_col] <= wr_data;
      xbar_n[wr_col] <= ~wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q_reg <= '0;
    else if (q_load) q_reg <= q_vec;
  end

  // Word-line drivers: chunk rd_chunk of Q and of ~Q, undriven rows at 0.
  logic [PAD-1:0]  q_pad, live_pad;
  logic [ROWS-1:0] row_p, row_n;
  assign q_pad    = PAD'(q_reg);
  assign live_pad = PAD'({D{1'b1}});
  always_comb begin
    logic [ROWS-1:0] qc, live;
    qc    = q_pad[rd_chunk * ROWS +: ROWS];
    live  = live_pad[rd_chunk * ROWS +: ROWS];
    row_p = qc & live;
    row_n = ~qc & live;
  end

  // Bit-line current -> ADC code
  function automatic logic [ADC_BITS-1:0] adc(input logic [ROWS-1:0] i_on);
    int unsigned n;
    n = $countones(i_on);
    return (n > ADC_MAX) ? ADC_BITS'(ADC_MAX) : ADC_BITS'(n);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_valid <= 1'b0;
      adc_p     <= '0;
      adc_n     <= '0;
    end else if (adv) begin
      adc_valid <= rd_en;
      if (rd_en) begin
        adc_p <= adc(row_p & xbar_p[rd_col]);
        adc_n <= adc(row_n & xbar_n[rd_col]);
      end
    end
  end

  a_rd_range: assert property (@(posedge clk) disable iff (!rst_n)
                               rd_en |-> (rd_col < NCOL) && (rd_chunk < NCHUNK))
    else $error("AM read out of range");
  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n)
                               wr_en |-> wr_col < NCOL)
    else $error("AM write out of range");

endmodule
