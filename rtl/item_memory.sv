// Item memory (IM): the four atomic HD vectors, one per DNA base.
//
// Each atomic vector occupies one row (row-major mapping), so a whole vector
// is read in a single access, the access the encoder makes for every base it
// processes.  A vector is wider than one crossbar row, so it is cut into
// chunks of IM_COLS bits (the largest power of two below the 2048 columns of
// a crossbar) and chunk j lives in array j; all arrays are read together.
// The row-wise gate enablers only permit column-wise programming: a write
// stores one bit position of all four vectors at once.  After the host has
// programmed it the IM is only read.
//
// Interface: wr_en/wr_col/wr_data write a column (bit s of wr_data is the bit
// of symbol s).  rd_en/rd_sym read a row; rd_data/rd_valid follow one clock
// later (registered sense-amplifier outputs) and rd_data is held until the
// next read.
//
// Cells are ideal bits ("1" = crystalline, "0" = amorphous); device
// variation is not modelled.  The one-cycle read latency is this design's
// choice.
module item_memory
  import demeter_pkg::*;
#(
  parameter int unsigned D       = D_DEF,
  parameter int unsigned IM_COLS = IM_COLS_DEF,
  localparam int unsigned IM_ARRAYS = cdiv(D, IM_COLS),
  localparam int unsigned COL_W     = $clog2(IM_ARRAYS * IM_COLS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [COL_W-1:0]       wr_col,
  input  logic [NUM_SYMBOLS-1:0] wr_data,
  input  logic                   rd_en,
  input  base_e                  rd_sym,
  output logic                   rd_valid,
  output logic [D-1:0]           rd_data
);

  // cells[a][s] is row s of array a
  logic [IM_COLS-1:0] cells [IM_ARRAYS][NUM_SYMBOLS];

  int unsigned wr_arr, wr_off;
  assign wr_arr = int'(wr_col) / IM_COLS;
  assign wr_off = int'(wr_col) % IM_COLS;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int s = 0; s < NUM_SYMBOLS; s++)
        cells[wr_arr][s][wr_off] <= wr_data[s];
    end
  end

  // Row read: every array drives its chunk of the vector to its own SAs.
  logic [IM_ARRAYS*IM_COLS-1:0] row;
  always_comb begin
    for (int a = 0; a < IM_ARRAYS; a++)
      row[a*IM_COLS +: IM_COLS] = cells[a][rd_sym];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) rd_data <= row[D-1:0];
    end
  end

  a_wr_in_range: assert property (@(posedge clk) wr_en |-> wr_col < D)
    else $error("IM column write beyond D");
  a_no_rw: assert property (@(posedge clk) rd_en |-> !wr_en)
    else $error("IM read and write in the same cycle");

endmodule
