// Controller: the finite-state machine that runs a build or a query job.
//
// The host writes a command (cmd_t) and pulses start.  The controller then
//  * walks the sequences stored back to back from cmd.seq_base, one base per
//    address, and for every N-gram window (sliding by one base) issues the
//    N base addresses in order, tagging the first, the last, and the last of
//    the N-gram that closes an HD vector.  A vector is closed at the end of
//    a sequence or after cmd.max_ngrams N-grams, whichever comes first, so a
//    long reference yields several prototype vectors;
//  * forwards each base read from memory as the item-memory row address and
//    the IM output, with its tags, to the encoder (two-stage pipeline);
//  * BUILD: writes every finished HD vector into the AM column by column,
//    one ROWS-bit chunk per clock, into prototype slot cmd.proto_base,
//    cmd.proto_base+1, ...;
//  * QUERY: loads every finished HD vector into the AM query register and
//    sweeps the columns of prototypes 0..cmd.num_protos-1, framing the ADC
//    results for the similarity check.  The sweep runs while the next read
//    is being encoded; the encoder is held only if a vector would finish
//    before the previous one has been handed over.
// Results are stalled, not dropped, while the host holds res_ready low
// (adv = !res_valid || res_ready).  done pulses when all vectors are
// encoded, written or scored and the last score has been taken.
//
// Memory port: mem_en/mem_addr, base returned on mem_base in the next clock
// (fixed latency, no stalls).  Status outputs pulse for observation.
// Following the described design: a simple FSM started by the host with
// the sequence address and the encoding parameters, N bases per N-gram,
// at most M N-grams per vector, and scores returned to the host.  This
// design's own choices: the sliding window, the command layout, the memory
// protocol, the order of columns and the overlap of encoding with the
// sweep.  Saving and restoring this state across a host context switch is
// not provided; a job runs to completion once started.
module controller
  import demeter_pkg::*;
#(
  parameter int unsigned D         = D_DEF,
  parameter int unsigned ROWS      = AM_ROWS_DEF,
  parameter int unsigned COLS      = AM_COLS_DEF,
  parameter int unsigned NUM_PROTO = NUM_PROTO_DEF,
  localparam int unsigned NCHUNK   = cdiv(D, ROWS),
  localparam int unsigned TILES    = cdiv(NUM_PROTO * NCHUNK, COLS),
  localparam int unsigned COL_W    = $clog2(TILES * COLS),
  localparam int unsigned CHUNK_W  = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned PROTO_W  = (NUM_PROTO > 1) ? $clog2(NUM_PROTO) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host command
  input  logic               start,
  input  cmd_t               cmd,
  output logic               busy,
  output logic               done,
  // host memory holding reads / references
  output logic               mem_en,
  output logic [ADDR_W-1:0]  mem_addr,
  input  base_e              mem_base,
  // item memory
  output logic               im_rd_en,
  output base_e              im_rd_sym,
  // encoder framing (aligned with the IM output)
  output logic               enc_first,
  output logic               enc_last,
  output logic               enc_fin,
  output logic [CNT_W_DEF-1:0] enc_threshold,
  input  logic               hv_valid,
  input  logic [D-1:0]       hv,
  // associative memory
  output logic               am_wr_en,
  output logic [COL_W-1:0]   am_wr_col,
  output logic [ROWS-1:0]    am_wr_data,
  output logic               am_q_load,
  output logic               adv,
  output logic               am_rd_en,
  output logic [COL_W-1:0]   am_rd_col,
  output logic [CHUNK_W-1:0] am_rd_chunk,
  input  logic               am_adc_valid,
  // similarity check framing (aligned with the ADC output)
  output logic               sc_first,
  output logic               sc_last,
  output logic [PROTO_W-1:0] sc_proto,
  output logic [LEN_W-1:0]   sc_tag,
  input  logic               res_valid,
  input  logic               res_ready,
  // observation
  output logic               stat_fin_stall,  // encoder held for hand-over
  output logic               stat_split,      // vector closed by the M limit
  output logic               stat_overlap     // encoding while searching
);

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_DRAIN} enc_state_e;
  enc_state_e st;
  cmd_t       c;

  // ---------------- issue of base addresses -----------------
  logic [LEN_W-1:0]  seq_i, s, ng_cnt;
  logic [NG_W-1:0]   j;
  logic [ADDR_W-1:0] seq_addr;
  logic              vec_inflight;   // a closing N-gram is past the issue point
  logic              hv_have;        // bundler output not yet handed over

  logic is_last_char, last_ng_of_seq, close, stall, issue;
  assign is_last_char   = (j == c.ngram_n - 1'b1);
  assign last_ng_of_seq = (s == c.seq_len - LEN_W'(c.ngram_n));
  assign close          = is_last_char &&
                          (last_ng_of_seq || (ng_cnt + 1'b1 == c.max_ngrams));
  assign stall          = close && vec_inflight;
  assign issue          = (st == E_RUN) && !stall;

  assign mem_en   = issue;
  assign mem_addr = seq_addr + ADDR_W'(s) + ADDR_W'(j);

  logic hand_over;   // the current vector leaves the bundler register
  logic s_busy;

  assign stat_fin_stall = (st == E_RUN) && stall;
  assign stat_split     = issue && close && !last_ng_of_seq;
  assign stat_overlap   = issue && s_busy;

  logic bad_cmd;
  assign bad_cmd = (cmd.ngram_n == '0) || (cmd.num_seqs == '0) ||
                   (cmd.max_ngrams == '0) || (cmd.seq_len < LEN_W'(cmd.ngram_n));

  logic all_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= E_IDLE;
      c            <= '0;
      seq_i        <= '0;
      s            <= '0;
      j            <= '0;
      ng_cnt       <= '0;
      seq_addr     <= '0;
      vec_inflight <= 1'b0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (hand_over) vec_inflight <= 1'b0;
      unique case (st)
        E_IDLE: if (start) begin
          c        <= cmd;
          seq_i    <= '0;
          s        <= '0;
          j        <= '0;
          ng_cnt   <= '0;
          seq_addr <= cmd.seq_base;
          st       <= bad_cmd ? E_DRAIN : E_RUN;
        end
        E_RUN: if (issue) begin
          if (close) vec_inflight <= 1'b1;
          if (!is_last_char) begin
            j <= j + 1'b1;
          end else begin
            j      <= '0;
            ng_cnt <= close ? '0 : ng_cnt + 1'b1;
            if (last_ng_of_seq) begin
              s        <= '0;
              seq_i    <= seq_i + 1'b1;
              seq_addr <= seq_addr + ADDR_W'(c.seq_len);
              if (seq_i + 1'b1 == c.num_seqs) st <= E_DRAIN;
            end else begin
              s <= s + 1'b1;
            end
          end
        end
        E_DRAIN: if (all_idle) begin
          st   <= E_IDLE;
          done <= 1'b1;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  assign busy = (st != E_IDLE);

  // ---------------- memory -> IM -> encoder pipeline -----------------
  logic [2:0] tag1, tag2;   // {first, last, fin}
  logic       v1, v2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; tag1 <= '0; tag2 <= '0;
    end else begin
      v1   <= issue;
      tag1 <= {(j == '0), is_last_char, close};
      v2   <= v1;
      tag2 <= tag1;
    end
  end
  assign im_rd_en  = v1;
  assign im_rd_sym = mem_base;
  assign {enc_first, enc_last, enc_fin} = tag2;
  assign enc_threshold = c.threshold;

  // ---------------- hand-over of finished vectors -----------------
  localparam int unsigned PAD = NCHUNK * ROWS;
  logic [PAD-1:0]     hv_pad;
  logic [CHUNK_W-1:0] wk;          // chunk being written (build)
  logic [7:0]         slot;        // prototype slot (build)
  logic [LEN_W-1:0]   vec_idx;     // query number (query)
  logic               start_search;

  assign hv_pad       = PAD'(hv);
  assign start_search = hv_have && (c.mode == OP_QUERY) && !s_busy;
  assign am_q_load    = start_search;

  assign am_wr_en   = hv_have && (c.mode == OP_BUILD) && (slot < NUM_PROTO);
  assign am_wr_col  = COL_W'(slot * NCHUNK + wk);
  assign am_wr_data = hv_pad[wk * ROWS +: ROWS];

  assign hand_over = start_search ||
                     (hv_have && (c.mode == OP_BUILD) && (wk == CHUNK_W'(NCHUNK - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hv_have <= 1'b0;
      wk      <= '0;
      slot    <= '0;
      vec_idx <= '0;
    end else begin
      if (start && st == E_IDLE) begin
        slot    <= cmd.proto_base;
        vec_idx <= '0;
      end
      if (hv_valid) hv_have <= 1'b1;
      else if (hand_over) hv_have <= 1'b0;
      if (hv_have && c.mode == OP_BUILD) begin
        if (wk == CHUNK_W'(NCHUNK - 1)) begin
          wk   <= '0;
          slot <= slot + 1'b1;
        end else begin
          wk <= wk + 1'b1;
        end
      end
      if (start_search) vec_idx <= vec_idx + 1'b1;
    end
  end

  // ---------------- AM column sweep (query) -----------------
  logic [COL_W-1:0]   col;
  logic [CHUNK_W-1:0] k;
  logic [PROTO_W-1:0] p;
  logic [LEN_W-1:0]   cur_tag;

  assign adv         = !res_valid || res_ready;
  assign am_rd_en    = s_busy && adv;
  assign am_rd_col   = col;
  assign am_rd_chunk = k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_busy  <= 1'b0;
      col     <= '0;
      k       <= '0;
      p       <= '0;
      cur_tag <= '0;
    end else begin
      if (start_search) begin
        s_busy  <= (c.num_protos != '0);
        col     <= '0;
        k       <= '0;
        p       <= '0;
        cur_tag <= vec_idx;
      end else if (am_rd_en) begin
        col <= col + 1'b1;
        if (k == CHUNK_W'(NCHUNK - 1)) begin
          k <= '0;
          p <= p + 1'b1;
          if (8'(p) + 8'd1 == c.num_protos) s_busy <= 1'b0;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

  // framing of the ADC outputs, one clock behind the column read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_first <= 1'b0; sc_last <= 1'b0; sc_proto <= '0; sc_tag <= '0;
    end else if (am_rd_en) begin
      sc_first <= (k == '0);
      sc_last  <= (k == CHUNK_W'(NCHUNK - 1));
      sc_proto <= p;
      sc_tag   <= cur_tag;
    end
  end

  assign all_idle = !v1 && !v2 && !vec_inflight && !hv_have && !s_busy &&
                    !am_adc_valid && !res_valid;

  a_protos: assert property (@(posedge clk) disable iff (!rst_n)
                             start_search |-> c.num_protos <= NUM_PROTO)
    else $error("more prototypes requested than the AM holds");
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   hv_valid |-> !hv_have)
    else $error("encoder output overwritten before hand-over");

endmodule
