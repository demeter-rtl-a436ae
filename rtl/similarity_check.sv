// Similarity check (distance calculator): adds the two ADC codes read from
// the same column of the true and complement crossbars, which gives the
// XNOR pop-count of one chunk, and accumulates the chunks of one prototype
// into its similarity score (number of matching bit positions, i.e.
// D - Hamming distance).  The score is buffered and sent to the host, which
// applies the classification threshold and does the abundance estimation;
// there is no winner-take-all here because a read may match one, several or
// no species.
//
// Interface: in_valid with adc_p/adc_n and framing in_first (first chunk of
// a prototype), in_last (last chunk), in_proto and in_tag (which query).  When
// in_last is accepted the score appears on res_score with res_valid one clock
// later.  Everything advances only when adv is high; the owner drives
// adv = !res_valid || res_ready so a result waits for the host.  Summing the
// chunks here, rather than on the host, is this design's choice.
module similarity_check
  import demeter_pkg::*;
#(
  parameter int unsigned ADC_BITS = ADC_BITS_DEF,
  parameter int unsigned SCORE_W  = SCORE_W_DEF,
  parameter int unsigned PROTO_W  = 5,
  parameter int unsigned TAG_W    = LEN_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                adv,
  input  logic                in_valid,
  input  logic [ADC_BITS-1:0] adc_p,
  input  logic [ADC_BITS-1:0] adc_n,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [PROTO_W-1:0]  in_proto,
  input  logic [TAG_W-1:0]    in_tag,
  output logic                res_valid,
  output logic [PROTO_W-1:0]  res_proto,
  output logic [TAG_W-1:0]    res_tag,
  output logic [SCORE_W-1:0]  res_score
);

  logic [SCORE_W-1:0] acc;
  logic [SCORE_W-1:0] chunk_sum, acc_next;

  assign chunk_sum = SCORE_W'(adc_p) + SCORE_W'(adc_n);
  assign acc_next  = in_first ? chunk_sum : acc + chunk_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      res_valid <= 1'b0;
      res_proto <= '0;
      res_tag   <= '0;
      res_score <= '0;
    end else if (adv) begin
      res_valid <= in_valid && in_last;
      if (in_valid) begin
        acc <= acc_next;
        if (in_last) begin
          res_score <= acc_next;
          res_proto <= in_proto;
          res_tag   <= in_tag;
        end
      end
    end
  end

endmodule
