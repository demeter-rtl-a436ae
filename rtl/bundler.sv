// Bundler: adds N-grams position by position and thresholds the sum.
//
// Each of the D bit positions owns a CNT_W-bit counter.  An arriving N-gram
// adds its bit to every counter (one adder per position, fed back from the
// counter).  The N-gram that closes an HD vector (ng_fin) is added as well,
// after which each position is compared with the threshold T (bit = count >
// T), the result is stored in the output register and all counters restart
// at zero, ready for the next vector in the following cycle.  With T set to
// half the number of bundled N-grams this is the majority function.
//
// Interface: ng_valid/ng_vec/ng_fin in; threshold is sampled when ng_fin is
// accepted.  hv_valid pulses for one clock when hv holds a new vector; hv is
// held until the next one.  Counters saturate at 2^CNT_W-1 (width and
// saturation are this design's choice).
module bundler
  import demeter_pkg::*;
#(
  parameter int unsigned D     = D_DEF,
  parameter int unsigned CNT_W = CNT_W_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ng_valid,
  input  logic [D-1:0]     ng_vec,
  input  logic             ng_fin,
  input  logic [CNT_W-1:0] threshold,
  output logic             hv_valid,
  output logic [D-1:0]     hv
);

  logic [CNT_W-1:0] cnt [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) cnt[i] <= '0;
      hv       <= '0;
      hv_valid <= 1'b0;
    end else begin
      hv_valid <= ng_valid && ng_fin;
      if (ng_valid) begin
        for (int i = 0; i < D; i++) begin
          logic [CNT_W-1:0] sum;
          sum = (cnt[i] == {CNT_W{1'b1}}) ? cnt[i] : cnt[i] + CNT_W'(ng_vec[i]);
          if (ng_fin) begin
            hv[i]  <= (sum > threshold);
            cnt[i] <= '0;
          end else begin
            cnt[i] <= sum;
          end
        end
      end
    end
  end

endmodule
