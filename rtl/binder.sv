// Binder: builds one N-gram from the atomic vectors of N consecutive bases.
//
// One XOR gate and one flip-flop per bit position.  Every cycle an atomic
// vector arrives from the item memory, each gate XORs its bit with the value
// held by the neighbouring flip-flop, and the result is stored.  Reading the
// neighbour instead of the own flip-flop is what shifts the partial N-gram by
// one position per character, at no cost: after N characters the buffer holds
//   B(c_N) ^ sh(B(c_{N-1})) ^ ... ^ sh^{N-1}(B(c_1)).
// Bit i reads flip-flop i+1; the top gate reads a constant 0, so sh() is a
// shift with zero fill (not a rotation).  The first character of an N-gram
// loads its vector without XOR, which resets the buffer.
//
// Interface: in_valid/in_vec with framing bits in_first, in_last and in_fin
// (this N-gram closes the HD vector).  When in_last is seen the finished
// N-gram appears on ng_vec with ng_valid (and ng_fin) one clock later;
// ng_vec stays readable until the next N-gram finishes.
module binder
  import demeter_pkg::*;
#(
  parameter int unsigned D = D_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [D-1:0] in_vec,
  input  logic         in_first,
  input  logic         in_last,
  input  logic         in_fin,
  output logic         ng_valid,
  output logic [D-1:0] ng_vec,
  output logic         ng_fin
);

  logic [D-1:0] buf_q;     // the flip-flop row
  logic [D-1:0] bound;     // XOR gate outputs

  // Neighbour of bit i is bit i+1; the last gate sees ground.
  assign bound = in_first ? in_vec : (in_vec ^ {1'b0, buf_q[D-1:1]});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q    <= '0;
      ng_valid <= 1'b0;
      ng_fin   <= 1'b0;
    end else begin
      ng_valid <= in_valid && in_last;
      ng_fin   <= in_valid && in_last && in_fin;
      if (in_valid) buf_q <= bound;
    end
  end

  assign ng_vec = buf_q;

  a_fin_on_last: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid && in_fin |-> in_last)
    else $error("in_fin without in_last");

endmodule
