// Encoder: binder followed by bundler, the compute periphery of the item
// memory.  It turns a stream of atomic vectors, framed into N-grams by the
// controller, into one binary HD vector per closed group of N-grams.  The
// same hardware produces prototype vectors (from reference genomes) and
// query vectors (from reads).
//
// Timing: the atomic vector of the last base of the closing N-gram enters in
// cycle t; the binder registers the N-gram at t+1 and the bundler's output
// register holds the HD vector with hv_valid high at t+2.  A new atomic vector
// can be accepted every cycle.
module encoder
  import demeter_pkg::*;
#(
  parameter int unsigned D     = D_DEF,
  parameter int unsigned CNT_W = CNT_W_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [D-1:0]     in_vec,
  input  logic             in_first,
  input  logic             in_last,
  input  logic             in_fin,
  input  logic [CNT_W-1:0] threshold,
  output logic             hv_valid,
  output logic [D-1:0]     hv
);

  logic         ng_valid, ng_fin;
  logic [D-1:0] ng_vec;

  binder #(.D(D)) u_binder (
    .clk, .rst_n, .in_valid, .in_vec, .in_first, .in_last, .in_fin,
    .ng_valid, .ng_vec, .ng_fin
  );

  bundler #(.D(D), .CNT_W(CNT_W)) u_bundler (
    .clk, .rst_n, .ng_valid, .ng_vec, .ng_fin, .threshold, .hv_valid, .hv
  );

endmodule
