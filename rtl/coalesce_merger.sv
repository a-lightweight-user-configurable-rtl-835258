// coalesce_merger: one merger node of the coalescing logic.
//
// Appends a variable-length list of words B (b_len valid words) directly
// behind list A (a_len valid words): out = A | (B << a_len * W), out_len =
// a_len + b_len. Words of A at or above a_len must be zero, as every producer
// in this design guarantees. Combinational, a barrel shifter plus an OR.
module coalesce_merger #(
  parameter int unsigned W   = detector_pkg::WORD_W,
  parameter int unsigned NA  = 10,
  parameter int unsigned NB  = 10,
  parameter int unsigned LAW = $clog2(NA + 1),
  parameter int unsigned LBW = $clog2(NB + 1),
  parameter int unsigned LOW = $clog2(NA + NB + 1)
) (
  input  logic [NA*W-1:0]      a,
  input  logic [LAW-1:0]       a_len,
  input  logic [NB*W-1:0]      b,
  input  logic [LBW-1:0]       b_len,
  output logic [(NA+NB)*W-1:0] y,
  output logic [LOW-1:0]       y_len
);
  logic [(NA+NB)*W-1:0] bs;
  assign bs    = {{NA*W{1'b0}}, b} << (a_len * W);
  assign y     = {{NB*W{1'b0}}, a} | bs;
  assign y_len = LOW'(a_len) + LOW'(b_len);
endmodule
