// predecode_primitive -- the two-level predecoding primitive.
//
// Checks one pair of syndromes of the decoding graph, called the center and
// the neighbor. If both are active, the edge between them is taken to have
// been flipped by an error: the primitive raises `correction` (routed by the
// enclosing stage to the edge's data qubit(s)) and clears both syndromes so
// that no later primitive counts them again. Structure as in the paper: one
// AND gate detects "both active", and two XOR gates clear the pair.
// Purely combinational; no clock.
module predecode_primitive (
  input  logic center_in,
  input  logic neighbor_in,
  output logic center_out,
  output logic neighbor_out,
  output logic correction
);

  assign correction   = center_in & neighbor_in;
  assign center_out   = center_in ^ correction;
  assign neighbor_out = neighbor_in ^ correction;

endmodule
