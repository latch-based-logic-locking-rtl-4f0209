// logic_decoy: a cone of decoy logic feeding a phase-programmable latch.
//
// The insertion flow adds logic decoys by building a small cone of logic
// from a subset of the locked group's latch outputs and storing its result
// in an extra programmable latch. The latch output is merged into the
// original logic downstream in a way that has no effect when it is 0 (the
// top level XORs it in). Under the correct key {key0, key1} = 00 the latch is
// held in reset, its output is constant 0 and the design computes its
// original function; any other key lets the cone's value through and
// changes the function.
//
// Interface: clk and two key bits as for prog_latch; src_a and src_b are two
// latch outputs of the group; q is the decoy output. Timing is that of
// prog_latch. The cone used here, (src_a & rotr(src_b)) ^ CONE_MASK, is this
// design's choice: the paper builds random cones and does not give one.
module logic_decoy #(
  parameter int unsigned     W         = 8,
  parameter logic [W-1:0]    CONE_MASK = W'(8'hA5)
) (
  input  logic         clk,
  input  logic         key0,
  input  logic         key1,
  input  logic [W-1:0] src_a,
  input  logic [W-1:0] src_b,
  output logic [W-1:0] q
);

  logic [W-1:0] cone;

  always_comb cone = (src_a & {src_b[0], src_b[W-1:1]}) ^ CONE_MASK;

  prog_latch #(.W(W)) u_lat (
    .clk (clk),
    .key0(key0),
    .key1(key1),
    .d   (cone),
    .q   (q)
  );

endmodule
