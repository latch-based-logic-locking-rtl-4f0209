// Shared types and constants for the latch-based logic locking RTL.
//
// latch_mode_e is the function a phase-programmable latch takes from its two
// key bits {Key0, Key1}. The encoding is the truth table of the latch control
// circuitry: 00 holds the latch in reset (constant 0, used by logic decoys),
// 01 clocks it on the true clock (positive-phase latch), 10 on the inverted
// clock (negative-phase latch), and 11 ties its clock high so it is a clear,
// transparent buffer (used by path-delay decoys).
//
// DATA_W and the cl_* functions belong to the small demonstration circuit
// that latch_lock_top locks. The locking scheme itself is independent of the
// logic it protects; these functions stand in for the original design's
// combinational logic (the "CL" clouds between registers) and are this
// design's own choice, as is the 8-bit word width.
package llock_pkg;

  typedef enum logic [1:0] {
    LK_RESET = 2'b00,  // R = 1, latch clock = 0: output constant 0
    LK_POS   = 2'b01,  // R = 0, latch clock = CLK: positive-phase latch
    LK_NEG   = 2'b10,  // R = 0, latch clock = !CLK: negative-phase latch
    LK_CLEAR = 2'b11   // R = 0, latch clock = 1: held transparent
  } latch_mode_e;

  // Word width of the demonstration datapath.
  localparam int unsigned DATA_W = 8;
  typedef logic [DATA_W-1:0] word_t;

  // Combinational clouds of the demonstration circuit, in path order:
  // input FF -> cl_a -> (converted FF) -> cl_b -> cl_c -> cl_d -> output FF.
  function automatic word_t cl_a(word_t x);
    return (x ^ {x[DATA_W-2:0], x[DATA_W-1]}) + word_t'(8'h5A);
  endfunction

  // cl_b mixes in the neighbouring lane, which interconnects the group.
  function automatic word_t cl_b(word_t x, word_t nb);
    return (x + (nb & word_t'(8'hC3))) ^ word_t'(8'h1F);
  endfunction

  function automatic word_t cl_c(word_t x);
    return {x[DATA_W/2-1:0], x[DATA_W-1:DATA_W/2]} ^ (x >> 1);
  endfunction

  function automatic word_t cl_d(word_t x);
    return x + {x[0], x[DATA_W-1:1]} + word_t'(8'h33);
  endfunction

endpackage
