// latch_cc: clock and reset control circuitry ("CC") of one phase-programmable
// latch.
//
// Two key bits select what the latch is. Following the truth table of the
// locking scheme, {key0, key1} = 00 drives the latch reset high and its clock
// low (the latch outputs constant 0), 01 passes the system clock (positive-
// phase latch), 10 passes the inverted clock (negative-phase latch) and 11
// ties the latch clock high (the latch is a clear, transparent buffer).
//
// Interface: clk is the system clock; key0/key1 come from the key store;
// lat_clk and lat_rst drive the latch's enable and active-high reset pins.
// The block is purely combinational: lat_clk follows clk with one gate of
// delay. The truth table is the paper's; the mux-style coding is this
// design's choice (the paper does not give the gates). An immediate
// assertion checks the table's rule that reset and clock enable are never
// active together.
module latch_cc
  import llock_pkg::*;
(
  input  logic clk,
  input  logic key0,
  input  logic key1,
  output logic lat_clk,
  output logic lat_rst
);

  latch_mode_e mode;
  assign mode = latch_mode_e'({key0, key1});

  always_comb begin
    unique case (mode)
      LK_RESET: begin lat_rst = 1'b1; lat_clk = 1'b0; end
      LK_POS:   begin lat_rst = 1'b0; lat_clk = clk;  end
      LK_NEG:   begin lat_rst = 1'b0; lat_clk = ~clk; end
      default:  begin lat_rst = 1'b0; lat_clk = 1'b1; end  // LK_CLEAR
    endcase
  end

  // A latch held in reset never has its clock enabled (truth table rule).
  always_comb assert (!(lat_rst && lat_clk));

endmodule
