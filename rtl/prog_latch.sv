// prog_latch: a phase-programmable latch with keyed reset.
//
// This is the one storage element of latch-based logic locking. The same
// cell replaces each half of a converted flip-flop, sits on a net as a
// path-delay decoy, and holds a logic decoy's output. Its two key bits go
// through latch_cc, which turns them into the latch's clock and reset:
//   key 00  output held at 0 (reset)
//   key 01  transparent while clk is high, holds while it is low
//   key 10  transparent while clk is low, holds while it is high
//   key 11  always transparent (a clear buffer on the path)
// Two such latches in series with keys 10 then 01 form a positive-edge
// flip-flop (master, then slave).
//
// Interface: clk, the two key bits, a W-bit data input d and output q.
// Timing: level sensitive; q follows d while the latch clock is high and
// keeps the last value when it falls. Reset is asynchronous and wins.
// There is no other reset: until a latch is first clocked its value is
// whatever it powered up to, as the scheme assumes. The behaviour is the
// paper's; the width parameter is this design's.
module prog_latch #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         key0,
  input  logic         key1,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic         lat_clk, lat_rst;
  logic [W-1:0] lat_q;

  latch_cc u_cc (
    .clk    (clk),
    .key0   (key0),
    .key1   (key1),
    .lat_clk(lat_clk),
    .lat_rst(lat_rst)
  );

  always_latch begin
    if (lat_rst || lat_clk) lat_q = lat_rst ? '0 : d;
  end

  // Clock-to-output delay of the latch (simulation only; synthesis ignores
  // it). A latch that opens on a clock edge must not hand its new value to
  // a flip-flop that samples on that same edge, which a zero-delay
  // simulation may otherwise do.
  assign #1 q = lat_q;

endmodule
