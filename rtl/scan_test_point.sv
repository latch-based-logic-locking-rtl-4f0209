// scan_test_point: a scannable test point at the output of one latch.
//
// Latches cannot be scanned like flip-flops, so every latch of the locked
// group gets a test point: a W-bit scan register and two muxes. The first
// mux, off the functional path, chooses whether the scan register shifts
// (scan_en = 1, one bit per clock from scan_in) or captures the latch output
// (scan_en = 0). The second mux, the only one on the functional path, passes
// the latch output downstream in normal operation and the scan register's
// contents in test mode. So each latch can be both observed and set.
//
// Interface: clk; scan_en, test_mode; scan_in/scan_out chain the registers
// of all test points into one scan chain (scan_out is the register's MSB);
// lat_q is the latch output and q what downstream logic sees.
// Timing: the scan register updates on the rising clock edge; q is
// combinational. The two-mux-plus-flip-flop structure is the paper's; the
// serial bit order and the capture-every-cycle behaviour are this design's.
module scan_test_point #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         scan_en,
  input  logic         test_mode,
  input  logic         scan_in,
  input  logic [W-1:0] lat_q,
  output logic [W-1:0] q,
  output logic         scan_out
);

  logic [W-1:0] sreg;

  always_ff @(posedge clk) begin
    if (scan_en) sreg <= {sreg[W-2:0], scan_in};
    else         sreg <= lat_q;
  end

  assign q        = test_mode ? sreg : lat_q;
  assign scan_out = sreg[W-1];

endmodule
