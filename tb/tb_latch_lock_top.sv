// tb_latch_lock_top: end-to-end testbench of the locked group, at the
// default size (4 lanes, 24 key bits).
//
// Random words are fed in every cycle and dout is compared, every cycle,
// with a reference model of the circuit written directly from the lane
// description (input register, cl_a, register, cl_b/cl_c/cl_d, output
// register). The latency the reference uses is not hard-coded: it is worked
// out from the key with the cycle-delay rule of the locking scheme. Walking
// a path from the input register (positive phase) through the latches to
// the output register (negative then positive phase), a positive-phase
// latch contributes P, a negative-phase latch N, a clear latch nothing and
// a reset latch breaks the path; the number of phase changes, divided by
// two, is the number of clock cycles along the path.
//
// Scenarios, each counted as a mechanism that must occur at least once:
//   correct_key      the correct key gives the unlocked function
//   decoy_equivalent the path-delay decoy set to either phase gives the same
//                    function as clear (keys that are functionally equal)
//   cycle_delay      keys that put the converted latches on other phases give
//                    one cycle of latency, and the output then differs from
//                    the unlocked function
//   latch_reset      a real latch or a delay decoy held in reset forces a
//                    constant
//   logic_decoy      a logic decoy switched on alters its lane's function in
//                    the way its cone predicts
//   scan_observe     every latch value is captured and shifted out
//   scan_control     every latch output is set from the scan chain
//   fuse_block       with the fuse blown, scan neither shifts, controls nor
//                    shows anything
module tb_latch_lock_top;
  import llock_pkg::*;

  localparam int unsigned LANES = 4;      // the top's default
  localparam int unsigned NLAT  = 3 * LANES;
  localparam int unsigned NB    = NLAT * DATA_W;

  logic clk = 0;
  word_t [LANES-1:0] din, dout;
  logic [2*NLAT-1:0] key;
  logic scan_en, test_mode, scan_in, scan_out, fuse;

  latch_lock_top dut (
    .clk(clk), .din(din), .dout(dout), .key(key),
    .scan_en(scan_en), .test_mode(test_mode), .scan_in(scan_in),
    .scan_out(scan_out), .scan_fuse_blown(fuse));

  always #5 clk = !clk;

  `include "tb_latch_lock_checks.svh"

  // Watchdog: the run takes well under this many time units.
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
