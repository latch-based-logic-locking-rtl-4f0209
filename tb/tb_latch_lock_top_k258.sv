// tb_latch_lock_top_k258: the end-to-end checks of tb_latch_lock_top run on
// a larger locked group, 43 lanes with 129 programmable latches and a
// 258-bit key. That is the smallest multiple of the 6 key bits per lane that
// reaches 256 bits, the largest amount of locking evaluated for the
// technique. The scan chain is 1032 bits long. Same checks and mechanisms
// as the default-size test; see tb_latch_lock_top.sv.
module tb_latch_lock_top_k258;
  import llock_pkg::*;

  localparam int unsigned LANES = 43;     // 258 key bits
  localparam int unsigned NLAT  = 3 * LANES;
  localparam int unsigned NB    = NLAT * DATA_W;

  logic clk = 0;
  word_t [LANES-1:0] din, dout;
  logic [2*NLAT-1:0] key;
  logic scan_en, test_mode, scan_in, scan_out, fuse;

  latch_lock_top #(.LANES(LANES)) dut (
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
