// tb_scan_test_point: self-checking testbench for one scan test point.
//
// Checks the three things a test point must do: in functional mode it is
// invisible (q equals the latch output); with scan_en it shifts, so a bit
// pattern fed in at scan_in comes out of scan_out W clocks later and, in
// test mode, drives q (control); with scan_en low it captures the latch
// output, which can then be shifted out (observe).
module tb_scan_test_point;
  localparam int unsigned W = 8;
  logic clk = 0, scan_en, test_mode, scan_in, scan_out;
  logic [W-1:0] lat_q, q, pattern, got;
  int checks = 0, failures = 0;

  scan_test_point #(.W(W)) dut (
    .clk(clk), .scan_en(scan_en), .test_mode(test_mode), .scan_in(scan_in),
    .lat_q(lat_q), .q(q), .scan_out(scan_out));

  always #5 clk = !clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    scan_en = 0; test_mode = 0; scan_in = 0; lat_q = '0;
    // Functional mode: transparent.
    repeat (20) begin
      @(negedge clk); lat_q = W'($urandom); #1;
      chk(q == lat_q, "functional pass-through");
    end
    // Control: shift a pattern in (MSB first) and drive q with it.
    for (int r = 0; r < 5; r++) begin
      pattern = W'($urandom);
      scan_en = 1; test_mode = 1;
      for (int i = W - 1; i >= 0; i--) begin
        @(negedge clk); scan_in = pattern[i];
      end
      @(negedge clk); scan_en = 0;
      // Hold the value by shifting nothing: keep scan_en high with no clocks
      // is not possible, so check q right after the last shift edge.
      chk(q == pattern, "control: q shows shifted-in pattern");
      chk(scan_out == pattern[W-1], "scan_out is register MSB");
      // Observe: capture lat_q, then shift it out MSB first.
      lat_q = W'($urandom); test_mode = 0;
      @(negedge clk);  // capture edge has passed
      scan_en = 1;
      for (int i = W - 1; i >= 0; i--) begin
        got[i] = scan_out;
        @(negedge clk);
      end
      scan_en = 0;
      chk(got == lat_q, "observe: captured latch value shifted out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
