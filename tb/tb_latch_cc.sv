// tb_latch_cc: self-checking testbench for the latch control circuitry.
//
// Walks all four key settings against both clock levels, many times over in
// random order, and compares lat_clk/lat_rst with the truth table written
// out here as literal constants: 00 -> reset, clock 0; 01 -> clock; 10 ->
// inverted clock; 11 -> clock tied high. A watchdog ends the run if it
// hangs.
module tb_latch_cc;
  logic clk, key0, key1, lat_clk, lat_rst;
  int checks = 0, failures = 0;

  latch_cc dut (.clk(clk), .key0(key0), .key1(key1), .lat_clk(lat_clk), .lat_rst(lat_rst));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_clk, exp_rst;
    for (int n = 0; n < 64; n++) begin
      {key0, key1, clk} = (n < 8) ? 3'(n) : 3'($urandom_range(7));
      #1;
      case ({key0, key1})
        2'b00: begin exp_rst = 1'b1; exp_clk = 1'b0;  end
        2'b01: begin exp_rst = 1'b0; exp_clk = clk;   end
        2'b10: begin exp_rst = 1'b0; exp_clk = !clk;  end
        default: begin exp_rst = 1'b0; exp_clk = 1'b1; end
      endcase
      checks++;
      if (lat_clk !== exp_clk || lat_rst !== exp_rst) begin
        failures++;
        $display("FAIL key=%b%b clk=%b: got clk=%b rst=%b, want clk=%b rst=%b",
                 key0, key1, clk, lat_clk, lat_rst, exp_clk, exp_rst);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
