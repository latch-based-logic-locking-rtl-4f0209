// tb_prog_latch: self-checking testbench for the phase-programmable latch.
//
// For every key setting the clock and data are changed in random order, one
// at a time, and after each change the latch output is compared with a
// reference latch kept in the testbench: under key 01 it is transparent
// while clk is high, under 10 while clk is low, under 11 always, and under
// 00 its output is 0. Each key is first given a full clock pulse so the
// reference and the latch start from the same stored value.
module tb_prog_latch;
  localparam int unsigned W = 8;
  logic clk, key0, key1;
  logic [W-1:0] d, q, ref_q;
  int checks = 0, failures = 0;
  int transparent_seen = 0, hold_seen = 0;

  prog_latch #(.W(W)) dut (.clk(clk), .key0(key0), .key1(key1), .d(d), .q(q));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic open_now(logic [1:0] k, logic c);
    case (k)
      2'b01: return c;
      2'b10: return !c;
      2'b11: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  initial begin
    for (int k = 0; k < 4; k++) begin
      {key0, key1} = 2'(k);
      d = 8'h00; clk = 0; #2; clk = 1; #2; clk = 0; #2;
      // After a full pulse every open-able latch holds 0, a reset one is 0.
      ref_q = '0;
      for (int n = 0; n < 300; n++) begin
        if ($urandom_range(1)) clk = !clk;
        else d = W'($urandom);
        #2;
        if (k == 0) ref_q = '0;
        else if (open_now(2'(k), clk)) begin ref_q = d; transparent_seen++; end
        else hold_seen++;
        checks++;
        if (q !== ref_q) begin
          failures++;
          if (failures < 10)
            $display("FAIL key=%02b clk=%b d=%h: q=%h want %h", 2'(k), clk, d, q, ref_q);
        end
      end
    end
    checks++;
    if (transparent_seen == 0 || hold_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
