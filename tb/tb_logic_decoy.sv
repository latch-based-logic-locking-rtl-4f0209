// tb_logic_decoy: self-checking testbench for the logic decoy.
//
// Under the correct key (00) the decoy must output 0 whatever its sources
// do. Under key 11 it must be transparent and show the cone value, which
// the testbench recomputes from the sources: (a & rotate_right(b, 1)) ^ mask.
// Under key 01 it must hold the cone value sampled when clk falls.
module tb_logic_decoy;
  localparam int unsigned W = 8;
  localparam logic [W-1:0] MASK = 8'h3C;
  logic clk, key0, key1;
  logic [W-1:0] a, b, q, exp_q;
  int checks = 0, failures = 0;

  logic_decoy #(.W(W), .CONE_MASK(MASK)) dut (
    .clk(clk), .key0(key0), .key1(key1), .src_a(a), .src_b(b), .q(q));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] cone(logic [W-1:0] x, logic [W-1:0] y);
    logic [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = x[i] & y[(i + 1) % W];
    return r ^ MASK;
  endfunction

  task automatic chk(string what);
    checks++;
    if (q !== exp_q) begin
      failures++;
      $display("FAIL %s: a=%h b=%h q=%h want %h", what, a, b, q, exp_q);
    end
  endtask

  initial begin
    clk = 0;
    // Correct key: output stays 0.
    {key0, key1} = 2'b00;
    for (int n = 0; n < 50; n++) begin
      a = W'($urandom); b = W'($urandom); clk = !clk; #2;
      exp_q = '0; chk("reset");
    end
    // Clear: transparent cone.
    {key0, key1} = 2'b11;
    for (int n = 0; n < 50; n++) begin
      a = W'($urandom); b = W'($urandom); clk = !clk; #2;
      exp_q = cone(a, b); chk("clear");
    end
    // Positive phase: follows while clk high, holds while low.
    {key0, key1} = 2'b01;
    clk = 1;
    for (int n = 0; n < 50; n++) begin
      a = W'($urandom); b = W'($urandom); #2;
      exp_q = cone(a, b); chk("pos open");
      clk = 0; #2;
      a = W'($urandom); b = W'($urandom); #2;
      chk("pos hold");
      clk = 1; #2;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
