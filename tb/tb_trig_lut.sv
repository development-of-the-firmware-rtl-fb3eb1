// tb_trig_lut: self-checking test of the look-up table.
//
// Reads every entry and compares it, one clock after the address, with the
// table's defining formula evaluated here in real arithmetic: for
// d = addr - 256, value = 255 if d = 0, else min(255, floor(1024 / |d|)).
// Also checks that the output holds while en is low.
module tb_trig_lut;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       en;
  logic [8:0] addr;
  logic [7:0] data;

  int checks = 0, failures = 0;

  trig_lut dut (.clk(clk), .en(en), .addr(addr), .data(data));

  function automatic int expect_val(int a);
    real d, q;
    d = (a >= 256) ? real'(a - 256) : real'(256 - a);
    if (d == 0.0) return 255;
    q = 1024.0 / d;
    return (q >= 255.0) ? 255 : $rtoi(q);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hold;
    en = 1'b1; addr = '0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); addr = 9'(a);
      @(negedge clk);
      checks++;
      if (int'(data) != expect_val(a)) begin
        failures++;
        $display("FAIL addr %0d: got %0d expected %0d", a, data, expect_val(a));
      end
    end
    hold = int'(data);
    en = 1'b0; addr = 9'd256;
    repeat (3) @(negedge clk);
    checks++;
    if (int'(data) != hold) begin
      failures++;
      $display("FAIL output changed with en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
