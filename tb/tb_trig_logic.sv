// tb_trig_logic: self-checking test of the example trigger logic.
//
// Random hits (each detector hit valid with probability 3/4) and tags are
// applied every clock. A reference computed here gives, for each input
// clock, the expected {coincidence, value} and tag; the output four clocks
// later must match it exactly, which checks both function and the 4-clock
// latency. Value = 0 without a coincidence, else the LUT formula of
// tb_trig_lut on d = eta_b - eta_a.
module tb_trig_logic;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [8:0]  in_a, in_b, out_1;
  logic [15:0] in_c, out_2;

  int checks = 0, failures = 0;
  int n_coin = 0;
  logic [8:0]  exp1 [$];
  logic [15:0] exp2 [$];

  trig_logic dut (.clk(clk), .rst_n(rst_n), .in_a(in_a), .in_b(in_b), .in_c(in_c),
                  .out_1(out_1), .out_2(out_2));

  function automatic logic [8:0] ref_out(logic [8:0] a, logic [8:0] b);
    int d, q;
    if (!(a[8] && b[8])) return 9'd0;
    d = int'(b[7:0]) - int'(a[7:0]);
    if (d < 0) d = -d;
    q = (d == 0) ? 255 : 1024 / d;
    if (q > 255) q = 255;
    return {1'b1, 8'(q)};
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_a = '0; in_b = '0; in_c = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // the pipeline holds zeros after reset; with the compare made after the
    // current input is queued, three leading zeros put input i at the head
    // of the queue exactly four clock edges after it was applied
    repeat (3) begin exp1.push_back('0); exp2.push_back('0); end
    for (int i = 0; i < 2000; i++) begin
      in_a = {1'($urandom_range(3) != 0), 8'($urandom())};
      in_b = {1'($urandom_range(3) != 0), 8'($urandom())};
      if (i % 7 == 0) in_b[7:0] = in_a[7:0];           // d = 0
      if (i % 11 == 0) in_b[7:0] = in_a[7:0] + 8'd3;   // small d
      in_c = 16'(i);
      exp1.push_back(ref_out(in_a, in_b));
      exp2.push_back(in_c);
      @(negedge clk);
      // output now shows the input of four clocks ago
      checks++;
      if (out_1 !== exp1[0] || out_2 !== exp2[0]) begin
        failures++;
        $display("FAIL clock %0d: got %h/%h expected %h/%h", i, out_1, out_2, exp1[0], exp2[0]);
      end
      if (out_1[8]) n_coin++;
      void'(exp1.pop_front());
      void'(exp2.pop_front());
    end
    checks++;
    if (n_coin == 0) begin failures++; $display("FAIL no coincidence seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
