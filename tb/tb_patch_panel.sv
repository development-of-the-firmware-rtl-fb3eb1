// tb_patch_panel: self-checking test of the patch panel at its default map.
//
// Random input frames, valid or not, are applied each clock. One clock later
// in_a/in_b/in_c must hold bits [8:0], [24:16] and [47:32] of a valid frame,
// or zero after an invalid one, and in_valid must follow frame_in_valid. The
// output frame must carry out_1 in bits [8:0], out_2 in [31:16] and zero
// elsewhere. Expected values are sliced here with shifts and masks.
module tb_patch_panel;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0] frame_in;
  logic        frame_in_valid, in_valid;
  logic [8:0]  in_a, in_b, out_1;
  logic [15:0] in_c, out_2;
  logic [31:0] frame_out;

  int checks = 0, failures = 0;

  patch_panel dut (
    .clk(clk), .rst_n(rst_n), .frame_in(frame_in), .frame_in_valid(frame_in_valid),
    .in_a(in_a), .in_b(in_b), .in_c(in_c), .in_valid(in_valid),
    .out_1(out_1), .out_2(out_2), .frame_out(frame_out));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] f;
    logic        v;
    frame_in = '0; frame_in_valid = 0; out_1 = '0; out_2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      f = {$urandom(), $urandom()};
      v = ($urandom_range(3) != 0);
      frame_in = f; frame_in_valid = v;
      out_1 = 9'($urandom()); out_2 = 16'($urandom());
      #1;
      check("frame_out", longint'(frame_out),
            longint'((32'(out_2) << 16) | 32'(out_1)));
      @(negedge clk);
      check("in_valid", longint'(in_valid), longint'(v));
      check("in_a", longint'(in_a), v ? longint'((f >> 0) & 64'h1FF) : 0);
      check("in_b", longint'(in_b), v ? longint'((f >> 16) & 64'h1FF) : 0);
      check("in_c", longint'(in_c), v ? longint'((f >> 32) & 64'hFFFF) : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
