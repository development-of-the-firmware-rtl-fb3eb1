// tb_fifo_out_buf: self-checking test of the output FIFO buffer.
//
// Frames of two words are captured on the clocks where cap_en is high (with
// random gaps), then drained against a randomly stalling consumer. The
// drained words must be the captured frames in order, low word first, and
// drain_done must follow the last word. A drain with nothing captured must
// give drain_done at once. A small-buffer instance is over-filled to check
// that extra frames are dropped and overflow is set.
module tb_fifo_out_buf;
  localparam int unsigned FW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             clear, cap_en, overflow, drain, out_valid, out_ready, drain_done;
  logic [32*FW-1:0] frame_in;
  logic [15:0]      n_frames;
  logic [31:0]      out_data;

  // small instance for the overflow check: 8 words = 4 frames
  logic             s_cap_en, s_overflow, s_out_valid, s_drain_done;
  logic [15:0]      s_n_frames;
  logic [31:0]      s_out_data;

  int checks = 0, failures = 0;
  logic [32*FW-1:0] frames [2048];

  fifo_out_buf #(.DEPTH_WORDS(4096), .FRAME_WORDS(FW)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .cap_en(cap_en), .frame_in(frame_in),
    .n_frames(n_frames), .overflow(overflow), .drain(drain),
    .out_data(out_data), .out_valid(out_valid), .out_ready(out_ready),
    .drain_done(drain_done));

  fifo_out_buf #(.DEPTH_WORDS(8), .FRAME_WORDS(FW)) dut_small (
    .clk(clk), .rst_n(rst_n), .clear(clear), .cap_en(s_cap_en), .frame_in(frame_in),
    .n_frames(s_n_frames), .overflow(s_overflow), .drain(1'b0),
    .out_data(s_out_data), .out_valid(s_out_valid), .out_ready(1'b0),
    .drain_done(s_drain_done));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (%h) expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  task automatic run(input int unsigned nf);
    int unsigned nw, got, n_dd, t;
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    for (int k = 0; k < int'(nf); k++) begin
      frames[k] = {$urandom(), $urandom()};
      while ($urandom_range(99) < 20) begin
        cap_en = 1'b0; frame_in = {$urandom(), $urandom()};
        @(negedge clk);
      end
      cap_en = 1'b1; frame_in = frames[k];
      @(negedge clk);
    end
    cap_en = 1'b0;
    check("frames stored", n_frames, nf);
    drain = 1'b1;
    @(negedge clk); drain = 1'b0;
    nw = nf * FW; got = 0; n_dd = 0; t = 0;
    while (t < 4 * nw + 20) begin
      out_ready = ($urandom_range(99) >= 30);
      #1;
      if (drain_done) begin
        n_dd++;
        check("drain_done after the last word", got, nw);
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== frames[got / FW][(got % FW) * 32 +: 32]) begin
          failures++;
          $display("FAIL word %0d: got %h expected %h", got, out_data,
                   frames[got / FW][(got % FW) * 32 +: 32]);
        end
        got++;
      end
      @(negedge clk); t++;
    end
    check("words drained", got, nw);
    check("one drain_done", n_dd, 1);
    check("no overflow", longint'(overflow), 0);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; cap_en = 0; frame_in = '0; drain = 0; out_ready = 0; s_cap_en = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(400);
    run(1);
    run(2048);   // full buffer
    run(0);
    // overflow on the small instance: 6 frames offered, 4 kept
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    s_cap_en = 1'b1;
    repeat (6) @(negedge clk);
    s_cap_en = 1'b0;
    check("small: frames kept", s_n_frames, 4);
    check("small: overflow", longint'(s_overflow), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
