// tb_fifo_in_buf: self-checking test of the input FIFO buffer.
//
// Words are fed with random gaps. Checks: ev_ready stays low until the last
// word of the event is in and then rises; nothing is played before play;
// after play, frame k appears exactly k+2 clocks after the clock with play
// high (two clocks to the first frame), on
// consecutive clocks, equal to words 2k (low half) and 2k+1 (high half);
// play_done comes with the last frame. A second event after clear checks
// that the buffer restarts from empty. A third run fills the whole buffer
// (DEPTH_WORDS words) and checks that in_ready drops when it is full.
module tb_fifo_in_buf;
  localparam int unsigned FW = 2;       // words per frame
  localparam int unsigned DW = 4096;    // buffer size in words

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              clear, in_valid, in_ready, ev_ready, play, frame_valid, play_done;
  logic [15:0]       ev_frames;
  logic [31:0]       in_data;
  logic [32*FW-1:0]  frame_data;

  int checks = 0, failures = 0;
  logic [31:0] words [DW];

  fifo_in_buf #(.DEPTH_WORDS(DW), .FRAME_WORDS(FW)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .ev_frames(ev_frames),
    .in_data(in_data), .in_valid(in_valid), .in_ready(in_ready),
    .ev_ready(ev_ready), .play(play), .frame_data(frame_data),
    .frame_valid(frame_valid), .play_done(play_done));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (%h) expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  task automatic run_event(input int unsigned nf);
    int unsigned nw, early_ready, early_valid, t, k, n_pd;
    nw = nf * FW;
    for (int i = 0; i < int'(nw); i++) words[i] = $urandom();
    @(negedge clk); clear = 1'b1; ev_frames = 16'(nf);
    @(negedge clk); clear = 1'b0;
    early_ready = 0; early_valid = 0;
    for (int i = 0; i < int'(nw); i++) begin
      while ($urandom_range(99) < 30) begin
        in_valid = 1'b0;
        @(negedge clk);
        if (ev_ready) early_ready++;
        if (frame_valid) early_valid++;
      end
      in_valid = 1'b1; in_data = words[i];
      #1;
      if (!in_ready) begin
        failures++; $display("FAIL in_ready low while space left");
      end
      @(negedge clk);
      if (ev_ready && i != int'(nw) - 1) early_ready++;
      if (frame_valid) early_valid++;
    end
    in_valid = 1'b0;
    check("ev_ready not before the last word", early_ready, 0);
    check("ev_ready after the last word", longint'(ev_ready), 1);
    repeat (5) @(negedge clk);
    if (frame_valid) early_valid++;
    check("no frame before play", early_valid, 0);
    play = 1'b1;
    @(negedge clk); play = 1'b0;
    t = 1; k = 0; n_pd = 0;
    while (t < nf + 10) begin
      if (frame_valid) begin
        check($sformatf("frame %0d timing", k), t, k + 2);
        checks++;
        if (frame_data !== {words[2*k+1], words[2*k]}) begin
          failures++;
          $display("FAIL frame %0d: got %h expected %h", k, frame_data, {words[2*k+1], words[2*k]});
        end
        if (play_done) begin
          n_pd++;
          check("play_done with last frame", k, nf - 1);
        end
        k++;
      end
      @(negedge clk); t++;
    end
    check("frames played", k, nf);
    check("one play_done", n_pd, 1);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; in_data = '0; play = 0; ev_frames = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_event(391);          // 25,000-bit event: 782 words
    run_event(7);
    run_event(DW / FW);      // full buffer
    // full: one more word must be refused
    @(negedge clk);
    check("in_ready low when full", longint'(in_ready), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
