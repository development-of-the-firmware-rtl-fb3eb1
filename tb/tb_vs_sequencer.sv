// tb_vs_sequencer: self-checking test of the cycle sequencer.
//
// The masters, buffers and trigger path around the sequencer are replaced by
// small responders with random delays. ev_ready is held high already during
// the load (as a stale flag from a previous event would be) to check that
// play waits for the read master's done. For each run the test checks the
// order start -> clear + read -> play -> capture -> write -> done, that
// capture opens exactly on the first valid trigger input (or at once when
// there is no input), lasts out_clks consecutive clocks, that one ap_done
// pulse ends the run and that the sequencer is idle again.
module tb_vs_sequencer;
  import vs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start, ap_idle, ap_done, rd_start, rd_done, wr_start, wr_done;
  logic       buf_clear, ev_ready, play, trig_valid, cap_en;
  run_cfg_t   cfg;
  seq_state_t state;

  int checks = 0, failures = 0;

  vs_sequencer dut (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg),
    .ap_idle(ap_idle), .ap_done(ap_done), .state(state),
    .rd_start(rd_start), .rd_done(rd_done), .wr_start(wr_start), .wr_done(wr_done),
    .buf_clear(buf_clear), .ibuf_ev_ready(ev_ready), .ibuf_play(play),
    .trig_in_valid(trig_valid), .cap_en(cap_en));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // event log, in clock numbers
  int cyc = 0;
  int t_start, t_rd_start, t_clear, t_rd_done, t_play, t_first_valid, t_cap_first, t_cap_last;
  int t_wr_start, t_wr_done, t_done, n_cap, n_done, n_play, n_cap_gap;
  int rd_delay, wr_delay;
  int valid_left, play_cnt;
  logic capped_prev;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // read master model: done rd_delay clocks after start
      if (rd_start) begin t_rd_start = cyc; rd_delay = $urandom_range(3, 20); end
      if (buf_clear) t_clear = cyc;
      rd_done <= (t_rd_start >= 0 && cyc == t_rd_start + rd_delay);
      if (rd_done) t_rd_done = cyc;
      // input buffer + patch panel model: valid frames 2..in_clks+1 clocks after play
      if (play) begin t_play = cyc; n_play++; play_cnt = 2; valid_left = int'(cfg.in_clks); end
      else if (play_cnt > 0) play_cnt--;
      trig_valid <= (play_cnt == 1 && valid_left > 0) || (trig_valid && valid_left > 1);
      if (trig_valid) valid_left--;
      if (trig_valid && t_first_valid < 0) t_first_valid = cyc;
      // capture log
      if (cap_en) begin
        if (t_cap_first < 0) t_cap_first = cyc;
        else if (!capped_prev) n_cap_gap++;
        t_cap_last = cyc;
        n_cap++;
      end
      capped_prev = cap_en;
      // write master model
      if (wr_start) begin t_wr_start = cyc; wr_delay = $urandom_range(2, 15); end
      wr_done <= (t_wr_start >= 0 && cyc == t_wr_start + wr_delay);
      if (wr_done) t_wr_done = cyc;
      if (ap_done) begin t_done = cyc; n_done++; end
    end
  end

  task automatic run(input int in_clks, input int out_clks);
    t_start = -1; t_rd_start = -1; t_clear = -1; t_rd_done = -1; t_play = -1;
    t_first_valid = -1; t_cap_first = -1; t_cap_last = -1; t_wr_start = -1;
    t_wr_done = -1; t_done = -1; n_cap = 0; n_done = 0; n_play = 0; n_cap_gap = 0;
    play_cnt = 0; valid_left = 0; capped_prev = 0;
    @(negedge clk);
    cfg.in_clks = 16'(in_clks); cfg.out_clks = 16'(out_clks);
    check("idle before start", longint'(ap_idle), 1);
    start = 1'b1; t_start = cyc;
    @(negedge clk); start = 1'b0;
    while (n_done == 0 && cyc < t_start + 2000) @(negedge clk);
    repeat (3) @(negedge clk);
    check("clear with read start", t_clear, t_rd_start);
    check("read started after start", longint'(t_rd_start > t_start - 1), 1);
    check("play once", n_play, 1);
    check("play after read done", longint'(t_play > t_rd_done), 1);
    check("clocks captured", n_cap, out_clks);
    check("capture contiguous", n_cap_gap, 0);
    if (out_clks > 0) begin
      if (in_clks > 0) check("capture opens on first valid input", t_cap_first, t_first_valid);
      else             check("capture opens at once", t_cap_first, t_play);
      check("write after capture", longint'(t_wr_start > t_cap_last), 1);
    end
    check("done after write done", longint'(t_done > t_wr_done), 1);
    check("one done", n_done, 1);
    check("idle after done", longint'(ap_idle), 1);
    check("state idle", longint'(state), longint'(S_IDLE));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cfg = '0; rd_done = 0; wr_done = 0; trig_valid = 0;
    ev_ready = 1'b1;   // stale "event ready" during load
    t_rd_start = -1; t_wr_start = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(5, 12);
    run(40, 45);
    run(0, 3);
    run(4, 0);
    run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
