// fifo_in_buf: input side of the FIFO buffer logic.
//
// Words arrive from the AXI read master 32 bits at a time and at whatever
// pace the memory delivers them. FRAME_WORDS consecutive words are merged
// into one frame, the data the trigger logic takes in one clock (word 0 in the
// least significant bits), and frames are stored in order. Only when the whole
// event, ev_frames frames, is stored does ev_ready rise; a play pulse then
// streams the frames out first-in first-out, one per clock with no gaps, so
// the trigger logic sees its inputs on consecutive clocks however irregular
// the bus transfer was. This merging and the wait for the complete event are
// what the system's FIFO buffer is described to do; the frame layout and the
// play handshake are this design's own.
//
// Capacity is DEPTH_WORDS 32-bit words (DEPTH_WORDS / FRAME_WORDS frames);
// in_ready drops when it is full. clear empties the buffer for a new event.
// Timing: frame_data / frame_valid are registered; with play high in clock 0,
// frame k is on the outputs in clock k+2. play_done pulses with the last frame.
module fifo_in_buf #(
  parameter int unsigned DATA_W      = 32,
  parameter int unsigned DEPTH_WORDS = 4096,
  parameter int unsigned FRAME_WORDS = 2,
  parameter int unsigned CNT_W       = 16,
  localparam int unsigned FRAME_W    = DATA_W * FRAME_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [CNT_W-1:0]   ev_frames,
  // word stream in
  input  logic [DATA_W-1:0]  in_data,
  input  logic               in_valid,
  output logic               in_ready,
  // event status and playback
  output logic               ev_ready,
  input  logic               play,
  output logic [FRAME_W-1:0] frame_data,
  output logic               frame_valid,
  output logic               play_done
);

  localparam int unsigned DEPTH  = DEPTH_WORDS / FRAME_WORDS;
  localparam int unsigned PTR_W  = $clog2(DEPTH + 1);
  localparam int unsigned IDX_W  = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned WIDX_W = (FRAME_WORDS > 1) ? $clog2(FRAME_WORDS) : 1;

  logic [FRAME_W-1:0] mem [DEPTH];
  logic [FRAME_W-1:0] acc, acc_next;
  logic [WIDX_W-1:0]  widx;
  logic [PTR_W-1:0]   wr_ptr, rd_ptr;
  logic               playing;
  logic               push, last_word, mem_we, mem_re;

  assign in_ready  = !clear && (wr_ptr < PTR_W'(DEPTH));
  assign push      = in_valid && in_ready;
  assign last_word = (widx == WIDX_W'(FRAME_WORDS - 1));
  assign mem_we    = push && last_word;
  assign ev_ready  = !playing && (wr_ptr == PTR_W'(ev_frames)) && (widx == '0);
  assign mem_re    = playing;

  always_comb begin
    acc_next = acc;
    acc_next[widx * DATA_W +: DATA_W] = in_data;
  end

  // frame store
  always_ff @(posedge clk) begin
    if (mem_we) mem[IDX_W'(wr_ptr)] <= acc_next;
    if (mem_re) frame_data <= mem[IDX_W'(rd_ptr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc         <= '0;
      widx        <= '0;
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      playing     <= 1'b0;
      frame_valid <= 1'b0;
      play_done   <= 1'b0;
    end else begin
      frame_valid <= mem_re;
      play_done   <= 1'b0;
      if (clear) begin
        widx    <= '0;
        wr_ptr  <= '0;
        rd_ptr  <= '0;
        playing <= 1'b0;
      end else begin
        if (push) begin
          acc  <= acc_next;
          widx <= last_word ? '0 : widx + 1'b1;
          if (last_word) wr_ptr <= wr_ptr + 1'b1;
        end
        if (play && ev_ready && ev_frames != '0) playing <= 1'b1;
        if (playing) begin
          rd_ptr <= rd_ptr + 1'b1;
          if (rd_ptr + 1'b1 == PTR_W'(ev_frames)) begin
            playing   <= 1'b0;
            play_done <= 1'b1;
          end
        end
      end
    end
  end

  // no frame may be written while the event is being played
  a_no_push_while_playing: assert property (@(posedge clk) disable iff (!rst_n)
    playing |-> !mem_we);

endmodule
