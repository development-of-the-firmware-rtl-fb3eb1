// fifo_out_buf: output side of the FIFO buffer logic.
//
// While cap_en is high, the merged trigger-output frame present on frame_in
// is stored every clock, so the stored sequence is a clock-by-clock record of
// what the trigger logic produced and its latency can be read off by the host.
// After capture, a drain pulse makes the buffer split each frame into
// FRAME_WORDS 32-bit words (word 0 = least significant bits) and hand them,
// in order, to the AXI write master on a valid/ready stream. This reverses
// the input-side merging, as the system's FIFO buffer is described to do; the
// per-clock capture window and the stream handshake are this design's own.
//
// Capacity is DEPTH_WORDS words (DEPTH_WORDS / FRAME_WORDS frames); frames
// offered beyond that are dropped and set overflow. clear empties the buffer.
// Timing: a frame is read from the store in one clock and its words then go
// out one per accepted handshake, so each frame costs FRAME_WORDS + 1 clocks
// when the write master never stalls. drain_done pulses after the last word.
module fifo_out_buf #(
  parameter int unsigned DATA_W      = 32,
  parameter int unsigned DEPTH_WORDS = 4096,
  parameter int unsigned FRAME_WORDS = 1,
  parameter int unsigned CNT_W       = 16,
  localparam int unsigned FRAME_W    = DATA_W * FRAME_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  // capture
  input  logic               cap_en,
  input  logic [FRAME_W-1:0] frame_in,
  output logic [CNT_W-1:0]   n_frames,
  output logic               overflow,
  // drain to the write master
  input  logic               drain,
  output logic [DATA_W-1:0]  out_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic               drain_done
);

  localparam int unsigned DEPTH  = DEPTH_WORDS / FRAME_WORDS;
  localparam int unsigned PTR_W  = $clog2(DEPTH + 1);
  localparam int unsigned IDX_W  = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned WIDX_W = (FRAME_WORDS > 1) ? $clog2(FRAME_WORDS) : 1;

  typedef enum logic [1:0] {D_IDLE, D_FETCH, D_SEND} dstate_t;

  logic [FRAME_W-1:0] mem [DEPTH];
  logic [FRAME_W-1:0] rd_frame;
  logic [PTR_W-1:0]   wr_ptr, rd_ptr;
  logic [WIDX_W-1:0]  widx;
  dstate_t            dstate;
  logic               push, mem_re, word_go;

  assign push     = cap_en && (wr_ptr < PTR_W'(DEPTH)) && (dstate == D_IDLE);
  assign mem_re   = (dstate == D_FETCH);
  assign n_frames = CNT_W'(wr_ptr);

  assign out_valid = (dstate == D_SEND);
  assign out_data  = rd_frame[widx * DATA_W +: DATA_W];
  assign word_go   = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push)   mem[IDX_W'(wr_ptr)] <= frame_in;
    if (mem_re) rd_frame <= mem[IDX_W'(rd_ptr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      widx       <= '0;
      dstate     <= D_IDLE;
      overflow   <= 1'b0;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      if (clear) begin
        wr_ptr   <= '0;
        rd_ptr   <= '0;
        widx     <= '0;
        dstate   <= D_IDLE;
        overflow <= 1'b0;
      end else begin
        if (push) wr_ptr <= wr_ptr + 1'b1;
        if (cap_en && wr_ptr == PTR_W'(DEPTH)) overflow <= 1'b1;
        unique case (dstate)
          D_IDLE: if (drain) begin
            if (rd_ptr == wr_ptr) drain_done <= 1'b1;
            else              dstate <= D_FETCH;
          end
          D_FETCH: dstate <= D_SEND;
          D_SEND: if (word_go) begin
            if (widx == WIDX_W'(FRAME_WORDS - 1)) begin
              widx   <= '0;
              rd_ptr <= rd_ptr + 1'b1;
              if (rd_ptr + 1'b1 == wr_ptr) begin
                dstate     <= D_IDLE;
                drain_done <= 1'b1;
              end else begin
                dstate <= D_FETCH;
              end
            end else begin
              widx <= widx + 1'b1;
            end
          end
          default: dstate <= D_IDLE;
        endcase
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || clear)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
