// vs_sequencer: runs one validation cycle of the system.
//
// A cycle is: read the event's words from DDR into the input FIFO buffer
// (LOAD); once every word is in, play the event through the patch panel into
// the trigger logic and record the trigger outputs clock by clock (RUN);
// write the record back to DDR (DRAIN); signal done (DONE). The host then
// fetches the result and may start the next cycle with a new event.
//
// The capture window opens on the first clock the trigger logic sees a valid
// input frame (trig_in_valid) and stays open for cfg.out_clks clocks, so
// output frame k is the trigger output k clocks after the first input frame;
// with cfg.in_clks = 0 it opens as soon as RUN is entered. The division of a
// cycle into load, run and return and the wait for the whole event follow the
// system's published description; the states and the capture rule are this
// design's own. All outputs except cap_en, ap_idle and state are one-clock
// registered pulses. cfg.in_clks must not exceed the input buffer's frames.
module vs_sequencer
  import vs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // control port
  input  logic       start,
  input  run_cfg_t   cfg,
  output logic       ap_idle,
  output logic       ap_done,
  output seq_state_t state,
  // AXI masters
  output logic       rd_start,
  input  logic       rd_done,
  output logic       wr_start,
  input  logic       wr_done,
  // buffers and trigger path
  output logic       buf_clear,
  input  logic       ibuf_ev_ready,
  output logic       ibuf_play,
  input  logic       trig_in_valid,
  output logic       cap_en
);

  logic             rd_seen;
  logic             capturing;
  logic [CNT_W-1:0] cap_cnt;
  logic             cap_last;

  assign ap_idle  = (state == S_IDLE);
  assign cap_en   = (state == S_RUN) && (cap_cnt != cfg.out_clks) &&
                    (capturing || trig_in_valid || cfg.in_clks == '0);
  assign cap_last = cap_en && (cap_cnt + 1'b1 == cfg.out_clks);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      rd_start  <= 1'b0;
      wr_start  <= 1'b0;
      buf_clear <= 1'b0;
      ibuf_play <= 1'b0;
      ap_done   <= 1'b0;
      rd_seen   <= 1'b0;
      capturing <= 1'b0;
      cap_cnt   <= '0;
    end else begin
      rd_start  <= 1'b0;
      wr_start  <= 1'b0;
      buf_clear <= 1'b0;
      ibuf_play <= 1'b0;
      ap_done   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          buf_clear <= 1'b1;
          rd_start  <= 1'b1;
          rd_seen   <= 1'b0;
          capturing <= 1'b0;
          cap_cnt   <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: begin
          if (rd_done) rd_seen <= 1'b1;
          if (rd_seen && ibuf_ev_ready) begin
            ibuf_play <= 1'b1;
            state     <= S_RUN;
          end
        end
        S_RUN: begin
          if (cap_en) begin
            capturing <= 1'b1;
            cap_cnt   <= cap_cnt + 1'b1;
          end
          if (cfg.out_clks == '0 || cap_last) begin
            wr_start <= 1'b1;
            state    <= S_DRAIN;
          end
        end
        S_DRAIN: if (wr_done) state <= S_DONE;
        S_DONE: begin
          ap_done <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
