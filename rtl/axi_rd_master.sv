// axi_rd_master: fetches one event's input words from accelerator DDR.
//
// On a start pulse it reads n_words consecutive 32-bit words from base_addr
// with AXI4 INCR bursts of at most MAX_BURST beats, one burst in flight at a
// time, and forwards every read beat on a valid/ready word stream (R-channel
// back-pressure is the stream's ready). A one-clock done pulse follows the
// last beat; n_words = 0 gives done one clock after start. A response other
// than OKAY sets the sticky err output until the next start.
//
// Moving the data in 32-bit AXI words is the system's published scheme; the
// burst policy and the requirement that base_addr be 4 KiB aligned (so that no
// burst of 256 x 4 bytes crosses a 4 KiB boundary) are this design's choices.
// Timing: an AR handshake, then the burst's beats as fast as the memory and
// the stream allow, then the next AR in the clock after the last beat.
module axi_rd_master #(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned MAX_BURST = 256,
  parameter int unsigned CNT_W     = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [CNT_W-1:0]  n_words,
  output logic              busy,
  output logic              done,
  output logic              err,
  // AXI4 read channels
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  output logic              m_arvalid,
  input  logic              m_arready,
  input  logic [DATA_W-1:0] m_rdata,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast,
  input  logic              m_rvalid,
  output logic              m_rready,
  // word stream
  output logic [DATA_W-1:0] out_data,
  output logic              out_valid,
  input  logic              out_ready
);

  localparam int unsigned BYTES = DATA_W / 8;

  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA} rstate_t;
  rstate_t          state;
  logic [CNT_W-1:0] remaining;   // words not yet requested
  logic [8:0]       beats_left;  // beats left in the current burst
  logic [CNT_W-1:0] burst_len;
  logic             beat;

  assign burst_len = (remaining > CNT_W'(MAX_BURST)) ? CNT_W'(MAX_BURST) : remaining;

  assign m_arlen   = 8'(burst_len - 1'b1);
  assign m_arsize  = 3'($clog2(BYTES));
  assign m_arburst = 2'b01;            // INCR
  assign m_arvalid = (state == R_ADDR);
  assign m_rready  = (state == R_DATA) && out_ready;
  assign out_valid = (state == R_DATA) && m_rvalid;
  assign out_data  = m_rdata;
  assign beat      = m_rvalid && m_rready;
  assign busy      = (state != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= R_IDLE;
      remaining  <= '0;
      beats_left <= '0;
      m_araddr   <= '0;
      done       <= 1'b0;
      err        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        R_IDLE: if (start) begin
          m_araddr  <= base_addr;
          remaining <= n_words;
          err       <= 1'b0;
          if (n_words == '0) done <= 1'b1;
          else               state <= R_ADDR;
        end
        R_ADDR: if (m_arready) begin
          beats_left <= 9'(burst_len);
          remaining  <= remaining - burst_len;
          m_araddr   <= m_araddr + ADDR_W'(burst_len) * ADDR_W'(BYTES);
          state      <= R_DATA;
        end
        R_DATA: if (beat) begin
          if (m_rresp != 2'b00) err <= 1'b1;
          beats_left <= beats_left - 1'b1;
          if (beats_left == 9'd1) begin
            if (remaining == '0) begin
              state <= R_IDLE;
              done  <= 1'b1;
            end else begin
              state <= R_ADDR;
            end
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  // the slave's RLAST must mark the last beat of the burst that was asked for
  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
    beat |-> (m_rlast == (beats_left == 9'd1)));
  // AXI: ARADDR stays put while ARVALID waits for ARREADY
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));

endmodule
