// axi_wr_master: writes the captured trigger outputs back to accelerator DDR.
//
// On a start pulse it takes n_words 32-bit words from a valid/ready word
// stream and writes them to consecutive addresses from base_addr with AXI4
// INCR bursts of at most MAX_BURST beats. Each burst is: AW handshake, the
// burst's W beats (WLAST on the last), then the B response; only then does the
// next burst start. A one-clock done pulse follows the last response;
// n_words = 0 gives done one clock after start. A response other than OKAY
// sets the sticky err output until the next start.
//
// The 32-bit word transfers are the system's published scheme; the one-burst-
// at-a-time policy and the 4 KiB alignment of base_addr are this design's.
module axi_wr_master #(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned MAX_BURST = 256,
  parameter int unsigned CNT_W     = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic [ADDR_W-1:0]   base_addr,
  input  logic [CNT_W-1:0]    n_words,
  output logic                busy,
  output logic                done,
  output logic                err,
  // AXI4 write channels
  output logic [ADDR_W-1:0]   m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [DATA_W-1:0]   m_wdata,
  output logic [DATA_W/8-1:0] m_wstrb,
  output logic                m_wlast,
  output logic                m_wvalid,
  input  logic                m_wready,
  input  logic [1:0]          m_bresp,
  input  logic                m_bvalid,
  output logic                m_bready,
  // word stream
  input  logic [DATA_W-1:0]   in_data,
  input  logic                in_valid,
  output logic                in_ready
);

  localparam int unsigned BYTES = DATA_W / 8;

  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wstate_t;
  wstate_t          state;
  logic [CNT_W-1:0] remaining;
  logic [8:0]       beats_left;
  logic [CNT_W-1:0] burst_len;
  logic             beat;

  assign burst_len = (remaining > CNT_W'(MAX_BURST)) ? CNT_W'(MAX_BURST) : remaining;

  assign m_awlen   = 8'(burst_len - 1'b1);
  assign m_awsize  = 3'($clog2(BYTES));
  assign m_awburst = 2'b01;
  assign m_awvalid = (state == W_ADDR);
  assign m_wvalid  = (state == W_DATA) && in_valid;
  assign m_wdata   = in_data;
  assign m_wstrb   = '1;
  assign m_wlast   = (beats_left == 9'd1);
  assign in_ready  = (state == W_DATA) && m_wready;
  assign m_bready  = (state == W_RESP);
  assign beat      = m_wvalid && m_wready;
  assign busy      = (state != W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= W_IDLE;
      remaining  <= '0;
      beats_left <= '0;
      m_awaddr   <= '0;
      done       <= 1'b0;
      err        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        W_IDLE: if (start) begin
          m_awaddr  <= base_addr;
          remaining <= n_words;
          err       <= 1'b0;
          if (n_words == '0) done <= 1'b1;
          else               state <= W_ADDR;
        end
        W_ADDR: if (m_awready) begin
          // awlen is taken from burst_len in this clock; keep it for the W beats
          beats_left <= 9'(burst_len);
          remaining  <= remaining - burst_len;
          state      <= W_DATA;
        end
        W_DATA: if (beat) begin
          beats_left <= beats_left - 1'b1;
          if (beats_left == 9'd1) state <= W_RESP;
        end
        W_RESP: if (m_bvalid) begin
          if (m_bresp != 2'b00) err <= 1'b1;
          m_awaddr <= m_awaddr + ADDR_W'(MAX_BURST) * ADDR_W'(BYTES);
          if (remaining == '0) begin
            state <= W_IDLE;
            done  <= 1'b1;
          end else begin
            state <= W_ADDR;
          end
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));

endmodule
