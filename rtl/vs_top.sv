// vs_top: FPGA side of the trigger-logic validation system.
//
// The host writes an event (the trigger logic's inputs for a number of
// consecutive clocks) into accelerator DDR, programs the control registers and
// starts a cycle. The design then reads the event over AXI in 32-bit words,
// merges the words into trigger-clock frames in the input FIFO buffer, and,
// once the whole event is held, plays one frame per clock through the patch
// panel into the trigger logic. The patch panel merges the trigger outputs
// into output frames, which the output FIFO buffer records every clock for
// out_clks clocks; the record is split back into 32-bit words and written to
// DDR, and the done flag is raised for the host.
//
//   DDR -AXI-> axi_rd_master -> fifo_in_buf -> patch_panel -> trig_logic
//   DDR <-AXI- axi_wr_master <- fifo_out_buf <- patch_panel <-'
//   axil_ctrl_regs <-> vs_sequencer (start/done/idle flags, run settings)
//
// Interfaces: s_axi_control_* is the AXI4-Lite control port (register map in
// vs_pkg); m_axi_gmem_* is the AXI4 master to DDR (32-bit data, 64-bit
// address, buffers 4 KiB aligned). Everything runs on one clock, ap_clk, with
// the active-low reset ap_rst_n. axi_err reports a non-OKAY memory response
// and obuf_overflow a capture longer than the output buffer, both for the
// last cycle. An IN_CLKS larger than the input buffer holds is cut to
// BUF_WORDS / IN_FRAME_WORDS frames.
//
// Input frame layout (defaults): bits [8:0] hit A {valid, eta}, [24:16] hit B,
// [47:32] tag. Output frame: [8:0] {coincidence, pT}, [31:16] tag. The chain
// of blocks, the 32-bit transfers and the 4096-word event size follow the
// published system; frame layouts, the control port and the single clock
// domain are this design's choices.
module vs_top #(
  parameter int unsigned BUF_WORDS       = vs_pkg::BUF_WORDS,
  parameter int unsigned IN_FRAME_WORDS  = 2,
  parameter int unsigned OUT_FRAME_WORDS = 1,
  parameter int unsigned MAX_BURST       = vs_pkg::MAX_BURST,
  parameter int unsigned ETA_W           = 8,
  parameter int unsigned PT_W            = 8,
  parameter int unsigned TAG_W           = 16
) (
  input  logic                  ap_clk,
  input  logic                  ap_rst_n,
  // AXI4-Lite control slave
  input  logic [5:0]            s_axi_control_awaddr,
  input  logic                  s_axi_control_awvalid,
  output logic                  s_axi_control_awready,
  input  logic [31:0]           s_axi_control_wdata,
  input  logic [3:0]            s_axi_control_wstrb,
  input  logic                  s_axi_control_wvalid,
  output logic                  s_axi_control_wready,
  output logic [1:0]            s_axi_control_bresp,
  output logic                  s_axi_control_bvalid,
  input  logic                  s_axi_control_bready,
  input  logic [5:0]            s_axi_control_araddr,
  input  logic                  s_axi_control_arvalid,
  output logic                  s_axi_control_arready,
  output logic [31:0]           s_axi_control_rdata,
  output logic [1:0]            s_axi_control_rresp,
  output logic                  s_axi_control_rvalid,
  input  logic                  s_axi_control_rready,
  // AXI4 master to DDR
  output logic [vs_pkg::AXI_ADDR_W-1:0] m_axi_gmem_araddr,
  output logic [7:0]            m_axi_gmem_arlen,
  output logic [2:0]            m_axi_gmem_arsize,
  output logic [1:0]            m_axi_gmem_arburst,
  output logic                  m_axi_gmem_arvalid,
  input  logic                  m_axi_gmem_arready,
  input  logic [vs_pkg::AXI_DATA_W-1:0] m_axi_gmem_rdata,
  input  logic [1:0]            m_axi_gmem_rresp,
  input  logic                  m_axi_gmem_rlast,
  input  logic                  m_axi_gmem_rvalid,
  output logic                  m_axi_gmem_rready,
  output logic [vs_pkg::AXI_ADDR_W-1:0] m_axi_gmem_awaddr,
  output logic [7:0]            m_axi_gmem_awlen,
  output logic [2:0]            m_axi_gmem_awsize,
  output logic [1:0]            m_axi_gmem_awburst,
  output logic                  m_axi_gmem_awvalid,
  input  logic                  m_axi_gmem_awready,
  output logic [vs_pkg::AXI_DATA_W-1:0] m_axi_gmem_wdata,
  output logic [3:0]            m_axi_gmem_wstrb,
  output logic                  m_axi_gmem_wlast,
  output logic                  m_axi_gmem_wvalid,
  input  logic                  m_axi_gmem_wready,
  input  logic [1:0]            m_axi_gmem_bresp,
  input  logic                  m_axi_gmem_bvalid,
  output logic                  m_axi_gmem_bready,
  // status
  output logic                  axi_err,
  output logic                  obuf_overflow
);

  localparam int unsigned IN_FRAME_W  = vs_pkg::AXI_DATA_W * IN_FRAME_WORDS;
  localparam int unsigned OUT_FRAME_W = vs_pkg::AXI_DATA_W * OUT_FRAME_WORDS;

  localparam int unsigned MAX_IN_CLKS = BUF_WORDS / IN_FRAME_WORDS;

  vs_pkg::run_cfg_t   cfg_host;   // as written by the host
  vs_pkg::run_cfg_t   cfg;        // in_clks limited to what the input buffer holds
  vs_pkg::seq_state_t state;
  logic ap_start, ap_done, ap_idle;
  logic rd_start, rd_done, rd_busy, rd_err;
  logic wr_start, wr_done, wr_busy, wr_err;
  logic buf_clear, ev_ready, play, play_done, cap_en, drain_done;
  logic [vs_pkg::CNT_W-1:0] n_frames;

  logic [vs_pkg::AXI_DATA_W-1:0] rd_word, wr_word;
  logic rd_word_valid, rd_word_ready, wr_word_valid, wr_word_ready;

  logic [IN_FRAME_W-1:0]  in_frame;
  logic                   in_frame_valid;
  logic [OUT_FRAME_W-1:0] out_frame;

  logic [ETA_W:0]   trig_a, trig_b;
  logic [TAG_W-1:0] trig_c, trig_o2;
  logic [PT_W:0]    trig_o1;
  logic             trig_valid;

  assign axi_err = rd_err || wr_err;

  // An event longer than the input buffer would never be complete and the
  // cycle would wait for ever; it is cut to the buffer's size instead.
  always_comb begin
    cfg = cfg_host;
    if (cfg_host.in_clks > vs_pkg::CNT_W'(MAX_IN_CLKS))
      cfg.in_clks = vs_pkg::CNT_W'(MAX_IN_CLKS);
  end

  axil_ctrl_regs #(.A_W(6)) u_ctrl (
    .clk       (ap_clk),                .rst_n     (ap_rst_n),
    .s_awaddr  (s_axi_control_awaddr),  .s_awvalid (s_axi_control_awvalid),
    .s_awready (s_axi_control_awready), .s_wdata   (s_axi_control_wdata),
    .s_wstrb   (s_axi_control_wstrb),   .s_wvalid  (s_axi_control_wvalid),
    .s_wready  (s_axi_control_wready),  .s_bresp   (s_axi_control_bresp),
    .s_bvalid  (s_axi_control_bvalid),  .s_bready  (s_axi_control_bready),
    .s_araddr  (s_axi_control_araddr),  .s_arvalid (s_axi_control_arvalid),
    .s_arready (s_axi_control_arready), .s_rdata   (s_axi_control_rdata),
    .s_rresp   (s_axi_control_rresp),   .s_rvalid  (s_axi_control_rvalid),
    .s_rready  (s_axi_control_rready),
    .ap_start  (ap_start), .ap_done (ap_done), .ap_idle (ap_idle), .cfg (cfg_host)
  );

  vs_sequencer u_seq (
    .clk           (ap_clk),   .rst_n     (ap_rst_n),
    .start         (ap_start), .cfg       (cfg),
    .ap_idle       (ap_idle),  .ap_done   (ap_done),  .state (state),
    .rd_start      (rd_start), .rd_done   (rd_done),
    .wr_start      (wr_start), .wr_done   (wr_done),
    .buf_clear     (buf_clear),
    .ibuf_ev_ready (ev_ready), .ibuf_play (play),
    .trig_in_valid (trig_valid),
    .cap_en        (cap_en)
  );

  axi_rd_master #(.ADDR_W(vs_pkg::AXI_ADDR_W), .DATA_W(vs_pkg::AXI_DATA_W), .MAX_BURST(MAX_BURST),
                  .CNT_W(vs_pkg::CNT_W)) u_rd (
    .clk       (ap_clk),   .rst_n (ap_rst_n),
    .start     (rd_start), .base_addr (cfg.in_addr),
    .n_words   (vs_pkg::CNT_W'(cfg.in_clks * vs_pkg::CNT_W'(IN_FRAME_WORDS))),
    .busy      (rd_busy),  .done (rd_done), .err (rd_err),
    .m_araddr  (m_axi_gmem_araddr),  .m_arlen  (m_axi_gmem_arlen),
    .m_arsize  (m_axi_gmem_arsize),  .m_arburst(m_axi_gmem_arburst),
    .m_arvalid (m_axi_gmem_arvalid), .m_arready(m_axi_gmem_arready),
    .m_rdata   (m_axi_gmem_rdata),   .m_rresp  (m_axi_gmem_rresp),
    .m_rlast   (m_axi_gmem_rlast),   .m_rvalid (m_axi_gmem_rvalid),
    .m_rready  (m_axi_gmem_rready),
    .out_data  (rd_word), .out_valid (rd_word_valid), .out_ready (rd_word_ready)
  );

  fifo_in_buf #(.DATA_W(vs_pkg::AXI_DATA_W), .DEPTH_WORDS(BUF_WORDS),
                .FRAME_WORDS(IN_FRAME_WORDS), .CNT_W(vs_pkg::CNT_W)) u_ibuf (
    .clk        (ap_clk),    .rst_n     (ap_rst_n),
    .clear      (buf_clear), .ev_frames (cfg.in_clks),
    .in_data    (rd_word),   .in_valid  (rd_word_valid), .in_ready (rd_word_ready),
    .ev_ready   (ev_ready),  .play      (play),
    .frame_data (in_frame),  .frame_valid (in_frame_valid), .play_done (play_done)
  );

  patch_panel #(
    .IN_FRAME_W (IN_FRAME_W), .OUT_FRAME_W (OUT_FRAME_W),
    .A_OFF (0),  .A_W (ETA_W + 1),
    .B_OFF (16), .B_W (ETA_W + 1),
    .C_OFF (32), .C_W (TAG_W),
    .O1_OFF (0),  .O1_W (PT_W + 1),
    .O2_OFF (16), .O2_W (TAG_W)
  ) u_pp (
    .clk      (ap_clk),   .rst_n          (ap_rst_n),
    .frame_in (in_frame), .frame_in_valid (in_frame_valid),
    .in_a     (trig_a),   .in_b (trig_b), .in_c (trig_c), .in_valid (trig_valid),
    .out_1    (trig_o1),  .out_2 (trig_o2),
    .frame_out(out_frame)
  );

  trig_logic #(.ETA_W(ETA_W), .PT_W(PT_W), .TAG_W(TAG_W)) u_trig (
    .clk   (ap_clk), .rst_n (ap_rst_n),
    .in_a  (trig_a), .in_b  (trig_b), .in_c (trig_c),
    .out_1 (trig_o1), .out_2 (trig_o2)
  );

  fifo_out_buf #(.DATA_W(vs_pkg::AXI_DATA_W), .DEPTH_WORDS(BUF_WORDS),
                 .FRAME_WORDS(OUT_FRAME_WORDS), .CNT_W(vs_pkg::CNT_W)) u_obuf (
    .clk       (ap_clk),    .rst_n    (ap_rst_n),
    .clear     (buf_clear),
    .cap_en    (cap_en),    .frame_in (out_frame),
    .n_frames  (n_frames),  .overflow (obuf_overflow),
    .drain     (wr_start),
    .out_data  (wr_word),   .out_valid (wr_word_valid), .out_ready (wr_word_ready),
    .drain_done(drain_done)
  );

  axi_wr_master #(.ADDR_W(vs_pkg::AXI_ADDR_W), .DATA_W(vs_pkg::AXI_DATA_W), .MAX_BURST(MAX_BURST),
                  .CNT_W(vs_pkg::CNT_W)) u_wr (
    .clk       (ap_clk),   .rst_n (ap_rst_n),
    .start     (wr_start), .base_addr (cfg.out_addr),
    .n_words   (vs_pkg::CNT_W'(n_frames * vs_pkg::CNT_W'(OUT_FRAME_WORDS))),
    .busy      (wr_busy),  .done (wr_done), .err (wr_err),
    .m_awaddr  (m_axi_gmem_awaddr),  .m_awlen  (m_axi_gmem_awlen),
    .m_awsize  (m_axi_gmem_awsize),  .m_awburst(m_axi_gmem_awburst),
    .m_awvalid (m_axi_gmem_awvalid), .m_awready(m_axi_gmem_awready),
    .m_wdata   (m_axi_gmem_wdata),   .m_wstrb  (m_axi_gmem_wstrb),
    .m_wlast   (m_axi_gmem_wlast),   .m_wvalid (m_axi_gmem_wvalid),
    .m_wready  (m_axi_gmem_wready),
    .m_bresp   (m_axi_gmem_bresp),   .m_bvalid (m_axi_gmem_bvalid),
    .m_bready  (m_axi_gmem_bready),
    .in_data   (wr_word), .in_valid (wr_word_valid), .in_ready (wr_word_ready)
  );

  // cross-block rules: each AXI master works only in its own phase, the
  // output buffer finishes draining inside DRAIN, and the input buffer never
  // finishes a playback while an event is still being loaded
  a_rd_in_load: assert property (@(posedge ap_clk) disable iff (!ap_rst_n)
    rd_busy |-> state == vs_pkg::S_LOAD);
  a_wr_in_drain: assert property (@(posedge ap_clk) disable iff (!ap_rst_n)
    wr_busy |-> state == vs_pkg::S_DRAIN);
  a_drain_in_drain: assert property (@(posedge ap_clk) disable iff (!ap_rst_n)
    drain_done |-> state == vs_pkg::S_DRAIN);
  a_play_not_in_load: assert property (@(posedge ap_clk) disable iff (!ap_rst_n)
    play_done |-> state != vs_pkg::S_LOAD);

endmodule
