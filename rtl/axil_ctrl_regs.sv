// axil_ctrl_regs: AXI4-Lite control registers of the validation system.
//
// The host program uses this port to launch one validation cycle: it writes
// the DDR addresses of the input and output buffers and the number of trigger
// clocks of input and of output, then writes 1 to bit 0 of the control
// register. It then polls the control register for the done flag. These
// start/done/idle flags are the control flags by which host and FPGA hand the
// data back and forth; the register layout (see vs_pkg) is this design's
// choice, modelled on the usual accelerator-kernel control port.
//
// Interface: one AXI4-Lite slave (32-bit data, A_W-bit byte address). A write
// is taken when address and data are both valid and no response is pending;
// its response follows one clock later. A read returns data one clock after
// the address. Reading the control register clears the done flag.
// ap_start is a one-clock pulse, issued only when the sequencer is idle.
module axil_ctrl_regs
  import vs_pkg::*;
#(
  parameter int unsigned A_W = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  // AXI4-Lite slave
  input  logic [A_W-1:0] s_awaddr,
  input  logic           s_awvalid,
  output logic           s_awready,
  input  logic [31:0]    s_wdata,
  input  logic [3:0]     s_wstrb,
  input  logic           s_wvalid,
  output logic           s_wready,
  output logic [1:0]     s_bresp,
  output logic           s_bvalid,
  input  logic           s_bready,
  input  logic [A_W-1:0] s_araddr,
  input  logic           s_arvalid,
  output logic           s_arready,
  output logic [31:0]    s_rdata,
  output logic [1:0]     s_rresp,
  output logic           s_rvalid,
  input  logic           s_rready,
  // to / from the sequencer
  output logic           ap_start,
  input  logic           ap_done,
  input  logic           ap_idle,
  output run_cfg_t       cfg
);

  logic done_flag;
  logic wr_fire, rd_fire;
  logic [5:0] waddr, raddr;

  assign waddr = 6'(s_awaddr);
  assign raddr = 6'(s_araddr);

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_bresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;
  assign s_rresp   = 2'b00;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] be);
    logic [31:0] r;
    for (int i = 0; i < 4; i++) r[8*i +: 8] = be[i] ? d[8*i +: 8] : old[8*i +: 8];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg       <= '0;
      ap_start  <= 1'b0;
      done_flag <= 1'b0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      ap_start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (waddr)
          REG_CTRL:     if (s_wstrb[0] && s_wdata[0] && ap_idle) ap_start <= 1'b1;
          REG_IN_LO:    cfg.in_addr[31:0]   <= merge(cfg.in_addr[31:0], s_wdata, s_wstrb);
          REG_IN_HI:    cfg.in_addr[63:32]  <= merge(cfg.in_addr[63:32], s_wdata, s_wstrb);
          REG_OUT_LO:   cfg.out_addr[31:0]  <= merge(cfg.out_addr[31:0], s_wdata, s_wstrb);
          REG_OUT_HI:   cfg.out_addr[63:32] <= merge(cfg.out_addr[63:32], s_wdata, s_wstrb);
          REG_IN_CLKS:  cfg.in_clks  <= CNT_W'(merge(32'(cfg.in_clks), s_wdata, s_wstrb));
          REG_OUT_CLKS: cfg.out_clks <= CNT_W'(merge(32'(cfg.out_clks), s_wdata, s_wstrb));
          default: ;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        unique case (raddr)
          REG_CTRL:     s_rdata <= {29'd0, ap_idle, done_flag, !ap_idle};
          REG_IN_LO:    s_rdata <= cfg.in_addr[31:0];
          REG_IN_HI:    s_rdata <= cfg.in_addr[63:32];
          REG_OUT_LO:   s_rdata <= cfg.out_addr[31:0];
          REG_OUT_HI:   s_rdata <= cfg.out_addr[63:32];
          REG_IN_CLKS:  s_rdata <= 32'(cfg.in_clks);
          REG_OUT_CLKS: s_rdata <= 32'(cfg.out_clks);
          default:      s_rdata <= '0;
        endcase
      end
      // done is sticky until the host reads the control register
      if (ap_done) done_flag <= 1'b1;
      else if (rd_fire && raddr == REG_CTRL) done_flag <= 1'b0;
    end
  end

  // AXI4-Lite: a valid response must stay up until it is accepted
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
