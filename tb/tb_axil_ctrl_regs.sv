// tb_axil_ctrl_regs: self-checking test of the AXI4-Lite control registers.
//
// Writes every run-setting register (with full and partial byte strobes) and
// reads it back, checks that a start write gives exactly one ap_start pulse
// when the sequencer is idle and none when it is busy, that the done flag is
// set by ap_done, survives until read and is cleared by reading, and that the
// idle/busy bits follow ap_idle. Expected values come from a shadow copy kept
// by the testbench.
module tb_axil_ctrl_regs;
  import vs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;
  logic        ap_start, ap_done, ap_idle;
  run_cfg_t    cfg;

  int checks = 0, failures = 0;
  int n_start = 0;

  axil_ctrl_regs dut (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .ap_start(ap_start), .ap_done(ap_done), .ap_idle(ap_idle), .cfg(cfg));

  always @(posedge clk) if (ap_start) n_start++;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic axil_write(input logic [5:0] a, input logic [31:0] d, input logic [3:0] be);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = be; awvalid = 1'b1; wvalid = 1'b1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    bready = 1'b1;
    while (!bvalid) @(negedge clk);
    check("bresp", 64'(bresp), 64'd0);
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    // let the response wait a clock to exercise the hold rule
    @(negedge clk);
    rready = 1'b1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
    @(negedge clk);
    rready = 1'b0;
  endtask

  logic [31:0] rd;
  logic [31:0] shadow [7];
  logic [5:0]  regs [7] = '{REG_CTRL, REG_IN_LO, REG_IN_HI, REG_OUT_LO, REG_OUT_HI,
                            REG_IN_CLKS, REG_OUT_CLKS};

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    awaddr = '0; araddr = '0; awvalid = 0; wvalid = 0; wdata = '0; wstrb = '0;
    bready = 0; arvalid = 0; rready = 0; ap_done = 0; ap_idle = 1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // full-word writes and read-back of the run settings
    for (int i = 1; i < 7; i++) begin
      shadow[i] = $urandom();
      if (i >= 5) shadow[i] = shadow[i] & 32'h0000_FFFF;
      axil_write(regs[i], shadow[i], 4'hF);
    end
    for (int i = 1; i < 7; i++) begin
      axil_read(regs[i], rd);
      check($sformatf("readback reg %h", regs[i]), 64'(rd), 64'(shadow[i]));
    end
    check("cfg.in_addr",  cfg.in_addr,  {shadow[2], shadow[1]});
    check("cfg.out_addr", cfg.out_addr, {shadow[4], shadow[3]});
    check("cfg.in_clks",  64'(cfg.in_clks),  64'(shadow[5]));
    check("cfg.out_clks", 64'(cfg.out_clks), 64'(shadow[6]));

    // byte-strobe write changes only byte 1
    axil_write(REG_IN_LO, 32'hA5A5_A5A5, 4'b0010);
    axil_read(REG_IN_LO, rd);
    check("wstrb byte 1", 64'(rd), 64'({shadow[1][31:16], 8'hA5, shadow[1][7:0]}));

    // start while idle: one pulse; idle bit reads 1
    axil_read(REG_CTRL, rd);
    check("ctrl idle", 64'(rd[2:0]), 64'(3'b100));
    n_start = 0;
    axil_write(REG_CTRL, 32'h1, 4'h1);
    repeat (3) @(negedge clk);
    check("one start pulse", 64'(n_start), 64'd1);

    // busy: start is ignored, busy bit reads 1
    ap_idle = 1'b0;
    axil_write(REG_CTRL, 32'h1, 4'h1);
    repeat (3) @(negedge clk);
    check("no start while busy", 64'(n_start), 64'd1);
    axil_read(REG_CTRL, rd);
    check("ctrl busy", 64'(rd[2:0]), 64'(3'b001));

    // done flag: set by a pulse, sticky, cleared by a read
    @(negedge clk); ap_done = 1'b1; ap_idle = 1'b1;
    @(negedge clk); ap_done = 1'b0;
    repeat (5) @(negedge clk);
    axil_read(REG_CTRL, rd);
    check("done set", 64'(rd[2:0]), 64'(3'b110));
    axil_read(REG_CTRL, rd);
    check("done cleared by read", 64'(rd[2:0]), 64'(3'b100));

    // unmapped address reads zero
    axil_read(6'h3C, rd);
    check("unmapped", 64'(rd), 64'd0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
