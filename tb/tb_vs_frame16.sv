// tb_vs_frame16: the full design with 16-word (512-bit) input frames.
//
// Checks that the wrapper carries a wide trigger input vector: vs_top is
// built with IN_FRAME_WORDS = 16, and events of 50 clocks of 500+ bits (the
// 25,000-bit event laid out as 50 trigger clocks) and of 256 clocks (the
// whole 4096-word buffer) are run through it. Word 0 of each frame carries
// hits A and B, word 1 the tag, words 2-15 random filler that the patch
// panel must ignore. Records are compared clock by clock with a reference,
// and the 4-clock latency is measured from the tags. Same host model and
// memory model as tb_vs_top.
module tb_vs_frame16;
  import vs_pkg::*;

  localparam int unsigned IN_BASE_W  = 0;      // word address of the input buffer
  localparam int unsigned OUT_BASE_W = 8192;   // word address of the output buffer
  localparam int unsigned LAT        = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // control port
  logic [5:0]  c_awaddr, c_araddr;
  logic        c_awvalid, c_awready, c_wvalid, c_wready, c_bvalid, c_bready;
  logic [31:0] c_wdata, c_rdata;
  logic [3:0]  c_wstrb;
  logic [1:0]  c_bresp, c_rresp;
  logic        c_arvalid, c_arready, c_rvalid, c_rready;
  // memory port
  logic [63:0] araddr, awaddr;
  logic [7:0]  arlen, awlen;
  logic [2:0]  arsize, awsize;
  logic [1:0]  arburst, awburst, rresp, bresp;
  logic        arvalid, arready, rlast, rvalid, rready;
  logic        awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [31:0] rdata, wdata;
  logic [3:0]  wstrb;
  logic        axi_err, obuf_overflow;

  int checks = 0, failures = 0;

  localparam int FW = 16;

  vs_top #(.IN_FRAME_WORDS(FW)) dut (
    .ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_control_awaddr(c_awaddr), .s_axi_control_awvalid(c_awvalid),
    .s_axi_control_awready(c_awready), .s_axi_control_wdata(c_wdata),
    .s_axi_control_wstrb(c_wstrb), .s_axi_control_wvalid(c_wvalid),
    .s_axi_control_wready(c_wready), .s_axi_control_bresp(c_bresp),
    .s_axi_control_bvalid(c_bvalid), .s_axi_control_bready(c_bready),
    .s_axi_control_araddr(c_araddr), .s_axi_control_arvalid(c_arvalid),
    .s_axi_control_arready(c_arready), .s_axi_control_rdata(c_rdata),
    .s_axi_control_rresp(c_rresp), .s_axi_control_rvalid(c_rvalid),
    .s_axi_control_rready(c_rready),
    .m_axi_gmem_araddr(araddr), .m_axi_gmem_arlen(arlen), .m_axi_gmem_arsize(arsize),
    .m_axi_gmem_arburst(arburst), .m_axi_gmem_arvalid(arvalid), .m_axi_gmem_arready(arready),
    .m_axi_gmem_rdata(rdata), .m_axi_gmem_rresp(rresp), .m_axi_gmem_rlast(rlast),
    .m_axi_gmem_rvalid(rvalid), .m_axi_gmem_rready(rready),
    .m_axi_gmem_awaddr(awaddr), .m_axi_gmem_awlen(awlen), .m_axi_gmem_awsize(awsize),
    .m_axi_gmem_awburst(awburst), .m_axi_gmem_awvalid(awvalid), .m_axi_gmem_awready(awready),
    .m_axi_gmem_wdata(wdata), .m_axi_gmem_wstrb(wstrb), .m_axi_gmem_wlast(wlast),
    .m_axi_gmem_wvalid(wvalid), .m_axi_gmem_wready(wready),
    .m_axi_gmem_bresp(bresp), .m_axi_gmem_bvalid(bvalid), .m_axi_gmem_bready(bready),
    .axi_err(axi_err), .obuf_overflow(obuf_overflow));

  axi_mem_model #(.MEM_WORDS(16384), .STALL_PCT(25)) mem (
    .clk(clk), .rst_n(rst_n),
    .araddr(araddr), .arlen(arlen), .arsize(arsize), .arburst(arburst),
    .arvalid(arvalid), .arready(arready), .rdata(rdata), .rresp(rresp),
    .rlast(rlast), .rvalid(rvalid), .rready(rready),
    .awaddr(awaddr), .awlen(awlen), .awsize(awsize), .awburst(awburst),
    .awvalid(awvalid), .awready(awready), .wdata(wdata), .wstrb(wstrb),
    .wlast(wlast), .wvalid(wvalid), .wready(wready),
    .bresp(bresp), .bvalid(bvalid), .bready(bready));

  // ---------------- mechanism counters ----------------
  int n_multi_burst_rd = 0, n_multi_burst_wr = 0, n_short_burst = 0;
  int n_rd_wait = 0, n_wr_wait = 0, n_merge = 0, n_play_held = 0;
  int n_latency_ok = 0, n_done_polls = 0, n_start_ignored = 0, n_overflow = 0;
  int n_cycles = 0, n_in_clipped = 0;
  int t_now = 0, t_go = 0, run_clocks = 0;

  always @(posedge clk) begin
    t_now <= t_now + 1;
    if (dut.ap_start) t_go <= t_now;
    if (dut.ap_done) run_clocks <= t_now - t_go;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (arvalid && arready && arlen != 8'hFF) n_short_burst++;
      if (awvalid && awready && awlen != 8'hFF) n_short_burst++;
      // a frame is written into the input buffer once both its words are in
      if (dut.u_ibuf.mem_we && dut.u_ibuf.widx == 4'(FW - 1)) n_merge++;
      // the read master is done but the buffer has not yet released the event
      if (dut.state == S_LOAD && !dut.ev_ready && dut.u_rd.busy) n_play_held++;
    end
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (%h) expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  // ---------------- host: AXI4-Lite ----------------
  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    c_awaddr = a; c_wdata = d; c_wstrb = 4'hF; c_awvalid = 1'b1; c_wvalid = 1'b1;
    do @(posedge clk); while (!(c_awready && c_wready));
    @(negedge clk);
    c_awvalid = 1'b0; c_wvalid = 1'b0; c_bready = 1'b1;
    while (!c_bvalid) @(negedge clk);
    @(negedge clk);
    c_bready = 1'b0;
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    c_araddr = a; c_arvalid = 1'b1;
    do @(posedge clk); while (!c_arready);
    @(negedge clk);
    c_arvalid = 1'b0; c_rready = 1'b1;
    while (!c_rvalid) @(negedge clk);
    d = c_rdata;
    @(negedge clk);
    c_rready = 1'b0;
  endtask

  // ---------------- reference ----------------
  function automatic logic [8:0] ref_out(logic [8:0] a, logic [8:0] b);
    int d, q;
    if (!(a[8] && b[8])) return 9'd0;
    d = int'(b[7:0]) - int'(a[7:0]);
    if (d < 0) d = -d;
    q = (d == 0) ? 255 : 1024 / d;
    if (q > 255) q = 255;
    return {1'b1, 8'(q)};
  endfunction

  logic [8:0] hit_a [2100], hit_b [2100];

  // one validation cycle: generate, load, run, fetch, compare
  task automatic cycle(input int in_clks, input int out_clks, input bit try_restart);
    logic [31:0] r;
    int rd0, wr0, rs0, ws0, first_tag_at, kept, polls, used;
    used = (in_clks > 4096 / FW) ? 4096 / FW : in_clks;
    // generate the event and write it into accelerator memory
    for (int k = 0; k < in_clks; k++) begin
      hit_a[k] = {1'($urandom_range(3) != 0), 8'($urandom())};
      hit_b[k] = {1'($urandom_range(3) != 0), 8'($urandom())};
      if (k % 5 == 0) hit_b[k][7:0] = hit_a[k][7:0] + 8'($urandom_range(4));
      mem.mem[IN_BASE_W + FW*k]     = {7'($urandom()), hit_b[k], 7'($urandom()), hit_a[k]};
      mem.mem[IN_BASE_W + FW*k + 1] = {16'($urandom()), 16'(k + 1)};
      for (int w = 2; w < FW; w++) mem.mem[IN_BASE_W + FW*k + w] = $urandom();
    end
    for (int i = 0; i < 4096 + 16; i++) mem.mem[OUT_BASE_W + i] = 32'hDEAD_BEEF;
    rd0 = mem.n_rd_bursts; wr0 = mem.n_wr_bursts; rs0 = mem.n_r_stalls; ws0 = mem.n_w_stalls;
    axil_write(REG_IN_LO, IN_BASE_W * 4);
    axil_write(REG_IN_HI, 0);
    axil_write(REG_OUT_LO, OUT_BASE_W * 4);
    axil_write(REG_OUT_HI, 0);
    axil_write(REG_IN_CLKS, 32'(in_clks));
    axil_write(REG_OUT_CLKS, 32'(out_clks));
    axil_write(REG_CTRL, 32'h1);
    if (try_restart) begin
      axil_write(REG_CTRL, 32'h1);           // must be ignored: a cycle is running
      if (dut.state != S_IDLE && dut.u_seq.state != S_IDLE) n_start_ignored++;
    end
    polls = 0;
    do begin
      repeat (50) @(negedge clk);
      axil_read(REG_CTRL, r);
      polls++;
    end while (!r[1] && polls < 5000);
    check("done flag", longint'(r[1]), 1);
    if (polls > 1) n_done_polls++;
    axil_read(REG_CTRL, r);
    check("done cleared by read", longint'(r[1]), 0);
    check("idle", longint'(r[2]), 1);
    check("no AXI error", longint'(axi_err), 0);
    // the memory traffic
    if (mem.n_rd_bursts - rd0 > 1) n_multi_burst_rd++;
    if (mem.n_wr_bursts - wr0 > 1) n_multi_burst_wr++;
    if (mem.n_r_stalls > rs0) n_rd_wait++;
    if (mem.n_w_stalls > ws0) n_wr_wait++;
    check("read bursts", mem.n_rd_bursts - rd0, (FW * used + 255) / 256);
    if (in_clks > used) n_in_clipped++;
    kept = (out_clks > 4096) ? 4096 : out_clks;
    check("write bursts", mem.n_wr_bursts - wr0, (kept + 255) / 256);
    check("overflow flag", longint'(obuf_overflow), longint'(out_clks > 4096));
    if (obuf_overflow) n_overflow++;
    // the record: clock by clock
    first_tag_at = -1;
    for (int k = 0; k < kept; k++) begin
      logic [31:0] e;
      int j;
      j = k - int'(LAT);
      e = (j >= 0 && j < used) ? {16'(j + 1), 7'd0, ref_out(hit_a[j], hit_b[j])} : 32'd0;
      checks++;
      if (mem.mem[OUT_BASE_W + k] !== e) begin
        failures++;
        if (failures < 20)
          $display("FAIL record clock %0d: got %h expected %h", k, mem.mem[OUT_BASE_W + k], e);
      end
      if (first_tag_at < 0 && mem.mem[OUT_BASE_W + k][31:16] == 16'd1) first_tag_at = k;
    end
    check("nothing written past the record", longint'(mem.mem[OUT_BASE_W + kept]), 32'hDEAD_BEEF);
    if (in_clks > 0 && kept > int'(LAT)) begin
      check("latency from tags", first_tag_at, LAT);
      if (first_tag_at == int'(LAT)) n_latency_ok++;
    end
    $display("cycle: %0d input clocks, %0d output clocks: %0d clocks from start to done",
             in_clks, out_clks, run_clocks);
    n_cycles++;
  endtask

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end else $display("mechanism %-34s x%0d", what, n);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c_awaddr = '0; c_araddr = '0; c_awvalid = 0; c_wvalid = 0; c_wdata = '0;
    c_wstrb = '0; c_bready = 0; c_arvalid = 0; c_rready = 0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    cycle(50, 60, 1'b1);      // 25,000 bits as 50 clocks of 512-bit frames
    cycle(256, 300, 1'b0);    // the whole 4096-word buffer
    cycle(300, 310, 1'b0);    // longer than the buffer: cut to 256 clocks
    need("read split into bursts", n_multi_burst_rd);
    need("short final burst", n_short_burst);
    need("memory read wait states", n_rd_wait);
    need("16 words merged into a frame", n_merge);
    need("4-clock latency measured", n_latency_ok);
    need("over-long event cut to the buffer", n_in_clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
