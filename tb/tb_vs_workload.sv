// tb_vs_workload: the published measurement's workload on the full design.
//
// 1,000 validation cycles, each an event of 25,000 bits of input (782 words,
// 391 trigger clocks of two words), at the design's default parameters,
// through the control port and a memory model with random wait states. The
// hits are chosen so that, over the run, every reachable look-up-table
// address (eta difference -255 ... +255) is hit by a coincidence: this is
// the "validate the whole table with many events" use of the system. Every
// record entry of every event is compared with a reference computed here,
// and each table address must have been checked at least once. The average
// number of clocks per cycle is printed.
module tb_vs_workload;
  import vs_pkg::*;

  localparam int unsigned IN_BASE_W  = 0;      // word address of the input buffer
  localparam int unsigned OUT_BASE_W = 8192;   // word address of the output buffer
  localparam int unsigned LAT        = 4;
  localparam int          N_EVENTS   = 1000;

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

  vs_top dut (
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
  longint total_clocks = 0;
  int sweep_pos = 0;
  int covered [512];
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
      if (dut.u_ibuf.mem_we && dut.u_ibuf.widx != '0) n_merge++;
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
    int rd0, wr0, rs0, ws0, first_tag_at, kept, polls, used, d, ea;
    used = (in_clks > 2048) ? 2048 : in_clks;   // the input buffer holds 2048 frames
    // generate the event and write it into accelerator memory
    for (int k = 0; k < in_clks; k++) begin
      // sweep the eta difference over -255 ... +255 across the run
      d = int'((sweep_pos + k) % 511) - 255;
      ea = (d >= 0) ? int'($urandom_range(255 - d)) : int'($urandom_range(255, -d));
      hit_a[k] = {1'($urandom_range(9) != 0), 8'(ea)};
      hit_b[k] = {1'($urandom_range(9) != 0), 8'(ea + d)};
      mem.mem[IN_BASE_W + 2*k]     = {7'($urandom()), hit_b[k], 7'($urandom()), hit_a[k]};
      mem.mem[IN_BASE_W + 2*k + 1] = {16'($urandom()), 16'(k + 1)};
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
    check("read bursts", mem.n_rd_bursts - rd0, (2 * used + 255) / 256);
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
      if (e[8] && mem.mem[OUT_BASE_W + k] === e)
        covered[int'(hit_b[j][7:0]) - int'(hit_a[j][7:0]) + 256]++;
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
    total_clocks += run_clocks;
    sweep_pos += in_clks;
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
    repeat (6000000) @(posedge clk);
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
    for (int a = 0; a < 512; a++) covered[a] = 0;
    for (int ev = 0; ev < N_EVENTS; ev++) cycle(391, 391 + int'(LAT), 1'b0);
    need("read split into bursts", n_multi_burst_rd);
    need("write split into bursts", n_multi_burst_wr);
    need("memory read wait states", n_rd_wait);
    need("memory write wait states", n_wr_wait);
    need("4-clock latency measured", n_latency_ok);
    check("validation cycles run", n_cycles, N_EVENTS);
    begin
      int missing;
      missing = 0;
      for (int a = 1; a < 512; a++) if (covered[a] == 0) missing++;
      check("table addresses never checked", missing, 0);
    end
    $display("%0d events of 782 words: %0d clocks per validation cycle on average",
             n_cycles, int'(total_clocks / n_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
