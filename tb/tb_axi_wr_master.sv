// tb_axi_wr_master: self-checking test of the AXI4 write master.
//
// A source offers a known word sequence with random gaps; the memory model
// inserts random wait states. Writes of 520 words (bursts 256, 256, 8), one
// word and zero words are checked: memory must hold the sequence at the base
// address and nothing may be written beyond it, the burst count and WLAST
// placement must be right (the model counts protocol errors), and exactly one
// done pulse must come after the last write response.
module tb_axi_wr_master;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy, done, err;
  logic [63:0] base;
  logic [15:0] n_words;
  logic [63:0] awaddr;
  logic [7:0]  awlen;
  logic [2:0]  awsize;
  logic [1:0]  awburst;
  logic        awvalid, awready;
  logic [31:0] wdata;
  logic [3:0]  wstrb;
  logic        wlast, wvalid, wready;
  logic [1:0]  bresp;
  logic        bvalid, bready;
  logic [31:0] in_data;
  logic        in_valid, in_ready;

  logic arready, rlast, rvalid;
  logic [31:0] rdata;
  logic [1:0] rresp;

  int checks = 0, failures = 0;
  int n_done = 0, n_sent = 0;
  int unsigned seed;

  axi_wr_master dut (
    .clk(clk), .rst_n(rst_n), .start(start), .base_addr(base), .n_words(n_words),
    .busy(busy), .done(done), .err(err),
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
    .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb),
    .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready),
    .in_data(in_data), .in_valid(in_valid), .in_ready(in_ready));

  axi_mem_model #(.MEM_WORDS(4096), .STALL_PCT(30)) mem (
    .clk(clk), .rst_n(rst_n),
    .araddr('0), .arlen('0), .arsize('0), .arburst('0), .arvalid(1'b0), .arready(arready),
    .rdata(rdata), .rresp(rresp), .rlast(rlast), .rvalid(rvalid), .rready(1'b0),
    .awaddr(awaddr), .awlen(awlen), .awsize(awsize), .awburst(awburst),
    .awvalid(awvalid), .awready(awready), .wdata(wdata), .wstrb(wstrb),
    .wlast(wlast), .wvalid(wvalid), .wready(wready),
    .bresp(bresp), .bvalid(bvalid), .bready(bready));

  function automatic logic [31:0] pattern(int unsigned s, int unsigned i);
    return (s * 32'h0101_0101) ^ (i * 32'h85EB_CA6B) ^ 32'h0F0F_0000;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (%h) expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  // word source: holds a word until taken, randomly idles between words
  int unsigned n_total;
  always @(posedge clk) begin
    if (rst_n) begin
      if (done) n_done++;
      if (in_valid && in_ready) n_sent++;
      if ((in_valid && in_ready) || !in_valid) begin
        if (n_sent < n_total && $urandom_range(99) >= 20) begin
          in_valid <= 1'b1;
          in_data  <= pattern(seed, n_sent);
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end

  task automatic run(input int unsigned base_word, input int unsigned n, input int exp_bursts);
    int unsigned b0;
    b0 = mem.n_wr_bursts;
    seed = $urandom();
    for (int i = 0; i < 4096; i++) mem.mem[i] = 32'hDEAD_BEEF;
    n_done = 0; n_sent = 0; n_total = n;
    @(negedge clk);
    base = 64'(base_word) * 4; n_words = 16'(n); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (n_done == 0) @(negedge clk);
    check("busy low after done", longint'(busy), 0);
    check("bvalid taken before done", longint'(bvalid), 0);
    repeat (5) @(negedge clk);
    for (int i = 0; i < int'(n); i++) begin
      checks++;
      if (mem.mem[base_word + i] !== pattern(seed, i)) begin
        failures++;
        $display("FAIL word %0d: got %h expected %h", i, mem.mem[base_word + i], pattern(seed, i));
      end
    end
    check("nothing past the end", longint'(mem.mem[base_word + n]), 32'hDEAD_BEEF);
    if (base_word > 0) check("nothing before the start", longint'(mem.mem[base_word - 1]), 32'hDEAD_BEEF);
    check("bursts", mem.n_wr_bursts - b0, exp_bursts);
    check("one done pulse", n_done, 1);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = '0; n_words = '0; in_valid = 0; in_data = '0; n_total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1024, 520, 3);
    run(2047, 1, 1);
    run(100, 0, 0);
    check("protocol errors", mem.n_protocol_errors, 0);
    check("wait states seen", longint'(mem.n_w_stalls > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
