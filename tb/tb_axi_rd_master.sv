// tb_axi_rd_master: self-checking test of the AXI4 read master.
//
// The memory model is filled with a known pattern and inserts random wait
// states; the word stream's ready is also randomly low. Three reads are
// checked: 600 words (bursts of 256, 256 and 88), a single word, and zero
// words. For each, the streamed words must equal memory in order, the burst
// count must be the expected one, busy must be high until the done pulse and
// exactly one done pulse must come.
module tb_axi_rd_master;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy, done, err;
  logic [63:0] base;
  logic [15:0] n_words;
  logic [63:0] araddr;
  logic [7:0]  arlen;
  logic [2:0]  arsize;
  logic [1:0]  arburst;
  logic        arvalid, arready;
  logic [31:0] rdata;
  logic [1:0]  rresp;
  logic        rlast, rvalid, rready;
  logic [31:0] out_data;
  logic        out_valid, out_ready;

  // unused write side of the model
  logic awready, wready, bvalid;
  logic [1:0] bresp;

  int checks = 0, failures = 0;
  int n_done = 0, n_words_seen = 0, n_bp = 0;
  int unsigned exp_addr;

  axi_rd_master dut (
    .clk(clk), .rst_n(rst_n), .start(start), .base_addr(base), .n_words(n_words),
    .busy(busy), .done(done), .err(err),
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp),
    .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .out_data(out_data), .out_valid(out_valid), .out_ready(out_ready));

  axi_mem_model #(.MEM_WORDS(4096), .STALL_PCT(30)) mem (
    .clk(clk), .rst_n(rst_n),
    .araddr(araddr), .arlen(arlen), .arsize(arsize), .arburst(arburst),
    .arvalid(arvalid), .arready(arready), .rdata(rdata), .rresp(rresp),
    .rlast(rlast), .rvalid(rvalid), .rready(rready),
    .awaddr('0), .awlen('0), .awsize('0), .awburst('0), .awvalid(1'b0), .awready(awready),
    .wdata('0), .wstrb('0), .wlast(1'b0), .wvalid(1'b0), .wready(wready),
    .bresp(bresp), .bvalid(bvalid), .bready(1'b0));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (%h) expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  // compare every streamed word with memory
  always @(posedge clk) begin
    if (rst_n) begin
      out_ready <= ($urandom_range(99) >= 25);
      if (out_valid && !out_ready) n_bp++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== mem.mem[exp_addr]) begin
          failures++;
          $display("FAIL word %0d: got %h expected %h", n_words_seen, out_data, mem.mem[exp_addr]);
        end
        exp_addr++;
        n_words_seen++;
      end
      if (done) n_done++;
    end
  end

  task automatic run(input int unsigned base_word, input int unsigned n, input int exp_bursts);
    int unsigned b0;
    b0 = mem.n_rd_bursts;
    n_done = 0; n_words_seen = 0; exp_addr = base_word;
    @(negedge clk);
    base = 64'(base_word) * 4; n_words = 16'(n); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    if (n != 0) check("busy after start", longint'(busy), 1);
    while (n_done == 0) @(negedge clk);
    check("busy low after done", longint'(busy), 0);
    repeat (20) @(negedge clk);
    check("words streamed", n_words_seen, n);
    check("bursts", mem.n_rd_bursts - b0, exp_bursts);
    check("one done pulse", n_done, 1);
    check("no error", longint'(err), 0);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = '0; n_words = '0; out_ready = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = 32'h5A00_0000 ^ (i * 32'h9E37_79B9);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1024, 600, 3);
    run(3000, 1, 1);
    run(0, 0, 0);
    check("protocol errors", mem.n_protocol_errors, 0);
    check("back-pressure seen", longint'(n_bp > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
