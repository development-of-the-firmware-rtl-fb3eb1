// axi_mem_model: behavioural model of the accelerator card's DDR as seen
// through an AXI4 slave port. Not synthesizable; for testbenches only.
//
// A word array of MEM_WORDS 32-bit words at byte address 0. It serves one
// INCR read burst and one INCR write burst at a time (the masters in this
// design never issue more) and inserts random wait states: each ready/valid
// the model drives is held low with probability STALL_PCT percent in a clock.
// It counts bursts, beats and stalls so a testbench can tell that burst
// splitting and back-pressure really happened, and checks RLAST/WLAST.
module axi_mem_model #(
  parameter int unsigned MEM_WORDS = 16384,
  parameter int unsigned STALL_PCT = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] araddr,
  input  logic [7:0]  arlen,
  input  logic [2:0]  arsize,
  input  logic [1:0]  arburst,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [63:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic [2:0]  awsize,
  input  logic [1:0]  awburst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);

  logic [31:0] mem [MEM_WORDS];

  int unsigned n_rd_bursts = 0, n_wr_bursts = 0;
  int unsigned n_rd_beats = 0, n_wr_beats = 0;
  int unsigned n_r_stalls = 0, n_w_stalls = 0;
  int unsigned n_protocol_errors = 0;

  // read side
  logic        r_busy;
  int unsigned r_addr, r_left;
  // write side
  logic        w_busy, w_resp;
  int unsigned w_addr, w_left;

  function automatic logic go();
    return ($urandom_range(99) >= STALL_PCT);
  endfunction

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0;
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      r_busy <= 1'b0; w_busy <= 1'b0; w_resp <= 1'b0;
      r_addr <= 0; r_left <= 0; w_addr <= 0; w_left <= 0;
    end else begin
      // ---------------- read ----------------
      if (!r_busy) begin
        if (arvalid && arready) begin
          if (arsize != 3'd2 || arburst != 2'b01) n_protocol_errors++;
          r_busy  <= 1'b1;
          r_addr  <= int'(araddr[31:0]) / 4;
          r_left  <= int'(arlen) + 1;
          arready <= 1'b0;
          n_rd_bursts++;
        end else begin
          arready <= go();
        end
      end else begin
        if (rvalid && rready) begin
          n_rd_beats++;
          if (r_left == 0) begin
            rvalid <= 1'b0;
            r_busy <= 1'b0;
          end
        end
        if (!rvalid || rready) begin
          if (r_left != 0 && go()) begin
            rvalid <= 1'b1;
            rdata  <= mem[r_addr % MEM_WORDS];
            rlast  <= (r_left == 1);
            r_addr <= r_addr + 1;
            r_left <= r_left - 1;
          end else begin
            if (r_left != 0) n_r_stalls++;
            rvalid <= 1'b0;
            if (r_left == 0) r_busy <= 1'b0;
          end
        end
      end
      // ---------------- write ----------------
      if (!w_busy) begin
        if (awvalid && awready) begin
          if (awsize != 3'd2 || awburst != 2'b01) n_protocol_errors++;
          w_busy  <= 1'b1;
          w_addr  <= int'(awaddr[31:0]) / 4;
          w_left  <= int'(awlen) + 1;
          awready <= 1'b0;
          wready  <= go();
          n_wr_bursts++;
        end else begin
          awready <= go();
        end
      end else if (!w_resp) begin
        if (wvalid && wready) begin
          for (int i = 0; i < 4; i++)
            if (wstrb[i]) mem[w_addr % MEM_WORDS][8*i +: 8] <= wdata[8*i +: 8];
          n_wr_beats++;
          if (wlast != (w_left == 1)) n_protocol_errors++;
          w_addr <= w_addr + 1;
          w_left <= w_left - 1;
          if (w_left == 1) begin
            w_resp <= 1'b1;
            wready <= 1'b0;
            bvalid <= 1'b1;
          end else begin
            wready <= go();
          end
        end else begin
          if (!wready) n_w_stalls++;
          wready <= go();
        end
      end else begin
        if (bvalid && bready) begin
          bvalid <= 1'b0;
          w_resp <= 1'b0;
          w_busy <= 1'b0;
        end
      end
    end
  end

endmodule
