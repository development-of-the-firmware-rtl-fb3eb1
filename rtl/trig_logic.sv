// trig_logic: example trigger logic run inside the validation system.
//
// A particle crosses detector A and then detector B; each detector reports a
// hit as {valid, eta strip}. The logic requires a hit in both (coincidence),
// turns the pair into one table address, the signed strip difference
// eta_b - eta_a offset to be non-negative, and looks the address up in
// trig_lut. Output 1 is {coincidence, LUT value} (value forced to 0 without a
// coincidence). Input C carries a free tag, such as a running clock number,
// that is delayed through the same pipeline and returned on output 2, so the
// host can see which input clock each output belongs to.
//
// Pipeline, 4 clocks from input to output as in the published example:
//   1 register the inputs, 2 coincidence and address, 3 LUT read,
//   4 output register.
// The two detector inputs, the single LUT address and the 4-clock latency
// follow the published example; the use of the eta difference follows the
// authors' description of the example. Widths, the {valid, strip} hit format
// and the tag on input C are this design's choices.
module trig_logic #(
  parameter int unsigned ETA_W = 8,
  parameter int unsigned PT_W  = 8,
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ETA_W:0]   in_a,    // {hit valid, eta strip} from detector A
  input  logic [ETA_W:0]   in_b,    // {hit valid, eta strip} from detector B
  input  logic [TAG_W-1:0] in_c,    // tag, returned on out_2
  output logic [PT_W:0]    out_1,   // {coincidence, LUT value}
  output logic [TAG_W-1:0] out_2
);

  localparam int unsigned ADDR_W = ETA_W + 1;

  // stage 1
  logic [ETA_W:0]   a1, b1;
  logic [TAG_W-1:0] t1;
  // stage 2
  logic              coin2;
  logic [ADDR_W-1:0] addr2;
  logic [TAG_W-1:0]  t2;
  // stage 3
  logic              coin3;
  logic [TAG_W-1:0]  t3;
  logic [PT_W-1:0]   lut_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a1    <= '0;
      b1    <= '0;
      t1    <= '0;
      coin2 <= 1'b0;
      addr2 <= '0;
      t2    <= '0;
      coin3 <= 1'b0;
      t3    <= '0;
      out_1 <= '0;
      out_2 <= '0;
    end else begin
      a1 <= in_a;
      b1 <= in_b;
      t1 <= in_c;
      // eta_b - eta_a in [-(2^ETA_W-1), 2^ETA_W-1], plus 2^ETA_W
      coin2 <= a1[ETA_W] && b1[ETA_W];
      addr2 <= ADDR_W'({1'b0, b1[ETA_W-1:0]}) - ADDR_W'({1'b0, a1[ETA_W-1:0]})
               + ADDR_W'(2 ** ETA_W);
      t2    <= t1;
      coin3 <= coin2;
      t3    <= t2;
      out_1 <= {coin3, coin3 ? lut_q : PT_W'(0)};
      out_2 <= t3;
    end
  end

  trig_lut #(.ADDR_W(ADDR_W), .DATA_W(PT_W)) u_lut (
    .clk  (clk),
    .en   (1'b1),
    .addr (addr2),
    .data (lut_q)
  );

endmodule
