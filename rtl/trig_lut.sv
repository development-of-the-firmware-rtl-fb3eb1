// trig_lut: look-up table of the example trigger logic.
//
// A synchronous ROM of 2**ADDR_W entries of DATA_W bits: the value at addr is
// on data one clock after addr is presented with en high (data holds when en
// is low). The address is the signed difference d of the two detectors' eta
// strips, offset by 2**(ADDR_W-1) so that d = 0 sits in the middle of the
// table. The table of the published example was produced from simulation and
// is not given; this ROM is filled at elaboration with a stand-in of the same
// kind, a momentum-like value that falls as the hits move apart:
//   value(d) = min(2**DATA_W - 1, K / |d|),  value(0) = 2**DATA_W - 1.
module trig_lut #(
  parameter int unsigned ADDR_W = 9,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned K      = 1024
) (
  input  logic              clk,
  input  logic              en,
  input  logic [ADDR_W-1:0] addr,
  output logic [DATA_W-1:0] data
);

  localparam int unsigned N    = 2 ** ADDR_W;
  localparam int unsigned VMAX = 2 ** DATA_W - 1;

  function automatic logic [DATA_W-1:0] entry(int unsigned a);
    int d;
    int unsigned q;
    d = int'(a) - int'(N / 2);
    if (d < 0) d = -d;
    if (d == 0) return DATA_W'(VMAX);
    q = K / int'(d);
    return (q > VMAX) ? DATA_W'(VMAX) : DATA_W'(q);
  endfunction

  function automatic logic [N*DATA_W-1:0] build();
    logic [N*DATA_W-1:0] t;
    for (int unsigned a = 0; a < N; a++) t[a*DATA_W +: DATA_W] = entry(a);
    return t;
  endfunction

  localparam logic [N*DATA_W-1:0] TABLE = build();

  always_ff @(posedge clk) begin
    if (en) data <= TABLE[addr * DATA_W +: DATA_W];
  end

endmodule
