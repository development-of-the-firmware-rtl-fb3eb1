// patch_panel: maps buffer frames onto the trigger logic's ports and back.
//
// Input side: each frame played by the input FIFO buffer is cut into the bit
// fields that feed the trigger logic's inputs A, B and C (field X is
// frame[X_OFF +: X_W]). The fields are registered, so they reach the trigger
// logic one clock after the frame, all on the same clock; when no frame is
// valid the inputs are driven to zero (no hit). Output side: outputs 1 and 2
// of the trigger logic are placed at their offsets in one output frame, unused
// bits zero, for the output FIFO buffer; this side is combinational.
//
// Three inputs and two outputs, and the role of the block (bit distribution
// so that the trigger logic's port widths need not match the 32-bit bus), are
// the system's published structure. That the map is fixed by parameters at
// elaboration, and the default offsets (fields start on 16-bit boundaries so
// the host can read them easily), are this design's choices.
module patch_panel #(
  parameter int unsigned IN_FRAME_W  = 64,
  parameter int unsigned OUT_FRAME_W = 32,
  parameter int unsigned A_OFF = 0,  parameter int unsigned A_W  = 9,
  parameter int unsigned B_OFF = 16, parameter int unsigned B_W  = 9,
  parameter int unsigned C_OFF = 32, parameter int unsigned C_W  = 16,
  parameter int unsigned O1_OFF = 0,  parameter int unsigned O1_W = 9,
  parameter int unsigned O2_OFF = 16, parameter int unsigned O2_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // from the input FIFO buffer
  input  logic [IN_FRAME_W-1:0]  frame_in,
  input  logic                   frame_in_valid,
  // to the trigger logic
  output logic [A_W-1:0]         in_a,
  output logic [B_W-1:0]         in_b,
  output logic [C_W-1:0]         in_c,
  output logic                   in_valid,
  // from the trigger logic
  input  logic [O1_W-1:0]        out_1,
  input  logic [O2_W-1:0]        out_2,
  // to the output FIFO buffer
  output logic [OUT_FRAME_W-1:0] frame_out
);

  // elaboration checks: every field must lie inside its frame, outputs disjoint
  if (A_OFF + A_W > IN_FRAME_W || B_OFF + B_W > IN_FRAME_W || C_OFF + C_W > IN_FRAME_W)
  begin : g_chk_in
    $error("patch_panel: an input field lies outside the input frame");
  end
  if (O1_OFF + O1_W > OUT_FRAME_W || O2_OFF + O2_W > OUT_FRAME_W) begin : g_chk_out
    $error("patch_panel: an output field lies outside the output frame");
  end
  if (!(O1_OFF + O1_W <= O2_OFF || O2_OFF + O2_W <= O1_OFF)) begin : g_chk_ovl
    $error("patch_panel: output fields overlap");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_a     <= '0;
      in_b     <= '0;
      in_c     <= '0;
      in_valid <= 1'b0;
    end else begin
      in_valid <= frame_in_valid;
      if (frame_in_valid) begin
        in_a <= frame_in[A_OFF +: A_W];
        in_b <= frame_in[B_OFF +: B_W];
        in_c <= frame_in[C_OFF +: C_W];
      end else begin
        in_a <= '0;
        in_b <= '0;
        in_c <= '0;
      end
    end
  end

  always_comb begin
    frame_out = '0;
    frame_out[O1_OFF +: O1_W] = out_1;
    frame_out[O2_OFF +: O2_W] = out_2;
  end

endmodule
