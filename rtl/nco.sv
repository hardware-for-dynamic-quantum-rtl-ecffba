// nco: phase accumulator of the receiver's channelizer.
//
// Each valid input sample advances the phase by phase_inc; phase_o is the
// phase to apply to that sample (full turn = 2^PHASE_W). The carrier's
// cosine and sine are not tabulated: the phase drives a CORDIC rotator that
// multiplies the sample by exp(-i*phase) directly. sync_i clears the phase,
// so a record can start at a known carrier phase. The accumulator is the
// standard NCO the receiver description names; the width and the clear
// input are this design's choices.
//
// Timing: phase_o / valid_o are registered, one clock after valid_i, and
// belong to the sample presented with valid_i.
module nco #(
  parameter int unsigned PHASE_W = 24
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PHASE_W-1:0] phase_inc,
  input  logic               sync_i,
  input  logic               valid_i,
  output logic [PHASE_W-1:0] phase_o,
  output logic               valid_o
);

  logic [PHASE_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc <= '0; phase_o <= '0; valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        phase_o <= sync_i ? '0 : acc;
        acc     <= (sync_i ? '0 : acc) + phase_inc;
      end else if (sync_i) begin
        acc <= '0;
      end
    end
  end

endmodule
