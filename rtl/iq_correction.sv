// iq_correction: I/Q mixer correction, channel scaling and DC offset.
//
// For each of the four samples per clock:
//   a = (m00*I + m01*Q) >>> 16 + off_a,   b = (m10*I + m11*Q) >>> 16 + off_b
// with matrix entries in signed 2.14 fixed point, so the matrix corrects
// amplitude and phase imbalance of the I/Q mixer and also scales each
// channel; the extra two bits of shift take the 16-bit samples to the
// 14-bit DAC codes. Offsets null the carrier leakage. The results saturate
// to the DAC range. Combining scale into the matrix and placing offset
// last follow the modulator this models; the number formats are this
// design's choice.
//
// Timing: two clocks (matrix, then offset and saturation).
module iq_correction
  import aps2_pkg::*;
#(
  parameter int unsigned DAC_W = 14
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic signed [SAMPLE_W-1:0] i_i [SPC],
  input  logic signed [SAMPLE_W-1:0] q_i [SPC],
  input  logic signed [15:0]         m00, m01, m10, m11,
  input  logic signed [DAC_W-1:0]    off_a, off_b,
  output logic signed [DAC_W-1:0]    dac_a_o [SPC],
  output logic signed [DAC_W-1:0]    dac_b_o [SPC]
);

  localparam int unsigned PW = SAMPLE_W + 16 + 1;
  localparam int unsigned SW = PW - 16;

  function automatic logic signed [DAC_W-1:0] sat(logic signed [SW:0] v);
    if (v > (SW+1)'((1 <<< (DAC_W-1)) - 1)) return {1'b0, {(DAC_W-1){1'b1}}};
    if (v < -(SW+1)'(1 <<< (DAC_W-1)))      return {1'b1, {(DAC_W-1){1'b0}}};
    return DAC_W'(v);
  endfunction

  logic signed [SW-1:0] ma [SPC], mb [SPC];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < SPC; k++) begin
        ma[k] <= '0; mb[k] <= '0; dac_a_o[k] <= '0; dac_b_o[k] <= '0;
      end
    end else begin
      for (int k = 0; k < SPC; k++) begin
        automatic logic signed [PW-1:0] pa = PW'(m00 * i_i[k]) + PW'(m01 * q_i[k]);
        automatic logic signed [PW-1:0] pb = PW'(m10 * i_i[k]) + PW'(m11 * q_i[k]);
        ma[k] <= SW'(pa >>> 16);
        mb[k] <= SW'(pb >>> 16);
        dac_a_o[k] <= sat((SW+1)'(ma[k]) + (SW+1)'(off_a));
        dac_b_o[k] <= sat((SW+1)'(mb[k]) + (SW+1)'(off_b));
      end
    end
  end

endmodule
