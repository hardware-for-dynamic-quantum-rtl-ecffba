// adc_decimator: first stage of the readout receiver.
//
// The ADC delivers LANES samples per fabric clock (four at 250 MHz for a
// 1 GS/s converter). This block adds them into one sample per clock, a
// boxcar low-pass followed by decimation by LANES, so that everything after
// it handles one sample per clock. Summing the four lanes is the receiver's
// published scheme; the registered output (one clock of latency) and the
// full-precision output width of ADC_W+2 bits are this design's choices.
//
// Interface: adc_i holds LANES signed samples, lane 0 first in time, with
// adc_valid_i; sample_o / sample_valid_o follow one clock later.
module adc_decimator #(
  parameter int unsigned ADC_W = 12,
  parameter int unsigned LANES = 4,
  localparam int unsigned OUT_W = ADC_W + $clog2(LANES)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic signed [ADC_W-1:0]     adc_i [LANES],
  input  logic                        adc_valid_i,
  output logic signed [OUT_W-1:0]     sample_o,
  output logic                        sample_valid_o
);

  logic signed [OUT_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < LANES; i++) sum += OUT_W'(adc_i[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sample_o       <= '0;
      sample_valid_o <= 1'b0;
    end else begin
      sample_o       <= sum;
      sample_valid_o <= adc_valid_i;
    end
  end

endmodule
