// tdm_steering: baseline steering logic of the trigger distribution module.
//
// Eight digital inputs come from the front-panel comparators. Input 7 is
// the data-valid strobe; inputs 0-6 carry qubit measurement results. On
// each rising edge of the strobe the results are latched and sent as one
// byte, {1'b0, meas[6:0]}, to every output link. Broadcasting all results
// to all sequencers is the baseline behaviour of the module this models;
// which input is the strobe, the byte layout and the edge detection are
// this design's choices.
//
// Timing: inputs are registered once; word_valid_o pulses one clock after
// the registered strobe rises (two clocks after the pins).
module tdm_steering (
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  meas_i,
  output logic        word_valid_o,
  output logic [7:0]  word_o,
  output logic [31:0] word_count_o
);

  logic [7:0] in_r;
  logic       strobe_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_r <= '0; strobe_d <= 1'b0; word_valid_o <= 1'b0; word_o <= '0; word_count_o <= '0;
    end else begin
      in_r         <= meas_i;
      strobe_d     <= in_r[7];
      word_valid_o <= in_r[7] && !strobe_d;
      if (in_r[7] && !strobe_d) begin
        word_o       <= {1'b0, in_r[6:0]};
        word_count_o <= word_count_o + 1'b1;
      end
    end
  end

endmodule
