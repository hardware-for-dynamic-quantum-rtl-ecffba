// trigger_generator: system trigger of the trigger distribution module.
//
// While run is high a one-clock trigger pulse is produced every `interval`
// clocks, the first one the clock after run rises. The link transmitters
// send each pulse as the reserved trigger symbol to every sequencer, which
// starts all modules' engines in the same clock. A periodic trigger with a
// programmable interval is this design's reading of the "trigger
// generator" block; an interval of 0 behaves as 1.
module trigger_generator (
  input  logic        clk,
  input  logic        rst,
  input  logic        run,
  input  logic [31:0] interval,
  output logic        trig_o,
  output logic [31:0] trig_count_o
);

  logic [31:0] cnt;
  logic        run_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; run_d <= 1'b0; trig_o <= 1'b0; trig_count_o <= '0;
    end else begin
      run_d  <= run;
      trig_o <= 1'b0;
      if (!run) begin
        cnt <= '0;
      end else if (!run_d || cnt + 32'd1 >= interval) begin
        cnt          <= '0;
        trig_o       <= 1'b1;
        trig_count_o <= trig_count_o + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
