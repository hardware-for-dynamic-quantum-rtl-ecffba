// polyphase_decimator: decimating FIR low-pass for one real stream.
//
// y[m] = sum_{n=0}^{TAPS-1} h[n] * x[m*DECIM - n], i.e. a TAPS-tap FIR
// followed by keeping every DECIM-th output. Only the kept outputs are
// computed: a shift register holds the last TAPS inputs and all taps are
// summed when a phase counter says an output is due, which is arithmetically
// the polyphase decimator the receiver uses, without its sharing of
// multipliers across phases. The coefficients h[] are written through a
// port (the paper designs them with the Remez algorithm but prints
// none); the tap count, the widths and the rounding are this design's.
//
// Interface: x_i with valid_i, one sample per clock at most; y_o with
// valid_o once per DECIM input samples. The output is (sum >>> COEF_SHIFT),
// saturated to W bits. sync_i restarts the decimation phase so that the
// next sample is phase 0.
//
// Timing: valid_o rises one clock after the valid_i that completes a group
// of DECIM samples.
module polyphase_decimator #(
  parameter int unsigned W          = 16,
  parameter int unsigned COEF_W     = 18,
  parameter int unsigned TAPS       = 24,
  parameter int unsigned DECIM      = 4,
  parameter int unsigned COEF_SHIFT = 17,
  localparam int unsigned TA_W      = $clog2(TAPS)
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cw_en,
  input  logic [TA_W-1:0]           cw_addr,
  input  logic signed [COEF_W-1:0]  cw_data,
  input  logic                      sync_i,
  input  logic                      valid_i,
  input  logic signed [W-1:0]       x_i,
  output logic                      valid_o,
  output logic signed [W-1:0]       y_o
);

  localparam int unsigned AW = W + COEF_W + TA_W + 1;
  localparam int unsigned PH_W = (DECIM > 1) ? $clog2(DECIM) : 1;

  logic signed [COEF_W-1:0] h [TAPS];
  logic signed [W-1:0]      line [TAPS];
  logic [PH_W-1:0]          phase;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int n = 0; n < TAPS; n++) h[n] <= '0;
    end else if (cw_en) begin
      h[cw_addr] <= cw_data;
    end
  end

  // sum over the taps including the sample arriving now
  logic signed [AW-1:0] acc;
  always_comb begin
    acc = AW'(x_i) * AW'(h[0]);
    for (int n = 1; n < TAPS; n++) acc += AW'(line[n-1]) * AW'(h[n]);
  end

  logic signed [AW-1:0] shifted;
  assign shifted = acc >>> COEF_SHIFT;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int n = 0; n < TAPS; n++) line[n] <= '0;
      phase   <= '0;
      valid_o <= 1'b0;
      y_o     <= '0;
    end else begin
      valid_o <= 1'b0;
      if (valid_i) begin
        line[0] <= x_i;
        for (int n = 1; n < TAPS; n++) line[n] <= line[n-1];
        if (sync_i || phase == PH_W'(DECIM - 1)) begin
          phase <= sync_i ? PH_W'(1 % DECIM) : '0;
        end else begin
          phase <= phase + 1'b1;
        end
        if (!sync_i && phase == PH_W'(DECIM - 1)) begin
          valid_o <= 1'b1;
          if (shifted > AW'((1 <<< (W-1)) - 1))   y_o <= {1'b0, {(W-1){1'b1}}};
          else if (shifted < -AW'(1 <<< (W-1)))  y_o <= {1'b1, {(W-1){1'b0}}};
          else                                   y_o <= W'(shifted);
        end
      end
    end
  end

endmodule
