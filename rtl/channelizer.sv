// channelizer: conventional down-conversion of one readout channel.
//
// The real IF stream is multiplied by exp(-i*w*t) from an NCO, giving a
// complex stream with the selected channel at 0 Hz, then low-pass filtered
// and decimated by DECIM1*DECIM2 (8 by default) in two FIR stages, one for
// I and one for Q at each stage. This is the receiver's diagnostic chain;
// its output is the baseband time trace of the measurement. The split of the
// decimation as 4 then 2 and the tap counts are this design's choice; the
// mixer is a CORDIC rotator driven by the NCO phase.
//
// Interface: x_i/valid_i at up to one sample per clock; sync_i with the
// first sample of a record clears the NCO phase and both decimation phases.
// Coefficients: cw_stage selects stage 1 (0) or 2 (1). Outputs re_o/im_o
// with valid_o once per DECIM1*DECIM2 inputs.
//
// Timing: NCO 1 clock, mixer 7 clocks, each FIR stage 1 clock after its
// group completes.
module channelizer #(
  parameter int unsigned IN_W     = 14,
  parameter int unsigned W        = 16,
  parameter int unsigned PHASE_W  = 24,
  parameter int unsigned COEF_W   = 18,
  parameter int unsigned TAPS     = 24,
  parameter int unsigned DECIM1   = 4,
  parameter int unsigned DECIM2   = 2,
  localparam int unsigned TA_W    = $clog2(TAPS)
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [PHASE_W-1:0]        phase_inc,
  input  logic                      cw_en,
  input  logic                      cw_stage,
  input  logic [TA_W-1:0]           cw_addr,
  input  logic signed [COEF_W-1:0]  cw_data,
  input  logic                      sync_i,
  input  logic                      valid_i,
  input  logic signed [IN_W-1:0]    x_i,
  output logic                      valid_o,
  output logic signed [W-1:0]       re_o,
  output logic signed [W-1:0]       im_o
);

  // NCO; the sample is delayed one clock to meet its phase
  logic [PHASE_W-1:0]       ph;
  logic                     ph_v;
  logic signed [IN_W-1:0]   x_d;
  logic                     sync_d;

  nco #(.PHASE_W(PHASE_W)) u_nco (
    .clk, .rst, .phase_inc, .sync_i(sync_i & valid_i), .valid_i,
    .phase_o(ph), .valid_o(ph_v)
  );

  always_ff @(posedge clk) begin
    if (rst) begin x_d <= '0; sync_d <= 1'b0; end
    else begin x_d <= x_i; sync_d <= sync_i & valid_i; end
  end

  // mix down: rotate (x, 0) by -phase
  logic                 mix_v;
  logic signed [W-1:0]  mix_re, mix_im;

  cordic_rotator #(.W(W), .PHASE_W(PHASE_W)) u_mix (
    .clk, .rst, .valid_i(ph_v), .x_i(W'(x_d)), .y_i('0), .phase_i(-ph),
    .valid_o(mix_v), .x_o(mix_re), .y_o(mix_im)
  );

  // the record start travels alongside the mixer pipeline
  localparam int unsigned MIX_LAT = 7;
  logic [MIX_LAT-1:0] sync_pipe;
  always_ff @(posedge clk) begin
    if (rst) sync_pipe <= '0;
    else     sync_pipe <= {sync_pipe[MIX_LAT-2:0], sync_d};
  end

  // two decimating FIR stages, I and Q
  logic                 s1_v, s1_vq, s2_v, s2_vq;
  logic signed [W-1:0]  s1_re, s1_im;
  logic                 s1_sync;

  polyphase_decimator #(.W(W), .COEF_W(COEF_W), .TAPS(TAPS), .DECIM(DECIM1)) u_fir1_i (
    .clk, .rst, .cw_en(cw_en & ~cw_stage), .cw_addr, .cw_data,
    .sync_i(sync_pipe[MIX_LAT-1]), .valid_i(mix_v), .x_i(mix_re), .valid_o(s1_v), .y_o(s1_re));
  polyphase_decimator #(.W(W), .COEF_W(COEF_W), .TAPS(TAPS), .DECIM(DECIM1)) u_fir1_q (
    .clk, .rst, .cw_en(cw_en & ~cw_stage), .cw_addr, .cw_data,
    .sync_i(sync_pipe[MIX_LAT-1]), .valid_i(mix_v), .x_i(mix_im), .valid_o(s1_vq), .y_o(s1_im));

  // first stage-1 output after a record start restarts stage 2
  logic sync_pend;
  always_ff @(posedge clk) begin
    if (rst)                        sync_pend <= 1'b0;
    else if (sync_pipe[MIX_LAT-1])  sync_pend <= 1'b1;
    else if (s1_v)                  sync_pend <= 1'b0;
  end
  assign s1_sync = sync_pend & s1_v;

  polyphase_decimator #(.W(W), .COEF_W(COEF_W), .TAPS(TAPS), .DECIM(DECIM2)) u_fir2_i (
    .clk, .rst, .cw_en(cw_en & cw_stage), .cw_addr, .cw_data,
    .sync_i(s1_sync), .valid_i(s1_v), .x_i(s1_re), .valid_o(s2_v), .y_o(re_o));
  polyphase_decimator #(.W(W), .COEF_W(COEF_W), .TAPS(TAPS), .DECIM(DECIM2)) u_fir2_q (
    .clk, .rst, .cw_en(cw_en & cw_stage), .cw_addr, .cw_data,
    .sync_i(s1_sync), .valid_i(s1_vq), .x_i(s1_im), .valid_o(s2_vq), .y_o(im_o));

  assign valid_o = s2_v;

  // I and Q filters run in lockstep
  always_ff @(posedge clk) begin
    if (!rst) assert (s1_v == s1_vq && s2_v == s2_vq) else $error("I/Q filter valids diverged");
  end

endmodule
