// qdsp_receiver: readout receiver for one ADC, NCH multiplexed channels.
//
// The ADC's four samples per clock are summed to one (adc_decimator). A
// record of rec_len samples starts at trig_i. Every channel then has two
// paths fed from the same record:
//   * fast path: a kernel_integrator applies a matched IF kernel straight
//     to the real samples and thresholds the result. Its state bit is the
//     fast digital output that goes to the trigger distribution module; it
//     is valid 4 clocks after the record's last ADC word.
//   * diagnostic path: record samples cross into slow_clk through a CDC
//     FIFO, are mixed to baseband and decimated by 8 (channelizer), and a
//     second kernel_integrator with a baseband kernel of bb_len points
//     makes a state decision from them. The baseband stream and the
//     integrated values are brought out as taps for recording.
// The two-path structure, the per-ADC duplication of four and the summing
// decimator follow the receiver this models. Record framing by trigger and
// length, the configuration buses and the sticky FIFO overflow flag are
// this design's choices. slow_clk must keep up with the record sample rate
// on average; cdc_overflow_o reports lost samples.
module qdsp_receiver #(
  parameter int unsigned NCH        = 4,
  parameter int unsigned ADC_W      = 12,
  parameter int unsigned KERNEL_LEN = 4096,
  parameter int unsigned BB_LEN     = 512,
  parameter int unsigned TAPS       = 24,
  parameter int unsigned PHASE_W    = 24,
  localparam int unsigned S_W   = ADC_W + 2,
  localparam int unsigned KA_W  = $clog2(KERNEL_LEN),
  localparam int unsigned BA_W  = $clog2(BB_LEN),
  localparam int unsigned CH_W  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned TA_W  = $clog2(TAPS),
  localparam int unsigned ACC_W = 48
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        slow_clk,
  input  logic                        slow_rst,
  // ADC
  input  logic signed [ADC_W-1:0]     adc_i [4],
  input  logic                        adc_valid_i,
  // record control (clk)
  input  logic                        trig_i,
  input  logic [15:0]                 rec_len,
  // fast-path configuration (clk)
  input  logic                        fk_en,
  input  logic [CH_W-1:0]             fk_ch,
  input  logic [KA_W-1:0]             fk_addr,
  input  logic signed [15:0]          fk_re,
  input  logic signed [15:0]          fk_im,
  input  logic signed [ACC_W-1:0]     fast_thr [NCH],
  // diagnostic-path configuration (slow_clk)
  input  logic [15:0]                 bb_len,
  input  logic [PHASE_W-1:0]          phase_inc [NCH],
  input  logic                        cw_en,
  input  logic [CH_W-1:0]             cw_ch,
  input  logic                        cw_stage,
  input  logic [TA_W-1:0]             cw_addr,
  input  logic signed [17:0]          cw_data,
  input  logic                        bk_en,
  input  logic [CH_W-1:0]             bk_ch,
  input  logic [BA_W-1:0]             bk_addr,
  input  logic signed [15:0]          bk_re,
  input  logic signed [15:0]          bk_im,
  input  logic signed [ACC_W-1:0]     bb_thr [NCH],
  // fast digital outputs and values (clk)
  output logic [NCH-1:0]              fast_state_o,
  output logic [NCH-1:0]              fast_valid_o,
  output logic signed [ACC_W-1:0]     fast_q_re_o [NCH],
  output logic signed [ACC_W-1:0]     fast_q_im_o [NCH],
  output logic signed [S_W-1:0]       raw_o,
  output logic                        raw_valid_o,
  output logic                        cdc_overflow_o,
  // diagnostic taps (slow_clk)
  output logic signed [15:0]          bb_re_o [NCH],
  output logic signed [15:0]          bb_im_o [NCH],
  output logic [NCH-1:0]              bb_valid_o,
  output logic [NCH-1:0]              bb_state_o,
  output logic [NCH-1:0]              bb_state_valid_o,
  output logic signed [ACC_W-1:0]     bb_q_re_o [NCH],
  output logic signed [ACC_W-1:0]     bb_q_im_o [NCH]
);

  // ---- decimate by 4 ----
  logic signed [S_W-1:0] s;
  logic                  s_v;

  adc_decimator #(.ADC_W(ADC_W), .LANES(4)) u_dec (
    .clk, .rst, .adc_i, .adc_valid_i, .sample_o(s), .sample_valid_o(s_v)
  );

  assign raw_o       = s;
  assign raw_valid_o = s_v;

  // ---- record framing ----
  // trig_i arms a record of rec_len samples; the decimator's register
  // delays the word presented with trig_i by one clock, so it comes first.
  logic [15:0] remain;
  logic        first_pend;
  logic        rec_v, rec_last, rec_first;

  assign rec_v     = s_v && (remain != 0);
  assign rec_last  = rec_v && (remain == 16'd1);
  assign rec_first = rec_v && first_pend;

  always_ff @(posedge clk) begin
    if (rst) begin
      remain <= '0; first_pend <= 1'b0;
    end else if (trig_i) begin
      remain <= rec_len; first_pend <= 1'b1;
    end else if (rec_v) begin
      remain <= remain - 1'b1; first_pend <= 1'b0;
    end
  end

  // ---- fast path ----
  for (genvar c = 0; c < NCH; c++) begin : g_fast
    kernel_integrator #(.DATA_W(S_W), .KERNEL_W(16), .KERNEL_LEN(KERNEL_LEN), .ACC_W(ACC_W)) u_ki (
      .clk, .rst,
      .kw_en(fk_en && fk_ch == CH_W'(c)), .kw_addr(fk_addr), .kw_re(fk_re), .kw_im(fk_im),
      .threshold(fast_thr[c]),
      .valid_i(rec_v), .last_i(rec_last), .re_i(s), .im_i('0),
      .state_valid_o(fast_valid_o[c]), .state_o(fast_state_o[c]),
      .q_re_o(fast_q_re_o[c]), .q_im_o(fast_q_im_o[c])
    );
  end

  // ---- clock-domain crossing ----
  logic               f_full, f_empty;
  logic [S_W:0]       f_dout;

  cdc_fifo #(.WIDTH(S_W + 1), .DEPTH_LOG2(5)) u_cdc (
    .wr_clk(clk), .wr_rst(rst), .wr_en(rec_v), .wr_data({rec_first, s}), .full(f_full),
    .rd_clk(slow_clk), .rd_rst(slow_rst), .rd_en(!f_empty), .rd_data(f_dout), .empty(f_empty)
  );

  always_ff @(posedge clk) begin
    if (rst)                 cdc_overflow_o <= 1'b0;
    else if (rec_v && f_full) cdc_overflow_o <= 1'b1;
  end

  // ---- diagnostic path ----
  for (genvar c = 0; c < NCH; c++) begin : g_slow
    logic                 ch_v;
    logic signed [15:0]   ch_re, ch_im;
    logic [15:0]          cnt;
    logic                 cnt_run;

    channelizer #(.IN_W(S_W), .W(16), .PHASE_W(PHASE_W), .TAPS(TAPS)) u_chan (
      .clk(slow_clk), .rst(slow_rst), .phase_inc(phase_inc[c]),
      .cw_en(cw_en && cw_ch == CH_W'(c)), .cw_stage, .cw_addr, .cw_data,
      .sync_i(f_dout[S_W]), .valid_i(!f_empty), .x_i(f_dout[S_W-1:0]),
      .valid_o(ch_v), .re_o(ch_re), .im_o(ch_im)
    );

    // the baseband record is the first bb_len outputs after a record start
    logic sync_seen;
    always_ff @(posedge slow_clk) begin
      if (slow_rst) begin
        cnt <= '0; cnt_run <= 1'b0; sync_seen <= 1'b0;
      end else begin
        if (!f_empty && f_dout[S_W]) sync_seen <= 1'b1;
        if (ch_v) begin
          if (sync_seen) begin
            sync_seen <= 1'b0; cnt_run <= (bb_len > 16'd1); cnt <= 16'd1;
          end else if (cnt_run) begin
            cnt <= cnt + 1'b1;
            if (cnt + 16'd1 == bb_len) cnt_run <= 1'b0;
          end
        end
      end
    end

    logic bb_rec_v, bb_rec_last;
    assign bb_rec_v    = ch_v && (sync_seen || cnt_run);
    assign bb_rec_last = bb_rec_v && (sync_seen ? (bb_len == 16'd1) : (cnt + 16'd1 == bb_len));

    kernel_integrator #(.DATA_W(16), .KERNEL_W(16), .KERNEL_LEN(BB_LEN), .ACC_W(ACC_W)) u_bb (
      .clk(slow_clk), .rst(slow_rst),
      .kw_en(bk_en && bk_ch == CH_W'(c)), .kw_addr(bk_addr), .kw_re(bk_re), .kw_im(bk_im),
      .threshold(bb_thr[c]),
      .valid_i(bb_rec_v), .last_i(bb_rec_last), .re_i(ch_re), .im_i(ch_im),
      .state_valid_o(bb_state_valid_o[c]), .state_o(bb_state_o[c]),
      .q_re_o(bb_q_re_o[c]), .q_im_o(bb_q_im_o[c])
    );

    assign bb_re_o[c]    = ch_re;
    assign bb_im_o[c]    = ch_im;
    assign bb_valid_o[c] = ch_v;
  end

endmodule
