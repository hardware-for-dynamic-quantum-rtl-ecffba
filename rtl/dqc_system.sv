// dqc_system: closed feedback loop of readout, steering and pulse
// sequencing.
//
// Two readout receivers (one per ADC of the digitizer, four multiplexed
// channels each) turn measurement records into qubit state bits within a
// few clocks of the record's end. Seven of the eight fast state bits, with
// the decision-valid pulse of the first channel as strobe, drive the
// trigger distribution module's eight inputs. It broadcasts each result
// byte and the periodic system trigger as symbols over serial links to
// NAPS2 pulse-sequencer modules, which branch on the results (LOAD_CMP /
// CMP / GOTO) and start their outputs on the trigger. The tenth link, for
// a second distribution module, is a port.
//
// The analog converters, comparators, transceivers, deep memories and host
// interfaces are not part of the logic: ADC words, memory ports, DAC words
// and marker words are ports, and the link symbols pass from the
// distribution module to the sequencers directly (the transceivers are
// replaced by wires; link_clk is the distribution module's clock). The
// state bit of receiver 1 channel 3 and all diagnostic taps are ports.
// Four clocks: readout fast and slow, distribution, sequencer. The
// channel-to-input mapping and the choice of strobe are this design's.
module dqc_system
  import aps2_pkg::*;
#(
  parameter int unsigned NAPS2      = 9,
  parameter int unsigned NADC       = 2,
  parameter int unsigned NCH        = 4,
  parameter int unsigned KERNEL_LEN = 4096,
  parameter int unsigned BB_LEN     = 512,
  parameter int unsigned WF_SAMPLES = 131072,
  localparam int unsigned KA_W = $clog2(KERNEL_LEN),
  localparam int unsigned BA_W = $clog2(BB_LEN),
  localparam int unsigned CH_W = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned DW   = SPC * 2 * SAMPLE_W
) (
  input  logic                   qdsp_clk,
  input  logic                   qdsp_rst,
  input  logic                   qdsp_slow_clk,
  input  logic                   qdsp_slow_rst,
  input  logic                   tdm_clk,
  input  logic                   tdm_rst,
  input  logic                   aps_clk,
  input  logic                   aps_rst,
  // ---- readout ----
  input  logic signed [11:0]     adc_i [NADC][4],
  input  logic                   adc_valid_i,
  input  logic                   meas_trig_i,
  input  logic [15:0]            rec_len,
  input  logic                   fk_en [NADC],
  input  logic [CH_W-1:0]        fk_ch,
  input  logic [KA_W-1:0]        fk_addr,
  input  logic signed [15:0]     fk_re, fk_im,
  input  logic signed [47:0]     fast_thr [NADC][NCH],
  input  logic [15:0]            bb_len,
  input  logic [23:0]            phase_inc [NADC][NCH],
  input  logic                   cw_en [NADC],
  input  logic [CH_W-1:0]        cw_ch,
  input  logic                   cw_stage,
  input  logic [4:0]             cw_addr,
  input  logic signed [17:0]     cw_data,
  input  logic                   bk_en [NADC],
  input  logic [CH_W-1:0]        bk_ch,
  input  logic [BA_W-1:0]        bk_addr,
  input  logic signed [15:0]     bk_re, bk_im,
  input  logic signed [47:0]     bb_thr [NADC][NCH],
  output logic [NCH-1:0]         fast_state_o [NADC],
  output logic [NCH-1:0]         fast_valid_o [NADC],
  output logic [NCH-1:0]         bb_state_o [NADC],
  output logic [NCH-1:0]         bb_state_valid_o [NADC],
  output logic                   cdc_overflow_o [NADC],
  // ---- distribution ----
  input  logic                   trig_run,
  input  logic [31:0]            trig_interval,
  output link_sym_t              crate_link_o,
  output logic [31:0]            tdm_word_count_o,
  output logic [31:0]            tdm_trig_count_o,
  // ---- sequencers ----
  input  logic                   aps_run,
  output logic                   imem_req_valid [NAPS2],
  output logic [IADDR_W-1:0]     imem_req_addr [NAPS2],
  input  logic                   imem_req_ready [NAPS2],
  input  logic                   imem_rd_valid [NAPS2],
  input  logic [INSTR_W-1:0]     imem_rd_data [NAPS2],
  output logic                   wmem_req_valid [NAPS2],
  output logic [31:0]            wmem_req_addr [NAPS2],
  output logic [31:0]            wmem_req_len [NAPS2],
  input  logic                   wmem_req_ready [NAPS2],
  input  logic                   wmem_rd_valid [NAPS2],
  input  logic [DW-1:0]          wmem_rd_data [NAPS2],
  input  logic signed [15:0]     m00, m01, m10, m11,
  input  logic signed [13:0]     off_a, off_b,
  output logic signed [13:0]     dac_a_o [NAPS2][SPC],
  output logic signed [13:0]     dac_b_o [NAPS2][SPC],
  output logic [SPC-1:0]         marker_o [NAPS2][NMK],
  output logic                   aps_trigger_o [NAPS2],
  output logic [IADDR_W-1:0]     pc_o [NAPS2],
  output logic [31:0]            jump_count_o [NAPS2],
  output logic [31:0]            stall_count_o [NAPS2],
  output logic [31:0]            imiss_count_o [NAPS2]
);

  // ---------------- readout ----------------
  for (genvar a = 0; a < NADC; a++) begin : g_rx
    logic signed [47:0] fqr [NCH], fqi [NCH], bqr [NCH], bqi [NCH];
    logic signed [15:0] bre [NCH], bim [NCH];
    logic [NCH-1:0]     bv;
    logic signed [13:0] raw;
    logic               raw_v;

    qdsp_receiver #(.NCH(NCH), .KERNEL_LEN(KERNEL_LEN), .BB_LEN(BB_LEN)) u_rx (
      .clk(qdsp_clk), .rst(qdsp_rst), .slow_clk(qdsp_slow_clk), .slow_rst(qdsp_slow_rst),
      .adc_i(adc_i[a]), .adc_valid_i, .trig_i(meas_trig_i), .rec_len,
      .fk_en(fk_en[a]), .fk_ch, .fk_addr, .fk_re, .fk_im, .fast_thr(fast_thr[a]),
      .bb_len, .phase_inc(phase_inc[a]), .cw_en(cw_en[a]), .cw_ch, .cw_stage, .cw_addr, .cw_data,
      .bk_en(bk_en[a]), .bk_ch, .bk_addr, .bk_re, .bk_im, .bb_thr(bb_thr[a]),
      .fast_state_o(fast_state_o[a]), .fast_valid_o(fast_valid_o[a]),
      .fast_q_re_o(fqr), .fast_q_im_o(fqi), .raw_o(raw), .raw_valid_o(raw_v),
      .cdc_overflow_o(cdc_overflow_o[a]),
      .bb_re_o(bre), .bb_im_o(bim), .bb_valid_o(bv), .bb_state_o(bb_state_o[a]),
      .bb_state_valid_o(bb_state_valid_o[a]), .bb_q_re_o(bqr), .bb_q_im_o(bqi)
    );
  end

  // digitizer outputs to distribution inputs: 7 state bits and a strobe
  logic [NADC*NCH-1:0] all_states;
  logic [7:0]          meas;
  always_comb begin
    for (int a = 0; a < NADC; a++) all_states[a*NCH +: NCH] = fast_state_o[a];
    meas = {fast_valid_o[0][0], 7'(all_states)};
  end

  // ---------------- distribution ----------------
  link_sym_t   links [NAPS2+1];
  logic        links_v [NAPS2+1];
  logic [NAPS2:0] dropped;

  tdm #(.NOUT(NAPS2)) u_tdm (
    .clk(tdm_clk), .rst(tdm_rst), .meas_i(meas), .trig_run, .trig_interval,
    .link_o(links), .link_valid_o(links_v), .link_dropped_o(dropped),
    .word_count_o(tdm_word_count_o), .trig_count_o(tdm_trig_count_o)
  );
  assign crate_link_o = links[NAPS2];

  // ---------------- sequencers ----------------
  for (genvar n = 0; n < NAPS2; n++) begin : g_aps
    logic serr, fill_busy;
    aps2_module #(.WF_SAMPLES(WF_SAMPLES)) u_aps (
      .clk(aps_clk), .rst(aps_rst), .run(aps_run),
      .link_clk(tdm_clk), .link_rst(tdm_rst), .link_valid(links_v[n]), .link_sym(links[n]),
      .imem_req_valid(imem_req_valid[n]), .imem_req_addr(imem_req_addr[n]),
      .imem_req_ready(imem_req_ready[n]), .imem_rd_valid(imem_rd_valid[n]),
      .imem_rd_data(imem_rd_data[n]),
      .wmem_req_valid(wmem_req_valid[n]), .wmem_req_addr(wmem_req_addr[n]),
      .wmem_req_len(wmem_req_len[n]), .wmem_req_ready(wmem_req_ready[n]),
      .wmem_rd_valid(wmem_rd_valid[n]), .wmem_rd_data(wmem_rd_data[n]),
      .m00, .m01, .m10, .m11, .off_a, .off_b,
      .dac_a_o(dac_a_o[n]), .dac_b_o(dac_b_o[n]), .marker_o(marker_o[n]),
      .trigger_o(aps_trigger_o[n]), .pc_o(pc_o[n]), .stack_err_o(serr),
      .imiss_count_o(imiss_count_o[n]), .jump_count_o(jump_count_o[n]),
      .stall_count_o(stall_count_o[n]), .wf_fill_busy_o(fill_busy)
    );
  end

endmodule
