// aps2_module: one pulse-sequencer module with two analog and four marker
// outputs.
//
// Data flow: the sequencer fetches instructions through the instruction
// cache and dispatches them to seven engine queues: waveform engines 0 and
// 1 (I and Q parts of one complex waveform), marker engines 0-3 and the
// modulation engine. The waveform engines read the waveform cache; the
// complex samples are rotated by the phase of the NCO the modulation engine
// selects (four CORDIC rotators, one per sample of the clock), then go
// through the mixer-correction matrix and offsets to two 14-bit DAC words of
// four samples per clock. The link receiver turns the TDM's trigger symbol
// into the engines' trigger and queues measurement words for LOAD_CMP.
// Marker words are delayed to line up with the analog path.
//
// Both caches reach deep memory through the imem_* and wmem_* ports; the
// memory controller, DACs, output serializers and host interface are
// outside. Registers normally written by the host (run, correction
// matrix, offsets) are plain inputs.
//
// Timing: from a waveform engine's cache read to the DAC word is 1 + 7 +
// 2 = 10 clocks: cache, rotation, matrix and offset. The part after the
// engine (rotation, matrix, offset) takes 9 clocks, the figure quoted for
// the sequencer's waveform processing.
module aps2_module
  import aps2_pkg::*;
#(
  parameter int unsigned WF_SAMPLES = 131072,
  parameter int unsigned DAC_W      = 14,
  localparam int unsigned WA_W      = $clog2(WF_SAMPLES / SPC)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    run,
  // serial link from the TDM
  input  logic                    link_clk,
  input  logic                    link_rst,
  input  logic                    link_valid,
  input  link_sym_t               link_sym,
  // instruction memory port
  output logic                    imem_req_valid,
  output logic [IADDR_W-1:0]      imem_req_addr,
  input  logic                    imem_req_ready,
  input  logic                    imem_rd_valid,
  input  logic [INSTR_W-1:0]      imem_rd_data,
  // waveform memory port
  output logic                    wmem_req_valid,
  output logic [31:0]             wmem_req_addr,
  output logic [31:0]             wmem_req_len,
  input  logic                    wmem_req_ready,
  input  logic                    wmem_rd_valid,
  input  logic [SPC*2*SAMPLE_W-1:0] wmem_rd_data,
  // mixer correction
  input  logic signed [15:0]      m00, m01, m10, m11,
  input  logic signed [DAC_W-1:0] off_a, off_b,
  // outputs
  output logic signed [DAC_W-1:0] dac_a_o [SPC],
  output logic signed [DAC_W-1:0] dac_b_o [SPC],
  output logic [SPC-1:0]          marker_o [NMK],
  // status
  output logic                    trigger_o,
  output logic [IADDR_W-1:0]      pc_o,
  output logic                    stack_err_o,
  output logic [31:0]             imiss_count_o,
  output logic [31:0]             jump_count_o,
  output logic [31:0]             stall_count_o,
  output logic                    wf_fill_busy_o
);

  // ---- link ----
  logic       trig, cmp_valid, cmp_pop, link_ovf;
  logic [7:0] cmp_data;

  link_rx u_link (
    .link_clk, .link_rst, .sym_valid(link_valid), .sym(link_sym),
    .clk, .rst, .trigger_o(trig), .cmp_valid_o(cmp_valid), .cmp_data_o(cmp_data),
    .cmp_pop_i(cmp_pop), .overflow_o(link_ovf)
  );
  assign trigger_o = trig;

  // ---- instruction cache and sequencer ----
  logic               ic_req, ic_valid, ic_miss, ic_pf;
  logic [IADDR_W-1:0] ic_addr, ic_pf_addr;
  logic [INSTR_W-1:0] ic_data;

  inst_cache #(.ADDR_W(IADDR_W)) u_icache (
    .clk, .rst, .req_i(ic_req), .req_addr_i(ic_addr), .rsp_valid_o(ic_valid),
    .rsp_miss_o(ic_miss), .rsp_data_o(ic_data), .pf_i(ic_pf), .pf_addr_i(ic_pf_addr),
    .mem_req_valid(imem_req_valid), .mem_req_addr(imem_req_addr), .mem_req_ready(imem_req_ready),
    .mem_rd_valid(imem_rd_valid), .mem_rd_data(imem_rd_data), .miss_count_o(imiss_count_o)
  );

  logic [NENG-1:0]  eng_wr, eng_full, eng_empty, eng_at_sync;
  logic [CMD_W-1:0] eng_cmd [NENG];
  logic             sync_go;

  sequencer u_seq (
    .clk, .rst, .run,
    .ic_req_o(ic_req), .ic_addr_o(ic_addr), .ic_valid_i(ic_valid), .ic_miss_i(ic_miss),
    .ic_data_i(ic_data), .ic_pf_o(ic_pf), .ic_pf_addr_o(ic_pf_addr),
    .cmp_valid_i(cmp_valid), .cmp_data_i(cmp_data), .cmp_pop_o(cmp_pop),
    .eng_wr_o(eng_wr), .eng_cmd_o(eng_cmd), .eng_full_i(eng_full), .eng_empty_i(eng_empty),
    .eng_at_sync_i(eng_at_sync), .sync_go_o(sync_go),
    .pc_o, .stack_err_o, .jump_count_o, .stall_count_o
  );

  // ---- waveform engines and cache ----
  logic                    wf_rd_en   [NWF];
  logic [WA_W-1:0]         wf_rd_addr [NWF];
  logic [SPC*2*SAMPLE_W-1:0] wf_rd_data [NWF];
  logic                    pf_valid [NWF];
  logic                    pf_page  [NWF];
  logic [31:0]             pf_src   [NWF];
  logic signed [SAMPLE_W-1:0] wf_s [NWF][SPC];
  logic                    wf_play [NWF];

  for (genvar w = 0; w < NWF; w++) begin : g_wf
    waveform_engine #(.CHANNEL(w), .WADDR_W(WA_W)) u_wf (
      .clk, .rst, .cmd_wr(eng_wr[w]), .cmd_data(eng_cmd[w]), .cmd_full(eng_full[w]),
      .cmd_empty(eng_empty[w]), .trigger_i(trig), .sync_go_i(sync_go), .at_sync_o(eng_at_sync[w]),
      .rd_en_o(wf_rd_en[w]), .rd_addr_o(wf_rd_addr[w]), .rd_data_i(wf_rd_data[w]),
      .pf_valid_o(pf_valid[w]), .pf_page_o(pf_page[w]), .pf_src_o(pf_src[w]),
      .sample_o(wf_s[w]), .playing_o(wf_play[w])
    );
  end

  logic pf_dropped;
  waveform_cache #(.SAMPLES(WF_SAMPLES)) u_wcache (
    .clk, .rst, .rd_en(wf_rd_en), .rd_addr(wf_rd_addr), .rd_data(wf_rd_data),
    .pf_valid_i(pf_valid[0]), .pf_page_i(pf_page[0]), .pf_src_i(pf_src[0]),
    .fill_busy_o(wf_fill_busy_o), .pf_dropped_o(pf_dropped),
    .mem_req_valid(wmem_req_valid), .mem_req_addr(wmem_req_addr), .mem_req_len(wmem_req_len),
    .mem_req_ready(wmem_req_ready), .mem_rd_valid(wmem_rd_valid), .mem_rd_data(wmem_rd_data)
  );

  // ---- marker engines ----
  logic [SPC-1:0] mk_raw [NMK];
  for (genvar m = 0; m < NMK; m++) begin : g_mk
    marker_engine u_mk (
      .clk, .rst, .cmd_wr(eng_wr[NWF+m]), .cmd_data(eng_cmd[NWF+m]), .cmd_full(eng_full[NWF+m]),
      .cmd_empty(eng_empty[NWF+m]), .trigger_i(trig), .sync_go_i(sync_go),
      .at_sync_o(eng_at_sync[NWF+m]), .marker_o(mk_raw[m])
    );
  end

  // ---- modulation ----
  logic [PHASE_W-1:0] phase [SPC];
  logic               modulating;
  logic [1:0]         nco_sel;

  modulation_engine u_mod (
    .clk, .rst, .cmd_wr(eng_wr[NENG-1]), .cmd_data(eng_cmd[NENG-1]), .cmd_full(eng_full[NENG-1]),
    .cmd_empty(eng_empty[NENG-1]), .trigger_i(trig), .sync_go_i(sync_go),
    .at_sync_o(eng_at_sync[NENG-1]), .phase_o(phase), .modulating_o(modulating), .nco_sel_o(nco_sel)
  );

  // ---- rotation, correction, offset ----
  logic signed [SAMPLE_W-1:0] rot_i [SPC], rot_q [SPC];
  logic [SPC-1:0]             rot_v;

  for (genvar k = 0; k < SPC; k++) begin : g_rot
    cordic_rotator #(.W(SAMPLE_W), .PHASE_W(PHASE_W)) u_rot (
      .clk, .rst, .valid_i(wf_play[0] | wf_play[1]), .x_i(wf_s[0][k]), .y_i(wf_s[1][k]),
      .phase_i(phase[k]), .valid_o(rot_v[k]), .x_o(rot_i[k]), .y_o(rot_q[k])
    );
  end

  iq_correction #(.DAC_W(DAC_W)) u_corr (
    .clk, .rst, .i_i(rot_i), .q_i(rot_q), .m00, .m01, .m10, .m11, .off_a, .off_b,
    .dac_a_o, .dac_b_o
  );

  // ---- marker alignment with the 9-clock analog processing ----
  localparam int unsigned MK_DLY = 9;
  logic [SPC-1:0] mk_pipe [NMK][MK_DLY];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int m = 0; m < NMK; m++) for (int d = 0; d < MK_DLY; d++) mk_pipe[m][d] <= '0;
    end else begin
      for (int m = 0; m < NMK; m++) begin
        mk_pipe[m][0] <= mk_raw[m];
        for (int d = 1; d < MK_DLY; d++) mk_pipe[m][d] <= mk_pipe[m][d-1];
      end
    end
  end
  for (genvar m = 0; m < NMK; m++) begin : g_mko
    assign marker_o[m] = mk_pipe[m][MK_DLY-1];
  end

endmodule
