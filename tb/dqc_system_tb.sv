// dqc_system_tb: end-to-end feedback test of the whole system at its
// default (full) size: two 4-channel readout receivers, the trigger
// distribution module and nine sequencer modules, each with deep-memory
// models.
//
// Setup: each fast kernel integrates one 16-word segment of a 64-word
// record, so the seven reported state bits can be set independently by the
// sign of the ADC words in each segment. Every sequencer runs
//   PREFETCH page 0; loop: SYNC; WAIT; pulse A (4 clocks); LOAD_CMP;
//   CMP byte > T_n; GOTO-if to pulse C (-2000) else pulse B (+2000);
//   pulse C returns to the loop through a far line (an instruction cache miss)
// with a different threshold T_n per module. Each round: the trigger
// generator fires once, then a measurement record with random state bits is
// played into both ADCs. Checks, on every module's DAC words: pulse A
// then the branch pulse chosen by that module's threshold and the measured
// byte. The test also counts each mechanism and fails if any of them never
// happens: triggers received, SYNC releases, taken jumps, dispatch stalls
// (LOAD_CMP waiting for the link), instruction cache misses, distributed
// measurement words, baseband decisions and, with a final over-long record
// into a slow diagnostic clock, the receiver's FIFO overflow.
module dqc_system_tb;
  import aps2_pkg::*;
  localparam int NAPS2 = 9, NADC = 2, NCH = 4, ROUNDS = 8;
  logic qclk = 0, sclk = 0, aclk = 0;
  logic qrst = 1, srst = 1, trst = 1, arst = 1;
  always #2 qclk = ~qclk;
  always #3 sclk = ~sclk;
  always #2 aclk = ~aclk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (2000000) @(posedge qclk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic signed [11:0] adc [NADC][4];
  logic adc_v, mtrig; logic [15:0] rec_len, bb_len;
  logic fk_en [NADC]; logic [1:0] fk_ch; logic [11:0] fk_addr; logic signed [15:0] fk_re, fk_im;
  logic signed [47:0] fthr [NADC][NCH], bthr [NADC][NCH];
  logic [23:0] pinc [NADC][NCH];
  logic cw_en [NADC]; logic [1:0] cw_ch; logic cw_stage; logic [4:0] cw_addr; logic signed [17:0] cw_data;
  logic bk_en [NADC]; logic [1:0] bk_ch; logic [8:0] bk_addr; logic signed [15:0] bk_re, bk_im;
  logic [NCH-1:0] fst [NADC], fv [NADC], bst [NADC], bsv [NADC];
  logic ovf [NADC];
  logic trig_run; logic [31:0] trig_iv, wc, tc;
  link_sym_t crate;
  logic aps_run;
  logic imv [NAPS2], imr [NAPS2], idv [NAPS2], wmv [NAPS2], wmr [NAPS2], wdv [NAPS2];
  logic [26:0] ima [NAPS2], pc [NAPS2]; logic [63:0] idd [NAPS2];
  logic [31:0] wma [NAPS2], wml [NAPS2], jumps [NAPS2], stalls [NAPS2], imiss [NAPS2];
  logic [127:0] wdd [NAPS2];
  logic signed [15:0] m00, m01, m10, m11; logic signed [13:0] offa, offb;
  logic signed [13:0] da [NAPS2][SPC], db [NAPS2][SPC];
  logic [SPC-1:0] mk [NAPS2][NMK]; logic atrig [NAPS2];

  dqc_system dut (
    .qdsp_clk(qclk), .qdsp_rst(qrst), .qdsp_slow_clk(sclk), .qdsp_slow_rst(srst),
    .tdm_clk(qclk), .tdm_rst(trst), .aps_clk(aclk), .aps_rst(arst),
    .adc_i(adc), .adc_valid_i(adc_v), .meas_trig_i(mtrig), .rec_len,
    .fk_en, .fk_ch, .fk_addr, .fk_re, .fk_im, .fast_thr(fthr), .bb_len, .phase_inc(pinc),
    .cw_en, .cw_ch, .cw_stage, .cw_addr, .cw_data, .bk_en, .bk_ch, .bk_addr, .bk_re, .bk_im,
    .bb_thr(bthr), .fast_state_o(fst), .fast_valid_o(fv), .bb_state_o(bst),
    .bb_state_valid_o(bsv), .cdc_overflow_o(ovf),
    .trig_run, .trig_interval(trig_iv), .crate_link_o(crate), .tdm_word_count_o(wc),
    .tdm_trig_count_o(tc),
    .aps_run, .imem_req_valid(imv), .imem_req_addr(ima), .imem_req_ready(imr),
    .imem_rd_valid(idv), .imem_rd_data(idd), .wmem_req_valid(wmv), .wmem_req_addr(wma),
    .wmem_req_len(wml), .wmem_req_ready(wmr), .wmem_rd_valid(wdv), .wmem_rd_data(wdd),
    .m00, .m01, .m10, .m11, .off_a(offa), .off_b(offb), .dac_a_o(da), .dac_b_o(db),
    .marker_o(mk), .aps_trigger_o(atrig), .pc_o(pc), .jump_count_o(jumps),
    .stall_count_o(stalls), .imiss_count_o(imiss)
  );

  for (genvar n = 0; n < NAPS2; n++) begin : g_mem
    sdram_model #(.DW(64), .DEPTH_LOG2(11), .LINE(128), .LAT(12)) u_imem (.clk(aclk),
      .req_valid(imv[n]), .req_addr({5'd0, ima[n]}), .req_len(32'd0), .req_ready(imr[n]),
      .rd_valid(idv[n]), .rd_data(idd[n]));
    sdram_model #(.DW(128), .DEPTH_LOG2(6), .LINE(128), .LAT(12)) u_wmem (.clk(aclk),
      .req_valid(wmv[n]), .req_addr(wma[n]), .req_len(wml[n]), .req_ready(wmr[n]),
      .rd_valid(wdv[n]), .rd_data(wdd[n]));
  end

  // ---- sequencer programs and waveforms ----
  function automatic int thr_of(int n); return 8 + 12 * n; endfunction
  function automatic logic [CMD_W-1:0] wf(int addr, int cnt);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = WF_PLAY; c[47:24] = 24'(cnt); c[16:0] = 17'(addr);
    return c;
  endfunction
  function automatic int level(int w);
    return (w < 16) ? 4000 : (w < 32) ? 8000 : (w < 48) ? -8000 : 0;
  endfunction
  task automatic load_programs();
    logic [CMD_W-1:0] pfc;
    pfc = '0; pfc[55:52] = WF_PREFETCH;
    for (int i = 0; i < 2048; i++) begin
      g_mem[0].u_imem.mem[i] = mk_instr(OP_GOTO, 0, 56'd1);
    end
    g_mem[0].u_imem.mem[0]  = mk_instr(OP_WAVEFORM, 4'b0001, pfc);
    g_mem[0].u_imem.mem[1]  = mk_instr(OP_SYNC, 0, 0);
    g_mem[0].u_imem.mem[2]  = mk_instr(OP_WAIT, 0, 0);
    g_mem[0].u_imem.mem[3]  = mk_instr(OP_WAVEFORM, 4'b0011, wf(0, 4));
    g_mem[0].u_imem.mem[4]  = mk_instr(OP_LOAD_CMP, 0, 0);
    g_mem[0].u_imem.mem[5]  = mk_instr(OP_CMP, 4'(CMP_GT), 56'd0);
    g_mem[0].u_imem.mem[6]  = mk_instr(OP_GOTO, 4'd1, 56'd9);
    g_mem[0].u_imem.mem[7]  = mk_instr(OP_WAVEFORM, 4'b0011, wf(64, 2));
    g_mem[0].u_imem.mem[8]  = mk_instr(OP_GOTO, 0, 56'd1);
    g_mem[0].u_imem.mem[9]  = mk_instr(OP_WAVEFORM, 4'b0011, wf(128, 2));
    g_mem[0].u_imem.mem[10] = mk_instr(OP_GOTO, 0, 56'd1500);
    g_mem[0].u_imem.mem[1500] = mk_instr(OP_GOTO, 0, 56'd1);  // far: misses in the cache
  endtask
  // copy module 0's program to the others with their own thresholds
  for (genvar n = 0; n < NAPS2; n++) begin : g_load
    task automatic copy();
      for (int i = 0; i < 2048; i++) g_mem[n].u_imem.mem[i] = g_mem[0].u_imem.mem[i];
      g_mem[n].u_imem.mem[5] = mk_instr(OP_CMP, 4'(CMP_GT), 56'(thr_of(n)));
      for (int w = 0; w < 64; w++)
        for (int k = 0; k < SPC; k++) g_mem[n].u_wmem.mem[w][k*32 +: 32] = {16'(level(w)), 16'd0};
    endtask
  end

  // ---- monitors ----
  int lv_q [NAPS2][$];
  int trig_seen [NAPS2], syncs = 0, words_seen = 0, bb_dec = 0;
  int last_adc_cyc = 0, branch_cyc [NAPS2], cyc = 0;
  always @(posedge aclk) begin
    #1; cyc++;
    for (int n = 0; n < NAPS2; n++) begin
      if (atrig[n] && !arst) trig_seen[n]++;
      if (da[n][0] > 300 || da[n][0] < -300) begin
        lv_q[n].push_back(da[n][0]);
        if (lv_q[n].size() == 5) branch_cyc[n] = cyc;
      end
    end
    if (dut.g_aps[0].u_aps.sync_go && !arst) syncs++;
  end
  always @(posedge qclk) if (!qrst) begin
    if (bsv[0] != 0) bb_dec++;
  end

  initial begin
    int fb_lat_max;
    fb_lat_max = 0;
    foreach (adc[a, i]) adc[a][i] = 0;
    adc_v = 1; mtrig = 0; rec_len = 64; bb_len = 4;
    fk_en[0] = 0; fk_en[1] = 0; fk_ch = 0; fk_addr = 0; fk_re = 0; fk_im = 0;
    cw_en[0] = 0; cw_en[1] = 0; cw_ch = 0; cw_stage = 0; cw_addr = 0; cw_data = 0;
    bk_en[0] = 0; bk_en[1] = 0; bk_ch = 0; bk_addr = 0; bk_re = 0; bk_im = 0;
    foreach (fthr[a, c]) begin fthr[a][c] = 0; bthr[a][c] = 0; pinc[a][c] = 24'(c * 24'h100000); end
    trig_run = 0; trig_iv = 32'd100000; aps_run = 0;
    m00 = 16384; m01 = 0; m10 = 0; m11 = 16384; offa = 0; offb = 0;
    foreach (trig_seen[n]) begin trig_seen[n] = 0; branch_cyc[n] = 0; end
    load_programs();
    g_load[0].copy(); g_load[1].copy(); g_load[2].copy(); g_load[3].copy(); g_load[4].copy();
    g_load[5].copy(); g_load[6].copy(); g_load[7].copy(); g_load[8].copy();
    repeat (4) @(posedge qclk); qrst = 0; trst = 0; arst = 0;
    repeat (4) @(posedge sclk); srst = 0;
    // kernels: channel c integrates words 16c..16c+15
    for (int a = 0; a < NADC; a++)
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < 64; i++) begin
          @(negedge qclk); fk_en[a] = 1; fk_ch = 2'(c); fk_addr = 12'(i);
          fk_re = (i / 16 == c) ? 16'sd1 : 16'sd0; fk_im = 0;
          @(negedge qclk); fk_en[a] = 0;
        end
    // baseband: pass-through first tap, flat kernel
    for (int a = 0; a < NADC; a++)
      for (int c = 0; c < NCH; c++) begin
        for (int s = 0; s < 2; s++) for (int i = 0; i < 24; i++) begin
          @(negedge sclk); cw_en[a] = 1; cw_ch = 2'(c); cw_stage = s[0]; cw_addr = 5'(i);
          cw_data = (i == 0) ? 18'sd16384 : 18'sd0;
        end
        @(negedge sclk); cw_en[a] = 0;
        for (int i = 0; i < 16; i++) begin
          @(negedge sclk); bk_en[a] = 1; bk_ch = 2'(c); bk_addr = 9'(i); bk_re = 16'sd1; bk_im = 0;
        end
        @(negedge sclk); bk_en[a] = 0;
      end
    @(negedge aclk); aps_run = 1;
    // waveform pages: 16k words each at one word per clock
    repeat (17000) @(posedge aclk);
    for (int r = 0; r < ROUNDS; r++) begin
      logic [6:0] bits;
      bits = (r == 0) ? 7'h00 : (r == 1) ? 7'h7f : 7'($urandom);
      foreach (lv_q[n]) lv_q[n].delete();
      // system trigger: one pulse
      @(negedge qclk); trig_run = 1; @(negedge qclk); trig_run = 0;
      repeat (30) @(negedge qclk);
      // measurement record, starting with the trigger
      mtrig = 1;
      for (int i = 0; i < 64; i++) begin
        for (int a = 0; a < NADC; a++) begin
          int b;
          b = a * NCH + i / 16;
          for (int l = 0; l < 4; l++)
            adc[a][l] = (b < 7 && bits[b]) ? 12'sd500 : -12'sd500;
        end
        @(negedge qclk); mtrig = 0;
      end
      foreach (adc[a, l]) adc[a][l] = 0;
      last_adc_cyc = cyc;
      repeat (150) @(negedge aclk);
      for (int n = 0; n < NAPS2; n++) begin
        bit hi;
        hi = int'(bits) > thr_of(n);
        chk(lv_q[n].size() == 6, $sformatf("round %0d module %0d: %0d pulse words", r, n, lv_q[n].size()));
        if (lv_q[n].size() == 6) begin
          chk(lv_q[n][0] > 995 && lv_q[n][0] < 1005, "pulse A level");
          chk(hi ? (lv_q[n][4] < -1995 && lv_q[n][4] > -2005) : (lv_q[n][4] > 1995 && lv_q[n][4] < 2005),
              $sformatf("round %0d module %0d byte %0d thr %0d level %0d", r, n, bits, thr_of(n), lv_q[n][4]));
          if (branch_cyc[n] - last_adc_cyc > fb_lat_max) fb_lat_max = branch_cyc[n] - last_adc_cyc;
        end
      end
      chk(fst[0] == bits[3:0] && fst[1][2:0] == bits[6:4], $sformatf("state bits %h", {fst[1], fst[0]}));
      repeat (500) @(negedge aclk);  // let the far line fetch finish before the next trigger
    end
    // over-long record: the diagnostic path's FIFO cannot keep up
    chk(!ovf[0], "no overflow in normal records");
    rec_len = 3000;
    @(negedge qclk); mtrig = 1; @(negedge qclk); mtrig = 0;
    repeat (3100) @(negedge qclk);
    // mechanism counters
    begin
      int tr_min, j_min, s_min, m_min;
      tr_min = 1 << 30; j_min = 1 << 30; s_min = 1 << 30; m_min = 1 << 30;
      for (int n = 0; n < NAPS2; n++) begin
        if (trig_seen[n] < tr_min) tr_min = trig_seen[n];
        if (int'(jumps[n]) < j_min) j_min = int'(jumps[n]);
        if (int'(stalls[n]) < s_min) s_min = int'(stalls[n]);
        if (int'(imiss[n]) < m_min) m_min = int'(imiss[n]);
      end
      $display("mechanisms: triggers %0d, syncs %0d, jumps %0d, stalls %0d, icache misses %0d, tdm words %0d, baseband decisions %0d, overflow %0d",
               tr_min, syncs, j_min, s_min, m_min, wc, bb_dec, ovf[0]);
      $display("feedback latency, last ADC word to branch pulse at the DAC: %0d clocks", fb_lat_max);
      chk(tr_min == ROUNDS, "trigger reached every module each round");
      chk(syncs >= ROUNDS, "sync");
      chk(j_min >= ROUNDS, "jump");
      chk(s_min > 0, "stall");
      chk(m_min > 0, "instruction cache miss");
      chk(int'(wc) >= ROUNDS, "measurement words distributed");
      chk(bb_dec > 0, "baseband decisions");
      chk(ovf[0], "overflow");
      chk(int'(tc) == ROUNDS, "trigger count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
