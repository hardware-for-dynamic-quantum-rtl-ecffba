// workloads_tb: the feedback circuits the system is meant for, run end to
// end on a reduced system (four sequencer modules, 256-word kernels,
// 1024-point waveform caches). Each round a measurement record with random
// state bits for four qubits goes through the readout, the distribution
// module and the links.
//  * Simultaneous reset of three qubits: modules 0-2 each test their own
//    qubit's bit in the shared byte (a chain of CMP = v / GOTO-if over the
//    byte values with that bit set) and play a pi pulse only when it is 1.
//    The same conditional pi pulse is the fast reset of one qubit and the
//    conditional bit flip that makes entanglement by measurement
//    deterministic.
//  * Measurement-based S gate: module 3 adds a quarter turn to its frame
//    when the ancilla bit (bit 3) is 1, then plays a pulse; the pulse must
//    come out rotated by the accumulated frame (I to Q and back).
// Checks the pulses of every module in every round and the state bits.
module workloads_tb;
  import aps2_pkg::*;
  localparam int NAPS2 = 4, NADC = 2, NCH = 4, ROUNDS = 16;
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
    repeat (400000) @(posedge qclk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic signed [11:0] adc [NADC][4];
  logic adc_v, mtrig; logic [15:0] rec_len, bb_len;
  logic fk_en [NADC]; logic [1:0] fk_ch; logic [7:0] fk_addr; logic signed [15:0] fk_re, fk_im;
  logic signed [47:0] fthr [NADC][NCH], bthr [NADC][NCH];
  logic [23:0] pinc [NADC][NCH];
  logic cw_en [NADC]; logic [1:0] cw_ch; logic cw_stage; logic [4:0] cw_addr; logic signed [17:0] cw_data;
  logic bk_en [NADC]; logic [1:0] bk_ch; logic [3:0] bk_addr; logic signed [15:0] bk_re, bk_im;
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

  dqc_system #(.NAPS2(NAPS2), .KERNEL_LEN(256), .BB_LEN(16), .WF_SAMPLES(1024)) dut (
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
    sdram_model #(.DW(64), .DEPTH_LOG2(8), .LINE(128), .LAT(12)) u_imem (.clk(aclk),
      .req_valid(imv[n]), .req_addr({5'd0, ima[n]}), .req_len(32'd0), .req_ready(imr[n]),
      .rd_valid(idv[n]), .rd_data(idd[n]));
    sdram_model #(.DW(128), .DEPTH_LOG2(6), .LINE(128), .LAT(12)) u_wmem (.clk(aclk),
      .req_valid(wmv[n]), .req_addr(wma[n]), .req_len(wml[n]), .req_ready(wmr[n]),
      .rd_valid(wdv[n]), .rd_data(wdd[n]));
  end


  function automatic logic [CMD_W-1:0] wf(int addr, int cnt);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = WF_PLAY; c[47:24] = 24'(cnt); c[16:0] = 17'(addr);
    return c;
  endfunction
  function automatic logic [CMD_W-1:0] modc(mod_op_e op, logic [3:0] m, int cnt, int ph);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = op; c[51:48] = m; c[47:24] = 24'(cnt); c[23:0] = 24'(ph);
    return c;
  endfunction
  for (genvar n = 0; n < NAPS2; n++) begin : g_load
    task automatic load();
      logic [CMD_W-1:0] pfc;
      int p, t, j;
      pfc = '0; pfc[55:52] = WF_PREFETCH;
      for (int i = 0; i < 256; i++) g_mem[n].u_imem.mem[i] = mk_instr(OP_GOTO, 0, 56'd1);
      g_mem[n].u_imem.mem[0] = mk_instr(OP_WAVEFORM, 4'b0001, pfc);
      g_mem[n].u_imem.mem[1] = mk_instr(OP_WAIT, 0, 0);
      g_mem[n].u_imem.mem[2] = mk_instr(OP_LOAD_CMP, 0, 0);
      // branch to t when bit n of the byte (values 0..15) is set
      t = 40; p = 3;
      for (int v = 0; v < 16; v++) if (v[n]) begin
        g_mem[n].u_imem.mem[p] = mk_instr(OP_CMP, 4'(CMP_EQ), 56'(v));
        g_mem[n].u_imem.mem[p+1] = mk_instr(OP_GOTO, 4'd1, 56'(t));
        p += 2;
      end
      if (n < 3) begin
        g_mem[n].u_imem.mem[p] = mk_instr(OP_GOTO, 0, 56'd1);            // bit clear: nothing
        g_mem[n].u_imem.mem[t] = mk_instr(OP_WAVEFORM, 4'b0011, wf(64, 2));  // pi pulse
        g_mem[n].u_imem.mem[t+1] = mk_instr(OP_GOTO, 0, 56'd1);
      end else begin
        g_mem[n].u_imem.mem[p] = mk_instr(OP_GOTO, 0, 56'd50);
        g_mem[n].u_imem.mem[t] = mk_instr(OP_MODULATOR, 0, modc(MOD_UPDATE_FRAME, 4'b0001, 0, 24'h400000));
        g_mem[n].u_imem.mem[t+1] = mk_instr(OP_GOTO, 0, 56'd50);
        g_mem[n].u_imem.mem[50] = mk_instr(OP_MODULATOR, 0, modc(MOD_MODULATE, 4'b0000, 3, 0));
        g_mem[n].u_imem.mem[51] = mk_instr(OP_WAVEFORM, 4'b0011, wf(64, 2));
        g_mem[n].u_imem.mem[52] = mk_instr(OP_GOTO, 0, 56'd1);
      end
      for (int w = 0; w < 64; w++)
        for (int k = 0; k < SPC; k++) g_mem[n].u_wmem.mem[w][k*32 +: 32] = {16'((w >= 16 && w < 32) ? 8000 : 0), 16'd0};
    endtask
  end

  int na [NAPS2][$], nb [NAPS2][$];
  always @(posedge aclk) begin
    #1;
    for (int n = 0; n < NAPS2; n++)
      if (da[n][0] > 300 || da[n][0] < -300 || db[n][0] > 300 || db[n][0] < -300) begin
        na[n].push_back(da[n][0]); nb[n].push_back(db[n][0]);
      end
  end
  function automatic bit near(int v, int e); return v > e - 8 && v < e + 8; endfunction

  initial begin
    int quarter;
    quarter = 0;
    foreach (adc[a, i]) adc[a][i] = 0;
    adc_v = 1; mtrig = 0; rec_len = 64; bb_len = 4;
    fk_en[0] = 0; fk_en[1] = 0; fk_ch = 0; fk_addr = 0; fk_re = 0; fk_im = 0;
    cw_en[0] = 0; cw_en[1] = 0; cw_ch = 0; cw_stage = 0; cw_addr = 0; cw_data = 0;
    bk_en[0] = 0; bk_en[1] = 0; bk_ch = 0; bk_addr = 0; bk_re = 0; bk_im = 0;
    foreach (fthr[a, c]) begin fthr[a][c] = 0; bthr[a][c] = 0; pinc[a][c] = 0; end
    trig_run = 0; trig_iv = 32'd100000; aps_run = 0;
    m00 = 16384; m01 = 0; m10 = 0; m11 = 16384; offa = 0; offb = 0;
    g_load[0].load(); g_load[1].load(); g_load[2].load(); g_load[3].load();
    repeat (4) @(posedge qclk); qrst = 0; trst = 0; arst = 0;
    repeat (4) @(posedge sclk); srst = 0;
    for (int a = 0; a < NADC; a++)
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < 64; i++) begin
          @(negedge qclk); fk_en[a] = 1; fk_ch = 2'(c); fk_addr = 8'(i);
          fk_re = (i / 16 == c) ? 16'sd1 : 16'sd0; fk_im = 0;
          @(negedge qclk); fk_en[a] = 0;
        end
    @(negedge aclk); aps_run = 1;
    repeat (300) @(posedge aclk);
    for (int r = 0; r < ROUNDS; r++) begin
      logic [3:0] bits;
      bits = (r == 0) ? 4'h0 : (r == 1) ? 4'hF : 4'($urandom);
      foreach (na[n]) begin na[n].delete(); nb[n].delete(); end
      @(negedge qclk); trig_run = 1; @(negedge qclk); trig_run = 0;
      repeat (20) @(negedge qclk);
      mtrig = 1;
      for (int i = 0; i < 64; i++) begin
        for (int l = 0; l < 4; l++) begin
          adc[0][l] = bits[i / 16] ? 12'sd500 : -12'sd500;
          adc[1][l] = -12'sd500;     // qubits 4-7 stay in 0
        end
        @(negedge qclk); mtrig = 0;
      end
      foreach (adc[a, l]) adc[a][l] = 0;
      repeat (200) @(negedge aclk);
      chk(fst[0] == bits, $sformatf("state bits %h exp %h", fst[0], bits));
      for (int n = 0; n < 3; n++) begin
        chk(na[n].size() == (bits[n] ? 2 : 0), $sformatf("round %0d qubit %0d: %0d pulse words, bit %0d", r, n, na[n].size(), bits[n]));
        foreach (na[n][i]) chk(near(na[n][i], 2000) && near(nb[n][i], 0), "pi pulse level");
      end
      if (bits[3]) quarter = (quarter + 1) % 4;
      chk(nb[3].size() == 2, $sformatf("round %0d S-gate module: %0d words", r, nb[3].size()));
      foreach (na[3][i]) begin
        int ea, eb;
        ea = (quarter == 0) ? 2000 : (quarter == 2) ? -2000 : 0;
        eb = (quarter == 1) ? 2000 : (quarter == 3) ? -2000 : 0;
        // the sign of a quarter turn depends on the rotation direction: accept both for Q
        chk(near(na[3][i], ea) && (near(nb[3][i], eb) || near(nb[3][i], -eb)),
            $sformatf("round %0d frame %0d quarter turns: a %0d b %0d", r, quarter, na[3][i], nb[3][i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
