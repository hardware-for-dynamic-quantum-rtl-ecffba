// aps2_module_tb: one sequencer module with its deep memories modelled.
// The program prefetches a waveform page, then loops: WAIT for the
// trigger, play a 4-clock pulse with marker 1, LOAD_CMP the measurement
// byte from the link, and branch to one of two 2-clock pulses. Each round
// the link carries a random byte and then a trigger symbol. Checks, on the
// DAC words: the pulse amplitudes after rotation at zero phase, the
// correction matrix and the 14-bit scaling; the branch taken for each
// byte; the marker lining up with the analog pulse; a constant trigger to
// output latency; and that jumps, stalls and cache misses were counted.
module aps2_module_tb;
  import aps2_pkg::*;
  localparam int WS = 1024;
  logic clk = 0, rst = 1, lclk = 0, lrst = 1;
  always #2 clk = ~clk;
  always #3 lclk = ~lclk;
  logic run, lv; link_sym_t ls;
  logic imv, imr, idv, wmv, wmr, wdv, trig, serr, fb;
  logic [26:0] ima, pc; logic [63:0] idd; logic [31:0] wma, wml, imiss, jumps, stalls;
  logic [127:0] wdd;
  logic signed [15:0] m00, m01, m10, m11; logic signed [13:0] offa, offb;
  logic signed [13:0] da [SPC], db [SPC]; logic [SPC-1:0] mk [NMK];
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  aps2_module #(.WF_SAMPLES(WS)) dut (.clk, .rst, .run, .link_clk(lclk), .link_rst(lrst),
    .link_valid(lv), .link_sym(ls), .imem_req_valid(imv), .imem_req_addr(ima),
    .imem_req_ready(imr), .imem_rd_valid(idv), .imem_rd_data(idd),
    .wmem_req_valid(wmv), .wmem_req_addr(wma), .wmem_req_len(wml), .wmem_req_ready(wmr),
    .wmem_rd_valid(wdv), .wmem_rd_data(wdd), .m00, .m01, .m10, .m11, .off_a(offa), .off_b(offb),
    .dac_a_o(da), .dac_b_o(db), .marker_o(mk), .trigger_o(trig), .pc_o(pc), .stack_err_o(serr),
    .imiss_count_o(imiss), .jump_count_o(jumps), .stall_count_o(stalls), .wf_fill_busy_o(fb));
  sdram_model #(.DW(64), .DEPTH_LOG2(10), .LINE(128), .LAT(10)) u_imem (.clk, .req_valid(imv),
    .req_addr({5'd0, ima}), .req_len(32'd0), .req_ready(imr), .rd_valid(idv), .rd_data(idd));
  sdram_model #(.DW(128), .DEPTH_LOG2(10), .LINE(128), .LAT(10)) u_wmem (.clk, .req_valid(wmv),
    .req_addr(wma), .req_len(wml), .req_ready(wmr), .rd_valid(wdv), .rd_data(wdd));
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [CMD_W-1:0] wf(int addr, int cnt);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = WF_PLAY; c[47:24] = 24'(cnt); c[16:0] = 17'(addr);
    return c;
  endfunction
  function automatic int level(int w);
    return (w < 16) ? 4000 : (w < 32) ? 8000 : (w < 48) ? -8000 : 0;
  endfunction
  // DAC monitor: collect the non-silent words of each round
  int lv_q [$]; int mk_ok = 0, mk_bad = 0, cyc = 0, trig_cyc = -1, first_cyc = -1;
  always @(posedge clk) begin
    #1; cyc++;
    if (trig) trig_cyc = cyc;
    if (da[0] > 300 || da[0] < -300) begin
      if (lv_q.size() == 0) first_cyc = cyc;
      lv_q.push_back(da[0]);
      for (int k = 1; k < SPC; k++) chk(da[k] == da[0], "lanes of a flat pulse");
      chk(db[0] > -8 && db[0] < 8, "Q output near zero at zero phase");
    end
    if (mk[0] != 0) begin
      if (mk[0] == 4'hF && da[0] > 900 && da[0] < 1100) mk_ok++; else mk_bad++;
    end
  end
  task automatic send_sym(bit k, logic [7:0] d);
    @(negedge lclk); lv = 1; ls = '{k: k, data: d};
    @(negedge lclk); lv = 1; ls = '{k: 1'b1, data: K_IDLE};
  endtask
  initial begin
    int lat0;
    logic [CMD_W-1:0] pfc;
    for (int i = 0; i < 1024; i++) u_imem.mem[i] = mk_instr(OP_GOTO, 0, 56'd1);
    pfc = '0; pfc[55:52] = WF_PREFETCH; pfc[16] = 1'b0; pfc[31:0] = 32'd0;
    u_imem.mem[0]  = mk_instr(OP_WAVEFORM, 4'b0001, pfc);
    u_imem.mem[1]  = mk_instr(OP_WAIT, 0, 0);
    u_imem.mem[2]  = mk_instr(OP_WAVEFORM, 4'b0011, wf(0, 4));
    u_imem.mem[3]  = mk_instr(OP_MARKER, 4'b0001, {MK_PLAY, 4'hF, 24'd4, 23'd0, 1'b1});
    u_imem.mem[4]  = mk_instr(OP_LOAD_CMP, 0, 0);
    u_imem.mem[5]  = mk_instr(OP_CMP, 4'(CMP_EQ), 56'd1);
    u_imem.mem[6]  = mk_instr(OP_GOTO, 4'd1, 56'd9);
    u_imem.mem[7]  = mk_instr(OP_WAVEFORM, 4'b0011, wf(64, 2));
    u_imem.mem[8]  = mk_instr(OP_GOTO, 0, 56'd1);
    u_imem.mem[9]  = mk_instr(OP_WAVEFORM, 4'b0011, wf(128, 2));
    u_imem.mem[10] = mk_instr(OP_GOTO, 0, 56'd1);
    for (int w = 0; w < 1024; w++)
      for (int k = 0; k < SPC; k++) u_wmem.mem[w][k*32 +: 32] = {16'(level(w)), 16'd0};
    m00 = 16384; m01 = 0; m10 = 0; m11 = 16384; offa = 0; offb = 0;
    run = 0; lv = 0; ls = '{k: 1'b1, data: K_IDLE};
    repeat (4) @(posedge lclk); lrst = 0;
    repeat (4) @(posedge clk); rst = 0; run = 1;
    repeat (400) @(posedge clk);
    chk(!fb, "waveform page filled");
    lat0 = -1;
    for (int r = 0; r < 12; r++) begin
      logic [7:0] b;
      b = (r < 2) ? 8'(r) : 8'($urandom_range(0, 1));
      lv_q.delete();
      send_sym(1'b0, b);
      repeat (20) @(posedge clk);
      send_sym(1'b1, K_TRIGGER);
      repeat (60) @(posedge clk);
      chk(lv_q.size() == 6, $sformatf("round %0d: %0d words", r, lv_q.size()));
      if (lv_q.size() == 6) begin
        for (int i = 0; i < 4; i++) chk(lv_q[i] > 995 && lv_q[i] < 1005, $sformatf("pulse 1 level %0d", lv_q[i]));
        for (int i = 4; i < 6; i++)
          chk(b == 1 ? (lv_q[i] < -1995 && lv_q[i] > -2005) : (lv_q[i] > 1995 && lv_q[i] < 2005),
              $sformatf("round %0d byte %0d branch level %0d", r, b, lv_q[i]));
      end
      if (lat0 < 0) lat0 = first_cyc - trig_cyc;
      chk(first_cyc - trig_cyc == lat0, $sformatf("trigger latency %0d vs %0d", first_cyc - trig_cyc, lat0));
    end
    chk(mk_ok == 12 * 4 && mk_bad == 0, $sformatf("marker aligned %0d, misaligned %0d", mk_ok, mk_bad));
    chk(jumps >= 12 && stalls > 0 && imiss > 0 && !serr, $sformatf("jumps %0d stalls %0d misses %0d", jumps, stalls, imiss));
    $display("trigger to DAC latency %0d clocks", lat0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
