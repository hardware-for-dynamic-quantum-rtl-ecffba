// waveform_engine_tb: two engines (I and Q parts) run the same command
// list against a behavioural waveform store whose point at sample address a
// is (3a, -a). Checks: back-to-back PLAYs without gaps, the two-clock
// minimum, time-amplitude hold, silence during WAIT and output 1 clock
// after the trigger, SYNC holding until sync_go, and the PREFETCH request.
module waveform_engine_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  localparam int WA = 6;
  logic cmd_wr; logic [CMD_W-1:0] cmd; logic full [2], empty [2];
  logic trig, sgo, at_sync [2];
  logic rd_en [2]; logic [WA-1:0] rd_addr [2]; logic [127:0] rd_data [2];
  logic pf_v [2], pf_page [2]; logic [31:0] pf_src [2];
  logic signed [15:0] smp [2][4]; logic play [2];
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  for (genvar e = 0; e < 2; e++) begin : g
    waveform_engine #(.CHANNEL(e), .WADDR_W(WA)) dut (.clk, .rst, .cmd_wr, .cmd_data(cmd),
      .cmd_full(full[e]), .cmd_empty(empty[e]), .trigger_i(trig), .sync_go_i(sgo), .at_sync_o(at_sync[e]),
      .rd_en_o(rd_en[e]), .rd_addr_o(rd_addr[e]), .rd_data_i(rd_data[e]), .pf_valid_o(pf_v[e]),
      .pf_page_o(pf_page[e]), .pf_src_o(pf_src[e]), .sample_o(smp[e]), .playing_o(play[e]));
    // store model, one clock read latency
    always_ff @(posedge clk) if (rd_en[e]) for (int k = 0; k < 4; k++) begin
      automatic int a = int'(rd_addr[e]) * 4 + k;
      rd_data[e][k*32 +: 32] <= {16'(3 * a), 16'(-a)};
    end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [CMD_W-1:0] play_c(int addr, int cnt, bit ta);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = WF_PLAY; c[51] = ta; c[47:24] = 24'(cnt); c[16:0] = 17'(addr);
    return c;
  endfunction
  // expected played words: sample addresses of the 4 lanes
  int exp_a [$];
  task automatic exp_play(int addr, int cnt, bit ta);
    if (cnt < 2) cnt = 2;
    for (int w = 0; w < cnt; w++) for (int k = 0; k < 4; k++)
      exp_a.push_back(ta ? addr : addr + 4 * w + k);
  endtask
  int got = 0, cyc = 0, first_cyc = -1, trig_cyc = -1, after_trig = -1, pf_seen = 0;
  int play_cycles [$];
  always @(posedge clk) begin
    #1; cyc++;
    if (play[0]) begin
      play_cycles.push_back(cyc);
      for (int k = 0; k < 4; k++) begin
        chk(got < exp_a.size(), "too many samples");
        chk(smp[0][k] == 16'(3 * exp_a[got]) && smp[1][k] == 16'(-exp_a[got]),
            $sformatf("sample %0d got (%0d,%0d) addr %0d", got, smp[0][k], smp[1][k], exp_a[got]));
        got++;
      end
    end else chk(smp[0][0] == 0 && smp[1][3] == 0, "output not zero while idle");
    if (pf_v[0]) begin pf_seen++; chk(pf_page[0] == 1 && pf_src[0][15:0] == 16'h1234, "prefetch fields"); end
    chk(!pf_v[1], "engine 1 must not prefetch");
  end
  initial begin
    cmd_wr = 0; cmd = 0; trig = 0; sgo = 0;
    repeat (3) @(posedge clk); rst <= 0;
    @(negedge clk);
    begin
      logic [CMD_W-1:0] list [$];
      logic [CMD_W-1:0] c;
      list.push_back(play_c(8, 3, 0));  exp_play(8, 3, 0);
      list.push_back(play_c(5, 2, 1));  exp_play(5, 2, 1);
      list.push_back(play_c(0, 1, 0));  exp_play(0, 1, 0);
      c = '0; c[55:52] = WF_WAIT; list.push_back(c);
      list.push_back(play_c(20, 2, 0)); exp_play(20, 2, 0);
      c = '0; c[55:52] = WF_SYNC; list.push_back(c);
      c = '0; c[55:52] = WF_PREFETCH; c[16] = 1; c[15:0] = 16'h1234; list.push_back(c);
      list.push_back(play_c(4, 2, 0));  exp_play(4, 2, 0);
      foreach (list[i]) begin cmd_wr = 1; cmd = list[i]; @(negedge clk); end
      cmd_wr = 0;
    end
    repeat (20) @(negedge clk);
    chk(play_cycles.size() == 7, $sformatf("words before WAIT %0d", play_cycles.size()));
    for (int i = 1; i < play_cycles.size(); i++) chk(play_cycles[i] == play_cycles[i-1] + 1, "gap between pulses");
    trig = 1; trig_cyc = cyc + 1; @(negedge clk); trig = 0;
    repeat (10) @(negedge clk);
    chk(play_cycles.size() == 9, "PLAY after WAIT");
    chk(play_cycles[7] == trig_cyc + 1, $sformatf("trigger to output %0d", play_cycles[7] - trig_cyc));
    chk(at_sync[0] && at_sync[1], "engines at SYNC");
    repeat (5) @(negedge clk);
    chk(play_cycles.size() == 9 && pf_seen == 0, "SYNC did not hold");
    sgo = 1; @(negedge clk); sgo = 0;
    repeat (10) @(negedge clk);
    chk(pf_seen == 1, "prefetch issued once");
    chk(got == exp_a.size(), $sformatf("samples %0d of %0d", got, exp_a.size()));
    chk(empty[0] && !full[0], "queue drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
