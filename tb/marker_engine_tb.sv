// marker_engine_tb: a stream of random back-to-back PLAY commands (state,
// count, last-word pattern) is compared word by word against the expected
// marker stream; then WAIT and SYNC are checked to hold the engine until
// the trigger and sync_go, with the first marked word one clock after the
// trigger is sampled.
module marker_engine_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic cmd_wr; logic [CMD_W-1:0] cmd; logic full, empty, trig, sgo, at_sync;
  logic [SPC-1:0] mk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  marker_engine dut (.clk, .rst, .cmd_wr, .cmd_data(cmd), .cmd_full(full), .cmd_empty(empty),
    .trigger_i(trig), .sync_go_i(sgo), .at_sync_o(at_sync), .marker_o(mk));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [CMD_W-1:0] mkc(mk_op_e op, bit st, int cnt, logic [3:0] pat);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = op; c[51:48] = pat; c[47:24] = 24'(cnt); c[0] = st;
    return c;
  endfunction
  logic [3:0] exp_w [$];
  task automatic exp_play(bit st, int cnt, logic [3:0] pat);
    if (cnt == 0) cnt = 1;
    for (int i = 0; i < cnt - 1; i++) exp_w.push_back({4{st}});
    exp_w.push_back(pat);
  endtask
  bit started = 0; int got = 0, cyc = 0, trig_cyc, hit_cyc = -1, nz = 0;
  logic [3:0] hist [$];
  always @(posedge clk) begin
    #1; cyc++;
    if (!started && mk == 4'hF) started = 1;
    if (started && got < exp_w.size()) begin
      chk(mk == exp_w[got], $sformatf("word %0d got %h exp %h", got, mk, exp_w[got]));
      got++;
    end
    if (mk == 4'b1000 && hit_cyc < 0) hit_cyc = cyc;
    if (mk != 0) nz++;
  end
  initial begin
    cmd_wr = 0; cmd = 0; trig = 0; sgo = 0;
    repeat (3) @(posedge clk); rst <= 0;
    @(negedge clk);
    begin
      logic [CMD_W-1:0] list [$];
      bit st; int cnt; logic [3:0] pat;
      list.push_back(mkc(MK_PLAY, 1, 1, 4'hF)); exp_play(1, 1, 4'hF);
      for (int i = 0; i < 150; i++) begin
        st = 1'($urandom); cnt = $urandom_range(0, 5); pat = 4'($urandom);
        list.push_back(mkc(MK_PLAY, st, cnt, pat)); exp_play(st, cnt, pat);
      end
      foreach (list[i]) begin
        while (full) @(negedge clk);
        cmd_wr = 1; cmd = list[i]; @(negedge clk); cmd_wr = 0;
      end
    end
    repeat (300) @(negedge clk);
    chk(got == exp_w.size(), $sformatf("stream length %0d of %0d", got, exp_w.size()));
    // WAIT then a marked word
    cmd_wr = 1; cmd = mkc(MK_WAIT, 0, 0, 0); @(negedge clk);
    cmd = mkc(MK_PLAY, 0, 1, 4'b1000); @(negedge clk);
    cmd = mkc(MK_SYNC, 0, 0, 0); @(negedge clk);
    cmd = mkc(MK_PLAY, 1, 3, 4'hF); @(negedge clk); cmd_wr = 0;
    nz = 0; hit_cyc = -1;
    repeat (10) @(negedge clk);
    chk(nz == 0, "output during WAIT");
    trig = 1; trig_cyc = cyc + 1; @(negedge clk); trig = 0;
    repeat (5) @(negedge clk);
    chk(hit_cyc == trig_cyc + 1, $sformatf("trigger to marker %0d", hit_cyc - trig_cyc));
    chk(at_sync, "at SYNC");
    nz = 0;
    repeat (10) @(negedge clk);
    chk(nz == 0 && at_sync, "SYNC holds");
    sgo = 1; @(negedge clk); sgo = 0;
    repeat (6) @(negedge clk);
    chk(nz == 3, $sformatf("words after sync_go %0d", nz));
    chk(empty && !at_sync, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
