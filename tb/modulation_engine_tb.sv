// modulation_engine_tb: checks the phase per sample during MODULATE
// against n*inc + offset + frame with n counted from the last phase reset:
// phase continuity across back-to-back pulses, a frame update landing
// exactly between two pulses, a second NCO that keeps its own phase while not selected, and a
// phase reset after a WAIT/trigger restarting the phase from zero.
module modulation_engine_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic cmd_wr; logic [CMD_W-1:0] cmd; logic full, empty, trig, sgo, at_sync, modu;
  logic [PHASE_W-1:0] ph [SPC]; logic [1:0] sel;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  modulation_engine dut (.clk, .rst, .cmd_wr, .cmd_data(cmd), .cmd_full(full), .cmd_empty(empty),
    .trigger_i(trig), .sync_go_i(sgo), .at_sync_o(at_sync), .phase_o(ph), .modulating_o(modu),
    .nco_sel_o(sel));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [CMD_W-1:0] mc(mod_op_e op, logic [3:0] m, int cnt, int ph);
    logic [CMD_W-1:0] c = '0;
    c[55:52] = op; c[51:48] = m; c[47:24] = 24'(cnt); c[23:0] = 24'(ph);
    return c;
  endfunction
  task automatic send(logic [CMD_W-1:0] c);
    cmd_wr = 1; cmd = c; @(negedge clk); cmd_wr = 0;
  endtask
  // expected phase of word w (since segment start) for each segment
  int seg = 0, word = 0, base0 = 0, words_seen = 0;
  int D, E, F, O;
  bit prev_mod = 0;
  always @(posedge clk) begin
    #1;
    if (modu && seg == 4) words_seen++;
    if (modu && seg < 4) begin
      for (int k = 0; k < SPC; k++) begin
        int n, e;
        n = 4 * word + k;
        case (seg)
          0: e = n * D;                    // NCO 0, frame 0
          1: e = (16 + n) * D + F;         // continues after 4 words, frame F
          2: e = (28 + n) * E + O;         // NCO 1 has tracked since the reset
          default: e = n * D;              // NCO 0 after reset
        endcase
        chk(ph[k] == 24'(e), $sformatf("seg %0d word %0d k %0d got %h exp %h", seg, word, k, ph[k], 24'(e)));
      end
      chk(sel == ((seg == 2) ? 2'd1 : 2'd0), "nco select");
      word++; words_seen++;
      if (seg == 0 && word == 4) begin seg = 1; word = 0; end
      else if (seg == 1 && word == 3) begin seg = 2; word = 0; end
      else if (seg == 2 && word == 2) begin seg = 3; word = 0; end
    end
    prev_mod = modu;
  end
  initial begin
    cmd_wr = 0; cmd = 0; trig = 0; sgo = 0;
    D = $urandom_range(1, 1 << 20); E = $urandom_range(1, 1 << 20);
    F = $urandom_range(1, 1 << 23); O = $urandom_range(1, 1 << 23);
    repeat (3) @(posedge clk); rst <= 0;
    @(negedge clk);
    send(mc(MOD_RESET_PHASE, 4'b0011, 0, 0));
    send(mc(MOD_SET_PHASE_INCREMENT, 4'b0001, 0, D));
    send(mc(MOD_SET_PHASE_INCREMENT, 4'b0010, 0, E));
    send(mc(MOD_SET_PHASE_OFFSET, 4'b0010, 0, O));
    send(mc(MOD_MODULATE, 4'b0000, 4, 0));
    send(mc(MOD_UPDATE_FRAME, 4'b0001, 0, F));
    send(mc(MOD_MODULATE, 4'b0000, 3, 0));
    send(mc(MOD_MODULATE, 4'b0001, 2, 0));
    repeat (20) @(negedge clk);
    chk(words_seen == 9 && seg == 3, $sformatf("words %0d", words_seen));
    send(mc(MOD_WAIT, 0, 0, 0));
    send(mc(MOD_RESET_PHASE, 4'b0001, 0, 0));
    send(mc(MOD_MODULATE, 4'b0000, 3, 0));
    repeat (10) @(negedge clk);
    chk(words_seen == 9, "WAIT holds");
    trig = 1; @(negedge clk); trig = 0;
    repeat (10) @(negedge clk);
    chk(words_seen == 12, $sformatf("after trigger %0d", words_seen));
    send(mc(MOD_SYNC, 0, 0, 0));
    send(mc(MOD_MODULATE, 4'b0000, 1, 0));
    repeat (5) @(negedge clk);
    chk(at_sync && words_seen == 12, "SYNC holds");
    seg = 4;  // the phase has moved on since the reset; only the count is checked
    sgo = 1; @(negedge clk); sgo = 0;
    repeat (5) @(negedge clk);
    chk(empty && !at_sync && words_seen == 13, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
