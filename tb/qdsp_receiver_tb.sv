// qdsp_receiver_tb: two channels with their own IF kernels and thresholds.
// Records of random ADC words: the fast-path values and state bits must
// match sums computed here, 4 clocks after the last ADC word. The
// diagnostic path (slower clock) must produce rec_len/8 baseband samples
// and one baseband decision per record. A final long record must overflow
// the clock-crossing FIFO and raise the overflow flag, which must stay
// low before it.
module qdsp_receiver_tb;
  logic clk = 0, sclk = 0, rst = 1, srst = 1;
  always #2 clk = ~clk;
  always #2.5 sclk = ~sclk;
  localparam int NCH = 2, KL = 64, BL = 16, T = 8;
  logic signed [11:0] adc [4];
  logic adc_v, trig;
  logic [15:0] rec_len, bb_len;
  logic fk_en; logic [0:0] fk_ch; logic [5:0] fk_addr; logic signed [15:0] fk_re, fk_im;
  logic signed [47:0] fthr [NCH], bthr [NCH];
  logic [23:0] pinc [NCH];
  logic cw_en; logic [0:0] cw_ch; logic cw_stage; logic [2:0] cw_addr; logic signed [17:0] cw_data;
  logic bk_en; logic [0:0] bk_ch; logic [3:0] bk_addr; logic signed [15:0] bk_re, bk_im;
  logic [NCH-1:0] fst, fv, bv, bst, bsv;
  logic signed [47:0] fqr [NCH], fqi [NCH], bqr [NCH], bqi [NCH];
  logic signed [15:0] bre [NCH], bim [NCH];
  logic signed [13:0] raw; logic raw_v, ovf;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  qdsp_receiver #(.NCH(NCH), .KERNEL_LEN(KL), .BB_LEN(BL), .TAPS(T)) dut (
    .clk, .rst, .slow_clk(sclk), .slow_rst(srst), .adc_i(adc), .adc_valid_i(adc_v),
    .trig_i(trig), .rec_len, .fk_en, .fk_ch, .fk_addr, .fk_re, .fk_im, .fast_thr(fthr),
    .bb_len, .phase_inc(pinc), .cw_en, .cw_ch, .cw_stage, .cw_addr, .cw_data,
    .bk_en, .bk_ch, .bk_addr, .bk_re, .bk_im, .bb_thr(bthr),
    .fast_state_o(fst), .fast_valid_o(fv), .fast_q_re_o(fqr), .fast_q_im_o(fqi),
    .raw_o(raw), .raw_valid_o(raw_v), .cdc_overflow_o(ovf),
    .bb_re_o(bre), .bb_im_o(bim), .bb_valid_o(bv), .bb_state_o(bst),
    .bb_state_valid_o(bsv), .bb_q_re_o(bqr), .bb_q_im_o(bqi));

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint kr [NCH][KL], ki [NCH][KL];
  int bb_samples = 0, bb_decisions = 0;
  always @(posedge sclk) begin
    if (bv[0]) bb_samples++;
    if (bsv[0]) bb_decisions++;
  end

  initial begin
    adc_v = 0; trig = 0; rec_len = 40; bb_len = 5; fk_en = 0; fk_ch = 0; fk_addr = 0; fk_re = 0; fk_im = 0;
    cw_en = 0; cw_ch = 0; cw_stage = 0; cw_addr = 0; cw_data = 0; bk_en = 0; bk_ch = 0; bk_addr = 0;
    bk_re = 0; bk_im = 0;
    foreach (adc[i]) adc[i] = 0;
    for (int c = 0; c < NCH; c++) begin fthr[c] = 0; bthr[c] = 0; pinc[c] = 24'h200000 * (c + 1); end
    repeat (4) @(posedge clk); rst <= 0; srst <= 0;
    // kernels
    for (int c = 0; c < NCH; c++) for (int i = 0; i < KL; i++) begin
      @(negedge clk); fk_en = 1; fk_ch = 1'(c); fk_addr = 6'(i);
      fk_re = 16'($urandom); fk_im = 16'($urandom);
      kr[c][i] = longint'(fk_re); ki[c][i] = longint'(fk_im);
    end
    @(negedge clk); fk_en = 0;
    for (int c = 0; c < NCH; c++) for (int s = 0; s < 2; s++) for (int i = 0; i < T; i++) begin
      @(negedge sclk); cw_en = 1; cw_ch = 1'(c); cw_stage = s[0]; cw_addr = 3'(i); cw_data = 18'sd16384;
    end
    for (int c = 0; c < NCH; c++) for (int i = 0; i < BL; i++) begin
      @(negedge sclk); cw_en = 0; bk_en = 1; bk_ch = 1'(c); bk_addr = 4'(i); bk_re = 16'sd1000; bk_im = 0;
    end
    @(negedge sclk); bk_en = 0;
    @(negedge clk); adc_v = 1;
    for (int r = 0; r < 6; r++) begin
      longint er [NCH], ei [NCH];
      int lat;
      foreach (er[c]) begin er[c] = 0; ei[c] = 0; end
      fthr[0] = (r % 2) ? 48'sd0 : 48'($signed(32'($urandom)));
      fthr[1] = -fthr[0];
      // the record starts with the ADC word presented with the trigger
      @(negedge clk); trig = 1;
      for (int n = 0; n < 40; n++) begin
        longint s; s = 0;
        foreach (adc[i]) begin adc[i] = 12'($urandom); s += longint'(adc[i]); end
        for (int c = 0; c < NCH; c++) begin
          er[c] += s * kr[c][n]; ei[c] += s * ki[c][n];
        end
        @(negedge clk); trig = 0;
      end
      foreach (adc[i]) adc[i] = 0;
      lat = 1;
      while (!fv[0] && lat < 10) begin @(negedge clk); lat++; end
      chk(lat == 4, $sformatf("fast latency %0d", lat));
      for (int c = 0; c < NCH; c++) begin
        chk(fv[c] && fqr[c] == 48'(er[c]) && fqi[c] == 48'(ei[c]),
            $sformatf("r%0d ch%0d q (%0d,%0d) exp (%0d,%0d)", r, c, fqr[c], fqi[c], er[c], ei[c]));
        chk(fst[c] == (er[c] > longint'(fthr[c])), "fast state");
      end
      repeat (100) @(negedge clk);
      chk(!ovf, "overflow without cause");
    end
    chk(bb_samples == 6 * 5, $sformatf("baseband samples %0d", bb_samples));
    chk(bb_decisions == 6, $sformatf("baseband decisions %0d", bb_decisions));
    // long record: the slow side cannot keep up
    rec_len = 1000;
    @(negedge clk); trig = 1;
    @(negedge clk); trig = 0;
    repeat (1100) @(negedge clk);
    chk(ovf, "overflow not flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
