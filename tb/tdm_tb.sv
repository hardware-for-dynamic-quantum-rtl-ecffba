// tdm_tb: the whole trigger distribution module. Random measurement words
// with strobes and a running trigger generator; every one of the ten links
// must carry each word once, in order, three clocks after the pins (or one
// later when it meets a trigger), and one trigger symbol per generator pulse.
module tdm_tb;
  import aps2_pkg::*;
  localparam int NOUT = 9;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic [7:0] meas; logic run; logic [31:0] iv, wc, tc;
  link_sym_t lk [NOUT+1]; logic lv [NOUT+1]; logic [NOUT:0] drop;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  tdm dut (.clk, .rst, .meas_i(meas), .trig_run(run), .trig_interval(iv), .link_o(lk),
    .link_valid_o(lv), .link_dropped_o(drop), .word_count_o(wc), .trig_count_o(tc));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] sent [$];
  int got [NOUT+1], trigs [NOUT+1], cyc = 0, strobe_cyc = 0, max_lat = 0;
  always @(posedge clk) begin
    #1; cyc++;
    for (int l = 0; l <= NOUT; l++) if (lv[l]) begin
      if (lk[l].k && lk[l].data == K_TRIGGER) trigs[l]++;
      else if (!lk[l].k) begin
        chk(got[l] < sent.size() && lk[l].data == sent[got[l]], $sformatf("link %0d word %0d", l, got[l]));
        if (l == 0 && cyc - strobe_cyc > max_lat) max_lat = cyc - strobe_cyc;
        got[l]++;
      end
    end
  end
  initial begin
    meas = 0; run = 0; iv = 7;
    foreach (got[l]) begin got[l] = 0; trigs[l] = 0; end
    repeat (3) @(posedge clk); rst <= 0;
    @(negedge clk); run = 1;
    for (int n = 0; n < 300; n++) begin
      logic [6:0] d;
      d = 7'($urandom);
      meas = {1'b0, d};
      repeat ($urandom_range(2, 4)) @(negedge clk);
      meas = {1'b1, d}; sent.push_back({1'b0, d}); strobe_cyc = cyc;
      repeat ($urandom_range(2, 4)) @(negedge clk);
    end
    meas = 0; run = 0;
    repeat (10) @(negedge clk);
    for (int l = 0; l <= NOUT; l++)
      chk(got[l] == 300 && trigs[l] == int'(tc), $sformatf("link %0d words %0d trigs %0d/%0d", l, got[l], trigs[l], tc));
    chk(wc == 300 && drop == '0, "word count, no drops");
    chk(max_lat == 4, $sformatf("strobe to link, worst case %0d", max_lat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
