// tdm_steering_tb: random measurement patterns with strobe pulses of random
// width and spacing; each rising strobe edge must give exactly one word
// {0, meas[6:0]} two clocks after the pins, and the word counter must match.
module tdm_steering_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic [7:0] meas; logic wv; logic [7:0] w; logic [31:0] wc;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  tdm_steering dut (.clk, .rst, .meas_i(meas), .word_valid_o(wv), .word_o(w), .word_count_o(wc));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] exp_q [$]; int exp_cyc [$]; int cyc = 0, words = 0;
  always @(posedge clk) begin
    #1; cyc++;
    if (wv) begin
      chk(exp_q.size() > 0, "unexpected word");
      if (exp_q.size() > 0) begin
        chk(w == exp_q[0] && cyc == exp_cyc[0], $sformatf("word %h exp %h cyc %0d exp %0d", w, exp_q[0], cyc, exp_cyc[0]));
        void'(exp_q.pop_front()); void'(exp_cyc.pop_front());
      end
      words++;
    end
  end
  initial begin
    meas = 0;
    repeat (3) @(posedge clk); rst <= 0;
    @(negedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [6:0] d;
      d = 7'($urandom);
      meas = {1'b0, d};
      repeat ($urandom_range(1, 3)) @(negedge clk);
      meas = {1'b1, d};
      exp_q.push_back({1'b0, d}); exp_cyc.push_back(cyc + 2);
      repeat ($urandom_range(1, 4)) @(negedge clk);
    end
    meas = 0;
    repeat (6) @(negedge clk);
    chk(exp_q.size() == 0 && words == 200 && wc == 200, $sformatf("words %0d count %0d", words, wc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
