// link_rx_tb: symbols in a link clock unrelated to the sequencer clock;
// random mixes of trigger, data, idle and other K symbols. Checks that each
// trigger symbol gives one trigger pulse, that data bytes come out in order
// and complete, that other symbols are dropped, and that the queue reports
// overflow when the sequencer does not read it.
module link_rx_tb;
  import aps2_pkg::*;
  logic lclk = 0, clk = 0, lrst = 1, rst = 1;
  always #2 clk = ~clk;
  always #3 lclk = ~lclk;
  logic sv, trig, cv, pop, ovf; link_sym_t sym; logic [7:0] cd;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  link_rx dut (.link_clk(lclk), .link_rst(lrst), .sym_valid(sv), .sym, .clk, .rst,
    .trigger_o(trig), .cmp_valid_o(cv), .cmp_data_o(cd), .cmp_pop_i(pop), .overflow_o(ovf));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] exp_q [$]; int trig_sent = 0, trig_seen = 0, data_seen = 0;
  bit reading = 1;
  assign pop = cv && reading && !rst;
  always @(posedge clk) begin
    if (trig && !rst) trig_seen++;
    if (pop) begin
      chk(exp_q.size() > 0 && cd == exp_q[0], $sformatf("data %h t=%0t n=%0d", cd, $time, data_seen));
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      data_seen++;
    end
  end
  initial begin
    sv = 0; sym = '{k: 1'b1, data: K_IDLE};
    repeat (4) @(posedge lclk); lrst <= 0;
    repeat (4) @(posedge clk); rst <= 0;
    repeat (4) @(posedge lclk);
    for (int n = 0; n < 3000; n++) begin
      @(negedge lclk);
      sv = ($urandom_range(0, 5) != 0);
      case ($urandom_range(0, 5))
        0: begin sym = '{k: 1'b1, data: K_TRIGGER}; if (sv) trig_sent++; end
        1, 2: begin sym = '{k: 1'b0, data: 8'($urandom)}; if (sv) exp_q.push_back(sym.data); end
        3: sym = '{k: 1'b1, data: 8'hF7};
        default: sym = '{k: 1'b1, data: K_IDLE};
      endcase
      // keep the trigger spacing so each gives a distinct pulse
      if (sym == '{k: 1'b1, data: K_TRIGGER} && sv) begin @(negedge lclk); sym = '{k: 1'b1, data: K_IDLE}; end
    end
    @(negedge lclk); sv = 0;
    repeat (40) @(posedge clk);
    chk(trig_seen == trig_sent && trig_sent > 100, $sformatf("triggers %0d of %0d", trig_seen, trig_sent));
    chk(exp_q.size() == 0 && data_seen > 500, $sformatf("data left %0d seen %0d", exp_q.size(), data_seen));
    chk(!ovf, "no overflow while read");
    // stop reading: overflow
    reading = 0;
    for (int n = 0; n < 40; n++) begin
      @(negedge lclk); sv = 1; sym = '{k: 1'b0, data: 8'(n)};
    end
    @(negedge lclk); sv = 0;
    repeat (40) @(posedge clk);
    chk(ovf, "overflow reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
