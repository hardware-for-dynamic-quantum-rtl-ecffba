// link_tx_tb: random triggers and data bytes; checks symbol priority
// (trigger, then data, then idle), the one-clock latency, that a byte
// colliding with a trigger goes out the next clock, and the dropped flag
// when two bytes collide with back-to-back use of the link.
module link_tx_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic trig, dv, sv, drop; logic [7:0] d; link_sym_t sym;
  int checks = 0, failures = 0, collisions = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  link_tx dut (.clk, .rst, .trig_i(trig), .data_valid_i(dv), .data_i(d), .sym_o(sym),
    .sym_valid_o(sv), .dropped_o(drop));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit hold; logic [7:0] hd;
    link_sym_t e;
    trig = 0; dv = 0; d = 0; hold = 0; hd = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      trig = ($urandom_range(0, 3) == 0);
      // never offer a byte while one is held, so nothing is dropped here
      dv = !hold && ($urandom_range(0, 2) == 0); d = 8'($urandom);
      if (trig) begin
        e = '{k: 1'b1, data: K_TRIGGER};
        if (dv) begin hold = 1; hd = d; collisions++; end
      end else if (hold) begin
        e = '{k: 1'b0, data: hd}; hold = dv; hd = d;
      end else if (dv) e = '{k: 1'b0, data: d};
      else e = '{k: 1'b1, data: K_IDLE};
      @(posedge clk); #1;
      chk(sv && sym == e, $sformatf("n=%0d sym %h exp %h", n, sym, e));
    end
    chk(!drop && collisions > 10, "no drops, collisions exercised");
    // two bytes while a trigger holds the link: the first is lost
    @(negedge clk); trig = 1; dv = 1; d = 8'h11;
    @(negedge clk); trig = 1; dv = 1; d = 8'h22;
    @(negedge clk); trig = 0; dv = 0;
    @(posedge clk); #1;
    chk(drop && sym == '{k: 1'b0, data: 8'h22}, "dropped flag and newest byte kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
