// nco_tb: the phase of sample n after a sync must be n*inc mod 2^24,
// including across gaps in valid and after a change of increment.
module nco_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic [23:0] inc, ph;
  logic sync, v, vo;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  nco #(.PHASE_W(24)) dut (.clk, .rst, .phase_inc(inc), .sync_i(sync), .valid_i(v), .phase_o(ph), .valid_o(vo));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [23:0] model;
    inc = 24'h123457; sync = 0; v = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int r = 0; r < 3; r++) begin
      inc = 24'($urandom);
      model = 0;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        v = (n == 0) || ($urandom % 5 != 0);
        sync = (n == 0);
        @(posedge clk); #1;
        if (v) begin
          chk(vo && ph == model, $sformatf("r%0d n%0d ph %h exp %h", r, n, ph, model));
          model += inc;
        end else chk(!vo, "valid out without valid in");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
