// trigger_generator_tb: random intervals; checks the first trigger the clock
// after run rises, exact spacing, silence while run is low, and the count.
module trigger_generator_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic run; logic [31:0] iv, tc; logic trig;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  trigger_generator dut (.clk, .rst, .run, .interval(iv), .trig_o(trig), .trig_count_o(tc));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int cyc = 0, last = -1, total = 0, run_cyc = 0;
  always @(posedge clk) begin
    #1; cyc++;
    if (trig) begin
      total++;
      if (last < 0) chk(cyc == run_cyc + 1, $sformatf("first trigger at %0d, run at %0d", cyc, run_cyc));
      else chk(cyc - last == ((iv == 0) ? 1 : int'(iv)), $sformatf("spacing %0d exp %0d", cyc - last, iv));
      last = cyc;
    end
  end
  initial begin
    run = 0; iv = 10;
    repeat (3) @(posedge clk); rst <= 0;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      iv = (r == 3) ? 0 : $urandom_range(1, 40);
      run = 1; run_cyc = cyc; last = -1;
      repeat ($urandom_range(50, 300)) @(negedge clk);
      run = 0;
      @(negedge clk);
      begin
        int t0; t0 = total;
        repeat (20) @(negedge clk);
        chk(total == t0, "trigger while stopped");
      end
    end
    chk(int'(tc) == total && total > 20, $sformatf("count %0d seen %0d", tc, total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
