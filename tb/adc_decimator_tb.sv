// adc_decimator_tb: random four-lane ADC words; the output must be the sum
// of the lanes, one clock later, with the valid flag delayed alike.
module adc_decimator_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic signed [11:0] adc [4];
  logic v;
  logic signed [13:0] s;
  logic sv;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  adc_decimator dut (.clk, .rst, .adc_i(adc), .adc_valid_i(v), .sample_o(s), .sample_valid_o(sv));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_s; bit exp_v;
    v = 0; foreach (adc[i]) adc[i] = '0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      exp_s = 0;
      foreach (adc[i]) begin
        adc[i] = (n < 4) ? ((n % 2) ? -12'sd2048 : 12'sd2047) : 12'($urandom);
        exp_s += int'(adc[i]);
      end
      v = (n % 7 != 3); exp_v = v;
      @(negedge clk);
      chk(s == 14'(exp_s) && int'(s) == exp_s, $sformatf("sum n=%0d got %0d exp %0d", n, s, exp_s));
      chk(sv == exp_v, "valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
