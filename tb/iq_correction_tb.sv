// iq_correction_tb: random matrices, offsets and samples (including full
// scale, to reach saturation) against a reference of the same arithmetic;
// checks the two-clock latency and that both signs of saturation occur.
module iq_correction_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic signed [15:0] i_s [SPC], q_s [SPC], m00, m01, m10, m11;
  logic signed [13:0] off_a, off_b, a_o [SPC], b_o [SPC];
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  iq_correction dut (.clk, .rst, .i_i(i_s), .q_i(q_s), .m00, .m01, .m10, .m11,
    .off_a, .off_b, .dac_a_o(a_o), .dac_b_o(b_o));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int ref1(int mi, int mq, int i, int q, int off);
    longint p = longint'(mi) * i + longint'(mq) * q;
    longint v = (p >>> 16) + off;
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    return int'(v);
  endfunction
  int ea [3][SPC], eb [3][SPC];
  initial begin
    for (int k = 0; k < SPC; k++) begin i_s[k] = 0; q_s[k] = 0; end
    {m00, m01, m10, m11} = '0; off_a = 0; off_b = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (n % 50 == 0) begin
        m00 = 16'($urandom_range(0, 32767)); m01 = 16'($urandom); m10 = 16'($urandom);
        m11 = 16'($urandom_range(0, 32767)); off_a = 14'($urandom); off_b = 14'($urandom);
        if (n == 100) begin m00 = 16'h7fff; m01 = 16'h7fff; m10 = 16'h8000; m11 = 16'h8000; end
      end
      for (int k = 0; k < SPC; k++) begin
        i_s[k] = (n % 7 == 0) ? 16'h7fff : 16'($urandom);
        q_s[k] = (n % 7 == 0) ? 16'h7fff : 16'($urandom);
      end
      for (int k = 0; k < SPC; k++) begin
        ea[n % 3][k] = ref1(m00, m01, i_s[k], q_s[k], off_a);
        eb[n % 3][k] = ref1(m10, m11, i_s[k], q_s[k], off_b);
      end
      // matrix/offsets held for the two clocks of latency except at changes
      @(posedge clk); #1;
      if (n >= 2 && (n % 50) > 1)
        for (int k = 0; k < SPC; k++) begin
          chk(a_o[k] == 14'(ea[(n + 2) % 3][k]) && b_o[k] == 14'(eb[(n + 2) % 3][k]),
              $sformatf("n=%0d k=%0d a %0d/%0d b %0d/%0d", n, k, a_o[k], ea[(n+2)%3][k], b_o[k], eb[(n+2)%3][k]));
          if (a_o[k] == 14'sd8191 || b_o[k] == 14'sd8191) sat_hi++;
          if (a_o[k] == -14'sd8192 || b_o[k] == -14'sd8192) sat_lo++;
        end
    end
    chk(sat_hi > 0 && sat_lo > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
