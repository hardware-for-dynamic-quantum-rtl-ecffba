// kernel_integrator_tb: loads a random complex kernel, plays records of
// random complex samples (with gaps in valid), and compares q and the
// state bit against a sum computed here; samples past the kernel length
// must get zero weight. The decision must appear 3 clocks after last.
module kernel_integrator_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  localparam int KL = 64;
  logic kw_en; logic [5:0] kw_addr; logic signed [15:0] kw_re, kw_im;
  logic signed [47:0] thr, qr, qi;
  logic v, last, sv, st;
  logic signed [13:0] re, im;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  kernel_integrator #(.DATA_W(14), .KERNEL_W(16), .KERNEL_LEN(KL), .ACC_W(48)) dut (
    .clk, .rst, .kw_en, .kw_addr, .kw_re, .kw_im, .threshold(thr), .valid_i(v), .last_i(last),
    .re_i(re), .im_i(im), .state_valid_o(sv), .state_o(st), .q_re_o(qr), .q_im_o(qi));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  longint kr [KL], ki [KL];
  initial begin
    longint er, ei;
    kw_en = 0; kw_addr = 0; kw_re = 0; kw_im = 0; thr = 0; v = 0; last = 0; re = 0; im = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < KL; i++) begin
      @(negedge clk);
      kw_en = 1; kw_addr = 6'(i); kw_re = 16'($urandom); kw_im = 16'($urandom);
      kr[i] = longint'(kw_re); ki[i] = longint'(kw_im);
    end
    @(negedge clk); kw_en = 0;
    for (int r = 0; r < 40; r++) begin
      int len, n, wait_c;
      len = (r == 0) ? 1 : (r == 1) ? KL + 10 : 1 + $urandom % KL;
      thr = (r % 3 == 0) ? 48'sd0 : 48'($signed(32'($urandom)));
      er = 0; ei = 0; n = 0;
      while (n < len) begin
        @(negedge clk);
        v = ($urandom % 4 != 0);
        re = 14'($urandom); im = 14'($urandom);
        last = v && (n == len - 1);
        if (v) begin
          if (n < KL) begin
            er += longint'(re) * kr[n] - longint'(im) * ki[n];
            ei += longint'(re) * ki[n] + longint'(im) * kr[n];
          end
          n++;
        end
      end
      @(negedge clk); v = 0; last = 0;
      // decision 3 clocks after the clock with last
      wait_c = 1;
      while (!sv && wait_c < 10) begin @(negedge clk); wait_c++; end
      chk(wait_c == 3, $sformatf("latency %0d", wait_c));
      chk(sv && qr == 48'(er) && qi == 48'(ei), $sformatf("rec %0d q (%0d,%0d) exp (%0d,%0d)", r, qr, qi, er, ei));
      chk(st == (er > longint'(thr)), "state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
