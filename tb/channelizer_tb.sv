// channelizer_tb: a random real input after a sync goes through a model of
// NCO mixing (real cosine/sine), FIR 1 with decimation by 4 and FIR 2 with
// decimation by 2; every output must match the model within a few LSB
// and the number of outputs must be one per 8 inputs.
module channelizer_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  localparam int T = 8, SH = 17, D1 = 4, D2 = 2;
  logic [23:0] inc;
  logic cw_en, cw_stage; logic [2:0] cw_addr; logic signed [17:0] cw_data;
  logic sync, v, vo;
  logic signed [13:0] x;
  logic signed [15:0] re, im;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  channelizer #(.IN_W(14), .W(16), .PHASE_W(24), .TAPS(T), .DECIM1(D1), .DECIM2(D2)) dut (
    .clk, .rst, .phase_inc(inc), .cw_en, .cw_stage, .cw_addr, .cw_data, .sync_i(sync),
    .valid_i(v), .x_i(x), .valid_o(vo), .re_o(re), .im_o(im));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  real h1 [T], h2 [T];
  real mr [$], mi [$], s1r [$], s1i [$], er [$], ei [$];
  localparam int N = 800;
  logic signed [13:0] xs [N];
  initial begin
    int got = 0;
    inc = 24'h0A3D71; cw_en = 0; cw_stage = 0; cw_addr = 0; cw_data = 0; sync = 0; v = 0; x = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int s = 0; s < 2; s++) for (int i = 0; i < T; i++) begin
      @(negedge clk); cw_en = 1; cw_stage = s[0]; cw_addr = 3'(i);
      cw_data = 18'sd8000 + 18'($urandom % 16000);
      if (s == 0) h1[i] = real'(cw_data); else h2[i] = real'(cw_data);
    end
    @(negedge clk); cw_en = 0;
    // model
    for (int n = 0; n < N; n++) begin
      real a, xr;
      xs[n] = 14'($urandom);
      xr = real'(xs[n]);
      a = real'((n * inc) % (1 << 24)) / 16777216.0 * 2.0 * 3.14159265358979;
      mr.push_back(xr * $cos(a)); mi.push_back(-xr * $sin(a));
    end
    // drive
    fork
      begin
        for (int n = 0; n < N; n++) begin
          @(negedge clk);
          v = 1; sync = (n == 0);
          x = xs[n];
        end
        @(negedge clk); v = 0; sync = 0;
      end
      begin
        // stage 1 and 2 model outputs
        for (int n = 0; n < N; n++) if (n % D1 == D1 - 1) begin
          real ar, ai; ar = 0; ai = 0;
          for (int i = 0; i < T; i++) if (n - i >= 0) begin ar += mr[n-i] * h1[i]; ai += mi[n-i] * h1[i]; end
          s1r.push_back($floor(ar / 131072.0)); s1i.push_back($floor(ai / 131072.0));
        end
        for (int m = 0; m < s1r.size(); m++) if (m % D2 == D2 - 1) begin
          real ar, ai; ar = 0; ai = 0;
          for (int i = 0; i < T; i++) if (m - i >= 0) begin ar += s1r[m-i] * h2[i]; ai += s1i[m-i] * h2[i]; end
          er.push_back(ar / 131072.0); ei.push_back(ai / 131072.0);
        end
        while (got < er.size()) begin
          @(posedge clk); #1;
          if (vo) begin
            real dr, di; dr = real'(re) - er[got]; di = real'(im) - ei[got];
            chk(dr < 6.0 && dr > -6.0 && di < 6.0 && di > -6.0,
                $sformatf("out %0d got (%0d,%0d) exp (%f,%f)", got, re, im, er[got], ei[got]));
            got++;
          end
        end
      end
    join
    repeat (20) @(posedge clk);
    chk(got == N / (D1 * D2), $sformatf("outputs %0d", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
