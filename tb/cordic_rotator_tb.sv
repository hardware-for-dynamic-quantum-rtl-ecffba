// cordic_rotator_tb: random samples and phases, compared with a real
// arithmetic rotation (tolerance 4 LSB); the latency must be 7 clocks and
// one result is produced every clock.
module cordic_rotator_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic v, vo;
  logic signed [15:0] x, y, xo, yo;
  logic [23:0] ph;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  cordic_rotator #(.W(16), .PHASE_W(24)) dut (.clk, .rst, .valid_i(v), .x_i(x), .y_i(y), .phase_i(ph), .valid_o(vo), .x_o(xo), .y_o(yo));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int N = 2000, LAT = 7;
  real ex [N], ey [N];
  initial begin
    int lat_seen = -1;
    v = 0; x = 0; y = 0; ph = 0;
    repeat (3) @(posedge clk); rst <= 0;
    fork
      begin
        for (int n = 0; n < N; n++) begin
          real a, c, s;
          @(negedge clk);
          x = 16'($signed(16'($urandom)) >>> 1); y = 16'($signed(16'($urandom)) >>> 1);
          ph = 24'($urandom);
          if (n < 4) begin x = 16'sd16000; y = 0; ph = 24'(n) << 22; end
          a = real'(ph) / 16777216.0 * 2.0 * 3.14159265358979;
          c = $cos(a); s = $sin(a);
          ex[n] = real'(x) * c - real'(y) * s;
          ey[n] = real'(x) * s + real'(y) * c;
          v = 1;
        end
        @(negedge clk); v = 0;
      end
      begin
        int k = 0, cyc = 0;
        while (k < N) begin
          @(posedge clk); #1; cyc++;
          if (vo) begin
            real dx, dy;
            if (k == 0) lat_seen = cyc;
            dx = real'(xo) - ex[k]; dy = real'(yo) - ey[k];
            chk(dx < 4.0 && dx > -4.0 && dy < 4.0 && dy > -4.0,
                $sformatf("k=%0d got (%0d,%0d) exp (%f,%f)", k, xo, yo, ex[k], ey[k]));
            k++;
          end else if (k > 0) chk(0, "gap in output stream");
        end
      end
    join
    chk(lat_seen == LAT, $sformatf("latency %0d", lat_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
