// polyphase_decimator_tb: random taps and input, one output per DECIM
// inputs equal to the FIR sum computed here (shifted and saturated), the
// decimation phase restarted by sync.
module polyphase_decimator_tb;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  localparam int T = 24, D = 4, SH = 17;
  logic cw_en; logic [4:0] cw_addr; logic signed [17:0] cw_data;
  logic sync, v, vo;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  polyphase_decimator #(.W(16), .COEF_W(18), .TAPS(T), .DECIM(D), .COEF_SHIFT(SH)) dut (
    .clk, .rst, .cw_en, .cw_addr, .cw_data, .sync_i(sync), .valid_i(v), .x_i(x), .valid_o(vo), .y_o(y));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  longint h [T];
  longint hist [$];
  initial begin
    int n = 0, outs = 0;
    cw_en = 0; cw_addr = 0; cw_data = 0; sync = 0; v = 0; x = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < T; i++) begin
      @(negedge clk); cw_en = 1; cw_addr = 5'(i); cw_data = 18'($urandom);
      h[i] = longint'(cw_data);
    end
    @(negedge clk); cw_en = 0;
    for (int i = 0; i < T; i++) hist.push_front(0);
    for (int k = 0; k < 1200; k++) begin
      longint acc, exp_y;
      bit due;
      @(negedge clk);
      v = ($urandom % 3 != 0); x = 16'($urandom);
      if (k == 600) v = 1;
      sync = (k == 600);
      due = 0;
      if (v) begin
        hist.push_front(longint'(x)); void'(hist.pop_back());
        if (sync) n = 1;
        else begin
          due = (n == D - 1);
          n = (n + 1) % D;
        end
      end
      acc = 0;
      for (int i = 0; i < T; i++) acc += hist[i] * h[i];
      exp_y = acc >>> SH;
      if (exp_y > 32767) exp_y = 32767;
      if (exp_y < -32768) exp_y = -32768;
      @(posedge clk); #1;
      chk(vo == due, $sformatf("valid k=%0d", k));
      if (due) begin outs++; chk(longint'(y) == exp_y, $sformatf("k=%0d y %0d exp %0d", k, y, exp_y)); end
    end
    chk(outs > 200, "too few outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
