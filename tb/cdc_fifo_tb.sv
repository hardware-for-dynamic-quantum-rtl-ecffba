// cdc_fifo_tb: writer at one clock, reader at an unrelated slower clock
// with random stalls; every word must arrive once, in order, and full must
// stop the writer without losing data.
module cdc_fifo_tb;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #2 wclk = ~wclk;
  always #3.3 rclk = ~rclk;
  logic wr_en, full, rd_en, empty;
  logic [15:0] wd, rd;
  int checks = 0, failures = 0, sawfull = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  cdc_fifo #(.WIDTH(16), .DEPTH_LOG2(4)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .wr_en, .wr_data(wd), .full,
    .rd_clk(rclk), .rd_rst(rrst), .rd_en, .rd_data(rd), .empty);

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int N = 2000;
  initial begin : writer
    int n = 0;
    wr_en = 0; wd = 0;
    repeat (4) @(posedge wclk); wrst <= 0;
    while (n < N) begin
      @(negedge wclk);
      if (wr_en && !full_q) n++;
      wd = 16'(n * 7 + 3);
      wr_en = (n < N);
    end
    @(negedge wclk); wr_en = 0;
  end
  // sample full at the same edge the FIFO does
  logic full_q;
  always_ff @(posedge wclk) full_q <= full;
  always @(negedge wclk) if (full) sawfull++;

  initial begin : reader
    int got = 0;
    rd_en = 0;
    repeat (4) @(posedge rclk); rrst <= 0;
    while (got < N) begin
      @(negedge rclk);
      if (rd_en && !empty_q) got++;
      rd_en = ($urandom % 4 != 0) && (got < 600 || got > 900 || ($urandom % 8 == 0));
      if (!empty && rd_en) chk(rd == 16'(got * 7 + 3), $sformatf("word %0d got %0h", got, rd));
    end
    chk(sawfull > 0, "full never seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic empty_q;
  always_ff @(posedge rclk) empty_q <= empty;
endmodule
